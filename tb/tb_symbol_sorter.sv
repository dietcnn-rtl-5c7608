// tb_symbol_sorter: pushes random bags of symbols (sizes 1 to 200, plus one
// bag of 4608 = 512*3*3 symbols, the largest of the VGG-11 example), flushes,
// and checks that the drained stream is the bag in ascending order, that
// out_first/out_last mark its ends, and that a bag of B symbols drains in
// exactly B cycles.
module tb_symbol_sorter;
  localparam int unsigned N = 512;
  localparam int unsigned SW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, flush = 0;
  logic [SW-1:0] in_sym = '0;
  logic busy, out_valid, out_first, out_last;
  logic [SW-1:0] out_sym;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  symbol_sorter #(.N_SYM(N), .CNT_W(16)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_bag(int unsigned size, bit narrow);
    int unsigned bag[$];
    int unsigned got[$];
    int cycles;
    bit saw_first;
    for (int i = 0; i < size; i++) begin
      int unsigned s;
      s = narrow ? ($urandom % 6) * 37 : $urandom % N;
      bag.push_back(s);
      @(posedge clk);
      in_valid <= 1; in_sym <= SW'(s);
      if (($urandom % 4) == 0) begin
        @(posedge clk) in_valid <= 0;
      end
    end
    @(posedge clk) begin in_valid <= 0; flush <= 1; end
    @(posedge clk) flush <= 0;
    cycles = 0;
    saw_first = 0;
    forever begin
      @(negedge clk);
      if (out_valid) begin
        cycles++;
        got.push_back(out_sym);
        checks++;
        if (out_first != (cycles == 1)) begin
          failures++; $display("out_first wrong at %0d", cycles);
        end
        if (out_last) break;
      end
      if (cycles == 0 && !busy) begin
        checks++; failures++;
        $display("sorter did not start draining");
        break;
      end
    end
    bag.sort();
    checks++;
    if (got.size() != bag.size()) begin
      failures++;
      $display("bag size %0d drained %0d", bag.size(), got.size());
    end else begin
      for (int i = 0; i < bag.size(); i++)
        if (got[i] != bag[i]) begin
          failures++;
          $display("order error at %0d: got %0d exp %0d", i, got[i], bag[i]);
          break;
        end
    end
    checks++;
    if (cycles != int'(size)) begin
      failures++; $display("drain took %0d cycles for %0d symbols", cycles, size);
    end
    @(negedge clk);
    checks++;
    if (busy) begin
      failures++; $display("busy after out_last");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_bag(1, 0);
    run_bag(2, 1);
    for (int t = 0; t < 60; t++) run_bag(1 + $urandom % 200, t % 2 == 0);
    run_bag(4608, 0);
    run_bag(27, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
