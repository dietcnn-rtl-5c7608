// tb_add_lut_unit: fills the 512x512 add table from a non-associative
// formula, streams random bags (first/last framed, sometimes with gaps) and
// checks the final symbol of each bag against a ripple sum in the same order,
// and that out_valid comes exactly one cycle after in_last.
module tb_add_lut_unit;
  import dietcnn_tb_pkg::*;
  localparam int unsigned N = 512;
  localparam int unsigned SW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic lut_we = 0;
  logic [2*SW-1:0] lut_waddr = '0;
  logic [SW-1:0] lut_wdata = '0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [SW-1:0] in_sym = '0;
  logic out_valid;
  logic [SW-1:0] out_sym;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  add_lut_unit #(.N_SYM(N)) dut (.*);

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_bag(int unsigned size);
    int unsigned acc;
    for (int i = 0; i < size; i++) begin
      int unsigned s;
      s = $urandom % N;
      acc = (i == 0) ? s : add_f(acc, s, N);
      @(posedge clk);
      in_valid <= 1; in_sym <= SW'(s); in_first <= (i == 0); in_last <= (i == size - 1);
      if (i != size - 1 && ($urandom % 5) == 0) begin
        @(posedge clk) in_valid <= 0;
      end
    end
    @(posedge clk) in_valid <= 0;
    @(negedge clk);
    checks++;
    if (!out_valid) begin
      failures++; $display("no out_valid one cycle after in_last");
    end else if (out_sym != SW'(acc)) begin
      failures++; $display("sum mismatch: got %0d exp %0d (size %0d)", out_sym, acc, size);
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin
      failures++; $display("out_valid longer than one cycle");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) begin
        @(posedge clk);
        lut_we <= 1; lut_waddr <= {SW'(a), SW'(b)}; lut_wdata <= SW'(add_f(a, b, N));
      end
    @(posedge clk) lut_we <= 0;
    run_bag(1);
    run_bag(2);
    for (int t = 0; t < 100; t++) run_bag(1 + $urandom % 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
