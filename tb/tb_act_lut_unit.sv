// tb_act_lut_unit: loads the activation table from a formula, streams random
// symbols with random gaps and checks every output symbol and its one-cycle
// latency.
module tb_act_lut_unit;
  import dietcnn_tb_pkg::*;
  localparam int unsigned N = 512;
  localparam int unsigned SW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic lut_we = 0;
  logic [SW-1:0] lut_waddr = '0, lut_wdata = '0;
  logic in_valid = 0;
  logic [SW-1:0] in_sym = '0;
  logic out_valid;
  logic [SW-1:0] out_sym;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  act_lut_unit #(.N_SYM(N)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected outputs, one per accepted input, checked in order.
  int unsigned exp_q[$];
  always @(posedge clk) begin
    if (in_valid) exp_q.push_back(act_f(in_sym, N));
  end
  // Latency: an output must follow each input by exactly one cycle.
  logic in_valid_d = 0;
  always @(posedge clk) in_valid_d <= in_valid;
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== in_valid_d) begin
      failures++;
      $display("latency error: out_valid=%0d expected %0d", out_valid, in_valid_d);
    end
    if (out_valid) begin
      int unsigned e;
      e = exp_q.pop_front();
      checks++;
      if (out_sym != SW'(e)) begin
        failures++;
        $display("act mismatch: got %0d exp %0d", out_sym, e);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(posedge clk);
      lut_we <= 1; lut_waddr <= SW'(i); lut_wdata <= SW'(act_f(i, N));
    end
    @(posedge clk) lut_we <= 0;
    for (int i = 0; i < 3000; i++) begin
      @(posedge clk);
      in_valid <= ($urandom % 4) != 0;
      in_sym   <= (i < N) ? SW'(i) : SW'($urandom);
    end
    @(posedge clk) in_valid <= 0;
    repeat (4) @(posedge clk);
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
