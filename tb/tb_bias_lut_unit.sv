// tb_bias_lut_unit: fills a 512-channel bias table from a formula and checks
// random (channel, symbol) look-ups and their one-cycle latency.
module tb_bias_lut_unit;
  import dietcnn_tb_pkg::*;
  localparam int unsigned N = 512, MC = 512;
  localparam int unsigned SW = $clog2(N), CW = $clog2(MC);

  logic clk = 0, rst_n = 0;
  logic lut_we = 0;
  logic [CW+SW-1:0] lut_waddr = '0;
  logic [SW-1:0] lut_wdata = '0;
  logic in_valid = 0;
  logic [CW-1:0] in_ch = '0;
  logic [SW-1:0] in_sym = '0;
  logic out_valid;
  logic [SW-1:0] out_sym;
  int checks = 0, failures = 0;
  int unsigned exp_q[$];
  logic in_valid_d = 0;

  always #5 clk = ~clk;

  bias_lut_unit #(.N_SYM(N), .MAX_CH(MC)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    in_valid_d <= in_valid;
    if (in_valid) exp_q.push_back(bias_f(32'(in_ch), 32'(in_sym), N));
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== in_valid_d) begin
      failures++; $display("latency error");
    end
    if (out_valid) begin
      int unsigned e;
      e = exp_q.pop_front();
      checks++;
      if (out_sym != SW'(e)) begin
        failures++;
        if (failures < 10) $display("bias mismatch: got %0d exp %0d", out_sym, e);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ch = 0; ch < MC; ch++)
      for (int s = 0; s < N; s++) begin
        @(posedge clk);
        lut_we <= 1; lut_waddr <= {CW'(ch), SW'(s)}; lut_wdata <= SW'(bias_f(ch, s, N));
      end
    @(posedge clk) lut_we <= 0;
    for (int i = 0; i < 4000; i++) begin
      @(posedge clk);
      in_valid <= ($urandom % 4) != 0;
      in_ch    <= CW'($urandom);
      in_sym   <= SW'($urandom);
    end
    @(posedge clk) in_valid <= 0;
    repeat (4) @(posedge clk);
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
