// tb_mult_lut_unit: fills conv_lut (512x256) and fc_lut (512x32) from
// formulas, then issues random conv and fc look-ups back to back and checks
// each product symbol and the one-cycle latency.
module tb_mult_lut_unit;
  import dietcnn_tb_pkg::*;
  localparam int unsigned N = 512, NC = 256, NF = 32;
  localparam int unsigned SW = $clog2(N), CFW = $clog2(NC), FFW = $clog2(NF);

  logic clk = 0, rst_n = 0;
  logic conv_we = 0, fc_we = 0;
  logic [SW+CFW-1:0] conv_waddr = '0;
  logic [SW+FFW-1:0] fc_waddr = '0;
  logic [SW-1:0] conv_wdata = '0, fc_wdata = '0;
  logic in_valid = 0, is_fc = 0;
  logic [SW-1:0] act_sym = '0;
  logic [CFW-1:0] flt_sym = '0;
  logic out_valid;
  logic [SW-1:0] out_sym;
  int checks = 0, failures = 0;
  int unsigned exp_q[$];
  logic in_valid_d = 0;

  always #5 clk = ~clk;

  mult_lut_unit #(.N_SYM(N), .N_CFLT(NC), .N_FFLT(NF)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    in_valid_d <= in_valid;
    if (in_valid)
      exp_q.push_back(is_fc ? fc_f(32'(act_sym), 32'(flt_sym[FFW-1:0]), N)
                            : conv_f(32'(act_sym), 32'(flt_sym), N));
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (out_valid !== in_valid_d) begin
      failures++;
      $display("latency error");
    end
    if (out_valid) begin
      int unsigned e;
      e = exp_q.pop_front();
      checks++;
      if (out_sym != SW'(e)) begin
        failures++;
        if (failures < 10) $display("product mismatch: got %0d exp %0d", out_sym, e);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < N; a++)
      for (int f = 0; f < NC; f++) begin
        @(posedge clk);
        conv_we <= 1; conv_waddr <= {SW'(a), CFW'(f)}; conv_wdata <= SW'(conv_f(a, f, N));
        fc_we <= (f < NF); fc_waddr <= {SW'(a), FFW'(f)}; fc_wdata <= SW'(fc_f(a, f, N));
      end
    @(posedge clk) begin conv_we <= 0; fc_we <= 0; end
    for (int i = 0; i < 5000; i++) begin
      @(posedge clk);
      in_valid <= ($urandom % 5) != 0;
      is_fc    <= ($urandom % 3) == 0;
      act_sym  <= SW'($urandom);
      flt_sym  <= CFW'($urandom);
    end
    @(posedge clk) in_valid <= 0;
    repeat (4) @(posedge clk);
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
