// tb_layer_engine: runs the layer engine at its default sizes against
// behavioural memories (one-cycle read latency).  It loads all tables from the
// formulas of dietcnn_tb_pkg, then runs conv layers (stride 1 and 2, square
// and non-square, with and without bias, a 1x1 kernel), a fully-connected
// layer and an activation layer.  Each output feature map is compared with the
// reference model, and the cycle count and look-up counters with
//   conv/fc: 4 + neurons * (2*B + 5 + bias_en),  B = C*K*K
//   act:     4 + C*H*W + 3
//   mul_lookups = neurons * B,  add_lookups = neurons * (B - 1).
module tb_layer_engine;
  import dietcnn_pkg::*;
  import dietcnn_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg = '0;
  logic start = 0, busy, done;
  logic fm_rd_en, fm_wr_en, flt_rd_en;
  logic [FM_AW-1:0] fm_rd_addr, fm_wr_addr;
  logic [SYM_W-1:0] fm_rd_data = '0, fm_wr_data;
  logic [FLT_AW-1:0] flt_rd_addr;
  logic [FLT_W-1:0] flt_rd_data = '0;
  logic lut_we = 0;
  wr_target_e lut_tgt = TGT_CONV_LUT;
  logic [HOST_AW-1:0] lut_addr = '0;
  logic [SYM_W-1:0] lut_data = '0;
  logic [31:0] mul_lookups, add_lookups;
  int checks = 0, failures = 0;

  int unsigned in_fm[], flt[];
  logic [SYM_W-1:0] out_fm [FM_DEPTH];

  always #5 clk = ~clk;

  layer_engine dut (.*);

  // Behavioural memories.
  always @(posedge clk) begin
    if (fm_rd_en)  fm_rd_data  <= SYM_W'(in_fm[fm_rd_addr]);
    if (flt_rd_en) flt_rd_data <= FLT_W'(flt[flt_rd_addr]);
    if (fm_wr_en)  out_fm[fm_wr_addr] <= fm_wr_data;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(wr_target_e t, int unsigned a, int unsigned d);
    @(posedge clk);
    lut_we <= 1; lut_tgt <= t; lut_addr <= HOST_AW'(a); lut_data <= SYM_W'(d);
  endtask

  task automatic run(layer_op_e op, bit bias_en, int c, int h, int w, int n, int k, int s);
    int unsigned exp_res[$];
    int cycles, neurons, b, exp_cycles;
    in_fm = new[c * h * w];
    foreach (in_fm[i]) in_fm[i] = $urandom % N_CLUSTERS;
    flt = new[(op == OP_ACT) ? 1 : n * c * k * k];
    foreach (flt[i]) flt[i] = $urandom % N_CFILTERS;
    ref_layer(in_fm, flt, int'(op), bias_en, c, h, w, n, k, s, N_CLUSTERS, N_FFILTERS, exp_res);
    @(posedge clk);
    lut_we <= 0;
    cfg <= '{op: op, bias_en: bias_en, src_bank: 1'b0, in_ch: DIM_W'(c), in_h: DIM_W'(h),
             in_w: DIM_W'(w), out_ch: DIM_W'(n), kernel: DIM_W'(k), stride: DIM_W'(s)};
    start <= 1;
    @(posedge clk) start <= 0;
    cycles = 1;
    while (!done) begin
      @(posedge clk);
      cycles++;
    end
    b = c * k * k;
    neurons = exp_res.size();
    exp_cycles = (op == OP_ACT) ? 4 + neurons + 3 : 4 + neurons * (2 * b + 5 + int'(bias_en));
    checks++;
    if (cycles != exp_cycles) begin
      failures++; $display("op %s: %0d cycles, expected %0d", op.name(), cycles, exp_cycles);
    end
    for (int i = 0; i < neurons; i++) begin
      checks++;
      if (out_fm[i] != SYM_W'(exp_res[i])) begin
        failures++;
        if (failures < 20) $display("op %s out[%0d]: got %0d exp %0d", op.name(), i, out_fm[i], exp_res[i]);
      end
    end
    if (op != OP_ACT) begin
      checks += 2;
      if (mul_lookups != 32'(neurons * b)) begin
        failures++; $display("mul_lookups %0d, expected %0d", mul_lookups, neurons * b);
      end
      if (add_lookups != 32'(neurons * (b - 1))) begin
        failures++; $display("add_lookups %0d, expected %0d", add_lookups, neurons * (b - 1));
      end
    end
    $display("op %s C=%0d H=%0d W=%0d N=%0d K=%0d S=%0d bias=%0d: %0d outputs, %0d cycles",
             op.name(), c, h, w, n, k, s, bias_en, neurons, cycles);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < N_CLUSTERS; a++) begin
      for (int f = 0; f < N_CFILTERS; f++) load(TGT_CONV_LUT, a * N_CFILTERS + f, conv_f(a, f, N_CLUSTERS));
      for (int f = 0; f < N_FFILTERS; f++) load(TGT_FC_LUT, a * N_FFILTERS + f, fc_f(a, f, N_CLUSTERS));
      for (int b = 0; b < N_CLUSTERS; b++) load(TGT_ADD_LUT, a * N_CLUSTERS + b, add_f(a, b, N_CLUSTERS));
      load(TGT_ACT_LUT, a, act_f(a, N_CLUSTERS));
      for (int ch = 0; ch < 16; ch++) load(TGT_BIAS_LUT, ch * N_CLUSTERS + a, bias_f(ch, a, N_CLUSTERS));
    end
    run(OP_CONV, 1, 3, 9, 9, 4, 3, 2);
    run(OP_CONV, 0, 5, 6, 7, 3, 3, 1);
    run(OP_CONV, 1, 1, 3, 3, 2, 1, 1);
    run(OP_FC,   1, 16, 2, 2, 10, 2, 1);
    run(OP_FC,   0, 40, 1, 1, 3, 1, 1);
    run(OP_ACT,  0, 3, 5, 4, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
