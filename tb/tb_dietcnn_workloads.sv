// tb_dietcnn_workloads: full-size layers of the networks the DietCNN method
// was evaluated on, run on the top at its default sizes.
//
// VGG-11 on CIFAR-10 (32x32x3 input, stride 2 in the first layer, no
// padding, no pooling):
//   encode a 32x32x3 image                         (bank 0)
//   layer 1: conv 3->64,  3x3, stride 2, bias       32x32x3  -> 15x15x64
//   ReLU look-up                                    15x15x64
//   layer 2: conv 64->128, 3x3, stride 1, bias      15x15x64 -> 13x13x128
//   layer 8: conv 512->512, 3x3, stride 1, bias     3x3x512  -> 1x1x512
//            (its 3x3x512 input written by the host: layers 2-7 are not run)
//   linear 512 -> 10, bias                          1x512    -> 1x10
// LeNet-5 on MNIST, fully-connected part (its 400-symbol input written by
// the host, since the pooling in front of it is not built):
//   FC1 400 -> 120, bias, ReLU; FC2 120 -> 84, bias, ReLU; FC3 84 -> 10, bias
//
// Each output feature map is compared with the reference model; the
// multiply look-up counts are compared with the per-layer figures of the
// networks' operation counts (388800, 12460032, 2359296 and 5120 for
// VGG-11; 48000, 10080 and 840 for LeNet-5), and the cycle counts with
// 4 + neurons*(2B + 5 + bias).
module tb_dietcnn_workloads;
  import dietcnn_pkg::*;
  import dietcnn_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic host_wr_en = 0;
  wr_target_e host_wr_tgt = TGT_CONV_LUT;
  logic [HOST_AW-1:0] host_wr_addr = '0;
  logic [HOST_DW-1:0] host_wr_data = '0;
  logic host_rd_bank = 0;
  logic [FM_AW-1:0] host_rd_addr = '0;
  sym_t host_rd_data;
  sym_t dec_sym = '0;
  val_t dec_val;
  logic enc_restart = 0, enc_bank = 0, pix_valid = 0, pix_ready;
  val_t pix_val = '0;
  logic [FM_AW-1:0] enc_count;
  layer_cfg_t cfg = '0;
  logic start = 0, busy, done;
  logic [31:0] mul_lookups, add_lookups;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dietcnn_accel dut (.*);

  `include "dietcnn_host.svh"

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cent[];

  function automatic int unsigned nearest(int x);
    int best, bi, d;
    best = 1 << 30; bi = 0;
    for (int i = 0; i < N_CLUSTERS; i++) begin
      d = (x > cent[i]) ? x - cent[i] : cent[i] - x;
      if (d < best) begin best = d; bi = i; end
    end
    return bi;
  endfunction

  task automatic layer(string name, layer_op_e op, bit bias_en, bit src, int c, int h, int w,
                       int n, int k, int s, int exp_mul, ref int unsigned fm[],
                       output int unsigned res[$]);
    int unsigned flt[];
    int cycles, b, bad;
    longint exp_cycles;
    flt = new[(op == OP_ACT) ? 0 : n * c * k * k];
    foreach (flt[i]) flt[i] = $urandom % ((op == OP_FC) ? N_FFILTERS : N_CFILTERS);
    ref_layer(fm, flt, int'(op), bias_en, c, h, w, n, k, s, N_CLUSTERS, N_FFILTERS, res);
    run_layer(op, bias_en, src, c, h, w, n, k, s, flt, cycles);
    b = c * k * k;
    exp_cycles = (op == OP_ACT) ? 7 + res.size() : 4 + res.size() * (2 * b + 5 + int'(bias_en));
    checks++;
    if (longint'(cycles) != exp_cycles) begin
      failures++; $display("%s: %0d cycles, expected %0d", name, cycles, exp_cycles);
    end
    if (op != OP_ACT) begin
      checks++;
      if (mul_lookups != 32'(exp_mul)) begin
        failures++; $display("%s: %0d multiply look-ups, expected %0d", name, mul_lookups, exp_mul);
      end
    end
    check_bank(!src, res, name, bad);
    $display("%s: %0d outputs, %0d cycles, %0d multiply and %0d add look-ups, %0d wrong",
             name, res.size(), cycles, mul_lookups, add_lookups, bad);
  endtask

  initial begin
    int unsigned img[], fm1[], fm2[], fm7[], fm8[];
    int unsigned r[$];
    int bad;
    repeat (3) @(posedge clk);
    rst_n = 1;

    cent = new[N_CLUSTERS];
    cent[0] = -16000;
    for (int i = 1; i < N_CLUSTERS; i++) cent[i] = cent[i-1] + 1 + $urandom % 120;
    load_tables(512, cent);

    // Encode the image.
    img = new[3 * 32 * 32];
    @(posedge clk) begin enc_restart <= 1; enc_bank <= 0; end
    @(posedge clk) enc_restart <= 0;
    foreach (img[i]) begin
      int x;
      x = cent[0] + int'($urandom % (cent[N_CLUSTERS-1] - cent[0]));
      img[i] = nearest(x);
      @(posedge clk);
      while (!pix_ready) @(posedge clk);
      pix_valid <= 1; pix_val <= VAL_W'(x);
      @(posedge clk) pix_valid <= 0;
    end
    while (enc_count != FM_AW'(img.size())) @(posedge clk);
    begin
      int unsigned q[$];
      foreach (img[i]) q.push_back(img[i]);
      check_bank(0, q, "encode", bad);
      $display("encode: %0d pixels, %0d wrong", img.size(), bad);
    end

    layer("conv1", OP_CONV, 1, 0, 3, 32, 32, 64, 3, 2, 388800, img, r);
    fm1 = new[r.size()]; foreach (r[i]) fm1[i] = r[i];
    layer("relu1", OP_ACT, 0, 1, 64, 15, 15, 1, 1, 1, 0, fm1, r);
    fm2 = new[r.size()]; foreach (r[i]) fm2[i] = r[i];
    layer("conv2", OP_CONV, 1, 0, 64, 15, 15, 128, 3, 1, 12460032, fm2, r);

    // Input of layer 8: a 3x3x512 feature map written into bank 1.
    fm7 = new[512 * 3 * 3];
    foreach (fm7[i]) begin
      fm7[i] = $urandom % N_CLUSTERS;
      host_stream(TGT_FM1, i, fm7[i]);
    end
    host_stream_end();
    layer("conv8", OP_CONV, 1, 1, 512, 3, 3, 512, 3, 1, 2359296, fm7, r);
    fm8 = new[r.size()]; foreach (r[i]) fm8[i] = r[i];
    layer("linear", OP_FC, 1, 0, 512, 1, 1, 10, 1, 1, 5120, fm8, r);

    // LeNet-5 fully-connected layers, input written into bank 0.
    begin
      int unsigned x[];
      x = new[400];
      foreach (x[i]) begin
        x[i] = $urandom % N_CLUSTERS;
        host_stream(TGT_FM0, i, x[i]);
      end
      host_stream_end();
      layer("lenet_fc1", OP_FC, 1, 0, 400, 1, 1, 120, 1, 1, 48000, x, r);
      x = new[r.size()]; foreach (r[i]) x[i] = r[i];
      layer("lenet_relu1", OP_ACT, 0, 1, 120, 1, 1, 1, 1, 1, 0, x, r);
      x = new[r.size()]; foreach (r[i]) x[i] = r[i];
      layer("lenet_fc2", OP_FC, 1, 0, 120, 1, 1, 84, 1, 1, 10080, x, r);
      x = new[r.size()]; foreach (r[i]) x[i] = r[i];
      layer("lenet_relu2", OP_ACT, 0, 1, 84, 1, 1, 1, 1, 1, 0, x, r);
      x = new[r.size()]; foreach (r[i]) x[i] = r[i];
      layer("lenet_fc3", OP_FC, 1, 0, 84, 1, 1, 10, 1, 1, 840, x, r);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
