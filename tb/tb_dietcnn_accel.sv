// tb_dietcnn_accel: end-to-end test of the whole engine at its default sizes
// (512/256/32 symbols, full table and memory depths).  It plays the host:
// loads every table, encodes a 3x9x9 image through the pixel encoder into
// bank 0, then runs a four-layer network, swapping banks each layer:
//   conv 3->4 ch, 3x3, stride 2, bias      (bank 0 -> 1)
//   activation                              (bank 1 -> 0)
//   conv 4->6 ch, 3x3, stride 1, no bias    (bank 0 -> 1)
//   fully connected 24 -> 10, bias          (bank 1 -> 0)
// and decodes the ten outputs to centroid values.  Every intermediate feature
// map, the cycle count and look-up counters of each layer, and the decoded
// values are checked against the reference model.  It counts how often each
// mechanism happened (encode, stride 2, stride 1, bias, no bias, activation,
// fc, bank 0->1 and 1->0, a bag whose sorted order differs from its issue
// order, decode) and counts a failure for any that never did.
module tb_dietcnn_accel;
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

  typedef enum int {M_ENCODE, M_STRIDE2, M_STRIDE1, M_BIAS, M_NOBIAS, M_ACT, M_FC,
                    M_BANK01, M_BANK10, M_REORDER, M_DECODE, M_NUM} mech_e;
  int mech [M_NUM];

  always #5 clk = ~clk;

  dietcnn_accel dut (.*);

  `include "dietcnn_host.svh"

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cent[];
  int unsigned img_sym[$];

  function automatic int unsigned nearest(int x);
    int best, bi, d;
    best = 1 << 30; bi = 0;
    for (int i = 0; i < N_CLUSTERS; i++) begin
      d = (x > cent[i]) ? x - cent[i] : cent[i] - x;
      if (d < best) begin best = d; bi = i; end
    end
    return bi;
  endfunction

  // Count bags whose issue order is not already ascending.
  function automatic int reorders(int unsigned fm[], int unsigned flt[], bit fc,
                                  int c, int h, int w, int n_out, int k, int s);
    int cnt = 0;
    for (int n = 0; n < n_out; n++)
      for (int oy = 0; oy + k <= h; oy += s)
        for (int ox = 0; ox + k <= w; ox += s) begin
          int unsigned bag[$], srt[$];
          for (int m = 0; m < c; m++)
            for (int ky = 0; ky < k; ky++)
              for (int kx = 0; kx < k; kx++) begin
                int unsigned a, f;
                a = fm[(m * h + oy + ky) * w + ox + kx];
                f = flt[((n * c + m) * k + ky) * k + kx];
                bag.push_back(fc ? fc_f(a, f % N_FFILTERS, N_CLUSTERS) : conv_f(a, f, N_CLUSTERS));
              end
          srt = bag;
          srt.sort();
          if (srt != bag) cnt++;
        end
    return cnt;
  endfunction

  task automatic layer(layer_op_e op, bit bias_en, bit src, int c, int h, int w, int n,
                       int k, int s, ref int unsigned fm[], output int unsigned res[$]);
    int unsigned flt[];
    int cycles, b, exp_cycles, bad;
    flt = new[(op == OP_ACT) ? 0 : n * c * k * k];
    foreach (flt[i]) flt[i] = $urandom % N_CFILTERS;
    ref_layer(fm, flt, int'(op), bias_en, c, h, w, n, k, s, N_CLUSTERS, N_FFILTERS, res);
    run_layer(op, bias_en, src, c, h, w, n, k, s, flt, cycles);
    b = c * k * k;
    exp_cycles = (op == OP_ACT) ? 7 + res.size() : 4 + res.size() * (2 * b + 5 + int'(bias_en));
    checks++;
    if (cycles != exp_cycles) begin
      failures++; $display("%s: %0d cycles, expected %0d", op.name(), cycles, exp_cycles);
    end
    if (op != OP_ACT) begin
      checks += 2;
      if (mul_lookups != 32'(res.size() * b) || add_lookups != 32'(res.size() * (b - 1))) begin
        failures += 2; $display("%s: look-up counters %0d/%0d", op.name(), mul_lookups, add_lookups);
      end
      mech[M_REORDER] += reorders(fm, flt, op == OP_FC, c, h, w, n, k, s);
      if (s == 2) mech[M_STRIDE2]++;
      if (s == 1 && op == OP_CONV) mech[M_STRIDE1]++;
      if (bias_en) mech[M_BIAS]++; else mech[M_NOBIAS]++;
      if (op == OP_FC) mech[M_FC]++;
    end else mech[M_ACT]++;
    if (src) mech[M_BANK10]++; else mech[M_BANK01]++;
    check_bank(!src, res, op.name(), bad);
    $display("%s C=%0d H=%0d W=%0d N=%0d K=%0d S=%0d bias=%0d: %0d outputs, %0d cycles, %0d wrong",
             op.name(), c, h, w, n, k, s, bias_en, res.size(), cycles, bad);
  endtask

  initial begin
    int unsigned fm0[], fm1[], fm2[], fm3[];
    int unsigned r[$];
    int bad;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Codebook: 512 increasing centroid values with random spacing.
    cent = new[N_CLUSTERS];
    cent[0] = -16000;
    for (int i = 1; i < N_CLUSTERS; i++) cent[i] = cent[i-1] + 1 + $urandom % 120;
    load_tables(16, cent);

    // Encode a 3x9x9 image into bank 0.
    @(posedge clk) begin enc_restart <= 1; enc_bank <= 0; end
    @(posedge clk) enc_restart <= 0;
    for (int i = 0; i < 3 * 9 * 9; i++) begin
      int x;
      x = cent[0] - 100 + int'($urandom % (cent[N_CLUSTERS-1] - cent[0] + 200));
      img_sym.push_back(nearest(x));
      @(posedge clk);
      while (!pix_ready) @(posedge clk);
      pix_valid <= 1; pix_val <= VAL_W'(x);
      @(posedge clk) pix_valid <= 0;
    end
    while (enc_count != FM_AW'(3 * 9 * 9)) @(posedge clk);
    check_bank(0, img_sym, "encode", bad);
    if (bad == 0) mech[M_ENCODE]++;
    fm0 = new[img_sym.size()];
    foreach (img_sym[i]) fm0[i] = img_sym[i];

    layer(OP_CONV, 1, 0, 3, 9, 9, 4, 3, 2, fm0, r);
    fm1 = new[r.size()]; foreach (r[i]) fm1[i] = r[i];
    layer(OP_ACT, 0, 1, 4, 4, 4, 1, 1, 1, fm1, r);
    fm2 = new[r.size()]; foreach (r[i]) fm2[i] = r[i];
    layer(OP_CONV, 0, 0, 4, 4, 4, 6, 3, 1, fm2, r);
    fm3 = new[r.size()]; foreach (r[i]) fm3[i] = r[i];
    layer(OP_FC, 1, 1, 6, 2, 2, 10, 2, 1, fm3, r);

    // Decode the ten class outputs.
    for (int i = 0; i < 10; i++) begin
      @(posedge clk) dec_sym <= SYM_W'(r[i]);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (int'(dec_val) != cent[r[i]]) begin
        failures++; $display("decode %0d: got %0d exp %0d", r[i], dec_val, cent[r[i]]);
      end else mech[M_DECODE]++;
    end

    for (int i = 0; i < M_NUM; i++) begin
      checks++;
      $display("mechanism %s happened %0d times", mech_e'(i), mech[i]);
      if (mech[i] == 0) begin
        failures++; $display("mechanism %s never happened", mech_e'(i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
