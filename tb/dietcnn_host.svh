// dietcnn_host.svh: host-side tasks shared by the testbenches of the top
// level.  Included inside a testbench module that declares the top's ports as
// variables with the names used below, plus checks/failures counters and the
// clock clk.

  // One write on the load bus.
  task automatic host_write(wr_target_e t, int unsigned a, int unsigned d);
    @(posedge clk);
    host_wr_en <= 1; host_wr_tgt <= t; host_wr_addr <= HOST_AW'(a); host_wr_data <= HOST_DW'(d);
    @(posedge clk) host_wr_en <= 0;
  endtask

  // Back-to-back writes: call host_stream for each word, then host_stream_end.
  task automatic host_stream(wr_target_e t, int unsigned a, int unsigned d);
    @(posedge clk);
    host_wr_en <= 1; host_wr_tgt <= t; host_wr_addr <= HOST_AW'(a); host_wr_data <= HOST_DW'(d);
  endtask

  task automatic host_stream_end();
    @(posedge clk) host_wr_en <= 0;
  endtask

  task automatic host_read(bit bank, int unsigned a, output int unsigned d);
    @(posedge clk);
    host_rd_bank <= bank; host_rd_addr <= FM_AW'(a);
    @(posedge clk);
    @(negedge clk);
    d = host_rd_data;
  endtask

  // Load the shared tables: conv_lut, fc_lut, add_lut, act_lut, bias (n_bias_ch
  // channels) and the centroids cent[].
  task automatic load_tables(int n_bias_ch, int cent[]);
    for (int a = 0; a < N_CLUSTERS; a++) begin
      for (int f = 0; f < N_CFILTERS; f++) host_stream(TGT_CONV_LUT, a * N_CFILTERS + f, conv_f(a, f, N_CLUSTERS));
      for (int f = 0; f < N_FFILTERS; f++) host_stream(TGT_FC_LUT, a * N_FFILTERS + f, fc_f(a, f, N_CLUSTERS));
      for (int b = 0; b < N_CLUSTERS; b++) host_stream(TGT_ADD_LUT, a * N_CLUSTERS + b, add_f(a, b, N_CLUSTERS));
      host_stream(TGT_ACT_LUT, a, act_f(a, N_CLUSTERS));
      host_stream(TGT_CENTROID, a, 32'(cent[a]));
      for (int ch = 0; ch < n_bias_ch; ch++) host_stream(TGT_BIAS_LUT, ch * N_CLUSTERS + a, bias_f(ch, a, N_CLUSTERS));
    end
    host_stream_end();
  endtask

  // Run one layer: load its filters, start it, wait for done; returns cycles
  // from the start cycle to the done cycle.
  task automatic run_layer(layer_op_e op, bit bias_en, bit src, int c, int h, int w, int n,
                           int k, int s, int unsigned flt[], output int cycles);
    if (op != OP_ACT) begin
      foreach (flt[i]) host_stream(TGT_FILTER, i, flt[i]);
      host_stream_end();
    end
    @(posedge clk);
    cfg <= '{op: op, bias_en: bias_en, src_bank: src, in_ch: DIM_W'(c), in_h: DIM_W'(h),
             in_w: DIM_W'(w), out_ch: DIM_W'(n), kernel: DIM_W'(k), stride: DIM_W'(s)};
    start <= 1;
    @(posedge clk) start <= 0;
    cycles = 1;
    while (!done) begin
      @(posedge clk);
      cycles++;
    end
  endtask

  // Compare a bank's first exp.size() symbols with exp; returns mismatches.
  task automatic check_bank(bit bank, int unsigned exp[$], string what, output int bad);
    int unsigned d;
    bad = 0;
    foreach (exp[i]) begin
      host_read(bank, i, d);
      checks++;
      if (d != exp[i]) begin
        failures++; bad++;
        if (bad < 5) $display("%s: addr %0d got %0d exp %0d", what, i, d, exp[i]);
      end
    end
  endtask
