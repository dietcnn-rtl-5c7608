// dietcnn_accel: top level of a multiplication-free CNN inference engine in
// which every activation, weight and partial sum is a codebook symbol and
// every arithmetic operation is a table look-up.
//
// Blocks: codebook_encoder (pixels -> symbols, centroid table and decode),
// fm_buffer (two feature-map banks), sym_ram (filter symbols of the current
// layer) and layer_engine (multiply LUTs, symbol sorter, add LUT, bias LUT,
// activation LUT and the loop controller).  A host (a processor, not part of
// this design) runs a network layer by layer:
//   1. load the shared tables once: conv_lut, fc_lut, add_lut, act_lut,
//      centroids (host_wr_* with host_wr_tgt = TGT_*);
//   2. encode the input image into a feature-map bank through pix_* (or write
//      ready-made symbols with TGT_FM0/TGT_FM1);
//   3. per layer: load its filter symbols (TGT_FILTER) and bias table
//      (TGT_BIAS_LUT), then pulse start with cfg; the result lands in bank
//      !cfg.src_bank and done pulses;
//   4. read the output symbols (host_rd_*) and decode them to centroid values
//      (dec_sym/dec_val).
// Table and memory writes are only allowed while busy is low.  host_wr_data
// carries a symbol in its low bits, or a signed centroid value.
// Reads (host_rd_data, dec_val) return one cycle after the address.
// The codebook sizes and the table set follow the paper; the host protocol,
// the write map and the on-chip memory organisation are this design's.
module dietcnn_accel
  import dietcnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // table / memory load bus
  input  logic                host_wr_en,
  input  wr_target_e          host_wr_tgt,
  input  logic [HOST_AW-1:0]  host_wr_addr,
  input  logic [HOST_DW-1:0]  host_wr_data,
  // feature-map read-back and symbol decode
  input  logic                host_rd_bank,
  input  logic [FM_AW-1:0]    host_rd_addr,
  output sym_t                host_rd_data,
  input  sym_t                dec_sym,
  output val_t                dec_val,
  // pixel encoder
  input  logic                enc_restart,    // next symbol goes to address 0
  input  logic                enc_bank,
  input  logic                pix_valid,
  output logic                pix_ready,
  input  val_t                pix_val,
  output logic [FM_AW-1:0]    enc_count,      // symbols written since restart
  // layer control
  input  layer_cfg_t          cfg,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [31:0]         mul_lookups,
  output logic [31:0]         add_lookups
);
  logic                eng_fm_rd_en, eng_fm_wr_en, eng_flt_rd_en;
  logic [FM_AW-1:0]    eng_fm_rd_addr, eng_fm_wr_addr;
  sym_t                eng_fm_rd_data, eng_fm_wr_data;
  logic [FLT_AW-1:0]   eng_flt_rd_addr;
  flt_t                eng_flt_rd_data;
  logic                src_bank_q;
  logic                enc_valid;
  sym_t                enc_sym;

  // The engine reads the bank it was started on for the whole layer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              src_bank_q <= 1'b0;
    else if (start && !busy) src_bank_q <= cfg.src_bank;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           enc_count <= '0;
    else if (enc_restart) enc_count <= '0;
    else if (enc_valid)   enc_count <= enc_count + 1'b1;
  end

  codebook_encoder u_enc (
    .clk, .rst_n,
    .cent_we   (host_wr_en && host_wr_tgt == TGT_CENTROID),
    .cent_waddr(host_wr_addr[SYM_W-1:0]),
    .cent_wdata(val_t'(host_wr_data)),
    .dec_sym,
    .dec_val,
    .pix_valid,
    .pix_ready,
    .pix_val,
    .sym_valid (enc_valid),
    .sym       (enc_sym)
  );

  fm_buffer u_fm (
    .clk,
    .eng_bank    (src_bank_q),
    .eng_rd_en   (eng_fm_rd_en),
    .eng_rd_addr (eng_fm_rd_addr),
    .eng_rd_data (eng_fm_rd_data),
    .eng_wr_en   (eng_fm_wr_en),
    .eng_wr_addr (eng_fm_wr_addr),
    .eng_wr_data (eng_fm_wr_data),
    .enc_wr_en   (enc_valid),
    .enc_bank,
    .enc_wr_addr (enc_count),
    .enc_wr_data (enc_sym),
    .host_wr_en  (host_wr_en && (host_wr_tgt == TGT_FM0 || host_wr_tgt == TGT_FM1)),
    .host_wr_bank(host_wr_tgt == TGT_FM1),
    .host_wr_addr(host_wr_addr[FM_AW-1:0]),
    .host_wr_data(host_wr_data[SYM_W-1:0]),
    .host_rd_bank,
    .host_rd_addr,
    .host_rd_data
  );

  sym_ram #(.DEPTH(FLT_DEPTH), .WIDTH(FLT_W)) u_flt (
    .clk,
    .we   (host_wr_en && host_wr_tgt == TGT_FILTER),
    .waddr(host_wr_addr[FLT_AW-1:0]),
    .wdata(host_wr_data[FLT_W-1:0]),
    .re   (eng_flt_rd_en),
    .raddr(eng_flt_rd_addr),
    .rdata(eng_flt_rd_data)
  );

  layer_engine u_eng (
    .clk, .rst_n,
    .cfg, .start, .busy, .done,
    .fm_rd_en   (eng_fm_rd_en),
    .fm_rd_addr (eng_fm_rd_addr),
    .fm_rd_data (eng_fm_rd_data),
    .fm_wr_en   (eng_fm_wr_en),
    .fm_wr_addr (eng_fm_wr_addr),
    .fm_wr_data (eng_fm_wr_data),
    .flt_rd_en  (eng_flt_rd_en),
    .flt_rd_addr(eng_flt_rd_addr),
    .flt_rd_data(eng_flt_rd_data),
    .lut_we     (host_wr_en),
    .lut_tgt    (host_wr_tgt),
    .lut_addr   (host_wr_addr),
    .lut_data   (host_wr_data[SYM_W-1:0]),
    .mul_lookups,
    .add_lookups
  );
endmodule
