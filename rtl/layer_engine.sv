// layer_engine: runs one layer of a multiplication-free (look-up based) CNN.
// All data are symbols (codebook indices); every multiplication and addition
// of a convolution or fully-connected layer is a table look-up.
//
// For each output neuron (channel n, row oy, column ox) a CONV or FC layer
//   1. reads the C*K*K input symbols of the window and the matching filter
//      symbols, and looks each pair up in the multiply LUT (conv_lut or fc_lut);
//   2. collects the C*K*K product symbols in the symbol sorter;
//   3. drains them in ascending symbol order through the add LUT (ripple add)
//      to one symbol;
//   4. optionally passes it through the layer's bias LUT (bias_en);
//   5. writes it to the output feature map.
// An ACT layer maps every symbol of the feature map through the activation LUT.
// Output geometry: OH = (H-K)/S + 1, OW = (W-K)/S + 1, no padding.  A fully
// connected layer is the same loop with fc_lut; configure K = H = W so that each
// output sees the whole (flattened) input, or C = inputs and H = W = K = 1.
//
// Memory layouts: feature maps (m*H + y)*W + x; filters ((n*C + m)*K + ky)*K + kx.
// Loop order: n, oy, ox outside; m, ky, kx inside.  Addresses are formed by
// counters and adders; the only multipliers are three that derive H*W, S*W
// and C*K*K once, in the setup cycle of a layer.
//
// Timing per CONV/FC neuron of B = C*K*K terms: B issue cycles, 3 cycles for
// the read and multiply pipeline to empty and the sorter to start, B drain
// cycles, 1 cycle for the last add, 1 bias cycle if bias_en, and 1 write
// cycle.  An ACT layer takes one cycle per symbol plus 3.  Counted from the
// cycle in which start is high to the cycle in which done is high, a layer
// takes 4 + neurons*(2B + 5 + bias_en) cycles (CONV/FC) or 7 + C*H*W (ACT).
//
// Interface: cfg/start (one cycle, while idle), busy, done (one-cycle pulse);
// read ports to the feature-map bank and the filter memory (data one cycle
// after the request); write port to the output bank; look-up table load bus
// (lut_we/lut_tgt/lut_addr/lut_data, while idle); look-up counters.
// What follows the paper: the look-up multiply, sort and ripple add, the
// activation look-up, the separate conv and fc tables and the codebook sizes.
// This design's own: the sequential one-look-up-per-cycle schedule, the loop
// order, the layouts, the bias table indexing and the control interface.
module layer_engine
  import dietcnn_pkg::layer_cfg_t, dietcnn_pkg::wr_target_e, dietcnn_pkg::HOST_AW,
         dietcnn_pkg::CNT_W, dietcnn_pkg::DIM_W,
         dietcnn_pkg::OP_ACT, dietcnn_pkg::OP_FC,
         dietcnn_pkg::TGT_CONV_LUT, dietcnn_pkg::TGT_FC_LUT, dietcnn_pkg::TGT_ADD_LUT,
         dietcnn_pkg::TGT_BIAS_LUT, dietcnn_pkg::TGT_ACT_LUT;
#(
  parameter int unsigned N_SYM     = dietcnn_pkg::N_CLUSTERS,
  parameter int unsigned N_CFLT    = dietcnn_pkg::N_CFILTERS,
  parameter int unsigned N_FFLT    = dietcnn_pkg::N_FFILTERS,
  parameter int unsigned MAX_CH    = dietcnn_pkg::MAX_CH,
  parameter int unsigned FM_DEPTH  = dietcnn_pkg::FM_DEPTH,
  parameter int unsigned FLT_DEPTH = dietcnn_pkg::FLT_DEPTH,
  localparam int unsigned SW   = $clog2(N_SYM),
  localparam int unsigned CFW  = $clog2(N_CFLT),
  localparam int unsigned FFW  = $clog2(N_FFLT),
  localparam int unsigned CW   = $clog2(MAX_CH),
  localparam int unsigned FMAW = $clog2(FM_DEPTH),
  localparam int unsigned FLAW = $clog2(FLT_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  layer_cfg_t        cfg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // input feature map (read)
  output logic              fm_rd_en,
  output logic [FMAW-1:0]   fm_rd_addr,
  input  logic [SW-1:0]     fm_rd_data,
  // output feature map (write)
  output logic              fm_wr_en,
  output logic [FMAW-1:0]   fm_wr_addr,
  output logic [SW-1:0]     fm_wr_data,
  // filter symbols (read)
  output logic              flt_rd_en,
  output logic [FLAW-1:0]   flt_rd_addr,
  input  logic [CFW-1:0]    flt_rd_data,
  // look-up table load bus
  input  logic              lut_we,
  input  wr_target_e        lut_tgt,
  input  logic [HOST_AW-1:0] lut_addr,
  input  logic [SW-1:0]     lut_data,
  // statistics
  output logic [31:0]       mul_lookups,
  output logic [31:0]       add_lookups
);
  typedef enum logic [3:0] {
    S_IDLE, S_SETUP, S_ISSUE, S_WAIT, S_DRAIN, S_BIAS, S_WRITE,
    S_ACT, S_ACT_WAIT, S_DONE
  } state_e;

  state_e     state;
  layer_cfg_t c;

  logic [FMAW-1:0]  hw, sw_step, ch_base, rowptr, ryw, out_addr, act_addr, act_waddr;
  logic [CNT_W-1:0] ckk;
  logic [FLAW-1:0]  flt_base, flt_addr;
  logic [DIM_W-1:0] n, ry, rx, m, ky, kx;
  logic [SW-1:0]    res_q;
  logic             p1;

  // ---- datapath units --------------------------------------------------
  logic          mul_ov;
  logic [SW-1:0] mul_sym;
  logic          srt_busy, srt_ov, srt_first, srt_last, srt_flush;
  logic [SW-1:0] srt_sym;
  logic          add_ov;
  logic [SW-1:0] add_sym;
  logic          bias_in_valid, bias_ov;
  logic [SW-1:0] bias_sym;
  logic          act_ov;
  logic [SW-1:0] act_sym;

  mult_lut_unit #(.N_SYM(N_SYM), .N_CFLT(N_CFLT), .N_FFLT(N_FFLT)) u_mult (
    .clk, .rst_n,
    .conv_we   (lut_we && lut_tgt == TGT_CONV_LUT),
    .conv_waddr(lut_addr[SW+CFW-1:0]),
    .conv_wdata(lut_data),
    .fc_we     (lut_we && lut_tgt == TGT_FC_LUT),
    .fc_waddr  (lut_addr[SW+FFW-1:0]),
    .fc_wdata  (lut_data),
    .in_valid  (p1 && c.op != OP_ACT),
    .is_fc     (c.op == OP_FC),
    .act_sym   (fm_rd_data),
    .flt_sym   (flt_rd_data),
    .out_valid (mul_ov),
    .out_sym   (mul_sym)
  );

  symbol_sorter #(.N_SYM(N_SYM), .CNT_W(CNT_W)) u_sort (
    .clk, .rst_n,
    .in_valid (mul_ov),
    .in_sym   (mul_sym),
    .flush    (srt_flush),
    .busy     (srt_busy),
    .out_valid(srt_ov),
    .out_first(srt_first),
    .out_last (srt_last),
    .out_sym  (srt_sym)
  );

  add_lut_unit #(.N_SYM(N_SYM)) u_add (
    .clk, .rst_n,
    .lut_we   (lut_we && lut_tgt == TGT_ADD_LUT),
    .lut_waddr(lut_addr[2*SW-1:0]),
    .lut_wdata(lut_data),
    .in_valid (srt_ov),
    .in_first (srt_first),
    .in_last  (srt_last),
    .in_sym   (srt_sym),
    .out_valid(add_ov),
    .out_sym  (add_sym)
  );

  bias_lut_unit #(.N_SYM(N_SYM), .MAX_CH(MAX_CH)) u_bias (
    .clk, .rst_n,
    .lut_we   (lut_we && lut_tgt == TGT_BIAS_LUT),
    .lut_waddr(lut_addr[CW+SW-1:0]),
    .lut_wdata(lut_data),
    .in_valid (bias_in_valid),
    .in_ch    (n[CW-1:0]),
    .in_sym   (add_sym),
    .out_valid(bias_ov),
    .out_sym  (bias_sym)
  );

  act_lut_unit #(.N_SYM(N_SYM)) u_act (
    .clk, .rst_n,
    .lut_we   (lut_we && lut_tgt == TGT_ACT_LUT),
    .lut_waddr(lut_addr[SW-1:0]),
    .lut_wdata(lut_data),
    .in_valid (p1 && c.op == OP_ACT),
    .in_sym   (fm_rd_data),
    .out_valid(act_ov),
    .out_sym  (act_sym)
  );

  // ---- loop conditions -----------------------------------------------------
  logic last_term, last_col, last_row, last_ch, act_last;
  assign last_term = (m == c.in_ch - 1'b1) && (ky == c.kernel - 1'b1) && (kx == c.kernel - 1'b1);
  assign last_col  = (rx + c.stride + c.kernel) > c.in_w;
  assign last_row  = (ry + c.stride + c.kernel) > c.in_h;
  assign last_ch   = (n == c.out_ch - 1'b1);
  assign act_last  = (m == c.in_ch - 1'b1) && (ch_base + hw - 1'b1 == act_addr);

  // ---- outputs to memories -------------------------------------------------
  always_comb begin
    fm_rd_en    = 1'b0;
    fm_rd_addr  = ch_base + rowptr + FMAW'(rx) + FMAW'(kx);
    flt_rd_en   = 1'b0;
    flt_rd_addr = flt_addr;
    fm_wr_en    = 1'b0;
    fm_wr_addr  = out_addr;
    fm_wr_data  = res_q;
    srt_flush   = 1'b0;
    bias_in_valid = 1'b0;
    case (state)
      S_ISSUE: begin
        fm_rd_en  = 1'b1;
        flt_rd_en = 1'b1;
      end
      S_WAIT:  srt_flush = !p1 && !mul_ov;
      S_DRAIN: bias_in_valid = add_ov && c.bias_en;
      S_WRITE: fm_wr_en = 1'b1;
      S_ACT: begin
        fm_rd_en   = 1'b1;
        fm_rd_addr = act_addr;
      end
      default: ;
    endcase
    if (act_ov) begin
      fm_wr_en   = 1'b1;
      fm_wr_addr = act_waddr;
      fm_wr_data = act_sym;
    end
  end

  assign busy = (state != S_IDLE);

  // ---- controller ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      c           <= '0;
      done        <= 1'b0;
      p1          <= 1'b0;
      hw          <= '0;
      sw_step     <= '0;
      ckk         <= '0;
      n           <= '0;  ry <= '0;  rx <= '0;
      m           <= '0;  ky <= '0;  kx <= '0;
      ch_base     <= '0;  rowptr <= '0;  ryw <= '0;
      flt_base    <= '0;  flt_addr <= '0;
      out_addr    <= '0;  act_addr <= '0;  act_waddr <= '0;
      res_q       <= '0;
      mul_lookups <= '0;
      add_lookups <= '0;
    end else begin
      done <= 1'b0;
      p1   <= fm_rd_en;
      if (p1 && c.op != OP_ACT) mul_lookups <= mul_lookups + 1;
      if (srt_ov && !srt_first) add_lookups <= add_lookups + 1;
      if (act_ov) act_waddr <= act_waddr + 1'b1;

      case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          state <= S_SETUP;
          mul_lookups <= '0;
          add_lookups <= '0;
        end

        S_SETUP: begin
          hw       <= FMAW'(c.in_h * c.in_w);
          sw_step  <= FMAW'(c.stride * c.in_w);
          ckk      <= CNT_W'(c.in_ch * c.kernel * c.kernel);
          n <= '0;  ry <= '0;  rx <= '0;
          m <= '0;  ky <= '0;  kx <= '0;
          ch_base  <= '0;  rowptr <= '0;  ryw <= '0;
          flt_base <= '0;  flt_addr <= '0;
          out_addr <= '0;  act_addr <= '0;  act_waddr <= '0;
          state    <= (c.op == OP_ACT) ? S_ACT : S_ISSUE;
        end

        // One multiply look-up issued per cycle.
        S_ISSUE: begin
          flt_addr <= flt_addr + 1'b1;
          if (kx != c.kernel - 1'b1) begin
            kx <= kx + 1'b1;
          end else begin
            kx <= '0;
            if (ky != c.kernel - 1'b1) begin
              ky     <= ky + 1'b1;
              rowptr <= rowptr + FMAW'(c.in_w);
            end else begin
              ky      <= '0;
              rowptr  <= ryw;
              m       <= m + 1'b1;
              ch_base <= ch_base + hw;
            end
          end
          if (last_term) state <= S_WAIT;
        end

        S_WAIT: if (srt_flush) state <= S_DRAIN;

        S_DRAIN: if (add_ov) begin
          res_q <= add_sym;
          state <= c.bias_en ? S_BIAS : S_WRITE;
        end

        S_BIAS: if (bias_ov) begin
          res_q <= bias_sym;
          state <= S_WRITE;
        end

        // Write the neuron and step to the next one.
        S_WRITE: begin
          out_addr <= out_addr + 1'b1;
          m <= '0;  ky <= '0;  kx <= '0;  ch_base <= '0;
          state <= S_ISSUE;
          if (!last_col) begin
            rx       <= rx + c.stride;
            rowptr   <= ryw;
            flt_addr <= flt_base;
          end else begin
            rx <= '0;
            if (!last_row) begin
              ry       <= ry + c.stride;
              ryw      <= ryw + sw_step;
              rowptr   <= ryw + sw_step;
              flt_addr <= flt_base;
            end else begin
              ry       <= '0;
              ryw      <= '0;
              rowptr   <= '0;
              n        <= n + 1'b1;
              flt_base <= flt_base + FLAW'(ckk);
              flt_addr <= flt_base + FLAW'(ckk);
              if (last_ch) state <= S_DONE;
            end
          end
        end

        // Activation layer: one look-up per symbol.
        S_ACT: begin
          act_addr <= act_addr + 1'b1;
          if (ch_base + hw - 1'b1 == act_addr) begin
            ch_base <= ch_base + hw;
            m       <= m + 1'b1;
          end
          if (act_last) state <= S_ACT_WAIT;
        end

        S_ACT_WAIT: if (!p1 && !act_ov) state <= S_DONE;

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // Layer configuration must describe a window that fits the input.
  assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_SETUP && c.op != OP_ACT) |-> (c.kernel != 0 && c.stride != 0 &&
       c.kernel <= c.in_h && c.kernel <= c.in_w && c.in_ch != 0 && c.out_ch != 0))
    else $error("layer_engine: invalid layer geometry");
  assert property (@(posedge clk) disable iff (!rst_n) srt_flush |-> !srt_busy)
    else $error("layer_engine: sorter flushed while draining");
  assert property (@(posedge clk) disable iff (!rst_n) !(lut_we && busy))
    else $error("layer_engine: table load while a layer runs");
endmodule
