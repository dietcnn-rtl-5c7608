// dietcnn_pkg: widths, types and constants shared by the multiplication-free
// (look-up based) CNN inference engine.
//
// Every activation, every filter weight and every partial sum is a *symbol*:
// the index of a centroid in a codebook.  The default codebook sizes are the
// ones of the FPGA configuration the design follows: 512 activation symbols,
// 256 convolution-filter symbols and 32 fully-connected-filter symbols.  The
// widths of centroid values, the memory depths and the host write map are
// this design's own choices.
package dietcnn_pkg;

  // ---- codebook sizes ---------------------------------------------------
  localparam int unsigned N_CLUSTERS = 512;  // activation/feature-map symbols
  localparam int unsigned N_CFILTERS = 256;  // convolution filter symbols
  localparam int unsigned N_FFILTERS = 32;   // fully-connected filter symbols

  localparam int unsigned SYM_W  = $clog2(N_CLUSTERS);  // 9
  localparam int unsigned CFLT_W = $clog2(N_CFILTERS);  // 8
  localparam int unsigned FFLT_W = $clog2(N_FFILTERS);  // 5
  localparam int unsigned FLT_W  = CFLT_W;              // filter memory word

  // Centroid value of an activation symbol (signed fixed point, own choice).
  localparam int unsigned VAL_W = 16;

  // ---- memory sizes (hold the largest layer of the VGG-11 example) -------
  localparam int unsigned FM_DEPTH   = 32768;           // >= 11*11*256 symbols
  localparam int unsigned FM_AW      = $clog2(FM_DEPTH);
  localparam int unsigned FLT_DEPTH  = 512 * 512 * 9;   // one 512x512x3x3 layer
  localparam int unsigned FLT_AW     = $clog2(FLT_DEPTH);
  localparam int unsigned MAX_CH     = 512;             // output channels per layer
  localparam int unsigned CH_W       = $clog2(MAX_CH);

  // Layer geometry counters.
  localparam int unsigned DIM_W = 10;   // C, N, H, W, K, stride fields
  localparam int unsigned CNT_W = 16;   // symbols per output neuron (C*K*K)

  typedef logic [SYM_W-1:0]  sym_t;
  typedef logic [FLT_W-1:0]  flt_t;
  typedef logic signed [VAL_W-1:0] val_t;

  // ---- layer operations --------------------------------------------------
  typedef enum logic [1:0] {
    OP_CONV = 2'd0,   // discrete convolution: multiply LUT conv_lut
    OP_FC   = 2'd1,   // fully connected: multiply LUT fc_lut
    OP_ACT  = 2'd2    // symbol-wise activation look-up
  } layer_op_e;

  typedef struct packed {
    layer_op_e        op;
    logic             bias_en;    // pass each output through the bias LUT
    logic             src_bank;   // feature-map bank read (0/1); result goes to the other
    logic [DIM_W-1:0] in_ch;      // C
    logic [DIM_W-1:0] in_h;       // H
    logic [DIM_W-1:0] in_w;       // W
    logic [DIM_W-1:0] out_ch;     // N
    logic [DIM_W-1:0] kernel;     // K (square kernel)
    logic [DIM_W-1:0] stride;     // S
  } layer_cfg_t;

  // ---- host write map ----------------------------------------------------
  typedef enum logic [3:0] {
    TGT_CONV_LUT = 4'd0,  // addr = {act_sym, conv_filter_sym}
    TGT_FC_LUT   = 4'd1,  // addr = {act_sym, fc_filter_sym}
    TGT_ADD_LUT  = 4'd2,  // addr = {sym_a, sym_b}
    TGT_ACT_LUT  = 4'd3,  // addr = sym
    TGT_BIAS_LUT = 4'd4,  // addr = {channel, sym}
    TGT_CENTROID = 4'd5,  // addr = sym, data = centroid value
    TGT_FILTER   = 4'd6,  // addr = ((n*C + m)*K + ky)*K + kx
    TGT_FM0      = 4'd7,  // feature-map bank 0, addr = (m*H + y)*W + x
    TGT_FM1      = 4'd8   // feature-map bank 1
  } wr_target_e;

  localparam int unsigned HOST_AW = 22;  // widest table: filter memory
  localparam int unsigned HOST_DW = 16;

endpackage
