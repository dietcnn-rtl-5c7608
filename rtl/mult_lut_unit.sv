// mult_lut_unit: the multiply look-up tables that replace every multiplication.
// A product of an activation symbol and a filter symbol is the symbol nearest
// to the product of their centroids, read from a pre-computed table:
//   convolution:      prod = conv_lut[{act_sym, flt_sym}]   (512 x 256)
//   fully connected:  prod = fc_lut  [{act_sym, flt_sym}]   (512 x 32)
// The two tables exist because convolution and fully-connected filters use
// separate codebooks (N_CFILTERS and N_FFILTERS symbols).
//
// Interface: load ports for each table; in_valid/is_fc/act_sym/flt_sym in,
// out_valid/out_sym one cycle later.  One look-up per cycle.  For a
// fully-connected look-up only the low FFLT_W bits of flt_sym are used.  The
// tables and their sizes follow the paper; addressing by concatenation and the
// single-cycle latency are this design's choice.
module mult_lut_unit #(
  parameter int unsigned N_SYM  = dietcnn_pkg::N_CLUSTERS,
  parameter int unsigned N_CFLT = dietcnn_pkg::N_CFILTERS,
  parameter int unsigned N_FFLT = dietcnn_pkg::N_FFILTERS,
  localparam int unsigned SW  = $clog2(N_SYM),
  localparam int unsigned CFW = $clog2(N_CFLT),
  localparam int unsigned FFW = $clog2(N_FFLT)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               conv_we,
  input  logic [SW+CFW-1:0]  conv_waddr,
  input  logic [SW-1:0]      conv_wdata,
  input  logic               fc_we,
  input  logic [SW+FFW-1:0]  fc_waddr,
  input  logic [SW-1:0]      fc_wdata,
  input  logic               in_valid,
  input  logic               is_fc,
  input  logic [SW-1:0]      act_sym,
  input  logic [CFW-1:0]     flt_sym,
  output logic               out_valid,
  output logic [SW-1:0]      out_sym
);
  logic [SW-1:0] conv_lut [N_SYM*N_CFLT];
  logic [SW-1:0] fc_lut   [N_SYM*N_FFLT];
  logic [SW-1:0] conv_q, fc_q;
  logic          fc_q_sel;

  always_ff @(posedge clk) begin
    if (conv_we) conv_lut[conv_waddr] <= conv_wdata;
    if (fc_we)   fc_lut[fc_waddr]     <= fc_wdata;
  end

  always_ff @(posedge clk) begin
    if (in_valid && !is_fc) conv_q <= conv_lut[{act_sym, flt_sym}];
    if (in_valid &&  is_fc) fc_q   <= fc_lut[{act_sym, flt_sym[FFW-1:0]}];
    if (in_valid)           fc_q_sel <= is_fc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  assign out_sym = fc_q_sel ? fc_q : conv_q;
endmodule
