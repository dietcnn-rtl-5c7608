// bias_lut_unit: adds a layer's symbolic bias to an output symbol by look-up.
// Each layer has a bias table indexed by output channel and symbol,
//   out = bias_lut[{channel, sym}],
// holding the symbol nearest to (centroid(sym) + bias[channel]).  The table
// holds one layer (up to MAX_CH channels) and is reloaded between layers.
// The paper names per-layer bias LUTs and gives their sizes, not their
// organisation: the {channel, symbol} indexing is this design's reading.
//
// Interface: load port; in_valid/in_ch/in_sym in, out_valid/out_sym one cycle
// later.
module bias_lut_unit #(
  parameter int unsigned N_SYM  = dietcnn_pkg::N_CLUSTERS,
  parameter int unsigned MAX_CH = dietcnn_pkg::MAX_CH,
  localparam int unsigned SW = $clog2(N_SYM),
  localparam int unsigned CW = $clog2(MAX_CH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lut_we,
  input  logic [CW+SW-1:0] lut_waddr,
  input  logic [SW-1:0]    lut_wdata,
  input  logic             in_valid,
  input  logic [CW-1:0]    in_ch,
  input  logic [SW-1:0]    in_sym,
  output logic             out_valid,
  output logic [SW-1:0]    out_sym
);
  logic [SW-1:0] lut [MAX_CH*N_SYM];

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_waddr] <= lut_wdata;
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_sym <= lut[{in_ch, in_sym}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
