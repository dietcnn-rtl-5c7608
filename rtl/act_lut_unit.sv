// act_lut_unit: the discrete activation transformer.  An activation function
// (ReLU, sigmoid, ...) applied to a feature map in the symbol domain is one
// table look-up per symbol: out = act_lut[in].  The table holds, for every
// activation symbol, the symbol nearest to the activation of its centroid;
// it is computed off line and written through the load port.
//
// Interface: load port lut_we/lut_waddr/lut_wdata; stream in_valid/in_sym,
// out_valid/out_sym.  One symbol per cycle, latency one cycle, no
// back-pressure.  The one-look-up-per-symbol function follows the paper; the
// streaming interface and the latency are this design's choice.
module act_lut_unit #(
  parameter int unsigned N_SYM = dietcnn_pkg::N_CLUSTERS,
  localparam int unsigned SW = $clog2(N_SYM)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          lut_we,
  input  logic [SW-1:0] lut_waddr,
  input  logic [SW-1:0] lut_wdata,
  input  logic          in_valid,
  input  logic [SW-1:0] in_sym,
  output logic          out_valid,
  output logic [SW-1:0] out_sym
);
  logic [SW-1:0] lut [N_SYM];

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_waddr] <= lut_wdata;
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_sym <= lut[in_sym];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
