// add_lut_unit: ripple addition of a bag of symbols through the add LUT.
// Symbolic addition is a table look-up, sum = add_lut[{a, b}], the symbol
// nearest to the sum of the two centroids.  A bag of symbols is reduced one
// symbol at a time into an accumulator symbol:
//   acc = s0;  acc = add_lut[{acc, s1}];  acc = add_lut[{acc, s2}]; ...
// The order of the bag matters, because symbolic addition is not
// associative; the sorter in front of this unit fixes that order.
//
// Interface: load port lut_we/lut_waddr/lut_wdata; stream in_valid/in_sym with
// in_first on the first and in_last on the last symbol of a bag (both on a bag
// of one); out_valid pulses for one cycle, the cycle after in_last, with the
// final symbol on out_sym.  One symbol per cycle: the accumulator register is
// the table's read register, so each look-up's address uses the previous
// result directly.  The ripple-add function follows the paper; the framing
// signals and timing are this design's choice.
module add_lut_unit #(
  parameter int unsigned N_SYM = dietcnn_pkg::N_CLUSTERS,
  localparam int unsigned SW = $clog2(N_SYM)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            lut_we,
  input  logic [2*SW-1:0] lut_waddr,
  input  logic [SW-1:0]   lut_wdata,
  input  logic            in_valid,
  input  logic            in_first,
  input  logic            in_last,
  input  logic [SW-1:0]   in_sym,
  output logic            out_valid,
  output logic [SW-1:0]   out_sym
);
  logic [SW-1:0] lut [N_SYM*N_SYM];
  logic [SW-1:0] acc;

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_waddr] <= lut_wdata;
  end

  always_ff @(posedge clk) begin
    if (in_valid) acc <= in_first ? in_sym : lut[{acc, in_sym}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_last;
  end

  assign out_sym = acc;
endmodule
