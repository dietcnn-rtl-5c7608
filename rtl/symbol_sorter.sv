// symbol_sorter: puts the bag of product symbols of one output neuron into
// ascending symbol order before ripple addition.  Symbolic addition is not
// associative, so a fixed order makes the result independent of the order in
// which the products were generated; the order used is ascending symbol index.
//
// How it works: a counting sort.  While filling, each pushed symbol increments
// its bin counter and sets its bit in an occupancy vector.  After flush the
// unit drains: every cycle a priority encoder picks the lowest occupied bin,
// emits that symbol and decrements the bin, clearing the occupancy bit when
// the bin empties.  A bag of B symbols therefore takes B cycles to fill and B
// cycles to drain, whatever the codebook size.
//
// Interface: in_valid/in_sym push while not busy; flush (one cycle, after the
// last push of a non-empty bag) starts the drain; out_valid/out_sym with
// out_first/out_last marking the ends of the sorted bag; busy is high from the
// cycle after flush until the cycle after out_last.  No back-pressure.
// The paper shows a sort before the ripple add; the ascending order is read off
// its figure, and the counting-sort insides are this design's choice.
module symbol_sorter #(
  parameter int unsigned N_SYM = dietcnn_pkg::N_CLUSTERS,
  parameter int unsigned CNT_W = dietcnn_pkg::CNT_W,
  localparam int unsigned SW = $clog2(N_SYM)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [SW-1:0] in_sym,
  input  logic          flush,
  output logic          busy,
  output logic          out_valid,
  output logic          out_first,
  output logic          out_last,
  output logic [SW-1:0] out_sym
);
  logic [CNT_W-1:0] cnt [N_SYM];
  logic [N_SYM-1:0] occ;
  logic             draining, first_q;
  logic [SW-1:0]    cur;
  logic [N_SYM-1:0] cur_onehot;

  // Lowest occupied bin.
  always_comb begin
    cur = '0;
    for (int i = N_SYM - 1; i >= 0; i--) begin
      if (occ[i]) cur = SW'(i);
    end
  end

  assign cur_onehot = N_SYM'(1) << cur;
  assign busy       = draining;
  assign out_valid  = draining;
  assign out_first  = draining && first_q;
  assign out_sym    = cur;
  assign out_last   = draining && (cnt[cur] == CNT_W'(1)) && ((occ & ~cur_onehot) == '0);

  always_ff @(posedge clk) begin
    if (!draining && in_valid)
      cnt[in_sym] <= occ[in_sym] ? cnt[in_sym] + CNT_W'(1) : CNT_W'(1);
    else if (draining)
      cnt[cur] <= cnt[cur] - CNT_W'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ      <= '0;
      draining <= 1'b0;
      first_q  <= 1'b0;
    end else if (!draining) begin
      if (in_valid) occ[in_sym] <= 1'b1;
      if (flush && (occ != '0 || in_valid)) begin
        draining <= 1'b1;
        first_q  <= 1'b1;
      end
    end else begin
      first_q <= 1'b0;
      if (cnt[cur] == CNT_W'(1)) occ[cur] <= 1'b0;
      if (out_last) draining <= 1'b0;
    end
  end

  // A push while draining would be lost.
  assert property (@(posedge clk) disable iff (!rst_n) !(draining && in_valid))
    else $error("symbol_sorter: push while draining");
endmodule
