// codebook_encoder: the symbolic coding of the input image (pixel level, patch
// size 1) and the centroid table.  Each input value is replaced by the index of
// the nearest centroid of the activation codebook.  For a scalar the L2
// distance is |x - c|, so the search needs only a subtractor and a comparator.
// The same centroid table (centroid_lut) decodes output symbols back to values.
//
// How it works: a sequential search.  An accepted pixel is compared with one
// centroid per cycle, keeping the closest so far (ties keep the lower index).
// A pixel takes N_SYM cycles; the symbol is then presented on sym_valid/sym
// for one cycle and the next pixel can be accepted in the same cycle.
//
// Interface: centroid load port cent_we/cent_waddr/cent_wdata; decode port
// dec_sym in, dec_val out one cycle later; pixel stream pix_valid/pix_ready/
// pix_val; result stream sym_valid/sym (no back-pressure).
// Nearest-centroid coding follows the paper; doing it on chip with a serial
// search, and the signed fixed-point value format, are this design's choices.
module codebook_encoder #(
  parameter int unsigned N_SYM = dietcnn_pkg::N_CLUSTERS,
  parameter int unsigned VAL_W = dietcnn_pkg::VAL_W,
  localparam int unsigned SW = $clog2(N_SYM)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cent_we,
  input  logic [SW-1:0]           cent_waddr,
  input  logic signed [VAL_W-1:0] cent_wdata,
  input  logic [SW-1:0]           dec_sym,
  output logic signed [VAL_W-1:0] dec_val,
  input  logic                    pix_valid,
  output logic                    pix_ready,
  input  logic signed [VAL_W-1:0] pix_val,
  output logic                    sym_valid,
  output logic [SW-1:0]           sym
);
  logic signed [VAL_W-1:0] cent [N_SYM];
  logic signed [VAL_W-1:0] pix_q;
  logic                    searching;
  logic [SW-1:0]           idx, best_idx;
  logic [VAL_W:0]          best_dist, abs_d;
  logic signed [VAL_W:0]   diff;

  always_ff @(posedge clk) begin
    if (cent_we) cent[cent_waddr] <= cent_wdata;
    dec_val <= cent[dec_sym];
  end

  assign diff      = (VAL_W+1)'(pix_q) - (VAL_W+1)'(cent[idx]);
  assign abs_d      = diff[VAL_W] ? -diff : diff;
  assign pix_ready = !searching;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      searching <= 1'b0;
      sym_valid <= 1'b0;
      idx       <= '0;
      best_idx  <= '0;
      best_dist <= '0;
      pix_q     <= '0;
    end else begin
      sym_valid <= 1'b0;
      if (!searching) begin
        if (pix_valid) begin
          pix_q     <= pix_val;
          idx       <= '0;
          searching <= 1'b1;
        end
      end else begin
        if (idx == '0 || abs_d < best_dist) begin
          best_idx  <= idx;
          best_dist <= abs_d;
        end
        if (idx == SW'(N_SYM - 1)) begin
          searching <= 1'b0;
          sym_valid <= 1'b1;
        end
        idx <= idx + SW'(1);
      end
    end
  end

  // The symbol is the last best index, updated with the final comparison.
  logic [SW-1:0] final_idx;
  always_ff @(posedge clk) begin
    if (searching && idx == SW'(N_SYM - 1))
      final_idx <= (abs_d < best_dist) ? idx : best_idx;
  end
  assign sym = final_idx;
endmodule
