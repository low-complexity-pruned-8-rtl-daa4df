// Dual pruned 8-point DCT approximation engine.
//
// Both pruned 1-D cores sit side by side on one input stream: every vector
// x0..x7 accepted with in_valid yields, three clocks later, the four pruned
// LODCT coefficients (lodct_X) and the six pruned MRDCT coefficients
// (mrdct_X) together, flagged by out_valid. One vector may enter per clock.
// Realising both transforms on one device is what the paper's prototype did;
// sharing a single input port and a single valid flag between them is this
// design's own choice. The two cores have equal latency, which an assertion
// checks.
//
// A 2-D pruned transform of an 8x8 block runs these cores on the eight
// columns and then on the K rows of the kept coefficients; the transpose
// between the passes is left to the surrounding system. The default input
// width of 11 bits is chosen so that one core can serve both passes:
// level-shifted 8-bit pixels (-128..127) enter the column pass, whose
// results (at most 8 * 128 in magnitude) still fit 11 bits for the row pass.
module pruned_dct_top
  import pruned_dct_pkg::*;
#(
  parameter int unsigned IN_W = 11  // input sample width
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic signed [IN_W-1:0]         x        [N],
  output logic                           out_valid,
  output logic signed [IN_W+GROWTH-1:0]  lodct_X  [K_LODCT],
  output logic signed [IN_W+GROWTH-1:0]  mrdct_X  [K_MRDCT]
);

  logic lodct_valid, mrdct_valid;

  pruned_lodct_1d #(.IN_W(IN_W)) u_lodct (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .x         (x),
    .out_valid (lodct_valid),
    .X         (lodct_X)
  );

  pruned_mrdct_1d #(.IN_W(IN_W)) u_mrdct (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .x         (x),
    .out_valid (mrdct_valid),
    .X         (mrdct_X)
  );

  assign out_valid = lodct_valid;

  a_valid_aligned : assert property (@(posedge clk) disable iff (!rst_n)
                                    lodct_valid == mrdct_valid)
    else $error("pruned cores out of step");

endmodule
