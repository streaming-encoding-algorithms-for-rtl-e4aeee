// embed_combiner: merges the numeric and categorical embeddings and holds the
// result for the learner.
//
// The two encoders produce phi(x_n) (binary, after thresholding) and phi(x_c)
// (binary, or counts in SUM mode) of the same dimension D. On load the
// combiner computes, coordinate by coordinate,
//   CMB_OR      : phi = phi_n | (phi_c != 0)   thresholded sum at one
//   CMB_SUM     : phi = phi_n + phi_c          element-wise sum
//   CMB_NOCOUNT : phi = (phi_c != 0)           numeric data omitted
//   CMB_CONCAT  : phi = [phi_n, phi_c != 0]    2D long: numeric code in
//                                              coordinates 0..D-1, categorical
//                                              code in D..2D-1
// and registers it (ED = D coordinates, or 2D for CMB_CONCAT). The register
// is the hand-off buffer between the encoding and the update stages of the
// dataflow pipeline: once loaded, both encoders may start on the next input
// while the learner reads this copy. The four combining rules follow the
// paper; the order of the two halves in the concatenation is this design's
// choice. The mode is a build-time parameter, as each mode was a separate
// build in the paper's FPGA evaluation.
//
// Timing: emb is valid the cycle after load and holds until the next load.
module embed_combiner
  import hdc_pkg::*;
#(
  parameter int unsigned D     = 10000,
  parameter combine_e    MODE  = CMB_OR,
  parameter int unsigned CNT_W = 1,                              // phi_c width
  parameter int unsigned EMB_W = (MODE == CMB_SUM) ? CNT_W + 1 : 1,
  localparam int unsigned ED   = (MODE == CMB_CONCAT) ? 2 * D : D
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [CNT_W-1:0] vec_c [D],
  input  logic             vec_n [D],
  output logic [EMB_W-1:0] emb   [ED]
);

  initial assert (MODE != CMB_SUM || EMB_W > CNT_W)
    else $error("EMB_W too narrow for the sum");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(ED); i++) emb[i] <= '0;
    end else if (load) begin
      for (int i = 0; i < int'(D); i++) begin
        unique case (MODE)
          CMB_OR:      emb[i] <= EMB_W'(vec_n[i] | (vec_c[i] != '0));
          CMB_SUM:     emb[i] <= EMB_W'(vec_n[i]) + EMB_W'(vec_c[i]);
          CMB_CONCAT: begin
            emb[i]     <= EMB_W'(vec_n[i]);
            emb[D + i] <= EMB_W'(vec_c[i] != '0);
          end
          default:     emb[i] <= EMB_W'(vec_c[i] != '0);
        endcase
      end
    end
  end

endmodule
