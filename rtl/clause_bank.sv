// clause_bank: GROUP convolutional clauses evaluated side by side.
//
// On a patch, clause j is the AND of the literals whose TA includes them:
//   c_j(patch) = |incl_j & (&(literals | ~incl_j))
// A clause that includes no literal outputs 0, as in CTM inference. The
// convolutional clause output for the whole image is the OR of c_j over all
// patches, kept in a sticky register per clause:
//   clear      sets every clause output to 0 (start of a group)
//   lit_valid  ORs the clause values on the current literal vector in
// clause_out is registered: the value for the patch presented in cycle t is
// included from cycle t+1 on.
//
// The AND over included literals follows the paper's clause figure; the OR
// over patches is the standard CTM rule, and evaluating a whole group of
// clauses per cycle against one shared literal vector is this design's
// choice.
module clause_bank #(
  parameter int unsigned GROUP    = ctm_pkg::CLAUSE_PAR,
  parameter int unsigned LITERALS = 2 * ctm_pkg::ctm_features(ctm_pkg::IMG_H, ctm_pkg::IMG_W, ctm_pkg::PATCH)
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clear,
  input  logic                            lit_valid,
  input  logic [LITERALS-1:0]             literals,
  input  logic [GROUP-1:0][LITERALS-1:0]  incl,
  output logic [GROUP-1:0]                clause_out
);

  logic [GROUP-1:0] fire;

  always_comb begin
    for (int unsigned j = 0; j < GROUP; j++) begin
      fire[j] = (|incl[j]) & (&(literals | ~incl[j]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         clause_out <= '0;
    else if (clear)     clause_out <= '0;
    else if (lit_valid) clause_out <= clause_out | fire;
  end

endmodule
