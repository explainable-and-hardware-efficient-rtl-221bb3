// class_sum: polarity-weighted clause voting and the class decision.
//
// Clause c of class k (entry k*CLAUSES + c, see ta_memory) votes +1 for its
// class when c is even (positive polarity) and -1 when c is odd (negative
// polarity), so that the first clause of a class is positive. The clause outputs arrive GROUP at a time: with add_en high the
// outputs of group `group` are added to the running class sums. clear sets
// all sums to 0 before an image. sums[k] is the class sum of class k;
// pred_class is the index of the largest sum, the lowest index on a tie.
// Sums and pred_class are valid the cycle after the last add.
//
// The +1/-1 polarities, their alternation (clause 1 +1, clause 2 -1, ...,
// clause M-1 +1, clause M -1) and the summation follow the paper's TM
// figure. No clipping to [-T, T] is applied: it only matters in
// training, and the decision here is the unclipped argmax.
module class_sum #(
  parameter int unsigned CLASSES  = ctm_pkg::CLASSES,
  parameter int unsigned CLAUSES  = ctm_pkg::CLAUSES,
  parameter int unsigned GROUP    = ctm_pkg::CLAUSE_PAR,
  localparam int unsigned GROUPS  = CLASSES * CLAUSES / GROUP,
  localparam int unsigned SUM_W   = $clog2(CLAUSES + 1) + 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                clear,
  input  logic                                add_en,
  input  logic [ctm_pkg::cnt_w(GROUPS-1)-1:0] group,
  input  logic [GROUP-1:0]                    clause_out,
  output logic signed [SUM_W-1:0]           sums [CLASSES],
  output logic [ctm_pkg::cnt_w(CLASSES-1)-1:0] pred_class
);

  // Per-class change contributed by the current group.
  logic signed [SUM_W-1:0] delta [CLASSES];

  always_comb begin
    for (int unsigned k = 0; k < CLASSES; k++) delta[k] = '0;
    for (int unsigned g = 0; g < GROUPS; g++) begin
      if (32'(group) == g) begin
        for (int unsigned j = 0; j < GROUP; j++) begin
          // entry number, its class and its place within the class
          if (clause_out[j]) begin
            if (((g*GROUP + j) % CLAUSES) % 2 == 0)
              delta[(g*GROUP + j) / CLAUSES] += SUM_W'(1);
            else
              delta[(g*GROUP + j) / CLAUSES] -= SUM_W'(1);
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < CLASSES; k++) sums[k] <= '0;
    end else if (clear) begin
      for (int unsigned k = 0; k < CLASSES; k++) sums[k] <= '0;
    end else if (add_en) begin
      for (int unsigned k = 0; k < CLASSES; k++) sums[k] <= sums[k] + delta[k];
    end
  end

  always_comb begin
    pred_class = '0;
    for (int unsigned k = 1; k < CLASSES; k++) begin
      if (sums[k] > sums[pred_class]) pred_class = (ctm_pkg::cnt_w(CLASSES-1))'(k);
    end
  end

endmodule
