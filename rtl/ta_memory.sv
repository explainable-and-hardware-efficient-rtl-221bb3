// ta_memory: the Tsetlin-automaton (TA) store of the CTM.
//
// Each clause has one TA per literal. A TA with 2N states (N = 2**(TA_BITS-1))
// excludes its literal in states 1..N and includes it in states N+1..2N.
// Inference needs only that action, so the store keeps one include bit per TA:
// a state written as the value v = state-1 in 0..2N-1 includes its literal
// exactly when v >= N, i.e. when the top bit of v is set.
//
// Clauses are numbered class-major: clause c of class k is entry
// k*CLAUSES + c. The entries are read GROUP clauses at a time: group g holds
// entries g*GROUP .. g*GROUP+GROUP-1. The store is built as GROUP lane
// memories of GROUPS words each (entry e in lane e % GROUP, word e / GROUP),
// so that a group is one word read from every lane, as a row of block RAMs
// would deliver it.
//
// Ports:
//   ld_en/ld_clause/ld_literal/ld_state  load one TA state per cycle
//   rd_group -> rd_include               registered read, one cycle latency
//
// The TA state machine and its include/exclude halves follow the paper's
// TA-team figure, and the paper's FPGA estimate assumes TAs stored in RAM.
// Storing only the action bit, the load port and the grouped read are this
// design's choices. The store is not reset: a model is loaded before use.
module ta_memory #(
  parameter int unsigned CLAUSES_TOTAL = ctm_pkg::CLASSES * ctm_pkg::CLAUSES,
  parameter int unsigned LITERALS      = 2 * ctm_pkg::ctm_features(ctm_pkg::IMG_H, ctm_pkg::IMG_W, ctm_pkg::PATCH),
  parameter int unsigned GROUP         = ctm_pkg::CLAUSE_PAR,
  parameter int unsigned TA_BITS       = ctm_pkg::TA_BITS,
  localparam int unsigned GROUPS       = CLAUSES_TOTAL / GROUP
) (
  input  logic                                clk,
  input  logic                                ld_en,
  input  logic [$clog2(CLAUSES_TOTAL)-1:0]    ld_clause,
  input  logic [$clog2(LITERALS)-1:0]         ld_literal,
  input  logic [TA_BITS-1:0]                  ld_state,
  input  logic [ctm_pkg::cnt_w(GROUPS-1)-1:0] rd_group,
  output logic [GROUP-1:0][LITERALS-1:0]      rd_include
);

  localparam int unsigned LW = $clog2(GROUP);
  localparam int unsigned GW = ctm_pkg::cnt_w(GROUPS-1);

  // Entry e sits in lane e % GROUP, row e / GROUP.
  logic [GW-1:0] ld_group;
  logic [LW-1:0] ld_lane;
  assign ld_group = GW'(32'(ld_clause) / GROUP);
  assign ld_lane  = LW'(32'(ld_clause) % GROUP);

  // One memory per lane: GROUPS words of LITERALS include bits, one bit
  // write port and one registered word read port.
  for (genvar j = 0; j < GROUP; j++) begin : g_lane
    logic [LITERALS-1:0] act [GROUPS];
    logic [LITERALS-1:0] q;

    always_ff @(posedge clk) begin
      if (ld_en && 32'(ld_lane) == j) act[ld_group][ld_literal] <= ld_state[TA_BITS-1];
      q <= act[rd_group];
    end

    assign rd_include[j] = q;
  end

  initial begin
    assert (CLAUSES_TOTAL % GROUP == 0)
      else $fatal(1, "ta_memory: GROUP must divide CLAUSES_TOTAL");
  end

endmodule
