// ctm_top: Convolutional Tsetlin Machine (CTM) jamming detector.
//
// A greyscale 100x100 spectrogram of the received PSS symbol is streamed in
// pixel by pixel. The otsu_binarizer turns it into a Boolean image
// (Enhanced Otsu), which is written row by row into the image_buffer. The
// last row starts an inference: the ctm_controller walks the clause groups
// held in the ta_memory; for each group it scans all 91x91 patch positions
// (stride 1), the patch_generator forms the literal vector of each patch,
// the clause_bank ORs every clause's value over the patches, and class_sum
// adds the +1/-1 votes of the group to the class sums. After the last group
// result_valid pulses with the class sums and the decision; class 1
// (CLASS_JAM) means jamming detected.
//
// Back-pressure: while an inference runs, the binarizer may already take the
// pixels of the next image and compute its threshold, but holds its binary
// rows (out_ready low) until the inference has finished.
//
// The model is loaded one TA state per cycle through ld_* (only while busy is
// low): clause ld_clause = class*CLAUSES + clause, literal ld_literal as laid
// out by patch_generator, state value 0..2**TA_BITS-1.
//
// The PSS reference generator is included for the receiver's synchronisation
// front end, which sits outside this block; its ports are brought out as is.
//
// Latency: H*W pixel cycles + 2**PIX_BITS threshold cycles + H row
// cycles, then GROUPS*((H-PATCH+1)*(W-PATCH+1) + 3) + 1 inference cycles
// (33,137 at the defaults, about 3,000 images/s at 100 MHz).
//
// The configuration (100x100 image, 10x10 patch, 200 clauses per class,
// 2 classes) is the paper's; the partitioning, interfaces, clause
// parallelism and schedule are this design's choices.
module ctm_top #(
  parameter int unsigned H          = ctm_pkg::IMG_H,
  parameter int unsigned W          = ctm_pkg::IMG_W,
  parameter int unsigned PATCH      = ctm_pkg::PATCH,
  parameter int unsigned CLASSES    = ctm_pkg::CLASSES,
  parameter int unsigned CLAUSES    = ctm_pkg::CLAUSES,
  parameter int unsigned CLAUSE_PAR = ctm_pkg::CLAUSE_PAR,
  parameter int unsigned TA_BITS    = ctm_pkg::TA_BITS,
  parameter int unsigned PIX_BITS   = ctm_pkg::PIX_BITS,
  localparam int unsigned F         = ctm_pkg::ctm_features(H, W, PATCH),
  localparam int unsigned LITERALS  = 2 * F,
  localparam int unsigned TOTAL     = CLASSES * CLAUSES,
  localparam int unsigned GROUPS    = TOTAL / CLAUSE_PAR,
  localparam int unsigned SUM_W     = $clog2(CLAUSES + 1) + 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // spectrogram pixel stream
  input  logic                                 pix_valid,
  output logic                                 pix_ready,
  input  logic [PIX_BITS-1:0]                  pix_data,
  // model load
  input  logic                                 ld_en,
  input  logic [$clog2(TOTAL)-1:0]             ld_clause,
  input  logic [$clog2(LITERALS)-1:0]          ld_literal,
  input  logic [TA_BITS-1:0]                   ld_state,
  // status and result
  output logic                                 busy,
  output logic                                 result_valid,
  output logic                                 jamming,
  output logic [ctm_pkg::cnt_w(CLASSES-1)-1:0] pred_class,
  output logic signed [SUM_W-1:0]              class_sums [CLASSES],
  output logic [PIX_BITS-1:0]                  threshold,
  // PSS reference for the synchronisation front end
  input  logic                                 pss_start,
  input  logic [1:0]                           pss_nid2,
  output logic                                 pss_busy,
  output logic                                 pss_valid,
  output logic [6:0]                           pss_index,
  output logic                                 pss_bit,
  output logic signed [1:0]                    pss_bpsk,
  output logic                                 pss_last
);

  localparam int unsigned GW = ctm_pkg::cnt_w(GROUPS - 1);

  // binarizer -> image buffer
  logic                  row_valid, row_ready, row_last, row_fire;
  logic [$clog2(H)-1:0]  row_idx;
  logic [W-1:0]          row_data;

  // controller
  logic                  start, done;
  logic [GW-1:0]         group;
  logic                  clause_clear, pos_valid, sum_clear, sum_add;
  logic [$clog2(H)-1:0]  pos_y;
  logic [$clog2(W)-1:0]  pos_x;

  // datapath
  logic [PATCH-1:0][W-1:0]          win_rows;
  logic                             lit_valid;
  logic [LITERALS-1:0]              literals;
  logic [CLAUSE_PAR-1:0][LITERALS-1:0] incl;
  logic [CLAUSE_PAR-1:0]            clause_out;

  otsu_binarizer #(.H(H), .W(W), .PIX_BITS(PIX_BITS)) u_otsu (
    .clk, .rst_n,
    .pix_valid, .pix_ready, .pix_data,
    .out_valid(row_valid), .out_ready(row_ready), .out_row(row_idx),
    .out_data(row_data), .out_last(row_last), .threshold
  );

  assign row_ready = !busy;
  assign row_fire  = row_valid && row_ready;
  assign start     = row_fire && row_last;

  image_buffer #(.H(H), .W(W), .PATCH(PATCH)) u_img (
    .clk,
    .wr_en(row_fire), .wr_row(row_idx), .wr_data(row_data),
    .win_top(pos_y), .win_rows
  );

  ctm_controller #(
    .GROUPS(GROUPS), .NPOS_Y(H - PATCH + 1), .NPOS_X(W - PATCH + 1),
    .YW($clog2(H)), .XW($clog2(W))
  ) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .group, .clause_clear,
    .pos_valid, .pos_y, .pos_x,
    .sum_clear, .sum_add
  );

  patch_generator #(.H(H), .W(W), .PATCH(PATCH)) u_patch (
    .clk, .rst_n,
    .in_valid(pos_valid), .pos_y, .pos_x, .win_rows,
    .lit_valid, .literals
  );

  ta_memory #(
    .CLAUSES_TOTAL(TOTAL), .LITERALS(LITERALS), .GROUP(CLAUSE_PAR), .TA_BITS(TA_BITS)
  ) u_ta (
    .clk,
    .ld_en, .ld_clause, .ld_literal, .ld_state,
    .rd_group(group), .rd_include(incl)
  );

  clause_bank #(.GROUP(CLAUSE_PAR), .LITERALS(LITERALS)) u_clauses (
    .clk, .rst_n,
    .clear(clause_clear), .lit_valid, .literals, .incl, .clause_out
  );

  class_sum #(.CLASSES(CLASSES), .CLAUSES(CLAUSES), .GROUP(CLAUSE_PAR)) u_sum (
    .clk, .rst_n,
    .clear(sum_clear), .add_en(sum_add), .group, .clause_out,
    .sums(class_sums), .pred_class
  );

  assign result_valid = done;
  assign jamming      = (32'(pred_class) == ctm_pkg::CLASS_JAM);

  pss_generator u_pss (
    .clk, .rst_n,
    .start(pss_start), .nid2(pss_nid2), .busy(pss_busy),
    .chip_valid(pss_valid), .chip_index(pss_index), .chip_bit(pss_bit),
    .chip_bpsk(pss_bpsk), .chip_last(pss_last)
  );

  // The model must not change under a running inference.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !ld_en)
    else $error("ctm_top: TA load while an inference is running");

endmodule
