// ctm_workload: reusable end-to-end run of ctm_top at one configuration,
// used by ctm_workloads_tb to exercise the model sizes of the published
// study. It generates its own clock and reset, a test model and
// NIMG greyscale images, computes the expected class sums in the
// testbench (floating-point Otsu, OR with the 90-degree rotation, every
// clause on every patch), loads the model TA by TA, streams the images back
// to back and compares class sums, decision and start-to-result latency
// GROUPS*((H-PATCH+1)*(W-PATCH+1) + 3) + 1. finished rises when all results
// are in; checks and failures count the comparisons.
//
// Test model: even clauses of the jamming class include six "pixel = 1"
// literals, even clauses of the pure class six "pixel = 0" literals, odd
// clauses two to four random literals, every fifth clause nothing.
module ctm_workload #(
  parameter string       NAME       = "default",
  parameter int unsigned H          = 100,
  parameter int unsigned W          = 100,
  parameter int unsigned PATCH      = 10,
  parameter int unsigned CLAUSES    = 200,
  parameter int unsigned CLAUSE_PAR = 100,
  parameter int unsigned NIMG       = 2
) (
  output logic        finished,
  output int unsigned checks,
  output int unsigned failures
);
  localparam int unsigned CLASSES = 2;
  localparam int unsigned TY = H - PATCH, TX = W - PATCH;
  localparam int unsigned F = PATCH * PATCH + TY + TX, LIT = 2 * F;
  localparam int unsigned TOTAL = CLASSES * CLAUSES, NP = (TY + 1) * (TX + 1);
  localparam int unsigned GROUPS = TOTAL / CLAUSE_PAR;
  localparam int unsigned LATENCY = GROUPS * (NP + 3) + 1;
  localparam int unsigned SUM_W = $clog2(CLAUSES + 1) + 1;

  logic                         clk = 1'b0, rst_n = 1'b0;
  logic                         pix_valid, pix_ready;
  logic [7:0]                   pix_data;
  logic                         ld_en;
  logic [$clog2(TOTAL)-1:0]     ld_clause;
  logic [$clog2(LIT)-1:0]       ld_literal;
  logic [7:0]                   ld_state;
  logic                         busy, result_valid, jamming;
  logic [0:0]                   pred_class;
  logic signed [SUM_W-1:0]      class_sums [CLASSES];
  logic [7:0]                   threshold;
  logic                         pss_busy, pss_valid, pss_bit, pss_last;
  logic [6:0]                   pss_index;
  logic signed [1:0]            pss_bpsk;

  ctm_top #(
    .H(H), .W(W), .PATCH(PATCH), .CLASSES(CLASSES), .CLAUSES(CLAUSES), .CLAUSE_PAR(CLAUSE_PAR)
  ) dut (
    .clk, .rst_n, .pix_valid, .pix_ready, .pix_data,
    .ld_en, .ld_clause, .ld_literal, .ld_state,
    .busy, .result_valid, .jamming, .pred_class, .class_sums, .threshold,
    .pss_start(1'b0), .pss_nid2(2'd0), .pss_busy, .pss_valid, .pss_index,
    .pss_bit, .pss_bpsk, .pss_last
  );

  always #5 clk = ~clk;

  int unsigned nlit [TOTAL];
  int unsigned lits [TOTAL][8];
  int unsigned img  [H][W];
  logic        bin  [H][W];
  int          exp_sum [NIMG][CLASSES];
  int unsigned imgs [NIMG][H][W];
  int unsigned n_results = 0, start_cyc = 0, cyc = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL [%s] %s at %0t", NAME, what, $time);
    end
  endtask

  task automatic build_model();
    for (int unsigned e = 0; e < TOTAL; e++) begin
      automatic int unsigned cls = e / CLAUSES, i = e % CLAUSES;
      if (i % 5 == 4) nlit[e] = 0;
      else if (i % 2 == 0) nlit[e] = 6;
      else nlit[e] = 2 + $urandom_range(2);
      for (int unsigned k = 0; k < nlit[e]; k++) begin
        automatic int unsigned pix = TY + TX + $urandom_range(PATCH * PATCH - 1);
        if (i % 2 == 0) lits[e][k] = (cls == 1) ? pix : F + pix;
        else lits[e][k] = $urandom_range(LIT - 1);
      end
    end
  endtask

  task automatic make_image(int unsigned kind);
    for (int unsigned r = 0; r < H; r++)
      for (int unsigned c = 0; c < W; c++)
        img[r][c] = (kind % 2 == 0) ? 150 + $urandom_range(100)
                  : (($urandom_range(99) < 4) ? 200 + $urandom_range(55) : 20 + $urandom_range(40));
    if (kind % 2 == 0)
      for (int unsigned r = H / 3; r < H / 3 + 15; r++) for (int unsigned c = 10; c < 60; c++) img[r][c] = 30;
  endtask

  function automatic int unsigned otsu_ref();
    real hist [256];
    real n = H * W, total = 0.0, w0 = 0.0, s0 = 0.0, best = 0.0;
    int unsigned t_best = 0;
    for (int unsigned b = 0; b < 256; b++) hist[b] = 0.0;
    for (int unsigned r = 0; r < H; r++)
      for (int unsigned c = 0; c < W; c++) begin
        hist[img[r][c]] += 1.0;
        total += img[r][c];
      end
    for (int unsigned t = 0; t < 256; t++) begin
      real q1, mu1, mu2, sigma;
      w0 += hist[t];
      s0 += hist[t] * t;
      if (w0 == 0.0 || w0 == n) continue;
      q1 = w0 / n;
      mu1 = s0 / w0;
      mu2 = (total - s0) / (n - w0);
      sigma = q1 * (1.0 - q1) * (mu1 - mu2) * (mu1 - mu2);
      if (sigma > best * (1.0 + 1e-12)) begin best = sigma; t_best = t; end
    end
    return t_best;
  endfunction

  function automatic logic literal(int unsigned l, int unsigned py, int unsigned px);
    int unsigned f = (l < F) ? l : l - F;
    logic v;
    if (f < TY)           v = (py > f);
    else if (f < TY + TX) v = (px > f - TY);
    else                  v = bin[py + (f - TY - TX) / PATCH][px + (f - TY - TX) % PATCH];
    return (l < F) ? v : !v;
  endfunction

  task automatic reference(int unsigned n);
    automatic int unsigned t = otsu_ref();
    for (int unsigned i = 0; i < H; i++)
      for (int unsigned j = 0; j < W; j++)
        bin[i][j] = (img[i][j] > t) || (img[j][W - 1 - i] > t);
    exp_sum[n][0] = 0; exp_sum[n][1] = 0;
    for (int unsigned e = 0; e < TOTAL; e++) begin
      automatic logic fired = 1'b0;
      if (nlit[e] == 0) continue;
      for (int unsigned py = 0; py <= TY && !fired; py++)
        for (int unsigned px = 0; px <= TX && !fired; px++) begin
          automatic logic all = 1'b1;
          for (int unsigned k = 0; k < nlit[e] && all; k++) all = literal(lits[e][k], py, px);
          fired = all;
        end
      if (fired) exp_sum[n][e / CLAUSES] += ((e % CLAUSES) % 2 == 0) ? 1 : -1;
    end
  endtask

  initial begin
    finished = 1'b0; checks = 0; failures = 0;
    pix_valid = 1'b0; pix_data = '0;
    ld_en = 1'b0; ld_clause = '0; ld_literal = '0; ld_state = '0;
    build_model();
    for (int unsigned n = 0; n < NIMG; n++) begin
      make_image(n);
      imgs[n] = img;
      reference(n);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int unsigned e = 0; e < TOTAL; e++) begin
      automatic logic [LIT-1:0] inc = '0;
      for (int unsigned k = 0; k < nlit[e]; k++) inc[lits[e][k]] = 1'b1;
      for (int unsigned l = 0; l < LIT; l++) begin
        ld_en = 1'b1; ld_clause = ($clog2(TOTAL))'(e); ld_literal = ($clog2(LIT))'(l);
        ld_state = inc[l] ? 8'(128 + $urandom_range(127)) : 8'($urandom_range(127));
        @(negedge clk);
      end
    end
    ld_en = 1'b0;
    for (int unsigned n = 0; n < NIMG; n++)
      for (int unsigned r = 0; r < H; r++)
        for (int unsigned c = 0; c < W; c++) begin
          pix_valid = 1'b1; pix_data = 8'(imgs[n][r][c]);
          @(posedge clk);
          while (!pix_ready) @(posedge clk);
          @(negedge clk);
        end
    pix_valid = 1'b0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dut.start) start_cyc <= cyc;
  end

  always @(negedge clk) begin
    if (rst_n && result_valid && !finished) begin
      automatic int unsigned n = n_results;
      automatic logic exp_jam = exp_sum[n][1] > exp_sum[n][0];
      $display("[%s] result %0d: sums %0d %0d (expected %0d %0d), latency %0d (expected %0d)",
               NAME, n, class_sums[0], class_sums[1], exp_sum[n][0], exp_sum[n][1],
               cyc - start_cyc, LATENCY);
      chk(int'(class_sums[0]) == exp_sum[n][0], "class 0 sum");
      chk(int'(class_sums[1]) == exp_sum[n][1], "class 1 sum");
      chk(jamming == exp_jam, "decision");
      chk(cyc - start_cyc == LATENCY, "latency");
      n_results++;
      if (n_results == NIMG) finished = 1'b1;
    end
  end
endmodule
