// ctm_top_tb: end-to-end test of the CTM jamming detector at its full,
// default size (100x100 image, 10x10 patches, 2 classes x 200 clauses).
//
// 1. A test model is loaded TA by TA (all 400 x 560 TAs). Positive clauses
//    of the jamming class include six "pixel = 1" literals, positive
//    clauses of the pure class six "pixel = 0" literals, negative clauses
//    two to four random literals (pixels or coordinates), and every fifth
//    clause includes nothing. Even clauses are positive, odd ones negative. Included TAs get a random state in the upper
//    half (129..256 in 1-based numbering), excluded ones in the lower half.
// 2. Four greyscale images (mostly bright, mostly dark with sparse bright
//    pixels, uniform noise, dark with bright blocks) are streamed back to
//    back. The testbench binarizes each one itself (floating-point Otsu,
//    OR with the 90-degree rotation) and evaluates every clause on every
//    patch to get the expected class sums and decision.
// 3. Each result is compared with the reference, the start-to-result
//    latency with 4 * (91*91 + 3) + 1 cycles, and the mechanisms of the
//    design are counted: binarizer stalled by a running inference, pixels
//    taken during an inference, empty clauses, both decisions, clause
//    groups, PSS reference sequence.
module ctm_top_tb;
  localparam int unsigned H = 100, W = 100, PATCH = 10, CLASSES = 2, CLAUSES = 200;
  localparam int unsigned TY = H - PATCH, TX = W - PATCH;
  localparam int unsigned F = PATCH * PATCH + TY + TX, LIT = 2 * F;
  localparam int unsigned TOTAL = CLASSES * CLAUSES, NP = (H - PATCH + 1) * (W - PATCH + 1);
  localparam int unsigned GROUPS = 4;
  localparam int unsigned NIMG = 4;
  localparam int unsigned LATENCY = GROUPS * (NP + 3) + 1;

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    pix_valid, pix_ready;
  logic [7:0]              pix_data;
  logic                    ld_en;
  logic [8:0]              ld_clause;
  logic [9:0]              ld_literal;
  logic [7:0]              ld_state;
  logic                    busy, result_valid, jamming;
  logic [0:0]              pred_class;
  logic signed [8:0]       class_sums [CLASSES];
  logic [7:0]              threshold;
  logic                    pss_start, pss_busy, pss_valid, pss_bit, pss_last;
  logic [1:0]              pss_nid2;
  logic [6:0]              pss_index;
  logic signed [1:0]       pss_bpsk;

  ctm_top dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned nlit [TOTAL];
  int unsigned lits [TOTAL][8];
  int unsigned img  [H][W];
  logic        bin  [H][W];
  int          exp_sum  [NIMG][CLASSES];
  int unsigned exp_thr  [NIMG];
  int unsigned imgs [NIMG][H][W];

  // mechanism counters
  int unsigned n_stall = 0, n_overlap = 0, n_empty = 0, n_jam = 0, n_pure = 0;
  int unsigned n_groups = 0, n_results = 0, n_pss = 0;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- model
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
      if (nlit[e] == 0) n_empty++;
    end
  endtask

  task automatic load_model();
    for (int unsigned e = 0; e < TOTAL; e++) begin
      logic [LIT-1:0] inc = '0;
      for (int unsigned k = 0; k < nlit[e]; k++) inc[lits[e][k]] = 1'b1;
      for (int unsigned l = 0; l < LIT; l++) begin
        ld_en = 1'b1; ld_clause = 9'(e); ld_literal = 10'(l);
        ld_state = inc[l] ? 8'(128 + $urandom_range(127)) : 8'($urandom_range(127));
        @(negedge clk);
      end
    end
    ld_en = 1'b0;
  endtask

  // ------------------------------------------------------------ reference
  task automatic make_image(int unsigned kind);
    for (int unsigned r = 0; r < H; r++)
      for (int unsigned c = 0; c < W; c++)
        unique case (kind)
          0: img[r][c] = 150 + $urandom_range(100);
          1: img[r][c] = ($urandom_range(99) < 4) ? 200 + $urandom_range(55) : 20 + $urandom_range(40);
          2: img[r][c] = $urandom_range(255);
          default: img[r][c] = 20 + $urandom_range(40);
        endcase
    if (kind == 0)
      for (int unsigned r = 30; r < 45; r++) for (int unsigned c = 10; c < 60; c++) img[r][c] = 30;
    if (kind == 3)
      for (int unsigned r = 0; r < 12; r++) for (int unsigned c = 40; c < 52; c++) img[r][c] = 220;
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
    exp_thr[n] = t;
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

  // --------------------------------------------------------------- stimuli
  initial begin
    pix_valid = 1'b0; pix_data = '0;
    ld_en = 1'b0; ld_clause = '0; ld_literal = '0; ld_state = '0;
    pss_start = 1'b0; pss_nid2 = '0;
    build_model();
    for (int unsigned n = 0; n < NIMG; n++) begin
      make_image(n);
      imgs[n] = img;
      reference(n);
      $display("image %0d: expected threshold %0d sums %0d %0d", n, exp_thr[n], exp_sum[n][0], exp_sum[n][1]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // PSS reference for sector 1, checked in its own process
    pss_start = 1'b1; pss_nid2 = 2'd1;
    @(negedge clk);
    pss_start = 1'b0;
    load_model();
    // all images back to back; the detector paces the stream
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

  // PSS check: base sequence s(i) from the recurrence, shift 43 for sector 1
  initial begin
    logic s [134];
    {s[6], s[5], s[4], s[3], s[2], s[1], s[0]} = 7'b1110110;
    for (int unsigned i = 0; i < 127; i++) s[i + 7] = s[i + 4] ^ s[i];
    @(posedge rst_n);
    wait (pss_valid);
    for (int unsigned k = 0; k < 127; k++) begin
      @(negedge clk);
      chk(pss_valid && pss_index == 7'(k) && pss_bit == s[(k + 43) % 127], "PSS chip");
    end
    n_pss++;
  end

  // monitors
  int unsigned start_cyc, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.u_otsu.out_valid && !dut.row_ready) n_stall++;
      if (pix_valid && pix_ready && busy) n_overlap++;
      if (dut.sum_add) n_groups++;
      if (dut.start) start_cyc <= cyc;
    end
  end

  always @(negedge clk) begin
    if (rst_n && result_valid) begin
      automatic int unsigned n = n_results;
      automatic logic exp_jam = exp_sum[n][1] > exp_sum[n][0];
      $display("result %0d: sums %0d %0d jamming %0d, latency %0d", n, class_sums[0], class_sums[1],
               jamming, cyc - start_cyc);
      chk(int'(class_sums[0]) == exp_sum[n][0], "class 0 sum");
      chk(int'(class_sums[1]) == exp_sum[n][1], "class 1 sum");
      chk(jamming == exp_jam && pred_class == exp_jam, "decision");
      chk(cyc - start_cyc == LATENCY, "inference latency");
      if (jamming) n_jam++; else n_pure++;
      n_results++;
      if (n_results == NIMG) begin
        repeat (2) @(negedge clk);
        $display("mechanisms: stall=%0d overlap=%0d empty_clauses=%0d jam=%0d pure=%0d groups=%0d pss=%0d",
                 n_stall, n_overlap, n_empty, n_jam, n_pure, n_groups, n_pss);
        chk(n_stall > 0, "binarizer stalled by inference");
        chk(n_overlap > 0, "pixels taken during inference");
        chk(n_empty > 0, "empty clauses in model");
        chk(n_jam > 0 && n_pure > 0, "both decisions");
        chk(n_groups == GROUPS * NIMG, "clause groups");
        chk(n_pss == 1, "PSS sequence");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
