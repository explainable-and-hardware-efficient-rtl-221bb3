// otsu_binarizer_tb: streams greyscale 100x100 test images (bimodal
// backgrounds with bright rectangles, a noisy image, a constant image)
// through the binarizer with random gaps on the input and random
// back-pressure on the output. The reference threshold is computed here in
// floating point, the way image libraries do it: for each t the class
// weights q1, q2 and means mu1, mu2 give sigma = q1*q2*(mu1-mu2)^2, and the
// first t with the largest sigma wins (t = 0 if none is above 0). Every
// output row is compared with (p[i][j] > t) | (p[j][99-i] > t). Also checks
// the 2**8 cycle threshold search (one cycle per histogram bin) and that pixels are refused while
// the threshold is searched.
module otsu_binarizer_tb;
  localparam int unsigned H = 100, W = 100, PB = 8;

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    pix_valid, pix_ready;
  logic [PB-1:0]           pix_data;
  logic                    out_valid, out_ready, out_last;
  logic [$clog2(H)-1:0]    out_row;
  logic [W-1:0]            out_data;
  logic [PB-1:0]           threshold;

  int unsigned checks = 0, failures = 0;
  int unsigned img [H][W];
  int unsigned stalls = 0;

  otsu_binarizer #(.H(H), .W(W), .PIX_BITS(PB)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic make_image(int unsigned kind);
    for (int unsigned r = 0; r < H; r++)
      for (int unsigned c = 0; c < W; c++)
        img[r][c] = (kind == 2) ? 77 :
                    (kind == 1) ? $urandom_range(255) :
                    (kind >= 3) ? 20 + $urandom_range(120) :
                                  20 + $urandom_range(40);
    if (kind == 0 || kind >= 3) begin
      for (int unsigned n = 0; n < 3 + kind; n++) begin
        automatic int unsigned r0 = $urandom_range(H - 20), c0 = $urandom_range(W - 30);
        automatic int unsigned hh = 5 + $urandom_range(15), ww = 5 + $urandom_range(25);
        for (int unsigned r = r0; r < r0 + hh; r++)
          for (int unsigned c = c0; c < c0 + ww; c++)
            img[r][c] = (kind >= 3) ? 100 + $urandom_range(150) : 150 + $urandom_range(100);
      end
    end
  endtask

  function automatic int unsigned ref_threshold();
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
      real q1, q2, mu1, mu2, sigma;
      w0 += hist[t];
      s0 += hist[t] * t;
      if (w0 == 0.0 || w0 == n) continue;
      q1 = w0 / n;
      q2 = 1.0 - q1;
      mu1 = s0 / w0;
      mu2 = (total - s0) / (n - w0);
      sigma = q1 * q2 * (mu1 - mu2) * (mu1 - mu2);
      if (sigma > best * (1.0 + 1e-12)) begin
        best = sigma;
        t_best = t;
      end
    end
    return t_best;
  endfunction

  initial begin
    pix_valid = 1'b0; pix_data = '0; out_ready = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int unsigned k = 0; k < 6; k++) begin
      automatic int unsigned t_ref, last_cyc, cyc;
      make_image(k);
      t_ref = ref_threshold();
      // stream pixels with random gaps
      for (int unsigned r = 0; r < H; r++)
        for (int unsigned c = 0; c < W; c++) begin
          pix_valid = 1'b0;
          while ($urandom_range(7) == 0) @(negedge clk);
          pix_valid = 1'b1; pix_data = PB'(img[r][c]);
          #1;
          chk(pix_ready, "pix_ready in load");
          @(negedge clk);
        end
      pix_valid = 1'b1;   // offered but must be refused now
      cyc = 0;
      while (!out_valid && cyc < 1000) begin
        chk(!pix_ready, "no pixels during threshold search");
        @(negedge clk);
        cyc++;
      end
      pix_valid = 1'b0;
      chk(cyc == 256, "threshold search cycles");
      if (cyc != 256) $display("search took %0d cycles", cyc);
      chk(32'(threshold) == t_ref, "threshold");
      $display("image %0d: threshold %0d (reference %0d)", k, threshold, t_ref);
      for (int unsigned i = 0; i < H; i++) begin
        logic [W-1:0] exp_row;
        for (int unsigned j = 0; j < W; j++)
          exp_row[j] = (img[i][j] > t_ref) || (img[j][W-1-i] > t_ref);
        out_ready = ($urandom_range(3) != 0);
        while (!out_ready) begin
          chk(out_valid && 32'(out_row) == i, "row held under back-pressure");
          stalls++;
          @(negedge clk);
          out_ready = ($urandom_range(3) != 0);
        end
        chk(out_valid && 32'(out_row) == i, "row index");
        chk(out_data == exp_row, "row data");
        chk(out_last == (i == H - 1), "last flag");
        @(negedge clk);
        out_ready = 1'b0;
      end
      chk(!out_valid && pix_ready, "back to load");
    end
    chk(stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
