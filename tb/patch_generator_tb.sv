// patch_generator_tb: drives random windows and random patch positions and
// compares the registered literal vector with a feature vector built here
// from the CTM layout (y thermometer, x thermometer, patch pixels, then all
// negated). Also checks the one-cycle latency of lit_valid.
module patch_generator_tb;
  localparam int unsigned H = 100, W = 100, PATCH = 10;
  localparam int unsigned TY = H - PATCH, TX = W - PATCH;
  localparam int unsigned F = PATCH*PATCH + TY + TX;

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    in_valid;
  logic [$clog2(H)-1:0]    pos_y;
  logic [$clog2(W)-1:0]    pos_x;
  logic [PATCH-1:0][W-1:0] win_rows;
  logic                    lit_valid;
  logic [2*F-1:0]          literals;

  int unsigned checks = 0, failures = 0;

  patch_generator #(.H(H), .W(W), .PATCH(PATCH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    logic [2*F-1:0] expect_lit;
    in_valid = 1'b0; pos_y = '0; pos_x = '0; win_rows = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (lit_valid !== 1'b0) begin failures++; $display("FAIL lit_valid after reset"); end
    for (int unsigned n = 0; n < 2000; n++) begin
      int unsigned py, px;
      // cover the corners, then random positions
      py = (n < 4) ? ((n & 1) ? TY : 0) : $urandom_range(TY);
      px = (n < 4) ? ((n & 2) ? TX : 0) : $urandom_range(TX);
      for (int unsigned r = 0; r < PATCH; r++)
        for (int unsigned c = 0; c < W; c += 32) win_rows[r][c +: 32] = $urandom;
      pos_y = $clog2(H)'(py); pos_x = $clog2(W)'(px); in_valid = 1'b1;
      // expected: y thermometer: py ones from index 0 up
      expect_lit = '0;
      for (int unsigned k = 0; k < py; k++) expect_lit[k] = 1'b1;
      for (int unsigned k = 0; k < px; k++) expect_lit[TY + k] = 1'b1;
      for (int unsigned r = 0; r < PATCH; r++)
        for (int unsigned c = 0; c < PATCH; c++)
          expect_lit[TY + TX + r*PATCH + c] = win_rows[r][px + c];
      for (int unsigned i = 0; i < F; i++) expect_lit[F + i] = ~expect_lit[i];
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (lit_valid !== 1'b1 || literals !== expect_lit) begin
        failures++;
        if (failures < 10) $display("FAIL patch (%0d,%0d)", py, px);
      end
      @(negedge clk);
      checks++;
      if (lit_valid !== 1'b0) begin failures++; $display("FAIL lit_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
