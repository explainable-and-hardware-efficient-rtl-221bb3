// class_sum_tb: full-size voting (2 classes x 200 clauses, 100 clauses per
// group). For random clause outputs of all four groups the expected class
// sums are counted here clause by clause (class = clause / 200, vote +1 for
// the even-numbered clauses of a class, -1 for the odd ones), and the decision is
// the larger sum, class 0 on a tie. Includes all-ones / all-zeros / tie
// cases and checks that add_en low leaves the sums alone.
module class_sum_tb;
  localparam int unsigned CLASSES = 2, CLAUSES = 200, GROUP = 100;
  localparam int unsigned GROUPS = CLASSES * CLAUSES / GROUP;
  localparam int unsigned SUM_W = $clog2(CLAUSES + 1) + 1;

  logic                     clk = 1'b0, rst_n = 1'b0;
  logic                     clear, add_en;
  logic [1:0]               group;
  logic [GROUP-1:0]         clause_out;
  logic signed [SUM_W-1:0]  sums [CLASSES];
  logic [0:0]               pred_class;

  int unsigned checks = 0, failures = 0;
  int unsigned jam_wins = 0, pure_wins = 0, ties = 0;

  class_sum #(.CLASSES(CLASSES), .CLAUSES(CLAUSES), .GROUP(GROUP)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    int expect_sum [CLASSES];
    logic [GROUP-1:0] outs [GROUPS];
    clear = 1'b0; add_en = 1'b0; group = '0; clause_out = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int unsigned img = 0; img < 300; img++) begin
      automatic int unsigned mode = img % 6;
      for (int unsigned g = 0; g < GROUPS; g++) begin
        for (int unsigned j = 0; j < GROUP; j += 32) outs[g][j +: 32] = $urandom;
        if (mode == 1) outs[g] = '1;
        if (mode == 2) outs[g] = '0;
        if (mode == 3) outs[g] = (g < 2) ? '1 : '0;   // class 0 +100 -100, class 1 0
      end
      expect_sum[0] = 0; expect_sum[1] = 0;
      for (int unsigned c = 0; c < CLASSES * CLAUSES; c++) begin
        if (outs[c / GROUP][c % GROUP]) begin
          if ((c % CLAUSES) % 2 == 0)       expect_sum[c / CLAUSES] += 1;
          else                             expect_sum[c / CLAUSES] -= 1;
        end
      end
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      for (int unsigned g = 0; g < GROUPS; g++) begin
        group = 2'(g); clause_out = outs[g]; add_en = 1'b1;
        @(negedge clk);
        // an idle cycle with garbage on the inputs
        add_en = 1'b0; clause_out = GROUP'($urandom);
        @(negedge clk);
      end
      for (int unsigned k = 0; k < CLASSES; k++) begin
        checks++;
        if (int'(sums[k]) != expect_sum[k]) begin
          failures++;
          $display("FAIL image %0d class %0d: %0d vs %0d", img, k, sums[k], expect_sum[k]);
        end
      end
      checks++;
      if (pred_class !== ((expect_sum[1] > expect_sum[0]) ? 1'b1 : 1'b0)) begin
        failures++;
        $display("FAIL image %0d decision", img);
      end
      if (expect_sum[1] > expect_sum[0]) jam_wins++;
      else if (expect_sum[1] < expect_sum[0]) pure_wins++;
      else ties++;
    end
    checks++;
    if (jam_wins == 0 || pure_wins == 0 || ties == 0) begin
      failures++;
      $display("FAIL coverage jam=%0d pure=%0d ties=%0d", jam_wins, pure_wins, ties);
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
