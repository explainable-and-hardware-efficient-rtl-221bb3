// clause_bank_tb: full-size clause group (100 clauses, 560 literals). Each
// clause includes a few random literals (some include none). A stream of
// random literal vectors is applied and each clause's expected output, the
// OR over the stream of "all included literals are 1", is computed from
// the include lists. Checks the sticky OR after every vector, that an
// empty clause never fires, that clear resets all outputs and that nothing
// changes while lit_valid is low.
module clause_bank_tb;
  localparam int unsigned GROUP = 100, LIT = 560, F = LIT / 2;

  logic                        clk = 1'b0, rst_n = 1'b0;
  logic                        clear, lit_valid;
  logic [LIT-1:0]              literals;
  logic [GROUP-1:0][LIT-1:0]   incl;
  logic [GROUP-1:0]            clause_out;

  int unsigned checks = 0, failures = 0;
  int unsigned nlit [GROUP];
  int unsigned lits [GROUP][4];
  logic [GROUP-1:0] expect_out;
  int unsigned fired_nonempty = 0;

  clause_bank #(.GROUP(GROUP), .LITERALS(LIT)) dut (.*);

  always #5 clk = ~clk;

  task automatic new_model();
    incl = '0;
    for (int unsigned j = 0; j < GROUP; j++) begin
      nlit[j] = (j % 10 == 0) ? 0 : 1 + $urandom_range(3);
      for (int unsigned k = 0; k < nlit[j]; k++) begin
        lits[j][k] = $urandom_range(LIT - 1);
        incl[j][lits[j][k]] = 1'b1;
      end
    end
  endtask

  task automatic run(int unsigned vectors, int unsigned density);
    for (int unsigned v = 0; v < vectors; v++) begin
      logic [F-1:0] feat;
      for (int unsigned i = 0; i < F; i++) feat[i] = ($urandom_range(99) < density);
      literals = {~feat, feat};
      lit_valid = ($urandom_range(3) != 0);
      if (lit_valid) begin
        for (int unsigned j = 0; j < GROUP; j++) begin
          logic all = (nlit[j] != 0);
          for (int unsigned k = 0; k < nlit[j]; k++) all &= literals[lits[j][k]];
          expect_out[j] |= all;
        end
      end
      @(negedge clk);
      checks++;
      if (clause_out !== expect_out) begin
        failures++;
        if (failures < 10) $display("FAIL vector %0d: %h vs %h", v, clause_out, expect_out);
      end
    end
  endtask

  initial begin
    clear = 1'b0; lit_valid = 1'b0; literals = '0; incl = '0;
    expect_out = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int unsigned m = 0; m < 6; m++) begin
      new_model();
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      expect_out = '0;
      checks++;
      if (clause_out !== '0) begin failures++; $display("FAIL clear"); end
      run(40, 30 + 10 * m);
      for (int unsigned j = 0; j < GROUP; j++) if (nlit[j] != 0 && expect_out[j]) fired_nonempty++;
    end
    checks++;
    if (fired_nonempty == 0) begin failures++; $display("FAIL no clause ever fired"); end
    $display("clauses fired: %0d", fired_nonempty);
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
