// ctm_controller_tb: runs the controller at its default size (4 clause
// groups, 91x91 patch positions) and checks, cycle by cycle, the schedule:
// one clause_clear per group, every patch position exactly once per group
// in row-major order, one sum_add per group after the last position plus a
// one-cycle drain, done one cycle after the last add, busy throughout, and
// the total of GROUPS*(91*91 + 3) + 1 cycles from start to done. A start
// pulse during busy must be ignored.
module ctm_controller_tb;
  localparam int unsigned GROUPS = 4, NY = 91, NX = 91;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       start, busy, done;
  logic [1:0] group;
  logic       clause_clear, pos_valid, sum_clear, sum_add;
  logic [6:0] pos_y, pos_x;

  int unsigned checks = 0, failures = 0;

  ctm_controller #(.GROUPS(GROUPS), .NPOS_Y(NY), .NPOS_X(NX), .YW(7), .XW(7)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    start = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk(!busy && !done, "idle after reset");
    for (int unsigned run = 0; run < 2; run++) begin
      automatic int unsigned cyc = 0, exp_y = 0, exp_x = 0, exp_g = 0, npos = 0, nclr = 0, nadd = 0;
      automatic int unsigned since_last = 0;
      start = 1'b1;
      #1;
      chk(sum_clear, "sum_clear with start");
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done && cyc < 100000) begin
        chk(busy, "busy");
        chk(!sum_clear, "no sum_clear while busy");
        if (cyc == 100) start = 1'b1;          // ignored while busy
        if (cyc == 101) start = 1'b0;
        if (clause_clear) begin
          chk(group == 2'(exp_g), "group at clear");
          chk(!pos_valid && !sum_add, "clear alone");
          nclr++;
          exp_y = 0; exp_x = 0;
        end
        if (pos_valid) begin
          chk(pos_y == 7'(exp_y) && pos_x == 7'(exp_x), "position order");
          chk(group == 2'(exp_g), "group during scan");
          npos++;
          since_last = 0;
          if (exp_x == NX - 1) begin exp_x = 0; exp_y++; end else exp_x++;
        end else since_last++;
        if (sum_add) begin
          chk(group == 2'(exp_g), "group at add");
          chk(since_last == 2, "one drain cycle before add");
          chk(npos == (exp_g + 1) * NY * NX, "all positions before add");
          nadd++;
          exp_g++;
        end
        @(negedge clk);
        cyc++;
      end
      chk(done, "done reached");
      chk(cyc == GROUPS * (NY * NX + 3) + 1, "start-to-done cycles");
      $display("run %0d: %0d cycles, %0d positions", run, cyc, npos);
      chk(nclr == GROUPS && nadd == GROUPS, "clears and adds per group");
      chk(npos == GROUPS * NY * NX, "positions per inference");
      @(negedge clk);
      chk(!busy && !done, "idle after done");
      repeat (3) @(negedge clk);
    end
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
