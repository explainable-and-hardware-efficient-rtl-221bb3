// pss_generator_tb: builds the 127-bit base sequence here directly from
// s(i+7) = s(i+4) xor s(i) with [s(6)..s(0)] = 1110110, and checks every chip
// of the generator for N_ID2 = 0, 1, 2 against d(k) = 1 - 2 s((k + 43 N_ID2)
// mod 127), including index, last flag, back-to-back restart and the
// balance of the m-sequence (64 ones, 63 zeros).
module pss_generator_tb;
  logic              clk = 1'b0, rst_n = 1'b0;
  logic              start;
  logic [1:0]        nid2;
  logic              busy, chip_valid, chip_bit, chip_last;
  logic [6:0]        chip_index;
  logic signed [1:0] chip_bpsk;

  int unsigned checks = 0, failures = 0;
  logic s [127 + 7];

  pss_generator dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t idx %0d bit %0d", what, $time, chip_index, chip_bit);
    end
  endtask

  initial begin
    int unsigned ones = 0;
    {s[6], s[5], s[4], s[3], s[2], s[1], s[0]} = 7'b1110110;
    for (int unsigned i = 0; i < 127; i++) s[i + 7] = s[i + 4] ^ s[i];
    for (int unsigned i = 0; i < 127; i++) ones += s[i];
    chk(ones == 64, "m-sequence balance");
    start = 1'b0; nid2 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    chk(!chip_valid, "idle after reset");
    for (int unsigned n = 0; n < 4; n++) begin
      automatic int unsigned id = n % 3;
      start = 1'b1; nid2 = 2'(id);
      @(negedge clk);
      start = 1'b0; nid2 = 2'(3 - id);   // inputs ignored once running
      for (int unsigned k = 0; k < 127; k++) begin
        automatic int unsigned m = (k + 43 * id) % 127;
        chk(chip_valid && chip_index == 7'(k), "valid and index");
        chk(chip_bit == s[m], "chip bit");
        chk(chip_bpsk == (s[m] ? -2'sd1 : 2'sd1), "bpsk value");
        chk(chip_last == (k == 126), "last flag");
        if (k == 126 && n == 1) begin start = 1'b1; nid2 = 2'd2; end  // back-to-back
        @(negedge clk);
      end
      if (n == 1) begin
        // restarted on the last chip: now streaming N_ID2 = 2 at k = 0
        start = 1'b0;
        for (int unsigned k = 0; k < 127; k++) begin
          chk(chip_valid && chip_bit == s[(k + 86) % 127], "back-to-back sequence");
          @(negedge clk);
        end
      end
      chk(!chip_valid, "stops after 127 chips");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
