// ta_memory_tb: loads a random TA state into every TA of the full-size
// store (400 clauses x 560 literals), keeps the include decision
// (state >= 128, i.e. states N+1..2N of a 2N = 256 state automaton) in a
// model, then reads every clause group and checks each include vector and
// the one-cycle read latency.
module ta_memory_tb;
  localparam int unsigned TOTAL = 400, LIT = 560, GROUP = 100, TA_BITS = 8;
  localparam int unsigned GROUPS = TOTAL / GROUP;
  localparam int unsigned N = 2 ** (TA_BITS - 1);

  logic                            clk = 1'b0;
  logic                            ld_en;
  logic [$clog2(TOTAL)-1:0]        ld_clause;
  logic [$clog2(LIT)-1:0]          ld_literal;
  logic [TA_BITS-1:0]              ld_state;
  logic [1:0]                      rd_group;
  logic [GROUP-1:0][LIT-1:0]       rd_include;

  int unsigned checks = 0, failures = 0;
  logic [LIT-1:0] model [TOTAL];

  ta_memory #(.CLAUSES_TOTAL(TOTAL), .LITERALS(LIT), .GROUP(GROUP), .TA_BITS(TA_BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    ld_en = 1'b0; ld_clause = '0; ld_literal = '0; ld_state = '0; rd_group = '0;
    @(negedge clk);
    for (int unsigned c = 0; c < TOTAL; c++) begin
      for (int unsigned l = 0; l < LIT; l++) begin
        automatic int unsigned st = $urandom_range(2*N - 1);
        // bias toward the decision boundary N-1 / N
        if (($urandom & 3) == 0) st = N - 1 + ($urandom & 1);
        ld_en = 1'b1; ld_clause = $clog2(TOTAL)'(c); ld_literal = $clog2(LIT)'(l);
        ld_state = TA_BITS'(st);
        model[c][l] = (st >= N);
        @(negedge clk);
      end
    end
    ld_en = 1'b0;
    for (int unsigned g = 0; g < GROUPS; g++) begin
      rd_group = 2'(g);
      @(negedge clk);
      for (int unsigned j = 0; j < GROUP; j++) begin
        checks++;
        if (rd_include[j] !== model[g*GROUP + j]) begin
          failures++;
          if (failures < 10) $display("FAIL group %0d clause %0d", g, j);
        end
      end
    end
    // a rewrite of a single TA reaches the read port
    ld_en = 1'b1; ld_clause = 9'd250; ld_literal = 10'd7; ld_state = 8'd200; model[250][7] = 1'b1;
    @(negedge clk);
    ld_clause = 9'd250; ld_literal = 10'd8; ld_state = 8'd3; model[250][8] = 1'b0;
    @(negedge clk);
    ld_en = 1'b0; rd_group = 2'd2;
    @(negedge clk);
    checks++;
    if (rd_include[50] !== model[250]) begin failures++; $display("FAIL rewrite"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
