// image_buffer_tb: writes a random 100x100 Boolean image row by row into
// image_buffer, keeps its own copy, and compares the PATCH-row window for
// every window position against that copy. Then rewrites a few rows and
// checks that only those rows change.
module image_buffer_tb;
  localparam int unsigned H = 100, W = 100, PATCH = 10;

  logic                    clk = 1'b0;
  logic                    wr_en;
  logic [$clog2(H)-1:0]    wr_row, win_top;
  logic [W-1:0]            wr_data;
  logic [PATCH-1:0][W-1:0] win_rows;

  int unsigned checks = 0, failures = 0;
  logic [W-1:0] model [H];

  image_buffer #(.H(H), .W(W), .PATCH(PATCH)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd_row();
    logic [W-1:0] r;
    for (int unsigned i = 0; i < W; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  task automatic check_windows();
    for (int unsigned t = 0; t <= H - PATCH; t++) begin
      win_top = $clog2(H)'(t);
      #1;
      for (int unsigned r = 0; r < PATCH; r++) begin
        checks++;
        if (win_rows[r] !== model[t + r]) begin
          failures++;
          $display("FAIL window top %0d row %0d", t, r);
        end
      end
    end
  endtask

  initial begin
    wr_en = 1'b0; wr_row = '0; wr_data = '0; win_top = '0;
    @(negedge clk);
    for (int unsigned r = 0; r < H; r++) begin
      model[r] = rnd_row();
      wr_en = 1'b1; wr_row = $clog2(H)'(r); wr_data = model[r];
      @(negedge clk);
    end
    wr_en = 1'b0;
    check_windows();
    for (int unsigned n = 0; n < 5; n++) begin
      automatic int unsigned r = $urandom_range(H - 1);
      model[r] = rnd_row();
      wr_en = 1'b1; wr_row = $clog2(H)'(r); wr_data = model[r];
      @(negedge clk);
    end
    wr_en = 1'b0;
    check_windows();
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
