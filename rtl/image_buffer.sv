// image_buffer: storage for one Boolean spectrogram and the row window that
// the patch generator slides over it.
//
// The image is H rows of W bits; bit c of a row is column c. Rows are
// written one whole row per cycle (wr_en, wr_row, wr_data). For the patch
// read, win_top selects the first of PATCH consecutive rows, and win_rows
// returns rows win_top .. win_top+PATCH-1 combinationally, so a new window
// can be read every cycle. The caller keeps win_top <= H-PATCH.
//
// The paper only says that the CTM works on 100x100 binarized spectrograms
// cut into 10x10 patches; keeping the whole image in registers so that any
// 10-row window is readable in one cycle is this design's choice. The
// contents are not reset: an image is always written before it is read.
module image_buffer #(
  parameter int unsigned H     = ctm_pkg::IMG_H,
  parameter int unsigned W     = ctm_pkg::IMG_W,
  parameter int unsigned PATCH = ctm_pkg::PATCH
) (
  input  logic                      clk,
  // row write port
  input  logic                      wr_en,
  input  logic [$clog2(H)-1:0]      wr_row,
  input  logic [W-1:0]              wr_data,
  // window read port
  input  logic [$clog2(H)-1:0]      win_top,
  output logic [PATCH-1:0][W-1:0]   win_rows
);

  logic [W-1:0] mem [H];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  always_comb begin
    for (int unsigned r = 0; r < PATCH; r++) begin
      win_rows[r] = mem[$clog2(H)'(32'(win_top) + r)];
    end
  end

endmodule
