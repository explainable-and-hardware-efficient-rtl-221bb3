// patch_generator: turns the PATCH x PATCH window at patch position
// (pos_y, pos_x) into the CTM literal vector.
//
// Feature layout, index 0 first (the layout of the reference CTM software):
//   [0 .. H-PATCH-1]                 y thermometer, bit k = (pos_y > k)
//   [H-PATCH .. H-PATCH+W-PATCH-1]   x thermometer, bit k = (pos_x > k)
//   then PATCH*PATCH pixels, pixel (r, c) of the window at index r*PATCH + c
// The literal vector is {~features, features}: literal i < F is feature i,
// literal F+i is its negation.
//
// The paper says the CTM "processes the input data in patches of predefined
// size" and that "the processing includes attaching coordinates to each
// patch"; the thermometer coding and the order above follow the usual CTM
// formulation and are not spelled out in the paper.
//
// Timing: one patch per cycle. in_valid/pos_y/pos_x/win_rows are sampled on
// the clock edge; literals and lit_valid appear one cycle later.
module patch_generator #(
  parameter int unsigned H     = ctm_pkg::IMG_H,
  parameter int unsigned W     = ctm_pkg::IMG_W,
  parameter int unsigned PATCH = ctm_pkg::PATCH,
  localparam int unsigned F    = ctm_pkg::ctm_features(H, W, PATCH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [$clog2(H)-1:0]      pos_y,
  input  logic [$clog2(W)-1:0]      pos_x,
  input  logic [PATCH-1:0][W-1:0]   win_rows,
  output logic                      lit_valid,
  output logic [2*F-1:0]            literals
);

  localparam int unsigned TY = H - PATCH;
  localparam int unsigned TX = W - PATCH;

  logic [F-1:0] feat;

  always_comb begin
    feat = '0;
    for (int unsigned k = 0; k < TY; k++) feat[k]      = (32'(pos_y) > k);
    for (int unsigned k = 0; k < TX; k++) feat[TY + k] = (32'(pos_x) > k);
    for (int unsigned r = 0; r < PATCH; r++) begin
      for (int unsigned c = 0; c < PATCH; c++) begin
        feat[TY + TX + r*PATCH + c] = win_rows[r][32'(pos_x) + c];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lit_valid <= 1'b0;
      literals  <= '0;
    end else begin
      lit_valid <= in_valid;
      if (in_valid) literals <= {~feat, feat};
    end
  end

endmodule
