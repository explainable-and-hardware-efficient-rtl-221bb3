// otsu_binarizer: "Enhanced Otsu" Booleanization of a square greyscale
// spectrogram, the input stage of the CTM detector.
//
// Operation, one image at a time:
//   LOAD    takes H*W pixels in raster order (row 0 first, column 0 first)
//           over a valid/ready stream, stores them and builds a histogram.
//   THRESH  walks the 2**PIX_BITS histogram bins, one per cycle, and finds
//           Otsu's threshold t: the first t that maximises the between-class
//           variance of {p <= t} and {p > t}. With w0 = #{p <= t},
//           s0 = sum{p <= t}, N pixels and pixel sum S this is the t with
//           the largest (N*s0 - S*w0)^2 / (w0*(N - w0)), bins with w0 = 0 or
//           w0 = N skipped; the ratios are compared by cross-multiplication,
//           so no divider is needed. t stays 0 if no split is better than 0.
//   OUT     emits the binary image a row per accepted transfer:
//             out bit (i, j) = (p[i][j] > t) | (p[j][W-1-i] > t)
//           the OR of the thresholded image and of its 90-degree
//           counter-clockwise rotation. Bit j of out_data is column j.
// out_valid/out_ready is a valid/ready handshake; out_last marks row H-1.
// Latency: H*W load cycles, 2**PIX_BITS threshold cycles, then at least
// H output cycles, after which LOAD accepts the next image.
//
// The paper defines Enhanced Otsu as Otsu thresholding of the original image
// and of its 90-degree rotated version, combined by logical OR, on a 100x100
// spectrogram. Rotation direction, pixel width (8 bits), the "p > t"
// convention, the first-maximum tie rule and the stream interfaces follow
// common image-library practice and are choices of this design. Because the
// rotation does not change the histogram, one threshold serves both images.
module otsu_binarizer #(
  parameter int unsigned H        = ctm_pkg::IMG_H,
  parameter int unsigned W        = ctm_pkg::IMG_W,
  parameter int unsigned PIX_BITS = ctm_pkg::PIX_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // pixel stream in
  input  logic                     pix_valid,
  output logic                     pix_ready,
  input  logic [PIX_BITS-1:0]      pix_data,
  // binary rows out
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [$clog2(H)-1:0]     out_row,
  output logic [W-1:0]             out_data,
  output logic                     out_last,
  output logic [PIX_BITS-1:0]      threshold
);

  localparam int unsigned N     = H * W;
  localparam int unsigned BINS  = 2 ** PIX_BITS;
  localparam int unsigned CW    = $clog2(N + 1);          // pixel count
  localparam int unsigned SW    = CW + PIX_BITS;          // pixel sum
  localparam int unsigned DW    = SW + CW + 1;            // N*s0 - S*w0, signed
  localparam int unsigned NUMW  = 2 * DW;                 // its square
  localparam int unsigned DENW  = 2 * CW;                 // w0*(N-w0)
  localparam int unsigned PRODW = NUMW + DENW;

  typedef enum logic [1:0] {S_LOAD, S_THRESH, S_OUT} state_t;
  state_t state;

  logic [PIX_BITS-1:0] pix  [H][W];
  logic [CW-1:0]       hist [BINS];

  logic [$clog2(H)-1:0] ld_row;
  logic [$clog2(W)-1:0] ld_col;
  logic [SW-1:0]        total;          // S
  logic [PIX_BITS-1:0]  bin;            // THRESH bin counter
  logic [CW-1:0]        w0;             // pixels in bins < bin
  logic [SW-1:0]        s0;             // their sum
  logic [NUMW-1:0]      best_num;
  logic [DENW-1:0]      best_den;

  // Criterion for the split after bin `bin`.
  logic [CW-1:0]          w0n;
  logic [SW-1:0]          s0n;
  logic signed [DW-1:0]   diff;
  logic signed [NUMW-1:0] diff_w;
  logic [NUMW-1:0]        num;
  logic [DENW-1:0]        den;
  logic                   better;

  always_comb begin
    w0n    = w0 + hist[bin];
    s0n    = s0 + SW'(hist[bin]) * SW'(bin);
    diff   = $signed(DW'(N) * DW'(s0n)) - $signed(DW'(total) * DW'(w0n));
    diff_w = NUMW'(diff);
    num    = diff_w * diff_w;
    den    = DENW'(w0n) * DENW'(CW'(N) - w0n);
    better = (w0n != '0) && (32'(w0n) != N)
             && (PRODW'(num) * PRODW'(best_den) > PRODW'(best_num) * PRODW'(den));
  end

  logic pix_fire, out_fire;
  assign pix_ready = (state == S_LOAD);
  assign pix_fire  = pix_valid && pix_ready;
  assign out_valid = (state == S_OUT);
  assign out_fire  = out_valid && out_ready;
  assign out_last  = (32'(out_row) == H - 1);

  // Pixel store, not reset: it is written in full before it is read.
  always_ff @(posedge clk) begin
    if (pix_fire) pix[ld_row][ld_col] <= pix_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      ld_row    <= '0;
      ld_col    <= '0;
      total     <= '0;
      bin       <= '0;
      w0        <= '0;
      s0        <= '0;
      best_num  <= '0;
      best_den  <= DENW'(1);
      threshold <= '0;
      out_row   <= '0;
      for (int unsigned b = 0; b < BINS; b++) hist[b] <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (pix_fire) begin
          hist[pix_data]      <= hist[pix_data] + 1'b1;
          total               <= total + SW'(pix_data);
          if (32'(ld_col) == W - 1) begin
            ld_col <= '0;
            if (32'(ld_row) == H - 1) begin
              ld_row    <= '0;
              state     <= S_THRESH;
              bin       <= '0;
              w0        <= '0;
              s0        <= '0;
              best_num  <= '0;
              best_den  <= DENW'(1);
              threshold <= '0;
            end else begin
              ld_row <= ld_row + 1'b1;
            end
          end else begin
            ld_col <= ld_col + 1'b1;
          end
        end
        S_THRESH: begin
          w0  <= w0n;
          s0  <= s0n;
          bin <= bin + 1'b1;
          if (better) begin
            best_num  <= num;
            best_den  <= den;
            threshold <= bin;
          end
          if (32'(bin) == BINS - 1) begin
            state   <= S_OUT;
            out_row <= '0;
          end
        end
        S_OUT: if (out_fire) begin
          if (out_last) begin
            state <= S_LOAD;
            total <= '0;
            for (int unsigned b = 0; b < BINS; b++) hist[b] <= '0;
          end else begin
            out_row <= out_row + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  always_comb begin
    for (int unsigned j = 0; j < W; j++) begin
      out_data[j] = (pix[out_row][j] > threshold) | (pix[j][W-1-32'(out_row)] > threshold);
    end
  end

  initial begin
    assert (H == W) else $fatal(1, "otsu_binarizer: the 90-degree rotation needs a square image");
  end

endmodule
