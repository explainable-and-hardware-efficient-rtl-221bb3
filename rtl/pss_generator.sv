// pss_generator: the 5G NR primary synchronisation signal (PSS) sequence.
//
// The PSS is a length-127 BPSK m-sequence. The base sequence s(i) obeys
//   s(i+7) = (s(i+4) + s(i)) mod 2,  [s(6) .. s(0)] = [1 1 1 0 1 1 0]
// and sector N_ID2 in {0,1,2} uses the cyclic shift
//   d(k) = 1 - 2*s(m),  m = (k + 43*N_ID2) mod 127,  k = 0 .. 126.
// This is the local reference that a receiver correlates against when it
// searches the carrier frequency offset and locates the PSS symbol ahead of
// the detector.
//
// A 7-bit shift register holds [s(i+6) .. s(i)]. Its start state for shift
// 43*N_ID2 is computed at elaboration by running the recurrence, so no
// sequence table is stored. After start (taken while busy is low) the block
// emits one chip per cycle for 127 cycles: chip_valid, chip_index = k,
// chip_bit = s(m) and chip_bpsk = d(k) in {+1, -1} as a 2-bit signed value;
// chip_last marks k = 126. The first chip appears the cycle after start.
//
// The recurrence, the initial state, the shift of 43 per sector and the
// length 127 are the paper's equations; the streaming interface is this
// design's own.
module pss_generator #(
  parameter int unsigned LEN   = 127,
  parameter int unsigned SHIFT = 43
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [1:0]             nid2,
  output logic                   busy,
  output logic                   chip_valid,
  output logic [$clog2(LEN)-1:0] chip_index,
  output logic                   chip_bit,
  output logic signed [1:0]      chip_bpsk,
  output logic                   chip_last
);

  localparam logic [6:0] INIT = 7'b1110110;   // s(6) .. s(0)

  function automatic logic [6:0] lfsr_step(logic [6:0] st);
    return {st[4] ^ st[0], st[6:1]};
  endfunction

  // Register contents [s(n+6) .. s(n)] for n = shift mod LEN.
  function automatic logic [6:0] state_at(int unsigned n);
    logic [6:0] st = INIT;
    for (int unsigned i = 0; i < n % LEN; i++) st = lfsr_step(st);
    return st;
  endfunction

  localparam logic [6:0] START0 = state_at(0);
  localparam logic [6:0] START1 = state_at(SHIFT);
  localparam logic [6:0] START2 = state_at(2 * SHIFT);

  logic [6:0] st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= INIT;
      chip_valid <= 1'b0;
      chip_index <= '0;
    end else if (!chip_valid || chip_last) begin
      chip_valid <= start;
      chip_index <= '0;
      if (start) begin
        unique case (nid2)
          2'd1:    st <= START1;
          2'd2:    st <= START2;
          default: st <= START0;
        endcase
      end
    end else begin
      st         <= lfsr_step(st);
      chip_index <= chip_index + 1'b1;
    end
  end

  assign busy      = chip_valid && !chip_last;
  assign chip_last = chip_valid && (32'(chip_index) == LEN - 1);
  assign chip_bit  = st[0];
  assign chip_bpsk = st[0] ? -2'sd1 : 2'sd1;

endmodule
