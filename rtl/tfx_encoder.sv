// tfx_encoder: signed fixed point to tapered fixed-point word.
//
// Input: a two's complement value of ceil(log2 N)+N bits with N-1
// fraction bits (the decoder's output format), two bits lo_in that
// describe what lies below that fraction (bit 1: the next bit; bit 0:
// OR of all lower bits), and IS-1. Output: the N-bit
// TFX word nearest to the value, ties to the even word, values beyond
// the format's range clipped to its largest or smallest word.
//
// Structure, following the encoder drawing of the design: a multiplexer
// on the sign picks the integer or its inverse as the shift amount k
// (the run length minus one); a second one picks the pattern "10"
// (positive) or "01" (negative) placed above the fraction; an arithmetic
// right shift by k then writes the unary run, its terminating bit and
// the fraction in one step. The drawing's n+1-bit shifter is widened here,
// and lo_in is placed below the fraction, so that the bits shifted out
// remain available as a guard bit and a sticky bit (the drawing's
// STICKY_BIT path; the two extra input bits are this design's addition,
// needed for IS = 1 where the word keeps all N-1 fraction bits); where the run reaches IS no terminating bit is written.
// Round to nearest even adds guard AND (sticky OR lsb) to the word;
// because TFX words are ordered like two's complement integers, the carry
// of that addition moves to the next word correctly, including from the
// largest negative word to zero. The clipping bounds are -IS and
// IS - 2^-(N-IS). Purely combinational.
module tfx_encoder #(
  parameter int unsigned N    = tent_pkg::N_BITS,
  parameter int unsigned LOGN = $clog2(N)
) (
  input  logic signed [LOGN+N-1:0] fx_in,
  input  logic [1:0]               lo_in,
  input  logic [LOGN-1:0]          is_m1,
  output logic [N-1:0]             tfx_out
);
  localparam int unsigned FW = LOGN + N;   // fixed-point width
  localparam int unsigned PW = 2*N + 3;    // pattern width

  logic signed [FW-1:0] max_v, min_v, v;
  logic                 sign, capped, clipped;
  logic [1:0]           lo;
  logic [LOGN:0]        int_bits, k;
  logic [N-2:0]         frac;
  logic signed [PW-1:0] pat;
  logic [N-2:0]         body;
  logic                 guard, sticky, round_up;
  logic [LOGN:0]        is_val;

  always_comb begin
    is_val = {1'b0, is_m1} + 1'b1;
    // largest word: (IS << (N-1)) - (1 << (IS-1)); smallest: -(IS << (N-1))
    max_v  = FW'(is_val) << (N - 1);
    max_v  = max_v - (FW'(1) << is_m1);
    min_v  = -(FW'(is_val) << (N - 1));

    clipped = 1'b1;
    if (fx_in >= max_v)     v = max_v;
    else if (fx_in < min_v) v = min_v;
    else begin
      v       = fx_in;
      clipped = 1'b0;
    end
    lo = clipped ? 2'b00 : lo_in;

    sign     = v[FW-1];
    int_bits = v[FW-1:N-1];
    frac     = v[N-2:0];
    k        = sign ? ~int_bits : int_bits;
    capped   = (k == {1'b0, is_m1});

    if (capped) pat = {~sign, frac, lo, {(PW-N-2){1'b0}}};
    else        pat = {~sign, sign, frac, lo, {(PW-N-3){1'b0}}};
    pat = pat >>> k;

    body     = pat[PW-2 -: N-1];
    guard    = pat[PW-N-1];
    sticky   = |pat[PW-N-2:0];
    round_up = guard & (sticky | body[0]);
    tfx_out  = {sign, body} + N'(round_up);
  end
endmodule
