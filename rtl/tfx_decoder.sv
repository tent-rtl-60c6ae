// tfx_decoder: tapered fixed-point word to signed fixed point.
//
// Input: an N-bit TFX word and IS-1 (ceil(log2 N) bits). Output: a two's
// complement fixed-point value of ceil(log2 N)+N bits, ceil(log2 N)+1
// integer bits above N-1 fraction bits, equal to I + f exactly.
//
// Structure, following the decoder drawing of the design: the word's
// inverted sign bit is concatenated with bits [N-2:1] and XORed with bits
// [N-2:0] (the word shifted right by one), which marks every place where
// a bit differs from the one before it, the sign counting as its
// inverse. A count-leading-zeros unit capped at IS-1 turns that vector
// into the integer run length minus one, z. The integer is z for a
// positive word and ~z = -(z+1) for a negative one (a multiplexer on the
// sign). The bits after the sign, shifted left past the run and its
// terminating bit, leave the fraction, MSB aligned in N-1 bits.
// Whether a terminating bit is skipped (it is not when the run reached
// IS) is this design's reading of the format definition; the drawing
// feeds the count straight to the shifter and does not show it.
// Purely combinational.
module tfx_decoder #(
  parameter int unsigned N    = tent_pkg::N_BITS,
  parameter int unsigned LOGN = $clog2(N)
) (
  input  logic [N-1:0]             tfx_in,
  input  logic [LOGN-1:0]          is_m1,    // IS-1
  output logic signed [LOGN+N-1:0] fx_out    // {integer, fraction}
);
  logic              sign;
  logic [N-2:0]      change;
  logic [LOGN:0]     z;
  logic              capped;
  logic [LOGN:0]     int_bits;
  logic [LOGN:0]     skip;
  logic [N-2:0]      frac;

  assign sign   = tfx_in[N-1];
  assign change = {~sign, tfx_in[N-2:1]} ^ tfx_in[N-2:0];

  tfx_clz #(.W(N-1), .CW(LOGN+1)) u_clz (
    .din    (change),
    .limit  ({1'b0, is_m1}),
    .count  (z),
    .capped (capped)
  );

  always_comb begin
    int_bits = sign ? ~z : z;
    // bits after the sign taken by the run (z) and its terminating bit
    skip     = z + (capped ? (LOGN+1)'(0) : (LOGN+1)'(1));
    frac     = tfx_in[N-2:0] << skip;
    fx_out   = {int_bits, frac};
  end
endmodule
