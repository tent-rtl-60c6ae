// tfx_clz: count of leading zeros, capped at a limit.
//
// Counts the zeros of `din` from its most significant bit and returns
// min(count, limit). In the TFX decoder the input is the bit-change vector
// of the word, so the count is the number of integer-run bits after the
// sign, and the limit IS-1 stops the run at the format's maximum integer
// width. `capped` reports that the limit was reached, meaning the run had
// no terminating bit. Purely combinational.
module tfx_clz #(
  parameter int unsigned W  = 7,                    // input width (n-1)
  parameter int unsigned CW = $clog2(W + 1) + 1     // count width
) (
  input  logic [W-1:0]  din,
  input  logic [CW-1:0] limit,
  output logic [CW-1:0] count,
  output logic          capped
);
  logic [CW-1:0] raw;
  logic          seen_one;

  always_comb begin
    raw      = '0;
    seen_one = 1'b0;
    for (int i = W - 1; i >= 0; i--) begin
      if (din[i]) seen_one = 1'b1;
      else if (!seen_one) raw = raw + 1'b1;
    end
    capped = (raw >= limit);
    count  = capped ? limit : raw;
  end
endmodule
