// tfx_pe: output-stationary tapered fixed-point processing element.
//
// Each cycle with a_vld set, the PE decodes its activation (with IS_a)
// and its weight (with IS_w), shifts the decoded weight by the signed
// 3-bit SC (left for positive, right for negative), multiplies the two
// exactly and adds the product to a wide accumulator; a_first restarts
// the sum. Nothing is rounded until the end: the accumulator is shifted
// back to the decoder's fixed-point format (the bits shifted out become a
// round bit and a sticky bit), saturated to that format, encoded to TFX with IS_o and
// optionally passed through a ReLU. The activation and its flags leave
// to the right and the weight leaves downward through one register each,
// so a grid of PEs forms the systolic array.
//
// Result drain: `cap` loads the encoded result into the output register;
// `shift` loads the output register of the PE above (`out_in`) instead,
// so a column of PEs shifts its results down one row per cycle.
//
// Follows the design: decoder per operand, SC on the weight only, exact
// product, quire-style accumulation, single rounding at the end, ReLU
// after the quantizer. This design's own choices: two's complement
// multiply instead of sign/magnitude, the scaled weight kept with four
// extra fraction and three extra integer bits so no SC loses precision,
// the accumulator width (product width plus ACC_GUARD), separate IS for
// weights, activations and outputs, and one MAC per cycle with no
// pipeline register in the multiplier path.
module tfx_pe
  import tent_pkg::*;
#(
  parameter int unsigned N     = N_BITS,
  parameter int unsigned GUARD = ACC_GUARD,
  parameter int unsigned LOGN  = $clog2(N)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // layer format, constant during an operation
  input  logic [LOGN-1:0]           is_w_m1,
  input  logic [LOGN-1:0]           is_a_m1,
  input  logic [LOGN-1:0]           is_o_m1,
  input  logic signed [SC_BITS-1:0] sc,
  input  logic                      relu_en,
  // activation from the left, forwarded to the right
  input  logic [N-1:0]              a_in,
  input  logic                      a_vld_in,
  input  logic                      a_first_in,
  output logic [N-1:0]              a_out,
  output logic                      a_vld_out,
  output logic                      a_first_out,
  // weight from above, forwarded downward
  input  logic [N-1:0]              w_in,
  output logic [N-1:0]              w_out,
  // result drain
  input  logic                      cap,
  input  logic                      shift,
  input  logic [N-1:0]              out_in,
  output logic [N-1:0]              out_q,
  // encoded result of the current sum (combinational, for observation)
  output logic [N-1:0]              result
);
  localparam int unsigned DW     = LOGN + N;          // decoded width
  localparam int unsigned SC_LO  = 1 << (SC_BITS-1);  // 4: most negative shift
  localparam int unsigned SC_HI  = SC_LO - 1;         // 3: most positive shift
  localparam int unsigned WSW    = DW + SC_LO + SC_HI;// scaled weight width
  localparam int unsigned PRW    = WSW + DW;          // product width
  localparam int unsigned ACCW   = PRW + GUARD;       // accumulator width
  localparam int unsigned DROP   = (N - 1) + SC_LO;   // extra fraction bits of the sum
  localparam logic signed [ACCW-1:0] FX_MAX = (ACCW'(1) <<< (DW-1)) - ACCW'(1);
  localparam logic signed [ACCW-1:0] FX_MIN = -(ACCW'(1) <<< (DW-1));

  logic signed [DW-1:0]   a_dec, w_dec;
  logic signed [WSW-1:0]  w_scaled;
  logic signed [PRW-1:0]  prod;
  logic signed [ACCW-1:0] acc_q;
  logic signed [ACCW-1:0] acc_shr;
  logic signed [DW-1:0]   fx_sat;
  logic [1:0]             lo;
  logic [N-1:0]           enc;

  tfx_decoder #(.N(N)) u_dec_a (.tfx_in(a_in), .is_m1(is_a_m1), .fx_out(a_dec));
  tfx_decoder #(.N(N)) u_dec_w (.tfx_in(w_in), .is_m1(is_w_m1), .fx_out(w_dec));

  // weight * 2^SC, held with SC_LO extra fraction bits
  always_comb begin
    w_scaled = WSW'(w_dec) <<< SC_LO;
    if (sc < 0) w_scaled = w_scaled >>> (-int'(sc));
    else        w_scaled = w_scaled <<< int'(sc);
    prod = PRW'(w_scaled) * PRW'(a_dec);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_q <= '0;
    else if (a_vld_in) acc_q <= (a_first_in ? '0 : acc_q) + ACCW'(prod);
  end

  // normalise: drop the extra fraction bits, keep them as a sticky flag,
  // saturate to the encoder's input format
  always_comb begin
    acc_shr = acc_q >>> DROP;
    lo      = {acc_q[DROP-1], |acc_q[DROP-2:0]};
    if (acc_shr > FX_MAX)      fx_sat = FX_MAX[DW-1:0];
    else if (acc_shr < FX_MIN) fx_sat = FX_MIN[DW-1:0];
    else                       fx_sat = acc_shr[DW-1:0];
  end

  tfx_encoder #(.N(N)) u_enc (.fx_in(fx_sat), .lo_in(lo), .is_m1(is_o_m1), .tfx_out(enc));

  assign result = (relu_en && enc[N-1]) ? '0 : enc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out       <= '0;
      a_vld_out   <= 1'b0;
      a_first_out <= 1'b0;
      w_out       <= '0;
      out_q       <= '0;
    end else begin
      a_out       <= a_in;
      a_vld_out   <= a_vld_in;
      a_first_out <= a_first_in;
      w_out       <= w_in;
      if (cap)        out_q <= result;
      else if (shift) out_q <= out_in;
    end
  end
endmodule
