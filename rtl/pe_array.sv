// pe_array: ROWS x COLS systolic grid of tapered fixed-point PEs running
// an output-stationary dataflow.
//
// Every PE accumulates one output: row r holds output pixel r of a tile
// and column c holds filter c. Each cycle the left edge takes one word of
// ROWS activations (one per row) and the top edge one word of COLS
// weights (one per column). Skew registers at the edges delay row r and
// column c by r and c cycles, so that after passing r (weights) and c
// (activations) PE registers the k-th activation and k-th weight meet in
// PE (r, c), r + c cycles after they entered. Activations carry a valid
// and a first-of-sum flag along the rows.
//
// Draining: `cap` copies every PE's encoded result into its output
// register; each `shift` moves the output registers one row down, so the
// bottom edge delivers row ROWS-1 first and row 0 after ROWS-1 shifts,
// COLS results per cycle into the ofmap buffer.
//
// Timing: a word entering at cycle t has been added into PE (r, c) at the
// end of cycle t + r + c. The 16x16 size and the directions (weights in
// from the top, activations from the left, outputs out of the bottom)
// follow the design; the skew registers and the drain by shifting are
// this design's choices.
module pe_array
  import tent_pkg::*;
#(
  parameter int unsigned N     = N_BITS,
  parameter int unsigned ROWS  = ARRAY_ROWS,
  parameter int unsigned COLS  = ARRAY_COLS,
  parameter int unsigned GUARD = ACC_GUARD,
  parameter int unsigned LOGN  = $clog2(N)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [LOGN-1:0]           is_w_m1,
  input  logic [LOGN-1:0]           is_a_m1,
  input  logic [LOGN-1:0]           is_o_m1,
  input  logic signed [SC_BITS-1:0] sc,
  input  logic                      relu_en,
  input  logic [ROWS-1:0][N-1:0]    act_word,   // left edge, unskewed
  input  logic                      act_vld,
  input  logic                      act_first,
  input  logic [COLS-1:0][N-1:0]    wgt_word,   // top edge, unskewed
  input  logic                      cap,
  input  logic                      shift,
  output logic [COLS-1:0][N-1:0]    out_word    // bottom edge
);
  // operand nets between PEs: index [r][c] is the input of PE (r, c)
  logic [N-1:0] a_net     [ROWS][COLS+1];
  logic         vld_net   [ROWS][COLS+1];
  logic         first_net [ROWS][COLS+1];
  logic [N-1:0] w_net     [ROWS+1][COLS];
  logic [N-1:0] o_net     [ROWS+1][COLS];

  // left-edge skew: row r delayed by r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_askew
    if (r == 0) begin : g_direct
      assign a_net[0][0]     = act_word[0];
      assign vld_net[0][0]   = act_vld;
      assign first_net[0][0] = act_first;
    end else begin : g_delay
      logic [N-1:0] d_a   [r];
      logic         d_v   [r];
      logic         d_f   [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin
            d_a[i] <= '0; d_v[i] <= 1'b0; d_f[i] <= 1'b0;
          end
        end else begin
          d_a[0] <= act_word[r]; d_v[0] <= act_vld; d_f[0] <= act_first;
          for (int i = 1; i < r; i++) begin
            d_a[i] <= d_a[i-1]; d_v[i] <= d_v[i-1]; d_f[i] <= d_f[i-1];
          end
        end
      end
      assign a_net[r][0]     = d_a[r-1];
      assign vld_net[r][0]   = d_v[r-1];
      assign first_net[r][0] = d_f[r-1];
    end
  end

  // top-edge skew: column c delayed by c cycles
  for (genvar c = 0; c < COLS; c++) begin : g_wskew
    if (c == 0) begin : g_direct
      assign w_net[0][0] = wgt_word[0];
    end else begin : g_delay
      logic [N-1:0] d_w [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) d_w[i] <= '0;
        end else begin
          d_w[0] <= wgt_word[c];
          for (int i = 1; i < c; i++) d_w[i] <= d_w[i-1];
        end
      end
      assign w_net[0][c] = d_w[c-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_top_out
    assign o_net[0][c] = '0;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic [N-1:0] result_unused;
      tfx_pe #(.N(N), .GUARD(GUARD)) u_pe (
        .clk         (clk),
        .rst_n       (rst_n),
        .is_w_m1     (is_w_m1),
        .is_a_m1     (is_a_m1),
        .is_o_m1     (is_o_m1),
        .sc          (sc),
        .relu_en     (relu_en),
        .a_in        (a_net[r][c]),
        .a_vld_in    (vld_net[r][c]),
        .a_first_in  (first_net[r][c]),
        .a_out       (a_net[r][c+1]),
        .a_vld_out   (vld_net[r][c+1]),
        .a_first_out (first_net[r][c+1]),
        .w_in        (w_net[r][c]),
        .w_out       (w_net[r+1][c]),
        .cap         (cap),
        .shift       (shift),
        .out_in      (o_net[r][c]),
        .out_q       (o_net[r+1][c]),
        .result      (result_unused)
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bottom
    assign out_word[c] = o_net[ROWS][c];
  end
endmodule
