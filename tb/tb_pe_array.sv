// tb_pe_array: the full 16x16 array (n = 8) computing random output
// tiles. Each tile streams K words of 16 activations and 16 weights
// (unskewed, one per cycle), waits ROWS+COLS-1 cycles, captures and
// shifts the 16 result rows out of the bottom edge. Every one of the 256
// outputs is compared with the reference. Back-to-back tiles check that
// the first-of-sum flag restarts every accumulator.
module tb_pe_array;
  import tfx_ref_pkg::*;
  localparam int N = 8, R = 16, C = 16;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic [2:0] is_w_m1, is_a_m1, is_o_m1;
  logic signed [2:0] sc;
  logic relu_en;
  logic [R-1:0][N-1:0] act_word;
  logic [C-1:0][N-1:0] wgt_word, out_word;
  logic act_vld, act_first, cap, shift;

  pe_array #(.N(N), .ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sum [R][C];

  initial begin
    logic [15:0] want;
    int k_len;
    {act_word, wgt_word, act_vld, act_first, cap, shift} = '0;
    {is_w_m1, is_a_m1, is_o_m1, sc, relu_en} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      is_w_m1 = 3'($urandom); is_a_m1 = 3'($urandom); is_o_m1 = 3'($urandom);
      sc = 3'($urandom); relu_en = 1'($urandom);
      k_len = (t == 0) ? 1 : $urandom_range(1, 40);
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) sum[r][c] = 0;
      for (int k = 0; k < k_len; k++) begin
        @(negedge clk);
        for (int r = 0; r < R; r++) act_word[r] = 8'($urandom);
        for (int c = 0; c < C; c++) wgt_word[c] = 8'($urandom);
        act_vld = 1; act_first = (k == 0);
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++)
            sum[r][c] += ref_scaled_product(N, int'(is_a_m1) + 1, int'(is_w_m1) + 1, int'(sc),
                                            16'(act_word[r]), 16'(wgt_word[c]));
      end
      @(negedge clk);
      act_vld = 0; act_first = 0;
      repeat (R + C - 2) @(negedge clk);
      cap = 1;
      @(negedge clk);
      cap = 0; shift = 1;
      for (int r = R - 1; r >= 0; r--) begin
        for (int c = 0; c < C; c++) begin
          want = ref_result(N, int'(is_o_m1) + 1, sum[r][c], relu_en);
          checks++;
          if (out_word[c] != want[N-1:0]) begin
            failures++;
            if (failures < 10) $display("tile %0d PE(%0d,%0d) got %b want %b", t, r, c, out_word[c], want[N-1:0]);
          end
        end
        @(negedge clk);
      end
      shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
