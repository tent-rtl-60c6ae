// tb_tfx_pe: random dot products through one PE (n = 8) against the
// reference model, under random IS_w, IS_a, IS_o, SC and ReLU. Each sum
// is K random words long and restarted by a_first; the encoded result is
// captured and compared. Also checks that operands are forwarded with one
// cycle of delay, that `shift` loads out_in, and that SC of both signs,
// clipping and ReLU all occurred.
module tb_tfx_pe;
  import tfx_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_sc_pos = 0, n_sc_neg = 0, n_clip = 0, n_relu = 0;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic [2:0] is_w_m1, is_a_m1, is_o_m1;
  logic signed [2:0] sc;
  logic relu_en;
  logic [7:0] a_in, w_in, a_out, w_out, out_in, out_q, result;
  logic a_vld_in, a_first_in, a_vld_out, a_first_out, cap, shift;

  tfx_pe #(.N(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum;
    logic [15:0] want;
    int k_len;
    {a_in, w_in, out_in, a_vld_in, a_first_in, cap, shift} = '0;
    {is_w_m1, is_a_m1, is_o_m1, sc, relu_en} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      is_w_m1 = 3'($urandom); is_a_m1 = 3'($urandom); is_o_m1 = 3'($urandom);
      sc = 3'($urandom); relu_en = 1'($urandom);
      k_len = 1 + $urandom_range(0, 30);
      sum = 0;
      for (int k = 0; k < k_len; k++) begin
        @(negedge clk);
        a_in = 8'($urandom); w_in = 8'($urandom);
        a_vld_in = 1; a_first_in = (k == 0);
        sum += ref_scaled_product(8, int'(is_a_m1) + 1, int'(is_w_m1) + 1, int'(sc), 16'(a_in), 16'(w_in));
        @(posedge clk); #1;
        checks++;
        if (a_out != a_in || w_out != w_in || !a_vld_out || a_first_out != (k == 0)) begin
          failures++;
          $display("forwarding mismatch");
        end
      end
      @(negedge clk);
      a_vld_in = 0;
      // a gap cycle with a_vld low must not change the sum
      a_in = 8'($urandom); w_in = 8'($urandom);
      @(negedge clk);
      cap = 1;
      @(negedge clk);
      cap = 0;
      want = ref_result(8, int'(is_o_m1) + 1, sum, relu_en);
      checks++;
      if (out_q != want[7:0]) begin
        failures++;
        if (failures < 10) $display("t=%0d IS w/a/o=%0d/%0d/%0d sc=%0d relu=%0d K=%0d sum=%0d got %b want %b",
                                    t, is_w_m1+1, is_a_m1+1, is_o_m1+1, sc, relu_en, k_len, sum, out_q, want[7:0]);
      end
      if (sc > 0) n_sc_pos++;
      if (sc < 0) n_sc_neg++;
      if (relu_en && ref_result(8, int'(is_o_m1) + 1, sum, 1'b0) != want) n_relu++;
      if (want[7:0] == ref_encode(8, int'(is_o_m1) + 1, 64'sd1 <<< 40, 18) && sum > 0) n_clip++;
      // shift path
      out_in = 8'($urandom); shift = 1;
      @(negedge clk);
      shift = 0;
      checks++;
      if (out_q != out_in) begin failures++; $display("shift mismatch"); end
    end
    checks++;
    if (n_sc_pos == 0 || n_sc_neg == 0 || n_clip == 0 || n_relu == 0) begin
      failures++;
      $display("coverage: sc+=%0d sc-=%0d clip=%0d relu=%0d", n_sc_pos, n_sc_neg, n_clip, n_relu);
    end
    $display("coverage: sc+=%0d sc-=%0d clip=%0d relu=%0d", n_sc_pos, n_sc_neg, n_clip, n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
