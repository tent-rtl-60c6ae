// tb_workload_fc: one fully-connected layer on the default-size
// accelerator, shaped like the first dense layer of an MNIST ConvNet:
// 784 inputs (a flattened 28x28 map) to 64 outputs, no ReLU, for a
// batch of 16 input vectors, one per array row. Weights and activations
// are quantized to 8-bit TFX from the MNIST model's ranges (weights in
// [-0.78, 0.62], activations in [0, 3.61]) with the per-layer rule
// IS = floor(max|x|) + 1 and SC = 0 (max|w| >= 0.5), which gives IS_w = 1
// (plain two's complement) and IS_a = IS_o = 4. Most weights are small,
// as in a trained dense layer, with the two range extremes planted, and
// about half of the activations are zero, as after a ReLU; this keeps the
// 784-term sums inside the output range so that rounding, not clipping,
// is what the check sees.
//
// The 64 outputs are four groups of 16 filters. They run as one
// operation of 4 tiles: the filter pointer steps by K per tile
// (FLT_STEP = 784) and the input vectors are stored once per tile, since
// the ifmap pointer always advances by K. The check covers every output
// against the exact reference and the cycle count against
// 4 * (784 + 2*16 + 16).
module tb_workload_fc;
  import tent_pkg::*;
  import tfx_ref_pkg::*;
  localparam int N = 8, R = 16, C = 16, AW = 13;
  localparam int K = 784, F = 64;
  localparam int TILES = F / C;             // 4

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic reg_we;
  logic [3:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic done_irq, busy;
  logic flt_wr_en, ifm_wr_en, ofm_rd_en;
  logic [AW-1:0] flt_wr_addr, ifm_wr_addr, ofm_rd_addr;
  logic [C-1:0][N-1:0] flt_wr_data, ofm_rd_data;
  logic [R-1:0][N-1:0] ifm_wr_data;

  tent_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] act [R][K];
  logic [N-1:0] wgt [F][K];

  task automatic wr(reg_addr_e a, logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask

  initial begin
    int is_w, is_a, sc, neg, pos, zero;
    longint sum;
    logic [15:0] want;
    real wmax, amax;
    reg_we = 0; reg_addr = '0; reg_wdata = '0;
    {flt_wr_en, ifm_wr_en, ofm_rd_en} = '0;
    flt_wr_addr = '0; ifm_wr_addr = '0; ofm_rd_addr = '0;
    flt_wr_data = '0; ifm_wr_data = '0;
    wmax = 0.78; amax = 3.61;
    is_w = int'($floor(wmax)) + 1; if (is_w > N) is_w = N;
    is_a = int'($floor(amax)) + 1; if (is_a > N) is_a = N;
    sc = 0;
    if (wmax < 0.5) sc = int'($floor($ln(wmax) / $ln(2.0))) + 1;
    // values * 2^18 handed to the nearest-word search
    for (int r = 0; r < R; r++)
      for (int k = 0; k < K; k++)
        act[r][k] = ($urandom_range(0, 1) == 0) ? '0 :
                    8'(ref_encode(N, is_a, (longint'($urandom_range(0, 361)) <<< 18) / 100, 18));
    for (int f = 0; f < F; f++)
      for (int k = 0; k < K; k++)
        wgt[f][k] = 8'(ref_encode(N, is_w, (longint'($urandom_range(0, 120)) - 60) * (longint'(1) <<< 18) / 1000, 18));
    wgt[0][0] = 8'(ref_encode(N, is_w, -78 * (longint'(1) <<< 18) / 100, 18));
    wgt[1][1] = 8'(ref_encode(N, is_w, 62 * (longint'(1) <<< 18) / 100, 18));
    repeat (3) @(posedge clk);
    rst_n = 1;
    // filter buffer: word g*K + k holds term k of outputs 16g .. 16g+15
    for (int g = 0; g < TILES; g++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        flt_wr_en = 1; flt_wr_addr = AW'(g * K + k);
        for (int c = 0; c < C; c++) flt_wr_data[c] = wgt[g * C + c][k];
      end
    @(negedge clk); flt_wr_en = 0;
    // ifmap buffer: the 16 input vectors, once per tile
    for (int g = 0; g < TILES; g++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        ifm_wr_en = 1; ifm_wr_addr = AW'(g * K + k);
        for (int r = 0; r < R; r++) ifm_wr_data[r] = act[r][k];
      end
    @(negedge clk); ifm_wr_en = 0;
    wr(REG_FORMAT, {16'd0, 1'b0, 3'(sc), 4'(is_a - 1), 4'(is_a - 1), 4'(is_w - 1)});
    wr(REG_K_LEN, K); wr(REG_N_TILES, TILES);
    wr(REG_IFM_BASE, 0); wr(REG_FLT_BASE, 0); wr(REG_OFM_BASE, 0); wr(REG_FLT_STEP, K);
    wr(REG_CTRL, 1);
    @(posedge done_irq);
    @(negedge clk);
    reg_addr = REG_CYCLES; #1;
    checks++;
    if (reg_rdata != TILES * (K + 2 * R + C)) begin
      failures++;
      $display("cycles %0d, want %0d", reg_rdata, TILES * (K + 2 * R + C));
    end
    // ofmap word 16g + r holds outputs 16g .. 16g+15 of input vector r
    neg = 0; pos = 0; zero = 0;
    for (int g = 0; g < TILES; g++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        ofm_rd_en = 1; ofm_rd_addr = AW'(g * R + r);
        @(negedge clk);
        ofm_rd_en = 0;
        for (int c = 0; c < C; c++) begin
          sum = 0;
          for (int k = 0; k < K; k++)
            sum += ref_scaled_product(N, is_a, is_w, sc, 16'(act[r][k]), 16'(wgt[g * C + c][k]));
          want = ref_result(N, is_a, sum, 1'b0);
          if (want[N-1]) neg++; else if (want[N-1:0] == '0) zero++; else pos++;
          checks++;
          if (ofm_rd_data[c] != want[N-1:0]) begin
            failures++;
            if (failures < 10) $display("vector %0d output %0d got %b want %b", r, g * C + c, ofm_rd_data[c], want[N-1:0]);
          end
        end
      end
    // a layer whose outputs were all of one sign would not test much
    checks++;
    if (neg < 16 || pos < 16) begin
      failures++;
      $display("outputs too one-sided: %0d negative, %0d positive", neg, pos);
    end
    $display("layer: IS_w=%0d IS_a=%0d SC=%0d, %0d outputs (%0d negative, %0d zero, %0d positive)",
             is_w, is_a, sc, R * F, neg, zero, pos);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
