// tb_workload_conv: one convolution layer on the default-size accelerator,
// shaped like the first layer of a CIFAR-10 ResNet: a 32x32x3 input, 3x3
// kernels, stride 1, zero padding 1, 16 filters, ReLU. Weights and
// activations are drawn from the ranges of the CIFAR-10 ResNet-18 model
// (weights in [-2.12, 1.17], activations in [0, 10.21]) and quantized to
// 8-bit TFX with the per-layer selection rule: IS = floor(max|x|) + 1
// capped at n, SC = floor(log2(max|w|)) + 1 only when max|w| < 0.5
// (here 0). The host-side im2col places one 27-term receptive field per
// ifmap lane; 1024 output pixels make 64 tiles of 16 pixels x 16
// filters, all in one operation with the filter pointer held. Every
// output is checked against the reference and the cycle count against
// 64 * (27 + 48).
module tb_workload_conv;
  import tent_pkg::*;
  import tfx_ref_pkg::*;
  localparam int N = 8, R = 16, C = 16, AW = 13;
  localparam int H = 32, W = 32, CI = 3, KS = 3, F = 16;
  localparam int K = KS * KS * CI;          // 27
  localparam int TILES = H * W / R;         // 64

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

  logic [N-1:0] img [H][W][CI];
  logic [N-1:0] wgt [F][K];

  task automatic wr(reg_addr_e a, logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask

  // im2col term k of output pixel (y, x): channel-fastest over the 3x3 window
  function automatic logic [N-1:0] patch(int y, int x, int k);
    int ci, kx, ky, yy, xx;
    ci = k % CI; kx = (k / CI) % KS; ky = k / (CI * KS);
    yy = y + ky - 1; xx = x + kx - 1;
    if (yy < 0 || yy >= H || xx < 0 || xx >= W) return '0;
    return img[yy][xx][ci];
  endfunction

  initial begin
    int is_w, is_a, sc, p, y, x;
    longint sum;
    logic [15:0] want;
    real wmax, amax;
    reg_we = 0; reg_addr = '0; reg_wdata = '0;
    {flt_wr_en, ifm_wr_en, ofm_rd_en} = '0;
    flt_wr_addr = '0; ifm_wr_addr = '0; ofm_rd_addr = '0;
    flt_wr_data = '0; ifm_wr_data = '0;
    // format selection from the layer's ranges
    wmax = 2.12; amax = 10.21;
    is_w = int'($floor(wmax)) + 1; if (is_w > N) is_w = N;
    is_a = int'($floor(amax)) + 1; if (is_a > N) is_a = N;
    sc = 0;
    if (wmax < 0.5) sc = int'($floor($ln(wmax) / $ln(2.0))) + 1;
    // quantized random data: value * 2^18 handed to the nearest-word search
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++)
        for (int c = 0; c < CI; c++)
          img[i][j][c] = 8'(ref_encode(N, is_a, (longint'($urandom_range(0, 1021)) <<< 18) / 100, 18));
    for (int f = 0; f < F; f++)
      for (int k = 0; k < K; k++)
        wgt[f][k] = 8'(ref_encode(N, is_w, (longint'($urandom_range(0, 329)) - 212) * (longint'(1) <<< 18) / 100, 18));
    repeat (3) @(posedge clk);
    rst_n = 1;
    // filter buffer: word k = term k of all 16 filters
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      flt_wr_en = 1; flt_wr_addr = AW'(k);
      for (int f = 0; f < F; f++) flt_wr_data[f] = wgt[f][k];
    end
    @(negedge clk); flt_wr_en = 0;
    // ifmap buffer: tile t, word k holds term k of pixels 16t .. 16t+15
    for (int t = 0; t < TILES; t++)
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        ifm_wr_en = 1; ifm_wr_addr = AW'(t * K + k);
        for (int r = 0; r < R; r++) begin
          p = t * R + r;
          ifm_wr_data[r] = patch(p / W, p % W, k);
        end
      end
    @(negedge clk); ifm_wr_en = 0;
    wr(REG_FORMAT, {16'd0, 1'b1, 3'(sc), 4'(is_a - 1), 4'(is_a - 1), 4'(is_w - 1)});
    wr(REG_K_LEN, K); wr(REG_N_TILES, TILES);
    wr(REG_IFM_BASE, 0); wr(REG_FLT_BASE, 0); wr(REG_OFM_BASE, 0); wr(REG_FLT_STEP, 0);
    wr(REG_CTRL, 1);
    @(posedge done_irq);
    @(negedge clk);
    reg_addr = REG_CYCLES; #1;
    checks++;
    if (reg_rdata != TILES * (K + 2 * R + C)) begin
      failures++;
      $display("cycles %0d, want %0d", reg_rdata, TILES * (K + 2 * R + C));
    end
    for (p = 0; p < H * W; p++) begin
      @(negedge clk);
      ofm_rd_en = 1; ofm_rd_addr = AW'(p);
      @(negedge clk);
      ofm_rd_en = 0;
      y = p / W; x = p % W;
      for (int f = 0; f < F; f++) begin
        sum = 0;
        for (int k = 0; k < K; k++)
          sum += ref_scaled_product(N, is_a, is_w, sc, 16'(patch(y, x, k)), 16'(wgt[f][k]));
        want = ref_result(N, is_a, sum, 1'b1);
        checks++;
        if (ofm_rd_data[f] != want[N-1:0]) begin
          failures++;
          if (failures < 10) $display("pixel (%0d,%0d) filter %0d got %b want %b", y, x, f, ofm_rd_data[f], want[N-1:0]);
        end
      end
    end
    $display("layer: IS_w=%0d IS_a=%0d SC=%0d, %0d outputs", is_w, is_a, sc, H * W * F);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
