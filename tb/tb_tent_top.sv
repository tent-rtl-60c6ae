// tb_tent_top: end-to-end test of the accelerator at its default size
// (8-bit words, 16x16 PEs, three 108 kB buffers).
//
// For each operation the test fills the filter and ifmap buffers through
// their memory-side ports with random TFX words, programs a layer format
// and the tile layout through the host register port, starts, waits for
// the done interrupt, checks the cycle count (K + 48 per tile), reads
// the ofmap buffer back and compares all outputs with the reference
// model. The operations together must show every mechanism of the
// datapath at least once: weight scaling with positive and negative SC,
// IS = 1 (uniform, fixed-point-like) and IS = n (fully tapered) words,
// rounding of inexact sums, clipping of sums beyond the output range,
// ReLU, and several tiles per operation with a filter pointer that
// advances or stays.
module tb_tent_top;
  import tent_pkg::*;
  import tfx_ref_pkg::*;
  localparam int N = 8, R = 16, C = 16, AW = 13;

  int checks = 0, failures = 0;
  int n_sc_pos = 0, n_sc_neg = 0, n_is1 = 0, n_isn = 0, n_round = 0, n_clip = 0,
      n_relu = 0, n_multi = 0, n_flt_reuse = 0;

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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host-side copies of the buffer contents
  logic [C-1:0][N-1:0] flt_img [6912];
  logic [R-1:0][N-1:0] ifm_img [6912];

  task automatic wr(reg_addr_e a, logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic run_op(int is_w, int is_a, int is_o, int sc, bit relu, int k, int tiles,
                        int ib, int fb, int ob, int fs);
    logic [15:0] want, exact_clip;
    longint sum;
    int T;
    T = k + 2 * R + C;
    // memory side: fill the words this operation reads
    for (int i = 0; i < tiles * k; i++) begin
      @(negedge clk);
      ifm_wr_en = 1; ifm_wr_addr = AW'(ib + i);
      for (int r = 0; r < R; r++) ifm_wr_data[r] = 8'($urandom);
      ifm_img[ib + i] = ifm_wr_data;
    end
    @(negedge clk); ifm_wr_en = 0;
    for (int i = 0; i < (tiles - 1) * fs + k; i++) begin
      @(negedge clk);
      flt_wr_en = 1; flt_wr_addr = AW'(fb + i);
      for (int c = 0; c < C; c++) flt_wr_data[c] = 8'($urandom);
      flt_img[fb + i] = flt_wr_data;
    end
    @(negedge clk); flt_wr_en = 0;
    // host side: program and start
    wr(REG_FORMAT, {16'd0, relu, 3'(sc), 4'(is_o - 1), 4'(is_a - 1), 4'(is_w - 1)});
    wr(REG_K_LEN, k); wr(REG_N_TILES, tiles);
    wr(REG_IFM_BASE, ib); wr(REG_FLT_BASE, fb); wr(REG_OFM_BASE, ob); wr(REG_FLT_STEP, fs);
    wr(REG_CTRL, 1);
    @(posedge done_irq);
    @(negedge clk);
    reg_addr = REG_CYCLES; #1;
    checks++;
    if (reg_rdata != tiles * T) begin
      failures++;
      $display("cycles %0d, want %0d", reg_rdata, tiles * T);
    end
    // read back and compare
    for (int t = 0; t < tiles; t++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        ofm_rd_en = 1; ofm_rd_addr = AW'(ob + t * R + r);
        @(negedge clk);
        ofm_rd_en = 0;
        for (int c = 0; c < C; c++) begin
          sum = 0;
          for (int kk = 0; kk < k; kk++)
            sum += ref_scaled_product(N, is_a, is_w, sc, 16'(ifm_img[ib + t * k + kk][r]),
                                      16'(flt_img[fb + t * fs + kk][c]));
          want = ref_result(N, is_o, sum, relu);
          checks++;
          if (ofm_rd_data[c] != want[N-1:0]) begin
            failures++;
            if (failures < 10) $display("tile %0d out(%0d,%0d) got %b want %b", t, r, c, ofm_rd_data[c], want[N-1:0]);
          end
          // mechanisms
          exact_clip = ref_encode(N, is_o, sum, 18);
          if ((ref_decode(N, is_o, exact_clip) <<< 11) != sum) n_round++;
          if (relu && sum < 0) n_relu++;
          if (sum > (longint'(is_o) <<< 18) || sum < -(longint'(is_o) <<< 18)) n_clip++;
        end
      end
    if (sc > 0) n_sc_pos++;
    if (sc < 0) n_sc_neg++;
    if (is_w == 1 || is_a == 1 || is_o == 1) n_is1++;
    if (is_w == N || is_a == N || is_o == N) n_isn++;
    if (tiles > 1) n_multi++;
    if (tiles > 1 && fs == 0) n_flt_reuse++;
  endtask

  initial begin
    reg_we = 0; reg_addr = '0; reg_wdata = '0;
    {flt_wr_en, ifm_wr_en, ofm_rd_en} = '0;
    flt_wr_addr = '0; ifm_wr_addr = '0; ofm_rd_addr = '0;
    flt_wr_data = '0; ifm_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    //      IS_w IS_a IS_o SC relu  K  tiles ib    fb   ob    fs
    run_op(8,   8,   8,   0, 0,    9,  2,    0,    0,   0,    9);
    run_op(1,   1,   1,   -3, 0,   25, 1,    100,  50,  40,   0);
    run_op(2,   5,   4,   2, 1,    16, 3,    300,  200, 100,  0);
    run_op(3,   4,   8,   -1, 1,   36, 2,    6800, 6000, 6880, 18);
    run_op(8,   2,   1,   3, 0,    4,  1,    0,    0,   0,    0);
    checks++;
    if (n_sc_pos == 0 || n_sc_neg == 0 || n_is1 == 0 || n_isn == 0 || n_round == 0 || n_clip == 0 ||
        n_relu == 0 || n_multi == 0 || n_flt_reuse == 0) failures++;
    $display("mechanisms: sc+=%0d sc-=%0d IS=1:%0d IS=n:%0d rounded=%0d clipped=%0d relu=%0d multi-tile=%0d filter-reuse=%0d",
             n_sc_pos, n_sc_neg, n_is1, n_isn, n_round, n_clip, n_relu, n_multi, n_flt_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
