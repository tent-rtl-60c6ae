// tb_tent_top_bits: the accelerator built for 5-, 6- and 7-bit words, the
// other precisions evaluated besides 8 bits. Three instances run side by
// side; each fills its buffers with random words, runs two operations of
// two tiles with random layer formats (IS from 1 to n, SC from -4 to 3,
// ReLU on and off) and compares every output with the reference model,
// plus the cycle count.
module tb_tent_top_bits;
  import tent_pkg::*;
  import tfx_ref_pkg::*;
  localparam int R = 16, C = 16;

  int checks [3];
  int failures [3];
  bit finished [3];
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  initial begin
    int tc, tf;
    tf = 0;
    for (int i = 0; i < 3; i++) begin checks[i] = 0; failures[i] = 0; finished[i] = 0; end
    fork
      begin
        repeat (400000) @(posedge clk);
        tf = 1;
        $display("watchdog expired");
      end
      wait (finished[0] && finished[1] && finished[2]);
    join_any
    tc = 0;
    for (int i = 0; i < 3; i++) begin tc += checks[i]; tf += failures[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  for (genvar gi = 0; gi < 3; gi++) begin : g_n
    localparam int NB = 5 + gi;
    localparam int DEPTH = 108 * 1024 * 8 / (16 * NB);
    localparam int AW = $clog2(DEPTH);
    logic reg_we;
    logic [3:0] reg_addr;
    logic [31:0] reg_wdata, reg_rdata;
    logic done_irq, busy;
    logic flt_wr_en, ifm_wr_en, ofm_rd_en;
    logic [AW-1:0] flt_wr_addr, ifm_wr_addr, ofm_rd_addr;
    logic [C-1:0][NB-1:0] flt_wr_data, ofm_rd_data;
    logic [R-1:0][NB-1:0] ifm_wr_data;
    logic [C-1:0][NB-1:0] flt_img [64];
    logic [R-1:0][NB-1:0] ifm_img [64];

    tent_top #(.N(NB)) dut (.*);

    task automatic wr(reg_addr_e a, logic [31:0] d);
      @(negedge clk);
      reg_we = 1; reg_addr = a; reg_wdata = d;
      @(negedge clk);
      reg_we = 0;
    endtask

    initial begin
      int is_w, is_a, is_o, sc, k, tiles;
      bit relu;
      longint sum;
      logic [15:0] want;
      reg_we = 0; reg_addr = '0; reg_wdata = '0;
      {flt_wr_en, ifm_wr_en, ofm_rd_en} = '0;
      flt_wr_addr = '0; ifm_wr_addr = '0; ofm_rd_addr = '0;
      flt_wr_data = '0; ifm_wr_data = '0;
      @(posedge rst_n);
      for (int op = 0; op < 2; op++) begin
        is_w = $urandom_range(1, NB); is_a = $urandom_range(1, NB); is_o = $urandom_range(1, NB);
        sc = $urandom_range(0, 7) - 4; relu = op[0];
        k = 20; tiles = 2;
        for (int i = 0; i < tiles * k; i++) begin
          @(negedge clk);
          ifm_wr_en = 1; ifm_wr_addr = AW'(i);
          for (int r = 0; r < R; r++) ifm_wr_data[r] = NB'($urandom);
          ifm_img[i] = ifm_wr_data;
          flt_wr_en = 1; flt_wr_addr = AW'(i);
          for (int c = 0; c < C; c++) flt_wr_data[c] = NB'($urandom);
          flt_img[i] = flt_wr_data;
        end
        @(negedge clk); ifm_wr_en = 0; flt_wr_en = 0;
        wr(REG_FORMAT, {16'd0, relu, 3'(sc), 4'(is_o - 1), 4'(is_a - 1), 4'(is_w - 1)});
        wr(REG_K_LEN, k); wr(REG_N_TILES, tiles);
        wr(REG_IFM_BASE, 0); wr(REG_FLT_BASE, 0); wr(REG_OFM_BASE, 100); wr(REG_FLT_STEP, k);
        wr(REG_CTRL, 1);
        @(posedge done_irq);
        @(negedge clk);
        reg_addr = REG_CYCLES; #1;
        checks[gi]++;
        if (reg_rdata != tiles * (k + 2 * R + C)) failures[gi]++;
        for (int t = 0; t < tiles; t++)
          for (int r = 0; r < R; r++) begin
            @(negedge clk);
            ofm_rd_en = 1; ofm_rd_addr = AW'(100 + t * R + r);
            @(negedge clk);
            ofm_rd_en = 0;
            for (int c = 0; c < C; c++) begin
              sum = 0;
              for (int kk = 0; kk < k; kk++)
                sum += ref_scaled_product(NB, is_a, is_w, sc, 16'(ifm_img[t * k + kk][r]), 16'(flt_img[t * k + kk][c]));
              want = ref_result(NB, is_o, sum, relu);
              checks[gi]++;
              if (ofm_rd_data[c] != want[NB-1:0]) begin
                failures[gi]++;
                if (failures[gi] < 5) $display("n=%0d tile %0d out(%0d,%0d) got %b want %b", NB, t, r, c, ofm_rd_data[c], want[NB-1:0]);
              end
            end
          end
      end
      finished[gi] = 1;
    end
  end
endmodule
