// tb_control_unit: the sequencer at its default 16x16 size. Programs the
// registers (read back), starts multi-tile operations and checks, cycle by
// cycle, every buffer read address, the valid and first flags, the
// capture and shift strobes and every ofmap write address against the
// schedule K + 2*ROWS + COLS cycles per tile worked out from the
// specification; then checks done, the interrupt pulse and the cycle
// counter, and that a start while busy is ignored.
module tb_control_unit;
  import tent_pkg::*;
  localparam int R = 16, C = 16, AW = 13;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a real falling edge for the asynchronous reset
  logic reg_we;
  logic [3:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic done_irq, busy;
  tfx_fmt_t fmt;
  logic ifm_rd_en, flt_rd_en, act_vld, act_first, cap, shift, ofm_wr_en;
  logic [AW-1:0] ifm_rd_addr, flt_rd_addr, ofm_wr_addr;

  control_unit #(.ROWS(R), .COLS(C), .AW(AW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(reg_addr_e a, logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic chk(bit cond, string what, int g);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("cycle %0d: %s", g, what);
    end
  endtask

  task automatic run(int k, int tiles, int ib, int fb, int ob, int fs);
    int T, tile, o, d;
    T = k + 2 * R + C;
    wr(REG_K_LEN, k); wr(REG_N_TILES, tiles);
    wr(REG_IFM_BASE, ib); wr(REG_FLT_BASE, fb); wr(REG_OFM_BASE, ob); wr(REG_FLT_STEP, fs);
    reg_addr = REG_K_LEN; #1; chk(reg_rdata == k, "K_LEN readback", 0);
    reg_addr = REG_FLT_STEP; #1; chk(reg_rdata == fs, "FLT_STEP readback", 0);
    @(negedge clk);
    reg_we = 1; reg_addr = REG_CTRL; reg_wdata = 1;
    for (int g = 0; g < tiles * T; g++) begin
      @(negedge clk);
      reg_we = (g == 5);   // a second start while busy must be ignored
      reg_addr = (g == 5) ? REG_CTRL : REG_STATUS;
      tile = g / T; o = g % T;
      chk(busy, "busy", g);
      chk(ifm_rd_en == (o < k) && flt_rd_en == (o < k), "read enable", g);
      if (o < k) begin
        chk(ifm_rd_addr == AW'(ib + tile * k + o), "ifmap address", g);
        chk(flt_rd_addr == AW'(fb + tile * fs + o), "filter address", g);
      end
      chk(act_vld == (o >= 1 && o <= k), "act_vld", g);
      chk(act_first == (o == 1), "act_first", g);
      chk(cap == (o == k + R + C - 1), "cap", g);
      d = o - (k + R + C);
      chk(shift == (d >= 0) && ofm_wr_en == (d >= 0), "shift/ofmap write", g);
      if (d >= 0) chk(ofm_wr_addr == AW'(ob + tile * R + R - 1 - d), "ofmap address", g);
      chk(!done_irq, "early done", g);
    end
    reg_we = 0;
    @(negedge clk);
    chk(!busy && done_irq, "end of operation", -1);
    reg_addr = REG_STATUS; #1;
    chk(reg_rdata[1:0] == 2'b10, "status done", -1);
    reg_addr = REG_CYCLES; #1;
    chk(reg_rdata == tiles * T, $sformatf("cycle count %0d, want %0d", reg_rdata, tiles * T), -1);
    @(negedge clk);
    chk(!done_irq, "done_irq is one pulse", -1);
  endtask

  initial begin
    reg_we = 0; reg_addr = '0; reg_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(REG_FORMAT, 32'h1a37);
    reg_addr = REG_FORMAT; #1;
    chk(reg_rdata == 32'h1a37, "FORMAT readback", 0);
    chk(fmt.is_w_m1 == 4'h7 && fmt.is_a_m1 == 4'h3 && fmt.is_o_m1 == 4'ha && fmt.sc == 3'sd1 && fmt.relu_en == 1'b0,
        "format fields", 0);
    run(1, 1, 0, 0, 0, 0);
    run(9, 3, 100, 7, 200, 9);
    run(27, 2, 6900 - 54, 30, 6912 - 32, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
