// tent_top: tapered fixed-point DNN accelerator.
//
// A control unit, three 108 kB four-bank scratchpads (filter, ifmap,
// ofmap) and a 16x16 array of tapered fixed-point PEs. The host
// processor configures the control unit through a register port; an
// external memory interface fills the filter and ifmap buffers and
// empties the ofmap buffer through their memory-side ports, which are
// ports of this module. Once started, the control unit streams one
// filter word (16 weights) and one ifmap word (16 activations) per cycle
// into the array and writes 16 encoded outputs per cycle back into the
// ofmap buffer (see control_unit for the sequence and its timing).
//
// The block diagram, the sizes and the 16 x N-bit paths between buffers
// and array follow the design; the host register port and the plain
// word-wide buffer ports stand in for the host and memory interfaces,
// which the design only names.
module tent_top
  import tent_pkg::*;
#(
  parameter int unsigned N      = N_BITS,
  parameter int unsigned ROWS   = ARRAY_ROWS,
  parameter int unsigned COLS   = ARRAY_COLS,
  parameter int unsigned KBYTES = SRAM_KBYTES,
  parameter int unsigned BANKS  = SRAM_BANKS,
  parameter int unsigned GUARD  = ACC_GUARD,
  parameter int unsigned F_DEPTH = KBYTES * 1024 * 8 / (COLS * N),
  parameter int unsigned I_DEPTH = KBYTES * 1024 * 8 / (ROWS * N),
  parameter int unsigned AW     = $clog2(F_DEPTH > I_DEPTH ? F_DEPTH : I_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host register port
  input  logic                   reg_we,
  input  logic [3:0]             reg_addr,
  input  logic [31:0]            reg_wdata,
  output logic [31:0]            reg_rdata,
  output logic                   done_irq,
  output logic                   busy,
  // memory side of the filter buffer
  input  logic                   flt_wr_en,
  input  logic [AW-1:0]          flt_wr_addr,
  input  logic [COLS-1:0][N-1:0] flt_wr_data,
  // memory side of the ifmap buffer
  input  logic                   ifm_wr_en,
  input  logic [AW-1:0]          ifm_wr_addr,
  input  logic [ROWS-1:0][N-1:0] ifm_wr_data,
  // memory side of the ofmap buffer
  input  logic                   ofm_rd_en,
  input  logic [AW-1:0]          ofm_rd_addr,
  output logic [COLS-1:0][N-1:0] ofm_rd_data
);
  localparam int unsigned LOGN = $clog2(N);

  tfx_fmt_t               fmt;
  logic                   ifm_rd_en, flt_rd_en, ofm_wr_en;
  logic [AW-1:0]          ifm_rd_addr, flt_rd_addr, ofm_wr_addr;
  logic                   act_vld, act_first, cap, shift;
  logic [ROWS-1:0][N-1:0] act_word;
  logic [COLS-1:0][N-1:0] wgt_word, out_word;

  control_unit #(.ROWS(ROWS), .COLS(COLS), .AW(AW)) u_ctrl (
    .clk, .rst_n,
    .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .done_irq,
    .fmt,
    .ifm_rd_en, .ifm_rd_addr, .flt_rd_en, .flt_rd_addr,
    .act_vld, .act_first, .cap, .shift,
    .ofm_wr_en, .ofm_wr_addr, .busy
  );

  sram_buffer #(.N(N), .LANES(COLS), .BANKS(BANKS), .KBYTES(KBYTES), .AW(AW)) u_filter_sram (
    .clk,
    .wr_en (flt_wr_en), .wr_addr (flt_wr_addr), .wr_data (flt_wr_data),
    .rd_en (flt_rd_en), .rd_addr (flt_rd_addr), .rd_data (wgt_word)
  );

  sram_buffer #(.N(N), .LANES(ROWS), .BANKS(BANKS), .KBYTES(KBYTES), .AW(AW)) u_ifmap_sram (
    .clk,
    .wr_en (ifm_wr_en), .wr_addr (ifm_wr_addr), .wr_data (ifm_wr_data),
    .rd_en (ifm_rd_en), .rd_addr (ifm_rd_addr), .rd_data (act_word)
  );

  sram_buffer #(.N(N), .LANES(COLS), .BANKS(BANKS), .KBYTES(KBYTES), .AW(AW)) u_ofmap_sram (
    .clk,
    .wr_en (ofm_wr_en), .wr_addr (ofm_wr_addr), .wr_data (out_word),
    .rd_en (ofm_rd_en), .rd_addr (ofm_rd_addr), .rd_data (ofm_rd_data)
  );

  pe_array #(.N(N), .ROWS(ROWS), .COLS(COLS), .GUARD(GUARD)) u_array (
    .clk, .rst_n,
    .is_w_m1 (fmt.is_w_m1[LOGN-1:0]),
    .is_a_m1 (fmt.is_a_m1[LOGN-1:0]),
    .is_o_m1 (fmt.is_o_m1[LOGN-1:0]),
    .sc      (fmt.sc),
    .relu_en (fmt.relu_en),
    .act_word, .act_vld, .act_first,
    .wgt_word,
    .cap, .shift,
    .out_word
  );
endmodule
