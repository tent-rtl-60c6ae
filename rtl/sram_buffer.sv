// sram_buffer: one global-buffer scratchpad (filter, ifmap or ofmap),
// 108 kB in four banks.
//
// A buffer word is LANES tapered fixed-point values of N bits, one per
// row or column of the PE array, so one access moves the 16 x N bits the
// array edge consumes or produces per cycle. The word is split across
// the four banks, each holding LANES/4 lanes at the same address; all
// banks are accessed together. The depth follows from the size:
// KBYTES*1024*8 / (LANES*N) words (6912 for 108 kB and 16 lanes of 8 bits).
//
// Ports: a write port and a read port, each a full word per cycle; reads
// return data one cycle after rd_en (see sram_bank). In this design the
// filter and ifmap buffers are written from the memory side and read by
// the array, the ofmap buffer the other way round. The size and the four
// banks follow the design; the lane-to-bank split and the ports are this
// design's choices.
module sram_buffer #(
  parameter int unsigned N      = tent_pkg::N_BITS,
  parameter int unsigned LANES  = tent_pkg::ARRAY_COLS,
  parameter int unsigned BANKS  = tent_pkg::SRAM_BANKS,
  parameter int unsigned KBYTES = tent_pkg::SRAM_KBYTES,
  parameter int unsigned DEPTH  = KBYTES * 1024 * 8 / (LANES * N),
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic [LANES-1:0][N-1:0] wr_data,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic [LANES-1:0][N-1:0] rd_data
);
  localparam int unsigned BL = LANES / BANKS;   // lanes per bank

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    sram_bank #(.WIDTH(BL * N), .DEPTH(DEPTH), .AW(AW)) u_bank (
      .clk     (clk),
      .wr_en   (wr_en),
      .wr_addr (wr_addr),
      .wr_data (wr_data[b*BL +: BL]),
      .rd_en   (rd_en),
      .rd_addr (rd_addr),
      .rd_data (rd_data[b*BL +: BL])
    );
  end

  if (LANES % BANKS != 0) begin : g_bad_split
    $error("sram_buffer: LANES must be a multiple of BANKS");
  end
endmodule
