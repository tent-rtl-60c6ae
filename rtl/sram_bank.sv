// sram_bank: one bank of a scratchpad buffer, a one-write one-read
// synchronous memory array.
//
// A write with wr_en stores wr_data at wr_addr on the clock edge. A read
// with rd_en returns the word at rd_addr on rd_data one cycle later;
// rd_data holds its value while rd_en is low. A read and a write of the
// same address in one cycle return the old word. The design only names
// its SRAM banks; the port arrangement and the one-cycle read latency are
// this design's choices, written as an array a synthesis tool maps to a
// memory macro.
module sram_bank #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 6912,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  assert property (@(posedge clk) wr_en |-> int'(wr_addr) < DEPTH)
    else $error("sram_bank: write address %0d out of range", wr_addr);
  assert property (@(posedge clk) rd_en |-> int'(rd_addr) < DEPTH)
    else $error("sram_bank: read address %0d out of range", rd_addr);
endmodule
