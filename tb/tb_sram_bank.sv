// tb_sram_bank: writes random words to random addresses of one bank and
// reads them back against a shadow array, checking the one-cycle read
// latency, that rd_data holds while rd_en is low, and read-during-write
// returning the old word.
module tb_sram_bank;
  localparam int W = 32, D = 6912;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [12:0] wr_addr = 0, rd_addr = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic [W-1:0] shadow [D];
  bit           known  [D];

  sram_bank #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] want, held;
    int a;
    for (int i = 0; i < D; i++) known[i] = 0;
    // fill every address
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 13'(i); wr_data = $urandom;
      shadow[i] = wr_data; known[i] = 1;
    end
    @(negedge clk); wr_en = 0;
    // random mixed traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      a = $urandom_range(0, D - 1);
      rd_en = 1; rd_addr = 13'(a); want = shadow[a];
      wr_en = $urandom_range(0, 1);
      wr_addr = ($urandom_range(0, 3) == 0) ? 13'(a) : 13'($urandom_range(0, D - 1));
      wr_data = $urandom;
      @(posedge clk); #1;
      if (wr_en) shadow[wr_addr] = wr_data;
      checks++;
      if (rd_data != want) begin
        failures++;
        if (failures < 10) $display("addr %0d got %h want %h", a, rd_data, want);
      end
      // hold
      @(negedge clk);
      rd_en = 0; wr_en = 0; rd_addr = 13'($urandom_range(0, D - 1));
      held = rd_data;
      @(posedge clk); #1;
      checks++;
      if (rd_data != held) begin failures++; $display("rd_data did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
