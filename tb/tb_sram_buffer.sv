// tb_sram_buffer: a full-size buffer (108 kB, 16 lanes of 8 bits, four
// banks) checked for its depth (6912 words), for every lane of every
// bank reaching the right bits, and for random traffic against a shadow
// copy, including the first and last addresses.
module tb_sram_buffer;
  localparam int N = 8, L = 16;
  localparam int D = 108 * 1024 * 8 / (L * N);
  int checks = 0, failures = 0;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [12:0] wr_addr = 0, rd_addr = 0;
  logic [L-1:0][N-1:0] wr_data = '0, rd_data;
  logic [L*N-1:0] shadow [D];

  sram_buffer #(.N(N), .LANES(L), .BANKS(4), .KBYTES(108)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    checks++;
    if (dut.DEPTH != 6912 || D != 6912) begin failures++; $display("depth %0d", dut.DEPTH); end
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 13'(i);
      for (int l = 0; l < L; l++) wr_data[l] = 8'($urandom);
      shadow[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      a = (i == 0) ? 0 : (i == 1) ? D - 1 : $urandom_range(0, D - 1);
      rd_en = 1; rd_addr = 13'(a);
      @(posedge clk); #1;
      rd_en = 0;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (rd_data[l] != shadow[a][l*N +: N]) begin
          failures++;
          if (failures < 10) $display("addr %0d lane %0d got %h want %h", a, l, rd_data[l], shadow[a][l*N +: N]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
