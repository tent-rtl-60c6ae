// tb_tfx_decoder: exhaustive check of the TFX decoder for n = 8 and n = 5,
// every word under every IS, against the bit-serial reference model.
// Also checks the worked example 0111_0111 = 3.875 in TFX(8,8,0).
module tb_tfx_decoder;
  import tfx_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0]         x8;
  logic [2:0]         is8;
  logic signed [10:0] y8;
  logic [4:0]         x5;
  logic [2:0]         is5;
  logic signed [7:0]  y5;

  tfx_decoder #(.N(8)) dut8 (.tfx_in(x8), .is_m1(is8), .fx_out(y8));
  tfx_decoder #(.N(5)) dut5 (.tfx_in(x5), .is_m1(is5), .fx_out(y5));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int is_v = 1; is_v <= 8; is_v++)
      for (int c = 0; c < 256; c++) begin
        x8 = 8'(c); is8 = 3'(is_v - 1);
        #1;
        checks++;
        if (longint'(y8) != ref_decode(8, is_v, 16'(c))) begin
          failures++;
          if (failures < 10) $display("n=8 IS=%0d word=%b got %0d want %0d", is_v, x8, y8, ref_decode(8, is_v, 16'(c)));
        end
      end
    for (int is_v = 1; is_v <= 5; is_v++)
      for (int c = 0; c < 32; c++) begin
        x5 = 5'(c); is5 = 3'(is_v - 1);
        #1;
        checks++;
        if (longint'(y5) != ref_decode(5, is_v, 16'(c))) begin
          failures++;
          if (failures < 10) $display("n=5 IS=%0d word=%b got %0d want %0d", is_v, x5, y5, ref_decode(5, is_v, 16'(c)));
        end
      end
    // 3.875 = 496 / 128
    x8 = 8'b0111_0111; is8 = 3'd7;
    #1;
    checks++;
    if (y8 != 11'sd496) begin failures++; $display("worked example: got %0d", y8); end
    // IS = 2 behaves as two's complement with two integer bits
    x8 = 8'b1000_0000; is8 = 3'd1;
    #1;
    checks++;
    if (y8 != -11'sd256) begin failures++; $display("IS=2 minimum: got %0d", y8); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
