// tb_tfx_encoder: the TFX encoder against a nearest-word search.
// n = 8, every IS: an exhaustive sweep of the in-range fixed-point inputs
// with all four round/sticky combinations, then random inputs over the
// whole input range (clipping). Also re-encodes every decoded word, which
// must give the word back.
module tb_tfx_encoder;
  import tfx_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_clip = 0, n_round_up = 0;

  logic signed [10:0] fx;
  logic [1:0]         lo;
  logic [2:0]         is_m1;
  logic [7:0]         y;
  logic signed [10:0] dec_y;

  tfx_encoder #(.N(8)) dut (.fx_in(fx), .lo_in(lo), .is_m1(is_m1), .tfx_out(y));
  tfx_decoder #(.N(8)) dec (.tfx_in(y), .is_m1(is_m1), .fx_out(dec_y));

  task automatic check(int is_v);
    logic [15:0] want;
    longint num;
    #1;
    num  = (longint'(fx) <<< 3) + (longint'(lo[1]) <<< 2) + longint'(lo[0]);
    want = ref_encode(8, is_v, num, 10);
    checks++;
    if (y != want[7:0]) begin
      failures++;
      if (failures < 10) $display("IS=%0d fx=%0d lo=%b got %b want %b", is_v, fx, lo, y, want[7:0]);
    end
    if (fx > 11'sd896 || fx < -11'sd1024) n_clip++;
    if (longint'(dec_y) > longint'(fx)) n_round_up++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int is_v = 1; is_v <= 8; is_v++) begin
      is_m1 = 3'(is_v - 1);
      // every word re-encodes to itself
      for (int c = 0; c < 256; c++) begin
        fx = 11'(ref_decode(8, is_v, 16'(c)));
        lo = 2'b00;
        #1;
        checks++;
        if (y != 8'(c)) begin
          failures++;
          if (failures < 10) $display("IS=%0d round trip of %b gave %b", is_v, 8'(c), y);
        end
      end
      // sweep a window around the format's range
      for (int v = -(is_v << 7) - 8; v <= (is_v << 7) + 8; v++)
        for (int l = 0; l < 4; l++) begin
          fx = 11'(v); lo = 2'(l);
          check(is_v);
        end
      // random over the whole input range
      repeat (300) begin
        fx = 11'($urandom); lo = 2'($urandom);
        check(is_v);
      end
    end
    checks++;
    if (n_clip == 0 || n_round_up == 0) begin
      failures++;
      $display("coverage: clip=%0d round_up=%0d", n_clip, n_round_up);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
