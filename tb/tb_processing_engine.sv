// tb_processing_engine: 5 x 5 windows of random 8-bit pixels and weights.
//
// Pixels are fed as the signed-digit form of their two's complement code
// (digit 1 = -sign bit, digits 2..8 = the other bits, value code/256).
// Result digit i (of SOP/32) must appear in cycle 12 + i after the clear:
// the 21 digits of cycles 13..33 (Num_Cycles = 33) must be worth
// 2 * sum(pixel_code * weight_code) in units of 2^-21. Earlier cycles give 0.
module tb_processing_engine;
  import dslot_pkg::*;
  localparam int KK = 25;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [7:0] w [KK];
  sd_t x [KK];
  sd_t z;
  int checks = 0, failures = 0;

  processing_engine dut (.clk, .rst_n, .clr, .en, .w, .x, .z);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sd_t code_digit(logic [7:0] c, int j);
    if (j == 1) return '{p: 1'b0, n: c[7]};
    if (j <= 8) return '{p: c[8-j], n: 1'b0};
    return SD_ZERO;
  endfunction

  initial begin
    logic [7:0] px [KK];
    longint S, Z;
    int zeros_ok;
    foreach (x[i]) x[i] = SD_ZERO;
    foreach (w[i]) w[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      S = 0;
      for (int k = 0; k < KK; k++) begin
        px[k] = (t == 0) ? 8'h80 : (t == 1) ? 8'h7f : 8'($urandom);
        w[k]  = (t == 0) ? 8'h80 : (t == 1) ? 8'h80 : 8'($urandom);
        S += 2 * longint'($signed(px[k])) * longint'($signed(w[k]));
      end
      @(negedge clk); clr = 1; en = 0;
      @(negedge clk); clr = 0; en = 1;
      Z = 0; zeros_ok = 1;
      for (int j = 1; j <= 35; j++) begin
        for (int k = 0; k < KK; k++) x[k] = code_digit(px[k], j);
        #1;
        if (j >= 13 && j <= 33) Z = Z * 2 + sd_value(z);
        else if (sd_value(z) != 0) zeros_ok = 0;
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (Z != S) begin
        failures++;
        if (failures < 10) $display("trial %0d: exp %0d got %0d", t, S, Z);
      end
      checks++;
      if (!zeros_ok) begin
        failures++;
        if (failures < 10) $display("trial %0d: digit outside cycles 13..33", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
