// tb_online_multiplier: random products checked digit by digit in value.
//
// Each trial clears the multiplier, feeds 8 random signed digits of x (then
// zeros) against a random 8-bit weight, and rebuilds the product from the
// output digits z_1..z_16 taken in the cycles 3..18 after the clear (online
// delay 2). The value must equal x * Y exactly: in units of 2^-16 that is
// 2 * X * Ycode, where X is x in units of 2^-8 and Ycode the weight code.
// The two initial cycles and the cycles after digit 16 must give zero.
// Some trials insert cycles with en low, which must not advance anything.
module tb_online_multiplier;
  import dslot_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [7:0] y;
  sd_t x, z;
  int checks = 0, failures = 0;

  online_multiplier dut (.clk, .rst_n, .clr, .en, .y, .x, .z);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sd_t rnd_digit();
    int r = $urandom_range(2);
    return (r == 0) ? '{p:1'b1, n:1'b0} : (r == 1) ? '{p:1'b0, n:1'b1} : SD_ZERO;
  endfunction

  initial begin
    sd_t xd [1:8];
    longint X, Z, expv;
    int j, zeros_ok;
    x = SD_ZERO; y = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      // weight: include the extremes
      y = (t == 0) ? 8'h80 : (t == 1) ? 8'h7f : 8'($urandom);
      X = 0;
      for (int i = 1; i <= 8; i++) begin
        xd[i] = (t < 2) ? '{p: (t == 1), n: (t == 0)} : rnd_digit();
        X = X * 2 + sd_value(xd[i]);
      end
      @(negedge clk); clr = 1; en = 0;
      @(negedge clk); clr = 0;
      Z = 0; zeros_ok = 1; j = 1;
      while (j <= 20) begin
        if ((t % 3 == 0) && ($urandom_range(3) == 0)) begin
          en = 0; x = rnd_digit();            // stalled: input ignored
          @(negedge clk);
          continue;
        end
        en = 1;
        x  = (j <= 8) ? xd[j] : SD_ZERO;
        #1;
        if (j >= 3 && j <= 18) Z = Z * 2 + sd_value(z);
        else if (z != SD_ZERO) zeros_ok = 0;
        @(negedge clk);
        j++;
      end
      en = 0;
      expv = 2 * X * longint'($signed(y));
      checks++;
      if (Z != expv) begin
        failures++;
        if (failures < 10) $display("trial %0d: y=%0d X=%0d got %0d exp %0d", t, $signed(y), X, Z, expv);
      end
      checks++;
      if (!zeros_ok) begin
        failures++;
        if (failures < 10) $display("trial %0d: non-zero digit outside cycles 3..18", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
