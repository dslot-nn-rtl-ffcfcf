// tb_online_adder: random 16-digit sums checked in value and timing.
//
// Two random signed-digit streams of 16 digits (then zeros) are added. The
// output digit i of (x+y)/2 must appear in cycle i+2 after the clear, so
// cycles 3..19 carry 17 digits whose value, in units of 2^-17, must equal
// X + Y with X, Y in units of 2^-16. Cycles 1, 2 and 20..22 must give zero.
// Random stall cycles (en low) must not disturb the result.
module tb_online_adder;
  import dslot_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  sd_t x, y, z;
  int checks = 0, failures = 0;

  online_adder dut (.clk, .rst_n, .clr, .en, .x, .y, .z);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sd_t rnd_digit();
    int r = $urandom_range(3);
    return (r == 0) ? '{p:1'b1, n:1'b0} : (r == 1) ? '{p:1'b0, n:1'b1} :
           (r == 2) ? '{p:1'b1, n:1'b1} : SD_ZERO;
  endfunction

  initial begin
    sd_t xd [1:16], yd [1:16];
    longint X, Y, Z;
    int zeros_ok, j;
    x = SD_ZERO; y = SD_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      X = 0; Y = 0;
      for (int i = 1; i <= 16; i++) begin
        xd[i] = (t == 0) ? '{p:1'b1, n:1'b0} : (t == 1) ? '{p:1'b0, n:1'b1} : rnd_digit();
        yd[i] = (t < 2) ? xd[i] : rnd_digit();
        X = X * 2 + sd_value(xd[i]);
        Y = Y * 2 + sd_value(yd[i]);
      end
      @(negedge clk); clr = 1; en = 0;
      @(negedge clk); clr = 0;
      Z = 0; zeros_ok = 1; j = 1;
      while (j <= 22) begin
        if ((t % 2 == 0) && ($urandom_range(3) == 0)) begin
          en = 0; x = rnd_digit(); y = rnd_digit();
          @(negedge clk);
          continue;
        end
        en = 1;
        x = (j <= 16) ? xd[j] : SD_ZERO;
        y = (j <= 16) ? yd[j] : SD_ZERO;
        #1;
        if (j >= 3 && j <= 19) Z = Z * 2 + sd_value(z);
        else if (sd_value(z) != 0) zeros_ok = 0;
        @(negedge clk);
        j++;
      end
      en = 0;
      checks++;
      if (Z != X + Y) begin
        failures++;
        if (failures < 10) $display("trial %0d: X=%0d Y=%0d got %0d", t, X, Y, Z);
      end
      checks++;
      if (!zeros_ok) begin
        failures++;
        if (failures < 10) $display("trial %0d: digit outside cycles 3..19", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
