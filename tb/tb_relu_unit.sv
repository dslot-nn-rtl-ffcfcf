// tb_relu_unit: early negative detection on random digit streams.
//
// Random 21-digit streams (many starting with zero digits) are fed with dv.
// neg must rise in exactly the cycle of the first digit after which the
// prefix value is negative (independently computed), stay high, and the
// final value must be max(0, stream value); streams cut short (fewer digits,
// as with reduced precision) must give the prefix value scaled to 21
// fraction bits. Cycles with dv low must be ignored.
module tb_relu_unit;
  import dslot_pkg::*;
  localparam int P = 21;
  logic clk = 0, rst_n = 0, clr = 0, dv = 0;
  sd_t z;
  logic neg;
  logic [P:0] value;
  int checks = 0, failures = 0;

  relu_unit dut (.clk, .rst_n, .clr, .dv, .z, .neg, .value);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sd_t d [1:P];
    longint pre, expv;
    int ndig, nz, first_neg, neg_seen, bad_neg, j;
    z = SD_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      ndig = (t % 4 == 0) ? 1 + $urandom_range(P - 1) : P;
      nz   = $urandom_range(8);
      for (int i = 1; i <= P; i++) begin
        int r;
        r = $urandom_range(2);
        d[i] = (i <= nz) ? SD_ZERO : (r == 0) ? '{p:1'b1, n:1'b0} :
               (r == 1) ? '{p:1'b0, n:1'b1} : SD_ZERO;
      end
      @(negedge clk); clr = 1; dv = 0;
      @(negedge clk); clr = 0;
      pre = 0; first_neg = 0; neg_seen = 0; bad_neg = 0; j = 1;
      while (j <= ndig) begin
        if ($urandom_range(4) == 0) begin
          dv = 0; z = '{p:1'b0, n:1'b1};
          #1; if (neg != (first_neg != 0)) bad_neg = 1;
          @(negedge clk);
          continue;
        end
        dv = 1; z = d[j];
        pre = pre * 2 + sd_value(d[j]);
        if (pre < 0 && first_neg == 0) first_neg = j;
        #1;
        if (neg != (first_neg != 0)) bad_neg = 1;
        @(negedge clk);
        j++;
      end
      dv = 0;
      #1;
      expv = (first_neg != 0) ? 0 : pre <<< (P - ndig);
      checks++;
      if (bad_neg || neg != (first_neg != 0)) begin
        failures++;
        if (failures < 10) $display("trial %0d: neg timing wrong (first negative prefix at digit %0d)", t, first_neg);
      end
      checks++;
      if (longint'(value) != expv) begin
        failures++;
        if (failures < 10) $display("trial %0d: value %0d exp %0d", t, value, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
