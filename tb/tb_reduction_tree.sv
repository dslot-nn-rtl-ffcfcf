// tb_reduction_tree: 25 random 16-digit streams summed by the online tree.
//
// With 25 leaves the tree has 5 levels, so digit i of sum/32 must appear in
// cycle 10 + i after the clear: cycles 11..31 carry 21 digits whose value in
// units of 2^-21 must equal the sum of the leaves in units of 2^-16. Earlier
// cycles and cycles 32..34 must give zero.
module tb_reduction_tree;
  import dslot_pkg::*;
  localparam int N = 25;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  sd_t d [N];
  sd_t z;
  int checks = 0, failures = 0;

  reduction_tree dut (.clk, .rst_n, .clr, .en, .d, .z);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sd_t rnd_digit(int bias);
    int r = $urandom_range(2);
    if (bias != 0) return (bias > 0) ? '{p:1'b1, n:1'b0} : '{p:1'b0, n:1'b1};
    return (r == 0) ? '{p:1'b1, n:1'b0} : (r == 1) ? '{p:1'b0, n:1'b1} : SD_ZERO;
  endfunction

  initial begin
    sd_t dd [N][1:16];
    longint S, Z;
    int zeros_ok, bias;
    foreach (d[i]) d[i] = SD_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      bias = (t == 0) ? 1 : (t == 1) ? -1 : 0;
      S = 0;
      for (int k = 0; k < N; k++) begin
        longint v;
        v = 0;
        for (int i = 1; i <= 16; i++) begin
          dd[k][i] = rnd_digit(bias);
          v = v * 2 + sd_value(dd[k][i]);
        end
        S += v;
      end
      @(negedge clk); clr = 1; en = 0;
      @(negedge clk); clr = 0; en = 1;
      Z = 0; zeros_ok = 1;
      for (int j = 1; j <= 34; j++) begin
        for (int k = 0; k < N; k++) d[k] = (j <= 16) ? dd[k][j] : SD_ZERO;
        #1;
        if (j >= 11 && j <= 31) Z = Z * 2 + sd_value(z);
        else if (sd_value(z) != 0) zeros_ok = 0;
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (Z != S) begin
        failures++;
        if (failures < 10) $display("trial %0d: sum %0d got %0d", t, S, Z);
      end
      checks++;
      if (!zeros_ok) begin
        failures++;
        if (failures < 10) $display("trial %0d: digit outside cycles 11..31", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
