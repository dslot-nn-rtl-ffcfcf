// tb_processing_block: a block with two input maps (two PEs and an online
// adder between them) and its ReLU unit.
//
// With N_IN = 2 and K = 5 the result is SOP/64 with 22 digits, first digit
// LAT = 2 + 2*(5+1) = 14 cycles after the first pixel digit. dv is raised for
// cycles 15..36. Checked: value = max(0, 2 * sum(pixel_code * weight_code))
// (units of 2^-22 for SOP/64, i.e. SOP in units of 2^-16), and neg equals the
// sign of the sum once all digits are in. When neg rises the enable is
// dropped from the next cycle on, as the control unit does; value must stay 0.
module tb_processing_block;
  import dslot_pkg::*;
  localparam int N = 2, KK = 25;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, dv = 0;
  logic [7:0] w [N][KK];
  sd_t x [N][KK];
  logic neg;
  logic [22:0] value;
  int checks = 0, failures = 0;

  processing_block #(.N_IN(N)) dut (.clk, .rst_n, .clr, .en, .dv, .w, .x, .neg, .value);

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
    logic [7:0] px [N][KK];
    longint S;
    int nneg = 0, npos = 0;
    bit stopped;
    foreach (x[c, i]) x[c][i] = SD_ZERO;
    foreach (w[c, i]) w[c][i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      S = 0;
      for (int c = 0; c < N; c++)
        for (int k = 0; k < KK; k++) begin
          px[c][k] = 8'($urandom_range(127));
          w[c][k]  = 8'($urandom);
          S += 2 * longint'($signed(px[c][k])) * longint'($signed(w[c][k]));
        end
      @(negedge clk); clr = 1; en = 0;
      @(negedge clk); clr = 0;
      stopped = 0;
      for (int j = 1; j <= 36; j++) begin
        en = !stopped;
        for (int c = 0; c < N; c++)
          for (int k = 0; k < KK; k++) x[c][k] = code_digit(px[c][k], j);
        dv = (j >= 15);
        #1;
        if (neg) stopped = 1;
        @(negedge clk);
      end
      dv = 0; en = 0;
      #1;
      checks++;
      if (neg != (S < 0)) begin
        failures++;
        if (failures < 10) $display("trial %0d: neg=%0d sum=%0d", t, neg, S);
      end
      checks++;
      if (longint'(value) != ((S < 0) ? 0 : S)) begin
        failures++;
        if (failures < 10) $display("trial %0d: value %0d sum %0d", t, value, S);
      end
      if (S < 0) nneg++; else npos++;
    end
    checks++;
    if (nneg == 0 || npos == 0) begin failures++; $display("signs not both covered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
