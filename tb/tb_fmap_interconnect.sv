// tb_fmap_interconnect: patch loading, digit conversion and window mapping.
//
// Loads a random 6 x 6 patch from random 28-pixel rows at a random column,
// then shifts 10 times. Every digit stream handed to PB p at window position
// (i, j) must rebuild, in units of 2^-8, the signed code of pixel
// (i + p/2, j + p%2) of the patch, with zero digits after the eighth, and
// each digit must be a legal one (not both bits set).
module tb_fmap_interconnect;
  import dslot_pkg::*;
  localparam int H = 28, K = 5, S = 6;
  logic clk = 0, rst_n = 0, load_en = 0, shift = 0;
  logic [0:0] load_ch = '0;
  logic [2:0] load_r = '0;
  logic [4:0] col0 = '0;
  logic [H*8-1:0] row_data = '0;
  sd_t x [4][1][K*K];
  int checks = 0, failures = 0;

  fmap_interconnect dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] patch [S][S];
    longint acc [4][K*K];
    int c0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      c0 = 2 * $urandom_range(11);
      for (int r = 0; r < S; r++) begin
        @(negedge clk); load_en = 1; load_r = 3'(r); col0 = 5'(c0);
        for (int c = 0; c < H; c++) row_data[c*8 +: 8] = 8'($urandom);
        for (int c = 0; c < S; c++) patch[r][c] = row_data[(c0 + c)*8 +: 8];
      end
      @(negedge clk); load_en = 0;
      foreach (acc[p, i]) acc[p][i] = 0;
      for (int d = 1; d <= 10; d++) begin
        #1;
        for (int p = 0; p < 4; p++)
          for (int i = 0; i < K*K; i++) begin
            if (x[p][0][i].p && x[p][0][i].n) begin
              checks++; failures++;
            end
            acc[p][i] = acc[p][i] * 2 + sd_value(x[p][0][i]);
          end
        shift = 1;
        @(negedge clk); shift = 0;
      end
      for (int p = 0; p < 4; p++)
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            longint e;
            e = longint'($signed(patch[i + p/2][j + p%2])) * 4;   // 10 digits: code/256 in units 2^-10
            checks++;
            if (acc[p][i*K+j] != e) begin
              failures++;
              if (failures < 10) $display("PB %0d pixel %0d,%0d: %0d exp %0d", p, i, j, acc[p][i*K+j], e);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
