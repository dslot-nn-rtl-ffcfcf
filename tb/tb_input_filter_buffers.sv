// tb_input_filter_buffers: pixel rows and filters read back after writes.
//
// Writes a random 28 x 28 map and five random 25-weight filters, then reads
// every row (registered: data one cycle after the address) and selects every
// filter, comparing with the written values. A second pass overwrites a few
// single pixels and checks that only those bytes of their rows change.
module tb_input_filter_buffers;
  localparam int H = 28, NF = 5, KK = 25;
  logic clk = 0;
  logic px_we = 0, wt_we = 0;
  logic [0:0] px_ch = '0, wt_ch = '0, rd_ch = '0;
  logic [4:0] px_row = '0, px_col = '0, rd_row = '0, wt_idx = '0;
  logic [7:0] px_data = '0, wt_data = '0;
  logic [2:0] wt_f = '0, sel_f = '0;
  logic [H*8-1:0] rd_data;
  logic [7:0] w [1][KK];
  int checks = 0, failures = 0;

  input_filter_buffers dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] img [H][H];
  logic [7:0] wts [NF][KK];

  task automatic check_rows();
    for (int r = 0; r < H; r++) begin
      @(negedge clk); rd_row = 5'(r);
      @(negedge clk);
      for (int c = 0; c < H; c++) begin
        checks++;
        if (rd_data[c*8 +: 8] != img[r][c]) begin
          failures++;
          if (failures < 10) $display("pixel %0d,%0d: %h exp %h", r, c, rd_data[c*8 +: 8], img[r][c]);
        end
      end
    end
  endtask

  initial begin
    for (int r = 0; r < H; r++)
      for (int c = 0; c < H; c++) begin
        img[r][c] = 8'($urandom);
        @(negedge clk); px_we = 1; px_row = 5'(r); px_col = 5'(c); px_data = img[r][c];
      end
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < KK; i++) begin
        wts[f][i] = 8'($urandom);
        @(negedge clk); px_we = 0; wt_we = 1; wt_f = 3'(f); wt_idx = 5'(i); wt_data = wts[f][i];
      end
    @(negedge clk); wt_we = 0; px_we = 0;
    check_rows();
    for (int f = 0; f < NF; f++) begin
      @(negedge clk); sel_f = 3'(f);
      #1;
      for (int i = 0; i < KK; i++) begin
        checks++;
        if (w[0][i] != wts[f][i]) begin
          failures++;
          if (failures < 10) $display("filter %0d weight %0d: %h exp %h", f, i, w[0][i], wts[f][i]);
        end
      end
    end
    for (int k = 0; k < 20; k++) begin
      int r, c;
      r = $urandom_range(H - 1); c = $urandom_range(H - 1);
      img[r][c] = 8'($urandom);
      @(negedge clk); px_we = 1; px_row = 5'(r); px_col = 5'(c); px_data = img[r][c];
    end
    @(negedge clk); px_we = 0;
    check_rows();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
