// tb_dslot_nn_batch: a batch of images through the layer at its default size.
//
// The filters are loaded once and stay; before each image the host rewrites
// the whole pixel store. Each image is a synthetic handwritten-style digit:
// the seven-segment shape of its class (0..9), drawn with 3-pixel strokes of
// codes 64..127 on a zero background and shifted by a random offset of up to
// two pixels. Every pooled output of every image is compared with a reference
// computed here, and the termination counter must equal the number of
// negative convolutions of that image.
// Per class it reports the share of negative convolutions and the share of
// block-cycles saved against running every convolution for 33 digit cycles.
module tb_dslot_nn_batch;
  import dslot_pkg::*;
  localparam int H = 28, K = 5, NF = 5, HP = 12, HC = 24;
  localparam int NCLASS = 10, PER_CLASS = 20;

  logic        clk = 0, rst_n = 0;
  logic        px_we = 0, wt_we = 0, start = 0;
  logic [0:0]  px_ch = '0, wt_ch = '0;
  logic [4:0]  px_row = '0, px_col = '0, wt_idx = '0, prec = '0;
  logic [7:0]  px_data = '0, wt_data = '0;
  logic [2:0]  wt_f = '0;
  logic        busy, done, pool_valid;
  logic [21:0] pool_out;
  logic [2:0]  out_f;
  logic [3:0]  out_r, out_c;
  logic [31:0] stat_terminated, stat_active_cycles;

  dslot_nn dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (NCLASS * PER_CLASS * 33000 + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // segments a..g as bits 0..6
  localparam logic [6:0] SEGS [NCLASS] = '{7'h3F, 7'h06, 7'h5B, 7'h4F, 7'h66,
                                           7'h6D, 7'h7D, 7'h07, 7'h7F, 7'h6F};

  logic [7:0] img [H][H];
  logic [7:0] wts [NF][K*K];
  longint     pool [NF][HP][HP];
  int         neg_conv;

  function automatic bit on_segment(int cls, int r, int c);
    logic [6:0] s;
    s = SEGS[cls];
    return (s[0] && r >= 4  && r <= 6  && c >= 8  && c <= 19) ||
           (s[1] && r >= 4  && r <= 15 && c >= 17 && c <= 19) ||
           (s[2] && r >= 13 && r <= 23 && c >= 17 && c <= 19) ||
           (s[3] && r >= 21 && r <= 23 && c >= 8  && c <= 19) ||
           (s[4] && r >= 13 && r <= 23 && c >= 8  && c <= 10) ||
           (s[5] && r >= 4  && r <= 15 && c >= 8  && c <= 10) ||
           (s[6] && r >= 13 && r <= 15 && c >= 8  && c <= 19);
  endfunction

  task automatic make_image(int cls);
    int dr, dc;
    dr = $urandom_range(4) - 2;
    dc = $urandom_range(4) - 2;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < H; c++)
        img[r][c] = on_segment(cls, r - dr, c - dc) ? 8'(64 + $urandom_range(63)) : 8'h00;
  endtask

  task automatic make_reference();
    longint conv [NF][HC][HC];
    neg_conv = 0;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < HC; r++)
        for (int c = 0; c < HC; c++) begin
          longint s;
          s = 0;
          for (int i = 0; i < K; i++)
            for (int j = 0; j < K; j++)
              s += 2 * longint'($signed(img[r+i][c+j])) * longint'($signed(wts[f][i*K+j]));
          if (s < 0) neg_conv++;
          conv[f][r][c] = (s < 0) ? 0 : s;
        end
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < HP; r++)
        for (int c = 0; c < HP; c++) begin
          pool[f][r][c] = conv[f][2*r][2*c];
          if (conv[f][2*r][2*c+1]   > pool[f][r][c]) pool[f][r][c] = conv[f][2*r][2*c+1];
          if (conv[f][2*r+1][2*c]   > pool[f][r][c]) pool[f][r][c] = conv[f][2*r+1][2*c];
          if (conv[f][2*r+1][2*c+1] > pool[f][r][c]) pool[f][r][c] = conv[f][2*r+1][2*c+1];
        end
  endtask

  task automatic load_image();
    for (int r = 0; r < H; r++)
      for (int c = 0; c < H; c++) begin
        @(negedge clk); px_we = 1; px_row = 5'(r); px_col = 5'(c); px_data = img[r][c];
      end
    @(negedge clk); px_we = 0;
  endtask

  task automatic run_layer();
    int got = 0;
    @(negedge clk); prec = 5'd21; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (pool_valid) begin
        checks++; got++;
        if (longint'(pool_out) != pool[out_f][out_r][out_c]) begin
          failures++;
          if (failures < 10) $display("f=%0d r=%0d c=%0d: got %0d exp %0d",
                                      out_f, out_r, out_c, pool_out, pool[out_f][out_r][out_c]);
        end
      end
    end
    checks++;
    if (got != NF * HP * HP) begin failures++; $display("got %0d pooled outputs", got); end
  endtask

  initial begin
    real neg_pct [NCLASS], saved_pct [NCLASS];
    real all_neg, all_saved;
    all_neg = 0.0; all_saved = 0.0;
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < K*K; i++) wts[f][i] = 8'($urandom);

    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < K*K; i++) begin
        @(negedge clk); wt_we = 1; wt_f = 3'(f); wt_idx = 5'(i); wt_data = wts[f][i];
      end
    @(negedge clk); wt_we = 0;

    for (int cls = 0; cls < NCLASS; cls++) begin
      neg_pct[cls] = 0.0; saved_pct[cls] = 0.0;
      for (int n = 0; n < PER_CLASS; n++) begin
        make_image(cls);
        make_reference();
        load_image();
        run_layer();
        repeat (2) @(posedge clk);
        checks++;
        if (stat_terminated != 32'(neg_conv)) begin
          failures++;
          $display("class %0d image %0d: terminated %0d, negative convolutions %0d",
                   cls, n, stat_terminated, neg_conv);
        end
        neg_pct[cls]   += 100.0 * neg_conv / (NF * HC * HC);
        saved_pct[cls] += 100.0 * (1.0 - real'(stat_active_cycles) / (33.0 * NF * HC * HC));
      end
      neg_pct[cls]   /= PER_CLASS;
      saved_pct[cls] /= PER_CLASS;
      all_neg   += neg_pct[cls] / NCLASS;
      all_saved += saved_pct[cls] / NCLASS;
      $display("class %0d: negative convolutions %0.1f%%, block-cycles saved %0.1f%%",
               cls, neg_pct[cls], saved_pct[cls]);
    end
    $display("batch of %0d images: negative %0.1f%%, block-cycles saved %0.1f%%",
             NCLASS * PER_CLASS, all_neg, all_saved);
    checks++;
    if (!(all_saved > 0.0)) begin failures++; $display("no cycles saved over the batch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
