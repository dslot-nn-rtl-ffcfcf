// tb_dslot_nn_multi: the layer with two input feature maps.
//
// Instantiates the top with N_IN = 2 (two engines per processing block and an
// online adder over the maps), a 12 x 12 input and three filters (one with
// non-negative, one with non-positive and one with random weights, so that
// full-length windows, all-negative windows and mixed ones all occur), loads
// random non-negative pixels, runs the layer and checks all 3 x 4 x 4 pooled
// outputs against max over the 2 x 2 window of
// max(0, 2 * sum over maps and window of pixel_code * weight_code).
// With two maps the result has 22 digits and a window without negative
// results runs Num_Cycles = 2 + 2*(5+1) + 22 = 36 digit cycles; this is
// checked, as are the termination counter and the occurrence of early
// terminations and of early-ended windows.
module tb_dslot_nn_multi;
  import dslot_pkg::*;
  localparam int H = 12, K = 5, NF = 3, NI = 2, HP = 4, HC = 8;

  logic        clk = 0, rst_n = 0;
  logic        px_we = 0, wt_we = 0, start = 0;
  logic [0:0]  px_ch = '0, wt_ch = '0;
  logic [1:0]  wt_f = '0;
  logic [3:0]  px_row = '0, px_col = '0;
  logic [4:0]  wt_idx = '0, prec = 5'd22;
  logic [7:0]  px_data = '0, wt_data = '0;
  logic        busy, done, pool_valid;
  logic [22:0] pool_out;
  logic [1:0]  out_f;
  logic [1:0]  out_r, out_c;
  logic [31:0] stat_terminated, stat_active_cycles;

  dslot_nn #(.H(H), .N_IN(NI), .NF(NF), .K(K)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] img [NI][H][H];
  logic [7:0] wts [NF][NI][K*K];
  longint     conv [NF][HC][HC];
  longint     pool [NF][HP][HP];
  int         neg_conv, n_full = 0, n_early = 0, got = 0;

  int  run_len;
  int  run_lens [$];
  always @(posedge clk) begin
    if (dut.u_ctrl.shift) run_len++;
    else if (run_len != 0) begin run_lens.push_back(run_len); run_len = 0; end
  end

  initial begin
    run_len = 0;
    for (int ch = 0; ch < NI; ch++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < H; c++) img[ch][r][c] = 8'($urandom_range(127));
    for (int f = 0; f < NF; f++)
      for (int ch = 0; ch < NI; ch++)
        for (int i = 0; i < K*K; i++)
          // filter 0 non-negative, filter 1 non-positive, filter 2 random
          wts[f][ch][i] = (f == 0) ? 8'($urandom_range(127)) :
                          (f == 1) ? 8'(-$urandom_range(127)) : 8'($urandom);
    neg_conv = 0;
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < HC; r++)
        for (int c = 0; c < HC; c++) begin
          longint s;
          s = 0;
          for (int ch = 0; ch < NI; ch++)
            for (int i = 0; i < K; i++)
              for (int j = 0; j < K; j++)
                s += 2 * longint'($signed(img[ch][r+i][c+j])) * longint'($signed(wts[f][ch][i*K+j]));
          if (s < 0) neg_conv++;
          conv[f][r][c] = (s < 0) ? 0 : s;
        end
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < HP; r++)
        for (int c = 0; c < HP; c++) begin
          pool[f][r][c] = 0;
          for (int q = 0; q < 4; q++)
            if (conv[f][2*r+q/2][2*c+q%2] > pool[f][r][c]) pool[f][r][c] = conv[f][2*r+q/2][2*c+q%2];
        end

    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ch = 0; ch < NI; ch++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < H; c++) begin
          @(negedge clk); px_we = 1; px_ch = 1'(ch); px_row = 4'(r); px_col = 4'(c); px_data = img[ch][r][c];
        end
    @(negedge clk); px_we = 0;
    for (int f = 0; f < NF; f++)
      for (int ch = 0; ch < NI; ch++)
        for (int i = 0; i < K*K; i++) begin
          @(negedge clk); wt_we = 1; wt_f = 2'(f); wt_ch = 1'(ch); wt_idx = 5'(i); wt_data = wts[f][ch][i];
        end
    @(negedge clk); wt_we = 0;

    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (pool_valid) begin
        longint e;
        e = pool[out_f][out_r][out_c];
        checks++; got++;
        if (longint'(pool_out) != e) begin
          failures++;
          if (failures < 10) $display("f=%0d r=%0d c=%0d: got %0d exp %0d", out_f, out_r, out_c, pool_out, e);
        end
      end
    end
    repeat (2) @(posedge clk);
    checks++;
    if (got != NF * HP * HP) begin failures++; $display("got %0d outputs", got); end
    checks++;
    if (run_lens.size() != NF * HP * HP) begin failures++; $display("%0d windows", run_lens.size()); end
    for (int w = 0; w < run_lens.size() && w < NF * HP * HP; w++) begin
      int f, r, c, anyneg, allneg;
      f = w / (HP * HP); r = (w / HP) % HP; c = w % HP;
      anyneg = 0; allneg = 1;
      for (int q = 0; q < 4; q++) begin
        longint s;
        s = 0;
        for (int ch = 0; ch < NI; ch++)
          for (int i = 0; i < K; i++)
            for (int j = 0; j < K; j++)
              s += longint'($signed(img[ch][2*r+q/2+i][2*c+q%2+j])) * longint'($signed(wts[f][ch][i*K+j]));
        if (s < 0) anyneg = 1; else allneg = 0;
      end
      if (!anyneg) begin
        n_full++; checks++;
        if (run_lens[w] != 36) begin failures++; $display("window %0d: %0d cycles, expected 36", w, run_lens[w]); end
      end
      if (allneg) begin
        n_early++; checks++;
        if (run_lens[w] >= 36) begin failures++; $display("window %0d: all negative but %0d cycles", w, run_lens[w]); end
      end
    end
    checks++;
    if (stat_terminated != 32'(neg_conv)) begin failures++; $display("terminated %0d, expected %0d", stat_terminated, neg_conv); end
    $display("mechanisms: terminations=%0d early_windows=%0d full_windows=%0d", stat_terminated, n_early, n_full);
    if (stat_terminated == 0) begin failures++; $display("no early termination"); end
    if (n_early == 0) begin failures++; $display("no early-ended window"); end
    if (n_full == 0) begin failures++; $display("no full-length window"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
