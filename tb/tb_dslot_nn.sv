// tb_dslot_nn: end-to-end run of the layer at its default size.
//
// Loads a 28 x 28 synthetic image (a ring-shaped stroke of pixel codes
// 64..127 on a zero background, like a handwritten digit) and five random
// 5 x 5 filters, runs the whole layer (5 x 12 x 12 pooled outputs) and
// compares every pooled output with a reference computed here:
// max over the 2 x 2 window of max(0, 2 * sum(pixel_code * weight_code)).
// Then it runs the layer again with the result precision cut to 10 digits,
// where each output must lie within 2^(21-10) of the exact one.
// It also checks: a window with no negative result runs for 33 digit cycles
// (Num_Cycles); a window whose four results are all negative ends earlier;
// the termination counter equals the number of negative convolutions; and it
// counts how often each mechanism (early termination, early end of a window,
// reduced precision, full-length window) occurred, failing if one never did.
module tb_dslot_nn;
  import dslot_pkg::*;
  localparam int H = 28, K = 5, NF = 5, HP = 12, HC = 24;

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
  int n_term = 0, n_early_window = 0, n_full_window = 0, n_prec = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] img [H][H];
  logic [7:0] wts [NF][K*K];
  longint     conv [NF][HC][HC];
  longint     conv_raw [NF][HC][HC];
  longint     pool [NF][HP][HP];
  int         neg_conv;

  // digit cycles of each window, measured on the control unit's shift strobe
  int  run_len;
  int  run_lens [$];
  always @(posedge clk) begin
    if (dut.u_ctrl.shift) run_len++;
    else if (run_len != 0) begin run_lens.push_back(run_len); run_len = 0; end
  end

  task automatic run_layer(input logic [4:0] p, input longint tol);
    int got = 0;
    @(negedge clk); prec = p; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (pool_valid) begin
        longint e;
        e = pool[out_f][out_r][out_c];
        checks++; got++;
        if ((longint'(pool_out) - e > tol) || (e - longint'(pool_out) > tol)) begin
          failures++;
          if (failures < 10) $display("f=%0d r=%0d c=%0d: got %0d exp %0d", out_f, out_r, out_c, pool_out, e);
        end
      end
    end
    checks++;
    if (got != NF * HP * HP) begin failures++; $display("got %0d pooled outputs", got); end
  endtask

  initial begin
    int neg_windows [$];
    run_len = 0;
    // image and filters
    for (int r = 0; r < H; r++)
      for (int c = 0; c < H; c++) begin
        int d2;
        d2 = (r - 14) * (r - 14) + (c - 13) * (c - 13);
        img[r][c] = (d2 >= 25 && d2 <= 64) ? 8'(64 + $urandom_range(63)) : 8'h00;
      end
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < K*K; i++) wts[f][i] = 8'($urandom);
    // reference
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
          conv_raw[f][r][c] = s;
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

    repeat (2) @(posedge clk);
    rst_n = 1;
    // load
    for (int r = 0; r < H; r++)
      for (int c = 0; c < H; c++) begin
        @(negedge clk); px_we = 1; px_row = 5'(r); px_col = 5'(c); px_data = img[r][c];
      end
    @(negedge clk); px_we = 0;
    for (int f = 0; f < NF; f++)
      for (int i = 0; i < K*K; i++) begin
        @(negedge clk); wt_we = 1; wt_f = 3'(f); wt_idx = 5'(i); wt_data = wts[f][i];
      end
    @(negedge clk); wt_we = 0;

    // full precision
    run_lens.delete();
    run_layer(5'd21, 0);
    repeat (2) @(posedge clk);
    checks++;
    if (run_lens.size() != NF * HP * HP) begin
      failures++; $display("%0d windows seen", run_lens.size());
    end
    // window lengths against the reference signs
    for (int f = 0; f < NF; f++)
      for (int r = 0; r < HP; r++)
        for (int c = 0; c < HP; c++) begin
          int idx, allneg, anyneg;
          longint s00;
          idx = (f * HP + r) * HP + c;
          allneg = 1; anyneg = 0;
          for (int q = 0; q < 4; q++) begin
            longint s;
            s = 0;
            for (int i = 0; i < K; i++)
              for (int j = 0; j < K; j++)
                s += longint'($signed(img[2*r+q/2+i][2*c+q%2+j])) * longint'($signed(wts[f][i*K+j]));
            if (s < 0) anyneg = 1; else allneg = 0;
          end
          if (idx < run_lens.size()) begin
            if (!anyneg) begin
              checks++; n_full_window++;
              if (run_lens[idx] != 33) begin failures++; $display("window %0d: %0d digit cycles, expected 33", idx, run_lens[idx]); end
            end
            if (allneg) begin
              checks++; n_early_window++;
              if (run_lens[idx] >= 33) begin failures++; $display("window %0d all negative but ran %0d cycles", idx, run_lens[idx]); end
            end
          end
        end
    // block-cycles spent on negative convolutions: the enabled cycles minus
    // those of the non-negative ones, which run to the end of their window
    begin
      longint pos_cycles;
      pos_cycles = 0;
      for (int f = 0; f < NF; f++)
        for (int r = 0; r < HP; r++)
          for (int c = 0; c < HP; c++)
            for (int q = 0; q < 4; q++)
              if (conv_raw[f][2*r+q/2][2*c+q%2] >= 0)
                pos_cycles += run_lens[(f * HP + r) * HP + c];
      if (neg_conv > 0)
        $display("negative convolutions stopped after %0.1f of 33 digit cycles on average (%0.1f%% saved)",
                 real'(longint'(stat_active_cycles) - pos_cycles) / neg_conv,
                 100.0 * (1.0 - real'(longint'(stat_active_cycles) - pos_cycles) / (33.0 * neg_conv)));
    end
    checks++;
    n_term = int'(stat_terminated);
    if (stat_terminated != 32'(neg_conv)) begin
      failures++; $display("terminated %0d, negative convolutions %0d", stat_terminated, neg_conv);
    end
    $display("negative convolutions %0d of %0d, PB-cycles %0d of %0d",
             neg_conv, NF * HC * HC, stat_active_cycles, NF * HC * HC * 33);

    // reduced precision: 10 result digits
    run_lens.delete();
    run_layer(5'd10, longint'(1) << 11);
    repeat (2) @(posedge clk);
    checks++;
    if (run_lens.size() > 0 && run_lens[0] > 22) begin
      failures++; $display("reduced precision window ran %0d cycles", run_lens[0]);
    end else n_prec++;

    $display("mechanisms: terminations=%0d early_windows=%0d full_windows=%0d reduced_precision_runs=%0d",
             n_term, n_early_window, n_full_window, n_prec);
    if (n_term == 0)         begin failures++; $display("no early termination happened"); end
    if (n_early_window == 0) begin failures++; $display("no window ended early"); end
    if (n_full_window == 0)  begin failures++; $display("no full-length window"); end
    if (n_prec == 0)         begin failures++; $display("no reduced-precision run"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
