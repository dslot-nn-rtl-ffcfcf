// tb_control_unit: the layer sequence, cycle counts and termination handshake.
//
// The testbench stands in for the four processing blocks: for each window it
// picks, per block, either no negative result or a digit index at which the
// block reports neg (held until the next clear, as the ReLU unit does).
// Checked per window: the K+1 buffer rows 2pr..2pr+K are read and loaded in
// order; pb_clr is pulsed once; the window runs 12 + prec digit cycles
// (33 for prec = 21) unless all four blocks report neg, in which case it ends
// in the cycle of the last report; dv is high exactly on cycles 13..12+prec;
// a block's enable drops the cycle after its neg and not before; pool_go is
// pulsed once with the window's coordinates; windows come in filter-major,
// row-major order; done follows the last one. The statistics counters are
// compared at the end. A second layer run uses prec = 7.
module tb_control_unit;
  localparam int HP = 12, NF = 5, LAT = 12;
  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] prec = 5'd21;
  logic busy, done;
  logic [0:0] rd_ch, load_ch;
  logic [4:0] rd_row, col0;
  logic [2:0] sel_f, load_r, out_f;
  logic load_en, shift, pb_clr, pb_dv, pool_go;
  logic [3:0] pb_en, neg;
  logic [3:0] out_r, out_c;
  logic [31:0] stat_terminated, stat_active_cycles;
  int checks = 0, failures = 0;

  control_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 15) $display("%s", msg);
  endtask

  // per-window plan: digit cycle at which block q raises neg (0 = never)
  int neg_at [4];
  int n_early = 0, n_term_total = 0, n_active_total = 0;

  task automatic run_layer(input int pr_digits);
    int exp_len, cyc, nclr, rows_read, loads, got_pool, en_ok, dv_ok;
    int f, r, c;
    @(negedge clk); prec = 5'(pr_digits); start = 1;
    @(negedge clk); start = 0;
    f = 0; r = 0; c = 0;
    n_term_total = 0; n_active_total = 0;
    for (int win = 0; win < NF * HP * HP; win++) begin
      int allneg, last, stop [4];
      // plan
      allneg = 1; last = 0;
      for (int q = 0; q < 4; q++) begin
        neg_at[q] = ($urandom_range(2) == 0) ? 0 : LAT + 1 + $urandom_range(pr_digits - 1);
        if (win % 7 == 0) neg_at[q] = LAT + 1 + $urandom_range(pr_digits - 1);
        if (neg_at[q] == 0) allneg = 0; else if (neg_at[q] > last) last = neg_at[q];
        stop[q] = 0;
      end
      exp_len = allneg ? last : LAT + pr_digits;
      // FETCH: expect 6 reads and 6 loads, then clear
      nclr = 0; rows_read = 0; loads = 0;
      while (!shift) begin
        if (pb_clr) nclr++;
        if (load_en) begin
          if (int'(load_r) != loads || int'(col0) != 2 * c) fail($sformatf("win %0d: load %0d of row %0d col %0d", win, loads, load_r, col0));
          loads++;
        end
        if (rows_read < 6 && !pb_clr) begin
          if (int'(rd_row) == 2 * r + rows_read) rows_read++;
        end
        neg = '0;
        @(negedge clk);
      end
      checks++;
      if (nclr != 1 || loads != 6 || rows_read != 6 || int'(sel_f) != f)
        fail($sformatf("win %0d: clr %0d loads %0d reads %0d sel_f %0d", win, nclr, loads, rows_read, sel_f));
      // RUN
      cyc = 0; en_ok = 1; dv_ok = 1;
      while (shift) begin
        cyc++;
        for (int q = 0; q < 4; q++) begin
          if (pb_en[q] != !stop[q]) en_ok = 0;
          neg[q] = (neg_at[q] != 0) && (cyc >= neg_at[q]);
        end
        if (pb_dv != (cyc > LAT && cyc <= LAT + pr_digits)) dv_ok = 0;
        for (int q = 0; q < 4; q++) if (!stop[q]) n_active_total++;
        @(negedge clk);
        for (int q = 0; q < 4; q++) if (neg[q] && !stop[q]) begin stop[q] = 1; n_term_total++; end
      end
      neg = '0;
      checks++;
      if (cyc != exp_len) fail($sformatf("win %0d: ran %0d cycles, expected %0d", win, cyc, exp_len));
      if (allneg && exp_len < LAT + pr_digits) n_early++;
      checks++;
      if (!en_ok) fail($sformatf("win %0d: enables wrong", win));
      checks++;
      if (!dv_ok) fail($sformatf("win %0d: dv wrong", win));
      // POOL
      got_pool = 0;
      for (int k = 0; k < 2; k++) begin
        if (pool_go) begin
          got_pool++;
          if (int'(out_f) != f || int'(out_r) != r || int'(out_c) != c)
            fail($sformatf("win %0d: pool at %0d,%0d,%0d expected %0d,%0d,%0d", win, out_f, out_r, out_c, f, r, c));
        end
        @(negedge clk);
      end
      checks++;
      if (got_pool != 1) fail($sformatf("win %0d: %0d pool strobes", win, got_pool));
      c++;
      if (c == HP) begin c = 0; r++; end
      if (r == HP) begin r = 0; f++; end
    end
    checks++;
    if (busy) fail("still busy after the last window");
    checks++;
    if (stat_terminated != 32'(n_term_total) || stat_active_cycles != 32'(n_active_total))
      fail($sformatf("stats %0d/%0d expected %0d/%0d", stat_terminated, stat_active_cycles, n_term_total, n_active_total));
  endtask

  // done must pulse exactly once per layer
  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  initial begin
    neg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_layer(21);
    run_layer(7);
    repeat (2) @(posedge clk);
    checks++;
    if (n_done != 2) fail($sformatf("done pulsed %0d times", n_done));
    checks++;
    if (n_early == 0) fail("no window ended early");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
