// control_unit: layer sequencer and early-termination control.
//
// For every filter f (outer loop) and every pooled output (pr, pc) of the
// (H-K+1)/2 x (H-K+1)/2 result (row-major), the unit
//   FETCH  reads the K+1 buffer rows 2pr .. 2pr+K of each input map and loads
//          them into the interconnect's patch (columns 2pc .. 2pc+K), and
//          clears the processing blocks in its last cycle;
//   RUN    shifts one digit per cycle into the blocks for LAT + prec cycles,
//          where LAT = 2 + 2*(ceil(log2(K*K)) + ceil(log2(N_IN))) is the
//          delay to the first result digit and prec (1..P, sampled at start)
//          is the number of result digits wanted; dv marks the result-digit
//          cycles. A block whose ReLU unit reports a negative result has its
//          enable dropped from the next cycle on, and RUN ends early once all
//          four blocks are stopped. With prec = P the full run is
//          Num_Cycles = 2 + 2*5 + 21 = 33 cycles for K = 5, N_IN = 1;
//   POOL   strobes the max-pooling unit (result valid in the next cycle);
//   NEXT   holds the window's coordinates while the pooled result is out,
//          then advances.
// done pulses after the last window. Counters report the number of
// terminated convolutions and the cycles during which blocks were enabled.
// The termination handshake and the cycle count follow the design; the state
// machine, loop order and counters are this implementation's own.
module control_unit
  import dslot_pkg::*;
#(
  parameter int unsigned H    = 28,
  parameter int unsigned N_IN = 1,
  parameter int unsigned NF   = 5,
  parameter int unsigned K    = 5,
  localparam int unsigned P   = dslot_pkg::p_out(K, N_IN),
  localparam int unsigned LAT = DELTA_MUL + DELTA_ADD * ($clog2(K*K) + $clog2(N_IN)),
  localparam int unsigned HP  = (H - K + 1) / 2,
  localparam int unsigned CW  = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned HW  = $clog2(H),
  localparam int unsigned FW  = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned PW  = $clog2(HP),
  localparam int unsigned NR  = (K + 1) * N_IN
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [4:0]    prec,
  output logic          busy,
  output logic          done,
  // buffers
  output logic [CW-1:0] rd_ch,
  output logic [HW-1:0] rd_row,
  output logic [FW-1:0] sel_f,
  // interconnect
  output logic          load_en,
  output logic [CW-1:0] load_ch,
  output logic [2:0]    load_r,
  output logic [HW-1:0] col0,
  output logic          shift,
  // processing blocks
  output logic          pb_clr,
  output logic [3:0]    pb_en,
  output logic          pb_dv,
  input  logic [3:0]    neg,
  // pooling
  output logic          pool_go,
  output logic [FW-1:0] out_f,
  output logic [PW-1:0] out_r,
  output logic [PW-1:0] out_c,
  // statistics
  output logic [31:0]   stat_terminated,
  output logic [31:0]   stat_active_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_RUN, S_POOL, S_NEXT} state_t;

  state_t             st_q;
  logic [FW-1:0]      f_q;
  logic [PW-1:0]      pr_q, pc_q;
  logic [$clog2(NR+1)-1:0] s_q;
  logic [5:0]         rc_q;       // RUN cycle, 1-based
  logic [5:0]         run_len_q;
  logic [3:0]         stop_q;
  logic [4:0]         prec_c;

  // fetch step s reads row s (channel-major); the row arrives one cycle later
  logic [$clog2(NR+1)-1:0] s_prev;
  assign s_prev = s_q - 1'b1;

  always_comb begin
    prec_c = (prec == 0 || prec > P[4:0]) ? P[4:0] : prec;
    rd_ch   = CW'(int'(s_q) / (K + 1));
    rd_row  = HW'(2 * int'(pr_q) + int'(s_q) % (K + 1));
    load_en = (st_q == S_FETCH) && (s_q != 0);
    load_ch = CW'(int'(s_prev) / (K + 1));
    load_r  = 3'(int'(s_prev) % (K + 1));
    col0    = HW'(2 * pc_q);
    sel_f   = f_q;
    pb_clr  = (st_q == S_FETCH) && (s_q == NR[$clog2(NR+1)-1:0]);
    shift   = (st_q == S_RUN);
    pb_en   = (st_q == S_RUN) ? ~stop_q : 4'b0;
    pb_dv   = (st_q == S_RUN) && (rc_q > LAT[5:0]);
    pool_go = (st_q == S_POOL);
    busy    = (st_q != S_IDLE);
    out_f   = f_q;
    out_r   = pr_q;
    out_c   = pc_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q               <= S_IDLE;
      f_q                <= '0;
      pr_q               <= '0;
      pc_q               <= '0;
      s_q                <= '0;
      rc_q               <= '0;
      run_len_q          <= '0;
      stop_q             <= '0;
      done               <= 1'b0;
      stat_terminated    <= '0;
      stat_active_cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        S_IDLE: if (start) begin
          st_q               <= S_FETCH;
          f_q                <= '0;
          pr_q               <= '0;
          pc_q               <= '0;
          s_q                <= '0;
          run_len_q          <= 6'(LAT) + 6'(prec_c);
          stat_terminated    <= '0;
          stat_active_cycles <= '0;
        end
        S_FETCH: begin
          if (s_q == NR[$clog2(NR+1)-1:0]) begin
            st_q   <= S_RUN;
            rc_q   <= 6'd1;
            stop_q <= '0;
          end else begin
            s_q <= s_q + 1'b1;
          end
        end
        S_RUN: begin
          stat_active_cycles <= stat_active_cycles + 32'($countones(~stop_q));
          stat_terminated    <= stat_terminated + 32'($countones(neg & ~stop_q));
          stop_q             <= stop_q | neg;
          rc_q               <= rc_q + 1'b1;
          if (rc_q == run_len_q || (stop_q | neg) == 4'hF) st_q <= S_POOL;
        end
        S_POOL: st_q <= S_NEXT;
        S_NEXT: begin
          s_q <= '0;
          if (pc_q != PW'(HP - 1)) begin
            pc_q <= pc_q + 1'b1;
            st_q <= S_FETCH;
          end else if (pr_q != PW'(HP - 1)) begin
            pc_q <= '0;
            pr_q <= pr_q + 1'b1;
            st_q <= S_FETCH;
          end else if (f_q != FW'(NF - 1)) begin
            pc_q <= '0;
            pr_q <= '0;
            f_q  <= f_q + 1'b1;
            st_q <= S_FETCH;
          end else begin
            st_q <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // A block stopped during a window is never re-enabled before the window ends,
  // and result digits are only marked inside RUN.
  a_stop_monotonic: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == S_RUN && $past(st_q) == S_RUN) |-> ((stop_q & $past(stop_q)) == $past(stop_q)));
  a_dv_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    pb_dv |-> (st_q == S_RUN));

endmodule
