// dslot_nn: digit-serial convolution + ReLU + 2 x 2 max-pooling layer.
//
// Four processing blocks compute the four convolution outputs of one 2 x 2
// pooling window in parallel, each as a most-significant-digit-first stream
// of online multipliers and online adders. Because the result digits come
// out MSD first, each block's ReLU unit knows the sign of its output as soon
// as the first non-zero digit appears; the control unit then stops that
// block, and the window ends early when all four are negative. The max-pooling
// unit takes the four ReLU values and produces one pooled output.
//
// Use: write the pixels (px_*, 8-bit two's complement, value code/256) and
// weights (wt_*, 8-bit two's complement, value code/128) while idle, then
// pulse start with prec = result digits wanted (0 or >P means all P = 21).
// Pooled outputs stream out on pool_valid with their filter/row/column; the
// value has P fraction bits and equals SOP/32 clipped at 0, i.e.
// 2 * sum(pixel_code * weight_code) / 2^21 for K = 5. done pulses at the end.
// A full window (fetch 7, run 33, pool 2) takes 42 cycles.
// The datapath structure follows the published design; the host interface,
// the output stream and the statistics ports are this implementation's own.
module dslot_nn
  import dslot_pkg::*;
#(
  parameter int unsigned H    = 28,
  parameter int unsigned N_IN = 1,
  parameter int unsigned NF   = 5,
  parameter int unsigned K    = 5,
  localparam int unsigned P   = dslot_pkg::p_out(K, N_IN),
  localparam int unsigned HP  = (H - K + 1) / 2,
  localparam int unsigned CW  = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned HW  = $clog2(H),
  localparam int unsigned FW  = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned IW  = $clog2(K*K),
  localparam int unsigned PW  = $clog2(HP)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host writes
  input  logic          px_we,
  input  logic [CW-1:0] px_ch,
  input  logic [HW-1:0] px_row,
  input  logic [HW-1:0] px_col,
  input  logic [7:0]    px_data,
  input  logic          wt_we,
  input  logic [FW-1:0] wt_f,
  input  logic [CW-1:0] wt_ch,
  input  logic [IW-1:0] wt_idx,
  input  logic [7:0]    wt_data,
  // layer control
  input  logic          start,
  input  logic [4:0]    prec,
  output logic          busy,
  output logic          done,
  // pooled output stream
  output logic          pool_valid,
  output logic [P:0]    pool_out,
  output logic [FW-1:0] out_f,
  output logic [PW-1:0] out_r,
  output logic [PW-1:0] out_c,
  // statistics
  output logic [31:0]   stat_terminated,
  output logic [31:0]   stat_active_cycles
);
  logic [CW-1:0]   rd_ch, load_ch;
  logic [HW-1:0]   rd_row, col0;
  logic [FW-1:0]   sel_f;
  logic [H*8-1:0]  rd_data;
  logic [7:0]      w [N_IN][K*K];
  logic            load_en, shift, pb_clr, pb_dv, pool_go;
  logic [2:0]      load_r;
  logic [3:0]      pb_en, neg;
  sd_t             x [4][N_IN][K*K];
  logic [P:0]      value [4];

  input_filter_buffers #(.H(H), .N_IN(N_IN), .NF(NF), .K(K), .WB(8)) u_buf (
    .clk,
    .px_we, .px_ch, .px_row, .px_col, .px_data,
    .wt_we, .wt_f, .wt_ch, .wt_idx, .wt_data,
    .rd_ch, .rd_row, .rd_data,
    .sel_f, .w
  );

  fmap_interconnect #(.H(H), .N_IN(N_IN), .K(K), .WB(8)) u_ic (
    .clk, .rst_n,
    .load_en, .load_ch, .load_r, .col0, .row_data(rd_data),
    .shift, .x
  );

  for (genvar p = 0; p < 4; p++) begin : g_pb
    processing_block #(.N_IN(N_IN), .K(K), .WB(8)) u_pb (
      .clk, .rst_n,
      .clr(pb_clr), .en(pb_en[p]), .dv(pb_dv),
      .w, .x(x[p]),
      .neg(neg[p]), .value(value[p])
    );
  end

  maxpool #(.NP(4), .W(P+1)) u_pool (
    .clk, .rst_n,
    .in_valid(pool_go), .in(value),
    .out_valid(pool_valid), .out(pool_out)
  );

  control_unit #(.H(H), .N_IN(N_IN), .NF(NF), .K(K)) u_ctrl (
    .clk, .rst_n, .start, .prec, .busy, .done,
    .rd_ch, .rd_row, .sel_f,
    .load_en, .load_ch, .load_r, .col0, .shift,
    .pb_clr, .pb_en, .pb_dv, .neg,
    .pool_go, .out_f, .out_r, .out_c,
    .stat_terminated, .stat_active_cycles
  );

endmodule
