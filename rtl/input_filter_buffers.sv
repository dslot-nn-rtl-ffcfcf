// input_filter_buffers: on-chip input feature maps and filter kernels.
//
// Pixel store: N_IN maps of H x H 8-bit two's complement codes, one word per
// image row (H pixels). The host writes one pixel per cycle (px_we); the
// interconnect reads a whole row per cycle, registered (rd_data is valid the
// cycle after rd_ch/rd_row). Filter store: NF filters of N_IN x K x K 8-bit
// weights in registers, written one weight per cycle (wt_we); w presents the
// whole filter sel_f in parallel, as the multipliers take their weights in
// parallel. Sizes follow the evaluated network (28 x 28 x 1 input, five 5 x 5
// filters); the organisation and the write ports are this implementation's own.
module input_filter_buffers #(
  parameter int unsigned H    = 28,
  parameter int unsigned N_IN = 1,
  parameter int unsigned NF   = 5,
  parameter int unsigned K    = 5,
  parameter int unsigned WB   = 8,
  localparam int unsigned CW  = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned HW  = $clog2(H),
  localparam int unsigned FW  = (NF > 1) ? $clog2(NF) : 1,
  localparam int unsigned IW  = $clog2(K*K)
) (
  input  logic            clk,
  // host pixel write
  input  logic            px_we,
  input  logic [CW-1:0]   px_ch,
  input  logic [HW-1:0]   px_row,
  input  logic [HW-1:0]   px_col,
  input  logic [WB-1:0]   px_data,
  // host weight write
  input  logic            wt_we,
  input  logic [FW-1:0]   wt_f,
  input  logic [CW-1:0]   wt_ch,
  input  logic [IW-1:0]   wt_idx,
  input  logic [WB-1:0]   wt_data,
  // row read
  input  logic [CW-1:0]   rd_ch,
  input  logic [HW-1:0]   rd_row,
  output logic [H*WB-1:0] rd_data,
  // filter read
  input  logic [FW-1:0]   sel_f,
  output logic [WB-1:0]   w [N_IN][K*K]
);
  logic [H*WB-1:0] pix [N_IN*H];
  logic [WB-1:0]   wt  [NF][N_IN][K*K];

  always_ff @(posedge clk) begin
    if (px_we)
      pix[px_ch*H + int'(px_row)][px_col*WB +: WB] <= px_data;
    rd_data <= pix[rd_ch*H + int'(rd_row)];
  end

  always_ff @(posedge clk) begin
    if (wt_we) wt[wt_f][wt_ch][wt_idx] <= wt_data;
  end

  assign w = wt[sel_f];

endmodule
