// fmap_interconnect: input patch, digit conversion and window distribution.
//
// The four processing blocks of a 2 x 2 pooling window need four K x K
// windows that overlap in a (K+1) x (K+1) patch. The patch is loaded one row
// per cycle (load_en, from a buffer row starting at column col0) and then
// shifted out one signed digit per cycle per pixel (shift), so every patch
// pixel is converted once and shared by all windows that contain it.
//
// Conversion of an 8-bit two's complement code b7..b0 to radix-2 signed digits,
// MSD first: digit 1 is -b7 (weight 2^-1), digits 2..8 are b6..b0, then zeros,
// so the stream's value is code / 256. PB p = 2*dy + dx gets the window at
// patch offset (dy, dx), row-major, channel by channel.
// The conversion to a redundant form is stated in the design; its encoding and
// the shared patch register are this implementation's own.
module fmap_interconnect
  import dslot_pkg::*;
#(
  parameter int unsigned H    = 28,
  parameter int unsigned N_IN = 1,
  parameter int unsigned K    = 5,
  parameter int unsigned WB   = dslot_pkg::OPERAND_BITS,
  localparam int unsigned CW  = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned HW  = $clog2(H),
  localparam int unsigned S   = K + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load_en,
  input  logic [CW-1:0]   load_ch,
  input  logic [2:0]      load_r,
  input  logic [HW-1:0]   col0,
  input  logic [H*WB-1:0] row_data,
  input  logic            shift,
  output sd_t             x [4][N_IN][K*K]
);
  logic [WB-1:0] sr [N_IN][S][S];
  logic          first_q;     // the next digit is the sign digit

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_q <= 1'b1;
    end else if (load_en) begin
      first_q <= 1'b1;
    end else if (shift) begin
      first_q <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < N_IN; c++)
      for (int r = 0; r < S; r++)
        for (int q = 0; q < S; q++)
          if (load_en) begin
            if (c == int'(load_ch) && r == int'(load_r))
              sr[c][r][q] <= row_data[(int'(col0) + q)*WB +: WB];
          end else if (shift) begin
            sr[c][r][q] <= sr[c][r][q] << 1;
          end
  end

  always_comb begin
    for (int p = 0; p < 4; p++)
      for (int c = 0; c < N_IN; c++)
        for (int i = 0; i < K; i++)
          for (int j = 0; j < K; j++) begin
            logic msb;
            msb = sr[c][i + p/2][j + p%2][WB-1];
            x[p][c][i*K+j] = first_q ? '{p: 1'b0, n: msb} : '{p: msb, n: 1'b0};
          end
  end

endmodule
