// maxpool: maximum of the NP ReLU outputs of one pooling window.
//
// A comparator tree on signed W-bit values; the result and its valid flag
// are registered, so out is valid the cycle after in_valid. The pooling
// function and the 2 x 2 window (NP = 4) come from the design; the comparator
// tree and the register are this implementation's own.
module maxpool #(
  parameter int unsigned NP = 4,
  parameter int unsigned W  = 22
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in [NP],
  output logic         out_valid,
  output logic [W-1:0] out
);
  logic [W-1:0] m;

  always_comb begin
    m = in[0];
    for (int i = 1; i < NP; i++)
      if ($signed(in[i]) > $signed(m)) m = in[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= m;
    end
  end

endmodule
