// tb_maxpool: random signed 4-tuples; the registered output must be the
// maximum one cycle after in_valid and must hold while in_valid is low.
module tb_maxpool;
  localparam int W = 22;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [W-1:0] in [4];
  logic out_valid;
  logic [W-1:0] out;
  int checks = 0, failures = 0;

  maxpool dut (.clk, .rst_n, .in_valid, .in, .out_valid, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint m;
    foreach (in[i]) in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      m = -(longint'(1) << 40);
      for (int i = 0; i < 4; i++) begin
        in[i] = W'($urandom);
        if (t % 3 == 0) in[i][W-1] = 1'b0;          // non-negative, as after ReLU
        if (longint'($signed(in[i])) > m) m = longint'($signed(in[i]));
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      foreach (in[i]) in[i] = W'($urandom);
      checks++;
      if (!out_valid || longint'($signed(out)) != m) begin
        failures++;
        if (failures < 10) $display("trial %0d: got %0d exp %0d valid %0d", t, $signed(out), m, out_valid);
      end
      @(negedge clk);
      checks++;
      if (out_valid || longint'($signed(out)) != m) begin
        failures++;
        if (failures < 10) $display("trial %0d: output not held", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
