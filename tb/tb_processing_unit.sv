// tb_processing_unit: P = 4 lanes of RP = 6 values. For several groups it
// streams K random vectors with random weights (FI on the first, a one-cycle
// Enable_s on the last, X2 = 0 otherwise), then checks that during exactly
// the next P cycles y_valid is high, y_idx counts 0..P-1, Y equals
// ReLU(sum_k s_pk * x_k) of lane y_idx (modulo 2^16), and Itter_done is high
// only in the last of those cycles.
module tb_processing_unit;
  localparam int unsigned N = 16, RP = 6, P = 4, K = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic fi = 1'b0, enable_s = 1'b0;
  logic [P-1:0] w = '0;
  logic [RP-1:0][N-1:0] x2 = '0, y;
  logic itter_done, y_valid;
  logic [1:0] y_idx;
  logic [N-1:0] model [P][RP];
  logic [N-1:0] e;
  int checks = 0, failures = 0, n_clamp = 0;

  processing_unit #(.N(N), .RP(RP), .P(P)) dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 30; g++) begin
      for (int k = 0; k < int'(K); k++) begin
        @(negedge clk);
        fi = (k == 0); enable_s = (k == int'(K) - 1);
        w  = P'($urandom);
        for (int j = 0; j < int'(RP); j++) x2[j] = N'($urandom_range(4000)) - N'(2000);
        for (int p = 0; p < int'(P); p++)
          for (int j = 0; j < int'(RP); j++)
            model[p][j] = (fi ? N'(0) : model[p][j]) + (w[p] ? x2[j] : N'(0) - x2[j]);
      end
      @(negedge clk) fi = 1'b0; enable_s = 1'b0; x2 = '0; w = P'($urandom);
      for (int c = 0; c < int'(P); c++) begin
        checks += 3;
        if (!y_valid) failures++;
        if (int'(y_idx) != c) failures++;
        if (itter_done != (c == int'(P) - 1)) failures++;
        for (int j = 0; j < int'(RP); j++) begin
          e = model[c][j][N-1] ? '0 : model[c][j];
          if (model[c][j][N-1]) n_clamp++;
          checks++;
          if (y[j] !== e) begin
            failures++;
            if (failures < 5) $display("g %0d p %0d j %0d got %h exp %h", g, c, j, y[j], e);
          end
        end
        @(negedge clk);
      end
      checks++;
      if (y_valid || itter_done) failures++;
    end
    checks++;
    if (n_clamp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("tb_processing_unit: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
