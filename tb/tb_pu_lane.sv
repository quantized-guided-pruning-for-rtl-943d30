// tb_pu_lane: random FI / weight / X2 sequences into one lane of 8 values;
// a shadow register computes (FI ? 0 : reg) + (w ? x : -x) modulo 2^16 and
// is compared with the lane after every clock. X2 = 0 must hold the value.
module tb_pu_lane;
  localparam int unsigned N = 16, RP = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic fi = 1'b1, w = 1'b0;
  logic [RP-1:0][N-1:0] x2 = '0, acc;
  logic [N-1:0] model [RP];
  int checks = 0, failures = 0;

  pu_lane #(.N(N), .RP(RP)) dut (.*);

  initial begin
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      fi = (t == 0) || ($urandom_range(7) == 0);
      w  = 1'($urandom);
      for (int j = 0; j < int'(RP); j++)
        x2[j] = ($urandom_range(5) == 0) ? '0 : N'($urandom);
      for (int j = 0; j < int'(RP); j++)
        model[j] = (fi ? N'(0) : model[j]) + (w ? x2[j] : N'(0) - x2[j]);
      @(posedge clk); #1;
      for (int j = 0; j < int'(RP); j++) begin
        checks++;
        if (acc[j] !== model[j]) begin
          failures++;
          if (failures < 5) $display("t %0d j %0d got %h exp %h", t, j, acc[j], model[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("tb_pu_lane: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
