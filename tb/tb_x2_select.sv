// tb_x2_select: random padded rows through the window multiplexers for
// stride 1 (JMAX = 32, the default) and stride 2 (JMAX = 8). Expected
// values: x2[j] = x1[STRIDE*j + lambda], all zero when row_valid is low.
module tb_x2_select;
  localparam int unsigned N = 16;
  int checks = 0, failures = 0;

  logic [33:0][N-1:0] a_x1;
  logic [31:0][N-1:0] a_x2;
  logic [9:0][N-1:0]  b_x1;
  logic [3:0][N-1:0]  b_x2;
  logic [1:0] lam;
  logic       rv;

  x2_select dut_s1 (.x1(a_x1), .lambda(lam), .row_valid(rv), .x2(a_x2));
  x2_select #(.N(N), .JMAX(8), .STRIDE(2)) dut_s2 (.x1(b_x1), .lambda(lam), .row_valid(rv), .x2(b_x2));

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int e = 0; e < 34; e++) a_x1[e] = N'($urandom);
      for (int e = 0; e < 10; e++) b_x1[e] = N'($urandom);
      lam = 2'($urandom_range(2));
      rv  = ($urandom_range(4) != 0);
      #1;
      for (int j = 0; j < 32; j++) begin
        checks++;
        if (a_x2[j] !== (rv ? a_x1[j + int'(lam)] : '0)) failures++;
      end
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (b_x2[j] !== (rv ? b_x1[2*j + int'(lam)] : '0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("tb_x2_select: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
