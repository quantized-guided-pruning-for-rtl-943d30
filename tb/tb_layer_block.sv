// tb_layer_block: runs lb_env on two layer blocks, stride 1 and stride 2,
// with small maps (8x8, 12 input maps so every tap position and the
// mod-9 wrap occur, 8 output maps in groups of P = 4), and checks that
// the back-pressure wait and the ReLU clamp both happened.
module tb_layer_block;
  logic d1, d2;
  int   c1, f1, s1, r1, c2, f2, s2, r2;
  int   checks, failures;

  lb_env #(.IMAX(8), .JMAX(8), .K(12), .L(8), .P(4), .STRIDE(1), .NIMG(3), .SEED(11))
    e1 (.done(d1), .checks(c1), .failures(f1), .n_stall(s1), .n_relu0(r1));
  lb_env #(.IMAX(8), .JMAX(8), .K(10), .L(8), .P(2), .STRIDE(2), .NIMG(3), .SEED(22))
    e2 (.done(d2), .checks(c2), .failures(f2), .n_stall(s2), .n_relu0(r2));

  initial begin
    #100;
    fork
      wait (d1 && d2);
      #2000000;
    join_any
    checks   = c1 + c2 + 2;
    failures = f1 + f2;
    if (!(d1 && d2)) begin
      failures++;
      $display("tb_layer_block: watchdog expired");
    end
    if (s1 + s2 == 0) begin failures++; $display("no back-pressure wait seen"); end
    if (r1 == 0 || r2 == 0) begin failures++; $display("no ReLU clamp seen"); end
    $display("stalls %0d/%0d relu-zeros %0d/%0d", s1, s2, r1, r2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
