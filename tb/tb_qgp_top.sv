// tb_qgp_top: end-to-end test of the layer-block pipeline at reduced size:
// three layer blocks, 12 maps of 8x8, P = 4, six images, with consumer
// back-pressure. See qgp_env for what is checked.
module tb_qgp_top;
  logic d;
  int   checks, failures;

  qgp_env #(.NL(3), .IMAX(8), .JMAX(8), .C(12), .P(4), .NIMG(6), .SEED(5))
    env (.done(d), .checks(checks), .failures(failures));

  initial begin
    #100;
    fork
      wait (d === 1'b1);
      #20000000;
    join_any
    #1;
    if (d !== 1'b1) begin
      $display("tb_qgp_top: watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    end else
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
