// tb_qgp_workloads: the FPGA configurations evaluated for Resnet18 layers on
// CIFAR10 (three-layer pipelines of Conv128-128 on 16x16 maps with P = 32 and
// 64, Conv256-256 on 8x8 with P = 64 and 128, Conv512-512 on 4x4 with
// P = 128), each at full size, two images each, through qgp_env: outputs are
// compared with the reference, the image interval with the layer clock-cycle
// count (12288 cycles, or 8192 for Conv128-128 with P = 64).
// The single Conv64-64 layer and the four-layer Conv64-64 pipeline are the
// top's defaults and run in tb_qgp_full.
module tb_qgp_workloads;
  logic d [5];
  int   c [5], f [5];
  int   checks, failures;

  qgp_env #(.NL(3), .IMAX(16), .JMAX(16), .C(128), .P(32),  .NIMG(2), .SEED(31), .OUT_STALL(1'b0))
    e0 (.done(d[0]), .checks(c[0]), .failures(f[0]));
  qgp_env #(.NL(3), .IMAX(16), .JMAX(16), .C(128), .P(64),  .NIMG(2), .SEED(32), .OUT_STALL(1'b0))
    e1 (.done(d[1]), .checks(c[1]), .failures(f[1]));
  qgp_env #(.NL(3), .IMAX(8),  .JMAX(8),  .C(256), .P(64),  .NIMG(2), .SEED(33), .OUT_STALL(1'b0))
    e2 (.done(d[2]), .checks(c[2]), .failures(f[2]));
  qgp_env #(.NL(3), .IMAX(8),  .JMAX(8),  .C(256), .P(128), .NIMG(2), .SEED(34), .OUT_STALL(1'b0))
    e3 (.done(d[3]), .checks(c[3]), .failures(f[3]));
  qgp_env #(.NL(3), .IMAX(4),  .JMAX(4),  .C(512), .P(128), .NIMG(2), .SEED(35), .OUT_STALL(1'b0))
    e4 (.done(d[4]), .checks(c[4]), .failures(f[4]));

  initial begin
    #100;
    fork
      wait (d[0] === 1'b1 && d[1] === 1'b1 && d[2] === 1'b1 && d[3] === 1'b1 && d[4] === 1'b1);
      #50000000;
    join_any
    #1;
    checks = 0; failures = 0;
    for (int i = 0; i < 5; i++) begin
      checks += c[i]; failures += f[i];
      if (d[i] !== 1'b1) begin
        failures++;
        $display("tb_qgp_workloads: configuration %0d did not finish", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
