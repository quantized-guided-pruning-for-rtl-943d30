// x2_select: the window multiplexers between BRAM one and BRAM two.
//
// BRAM one holds a padded row X1 = {x1[0] .. x1[R-1]} of R = JMAX + 2 n-bit
// values (x1[0] and x1[R-1] are the zero padding). The kept tap of the
// pruned 3x3 kernel sits at column offset lambda (0, 1 or 2), so the values
// the processing unit needs for output columns j = 0 .. RP-1 are
//     x2[j] = x1[STRIDE * j + lambda].
// With STRIDE = 1 this picks the first, middle or last RP = R - 2 values;
// with STRIDE = 2 it picks every other value (even or odd positions), one
// multiplexer per output value as drawn for the stride-2 case. row_valid
// low forces the whole vector to zero; it is used for the zero rows above
// and below the feature map (vertical padding).
//
// Purely combinational. The general formula and the row_valid input are
// this design's; the paper draws only the stride-2 pairwise multiplexers and
// states the stride-1 selection in words.
module x2_select #(
  parameter int unsigned N      = 16,   // bits per value
  parameter int unsigned JMAX   = 32,   // unpadded input row length
  parameter int unsigned STRIDE = 1,
  localparam int unsigned R  = JMAX + 2,
  localparam int unsigned RP = JMAX / STRIDE
) (
  input  logic [R-1:0][N-1:0]  x1,
  input  logic [1:0]           lambda,
  input  logic                 row_valid,
  output logic [RP-1:0][N-1:0] x2
);

  always_comb begin
    for (int unsigned j = 0; j < RP; j++) begin
      unique case (lambda)
        2'd0:    x2[j] = x1[STRIDE*j];
        2'd1:    x2[j] = x1[STRIDE*j + 1];
        default: x2[j] = x1[STRIDE*j + 2];
      endcase
      if (!row_valid) x2[j] = '0;
    end
  end

endmodule
