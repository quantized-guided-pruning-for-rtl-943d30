// layer_block: one pruned, binary-weight 3x3 convolution layer with ReLU.
//
// A memory block (two BRAMs, weight store, copy multiplexers, control) feeds
// a processing unit of P accumulator lanes. For input maps k = 0..K-1 and
// output maps l = 0..L-1 the layer computes, for every output row i and
// column j,
//     y[i][j][l] = ReLU( sum_k  s[k][l] * xpad[S*i + iota_k][S*j + lambda_k][k] )
// where s = +1 / -1 is the binary weight of the one kept tap of slice (k, l),
// (iota_k, lambda_k) is the tap position fixed by k mod 9, and xpad is the
// input map with one zero row/column of padding on each side. All values are
// N-bit two's complement and sums wrap modulo 2^N.
//
// Interface: the writer fills BRAM one (x1_*, rows of R = JMAX+2 values with
// zero padding at both ends, address row*K + k) while x1_free = 1, then
// pulses x1_done. The layer writes its result one row-vector per cycle on
// y_we / y_addr / y_data (RP = JMAX/STRIDE values, address row*L + l, the
// layout the next layer's BRAM one uses) once dn_free = 1, and pulses
// y_done with the last vector. Weights are loaded through w_* (address
// g*K + k, bit p for output map g*P + p).
//
// Timing: one image takes IO*K + IO*K*L/P + IO*L cycles from the first copy
// cycle to the last y_we (IO = IMAX/STRIDE output rows), the paper's clock
// cycle count. While it is processed, BRAM one is already free for the next
// image, so consecutive layers work on consecutive images at the same time.
//
// The split into memory block and processing unit, the one-tap-per-slice
// rule, the binary weights and the cycle count follow the published layer
// block; the handshake signals, the address layouts and the padding scheme
// are this design's (see mem_block).
module layer_block
  import qgp_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned IMAX   = 32,
  parameter int unsigned JMAX   = 32,
  parameter int unsigned K      = 64,
  parameter int unsigned L      = 64,
  parameter int unsigned P      = 16,
  parameter int unsigned STRIDE = 1,
  localparam int unsigned R    = JMAX + 2,
  localparam int unsigned RP   = JMAX / STRIDE,
  localparam int unsigned IO   = IMAX / STRIDE,
  localparam int unsigned G    = L / P,
  localparam int unsigned A1W  = $clog2(IMAX * K),
  localparam int unsigned AYW  = $clog2(IO * L),
  localparam int unsigned AWW  = (K * G > 1) ? $clog2(K * G) : 1,
  localparam int unsigned ROWW = (IMAX > 1) ? $clog2(IMAX) + 1 : 2,
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned PW   = (P > 1) ? $clog2(P) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 x1_we,
  input  logic [A1W-1:0]       x1_addr,
  input  logic [R-1:0][N-1:0]  x1_data,
  input  logic                 x1_done,
  output logic                 x1_free,
  input  logic                 w_we,
  input  logic [AWW-1:0]       w_addr,
  input  logic [P-1:0]         w_data,
  input  logic                 dn_free,
  output logic                 y_we,
  output logic [AYW-1:0]       y_addr,
  output logic [RP-1:0][N-1:0] y_data,
  output logic                 y_done,
  output mb_state_t            state_o
);

  initial begin
    assert (L % P == 0) else $fatal(1, "layer_block: P must divide L");
    assert (P <= L)     else $fatal(1, "layer_block: P must not exceed L");
    assert (K >= 2)     else $fatal(1, "layer_block: K must be at least 2");
  end

  logic                 fi, enable_s, itter_done;
  logic [P-1:0]         w;
  logic [RP-1:0][N-1:0] x2;
  logic [ROWW-1:0]      out_row;
  logic [GW-1:0]        out_grp;
  logic [PW-1:0]        y_idx;

  mem_block #(
    .N(N), .IMAX(IMAX), .JMAX(JMAX), .K(K), .L(L), .P(P), .STRIDE(STRIDE)
  ) u_mem (
    .clk        (clk),
    .rst_n      (rst_n),
    .x1_we      (x1_we),
    .x1_addr    (x1_addr),
    .x1_data    (x1_data),
    .x1_done    (x1_done),
    .x1_free    (x1_free),
    .w_we       (w_we),
    .w_addr     (w_addr),
    .w_data     (w_data),
    .fi         (fi),
    .w          (w),
    .enable_s   (enable_s),
    .x2         (x2),
    .itter_done (itter_done),
    .dn_free    (dn_free),
    .out_row    (out_row),
    .out_grp    (out_grp),
    .img_done   (y_done),
    .state_o    (state_o)
  );

  processing_unit #(.N(N), .RP(RP), .P(P)) u_pu (
    .clk        (clk),
    .rst_n      (rst_n),
    .fi         (fi),
    .w          (w),
    .enable_s   (enable_s),
    .x2         (x2),
    .itter_done (itter_done),
    .y_valid    (y_we),
    .y_idx      (y_idx),
    .y          (y_data)
  );

  assign y_addr = AYW'(out_row * L + out_grp * P + y_idx);

endmodule
