// qgp_top: a pipeline of NL identical layer blocks.
//
// Layer block b writes its output rows straight into BRAM one of block b+1,
// adding the zero padding value at both ends of each row. Each block starts
// an image only when the next block's BRAM one is free, and a block frees its
// BRAM one as soon as it has copied it to BRAM two, so all NL blocks work at
// the same time on NL consecutive images: latency grows with NL while the
// image rate stays that of one block.
//
// Ports: the input image is written into block 0's BRAM one (in_*: padded
// rows of JMAX+2 values, address row*K + k, while in_free = 1, then pulse
// in_done). Weights go to block w_layer through w_*. The last block's rows
// leave on out_* (address row*L + l) while out_free = 1 is held by the
// consumer, and out_done pulses with the last row of an image.
//
// Defaults: four Conv64-64 layers on 32x32 maps with P = 16 and 16-bit
// values, the paper's "4 x Conv64-64" FPGA configuration. The pipeline keeps
// map sizes from layer to layer, so stride is 1 and K = L here.
module qgp_top
  import qgp_pkg::*;
#(
  parameter int unsigned NL   = 4,
  parameter int unsigned N    = 16,
  parameter int unsigned IMAX = 32,
  parameter int unsigned JMAX = 32,
  parameter int unsigned C    = 64,
  parameter int unsigned P    = 16,
  localparam int unsigned R    = JMAX + 2,
  localparam int unsigned A1W  = $clog2(IMAX * C),
  localparam int unsigned AWW  = $clog2(C * C / P),
  localparam int unsigned LW   = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_we,
  input  logic [A1W-1:0]         in_addr,
  input  logic [R-1:0][N-1:0]    in_data,
  input  logic                   in_done,
  output logic                   in_free,
  input  logic                   w_we,
  input  logic [LW-1:0]          w_layer,
  input  logic [AWW-1:0]         w_addr,
  input  logic [P-1:0]           w_data,
  input  logic                   out_free,
  output logic                   out_we,
  output logic [A1W-1:0]         out_addr,
  output logic [JMAX-1:0][N-1:0] out_data,
  output logic                   out_done,
  output logic [NL-1:0]          busy
);

  logic                   x1_we   [NL+1];
  logic [A1W-1:0]         x1_addr [NL+1];
  logic [JMAX-1:0][N-1:0] yv      [NL+1];
  logic                   x1_done [NL+1];
  logic                   x1_free [NL+1];

  // stage 0 is the input port, stage NL the output port
  assign x1_we[0]   = in_we;
  assign x1_addr[0] = in_addr;
  assign x1_done[0] = in_done;
  assign in_free    = x1_free[0];
  assign x1_free[NL] = out_free;
  assign yv[0]      = in_data[JMAX:1];

  for (genvar b = 0; b < NL; b++) begin : g_layer
    mb_state_t st;
    layer_block #(
      .N(N), .IMAX(IMAX), .JMAX(JMAX), .K(C), .L(C), .P(P), .STRIDE(1)
    ) u_layer (
      .clk     (clk),
      .rst_n   (rst_n),
      .x1_we   (x1_we[b]),
      .x1_addr (x1_addr[b]),
      .x1_data ((b == 0) ? in_data : {N'(0), yv[b], N'(0)}),
      .x1_done (x1_done[b]),
      .x1_free (x1_free[b]),
      .w_we    (w_we && (w_layer == LW'(b))),
      .w_addr  (w_addr),
      .w_data  (w_data),
      .dn_free (x1_free[b+1]),
      .y_we    (x1_we[b+1]),
      .y_addr  (x1_addr[b+1]),
      .y_data  (yv[b+1]),
      .y_done  (x1_done[b+1]),
      .state_o (st)
    );
    assign busy[b] = (st != MB_IDLE);
  end

  assign out_we   = x1_we[NL];
  assign out_addr = x1_addr[NL];
  assign out_data = yv[NL];
  assign out_done = x1_done[NL];

endmodule
