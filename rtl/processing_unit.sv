// processing_unit: P binary-weight accumulator lanes, output counter,
// register selector and ReLU.
//
// While the memory block streams the K input vectors X2 of one output row,
// lane p adds +X2 or -X2 (weight bit w[p]) into register p, FI clearing the
// registers on the first vector. So after K vectors register p holds the
// (pruned, binary) convolution of output feature map p of the current group
// for the whole row: RP values at once.
//
// A one-cycle Enable_s pulse, given together with the last input vector,
// starts the counter. During the next P cycles the counter selects register
// 0, 1, .. P-1 in turn (the "DEMUX" of the figure, here a P-to-1 selector
// onto the single output bus); the selected vector goes through ReLU and
// leaves as Y with y_valid = 1 and y_idx = counter. Itter_done is high in the
// cycle of the last of these P outputs, so the memory block can issue its
// next read in that cycle and the lanes receive new data right after.
//
// Timing: Y is combinational from the registers (valid during the P cycles
// after Enable_s). After the ReLU the sign bit of every Y value is always 0;
// it is kept so that Y has the n-bit width the next layer's BRAM stores. Structure, FI/W/Enable_s/Itter_done follow the paper;
// the pulse form of Enable_s, the cycle of Itter_done and wrap-around
// arithmetic are this design's choices.
module processing_unit #(
  parameter int unsigned N  = 16,
  parameter int unsigned RP = 32,
  parameter int unsigned P  = 16,
  localparam int unsigned PW = (P > 1) ? $clog2(P) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 fi,
  input  logic [P-1:0]         w,
  input  logic                 enable_s,
  input  logic [RP-1:0][N-1:0] x2,
  output logic                 itter_done,
  output logic                 y_valid,
  output logic [PW-1:0]        y_idx,
  output logic [RP-1:0][N-1:0] y
);

  logic [RP-1:0][N-1:0] acc [P];

  for (genvar p = 0; p < P; p++) begin : g_lane
    pu_lane #(.N(N), .RP(RP)) u_lane (
      .clk (clk),
      .fi  (fi),
      .w   (w[p]),
      .x2  (x2),
      .acc (acc[p])
    );
  end

  // Counter driving the output selector.
  logic          running;
  logic [PW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      cnt     <= '0;
    end else if (enable_s) begin
      running <= 1'b1;
      cnt     <= '0;
    end else if (running) begin
      if (cnt == PW'(P - 1)) running <= 1'b0;
      cnt <= cnt + 1'b1;
    end
  end

  assign itter_done = running && (cnt == PW'(P - 1));
  assign y_valid    = running;
  assign y_idx      = cnt;

  // Register selector and ReLU.
  always_comb begin
    for (int unsigned j = 0; j < RP; j++)
      y[j] = acc[cnt][j][N-1] ? '0 : acc[cnt][j];
  end

  // Enable_s must not restart the counter while it is still emitting.
  assert property (@(posedge clk) disable iff (!rst_n) enable_s |-> !running)
    else $error("processing_unit: Enable_s while outputs are still being written");

endmodule
