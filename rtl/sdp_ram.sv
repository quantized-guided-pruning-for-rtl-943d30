// sdp_ram: simple dual-port RAM, the block-RAM primitive of the layer block.
//
// One synchronous write port and one synchronous read port on the same
// clock. The read data appear one clock after the address (registered
// output), as in an FPGA block RAM. A read of the address being written in
// the same cycle returns the old contents. The memory has no reset; callers
// only read words they have written.
//
// The paper's memory block holds two such BRAMs of n-bit fixed-point words;
// the weight store of the memory block uses one as well. Width and depth are
// parameters; the defaults are the BRAM-one size of one Conv64-64 layer
// (32 rows x 64 maps = 2048 words of 34 x 16 bits).
module sdp_ram #(
  parameter int unsigned WIDTH = 544,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
