// pu_lane: one accumulator column of the processing unit.
//
// Every clock the lane adds either +X2 or -X2 (chosen by its binary weight
// w: 1 means +1, 0 means -1) to either its register or to zero (chosen by
// FI, the First-Input flag). So FI = 1 starts a new sum with the first input
// vector, and later cycles accumulate. The memory block drives X2 = 0
// whenever it is not streaming data; the register then keeps its value, so
// no separate valid signal is needed (the paper's figure shows none).
//
// All RP values of the vector are processed side by side; each value is an
// n-bit two's-complement fixed-point number and the adder wraps modulo 2^n,
// as the paper gives the register the same width nR' as X2. Result acc is the
// register itself, updated at the rising edge after the inputs. No reset:
// FI initialises the register before it is used.
module pu_lane #(
  parameter int unsigned N  = 16,
  parameter int unsigned RP = 32
) (
  input  logic                 clk,
  input  logic                 fi,
  input  logic                 w,
  input  logic [RP-1:0][N-1:0] x2,
  output logic [RP-1:0][N-1:0] acc
);

  logic [RP-1:0][N-1:0] addend;  // +X2 or -X2 (weight multiplexer)
  logic [RP-1:0][N-1:0] base;    // 0 or the register (FI multiplexer)

  always_comb begin
    for (int unsigned j = 0; j < RP; j++) begin
      addend[j] = w  ? x2[j] : N'(-x2[j]);
      base[j]   = fi ? '0    : acc[j];
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned j = 0; j < RP; j++) acc[j] <= base[j] + addend[j];
  end

endmodule
