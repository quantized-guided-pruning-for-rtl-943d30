// qgp_pkg: constants, types and small functions shared by the layer-block RTL.
//
// The pruning rule keeps, in every 3x3 kernel slice w[.,.,k,l], exactly one
// tap: the one at position (iota, lambda) with
//     iota + lambda * KH == k  (mod KH*KW).
// The position therefore depends only on the input feature map k, never on
// the output map l. tap_row() / tap_col() decode a position 0..8 into the
// row offset iota and the column offset lambda (iota is taken as the row
// coordinate and lambda as the column coordinate, which is this design's
// reading of the rule). A fixed, stored-nowhere tap position is what lets the
// hardware replace each 3x3 convolution slice by one shifted copy of a row.
package qgp_pkg;

  // Kernel height and width of the pruned convolutions (3x3 in the paper).
  localparam int unsigned KH = 3;
  localparam int unsigned KW = 3;
  localparam int unsigned KTAPS = KH * KW;

  // Row offset iota of the kept tap for position pos = k mod 9.
  function automatic logic [1:0] tap_row(input logic [3:0] pos);
    return 2'(pos % 4'(KH));
  endfunction

  // Column offset lambda of the kept tap for position pos = k mod 9.
  function automatic logic [1:0] tap_col(input logic [3:0] pos);
    return 2'(pos / 4'(KH) % 4'(KW));
  endfunction

  // Next tap position: pos + 1, wrapping from KTAPS-1 to 0 (tracks k mod 9).
  function automatic logic [3:0] tap_next(input logic [3:0] pos);
    return (pos == 4'(KTAPS - 1)) ? 4'd0 : pos + 4'd1;
  endfunction

  // Phases of the memory-block controller.
  typedef enum logic [2:0] {
    MB_IDLE,   // BRAM two empty, waiting for BRAM one to be filled
    MB_COPY,   // copying BRAM one -> BRAM two through the window multiplexers
    MB_WAIT,   // copy done, waiting until the next layer's BRAM one is free
    MB_READ,   // streaming K vectors X2 and weight words to the processing unit
    MB_DRAIN   // processing unit is writing its P registers out
  } mb_state_t;

endpackage
