// mem_block: the memory block of a layer block, with its control.
//
// Holds three memories:
//   BRAM one  IMAX*K words of R = JMAX+2 values: the padded input rows X1,
//             written by the previous layer (or the input port), address
//             row*K + k.
//   BRAM two  IO*K words of RP values (IO = IMAX/STRIDE output rows,
//             RP = JMAX/STRIDE): the rows X2 the processing unit reads.
//   weights   K*L/P words of P bits, address g*K + k, bit p = sign of the
//             kept tap w[k][g*P+p] (1 = +1, 0 = -1).
//
// Operation on one image (all phases back to back):
//   COPY  IO*K cycles. For output row i and input map k the kept tap of map k
//         sits at (iota, lambda) = tap of (k mod 9). BRAM one row
//         STRIDE*i + iota - 1 (zero outside the map: vertical padding) is
//         read and the window multiplexers (x2_select) keep the RP values
//         starting at column lambda; the result is written to BRAM two at
//         i*K + k. After the copy BRAM one is free for the next image
//         (x1_free = 1) while this image is still being processed.
//   WAIT  until the next layer's BRAM one is free (dn_free). This is the
//         pipeline back-pressure; it takes no cycle if dn_free is already 1.
//   READ  for every output row i and group g of P output maps, K cycles
//         read X2 (address i*K + k) and the weight word (g*K + k); one cycle
//         later they reach the processing unit with FI on the first vector
//         and a one-cycle Enable_s on the last.
//   DRAIN the processing unit writes its P registers out (P cycles). On
//         Itter_done the first read of the next group is issued in the same
//         cycle, so one group costs exactly K + P cycles.
// One image therefore takes IO*K + IO*K*L/P + IO*L cycles from the first
// copy cycle to the last output, the paper's equation for the layer's clock
// cycles. When no vector is being streamed X2 is driven to zero so the
// processing-unit registers keep their values.
//
// Handshake with the neighbours: the writer may write BRAM one only while
// x1_free = 1 and pulses x1_done with (or after) its last write; img_done
// pulses in the cycle of this layer's last output. out_row / out_grp name the
// row and group whose outputs are being written.
//
// Follows the paper: two BRAMs, copy with window selection, the FI, W,
// Enable_s, X2 and Itter_done signals and the cycle count. This design's
// choices: the weight store and its load port, the row offset applied at copy
// time, the x1_free/x1_done/dn_free handshake, and the pulse form of
// Enable_s.
module mem_block
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
  localparam int unsigned D1   = IMAX * K,
  localparam int unsigned D2   = IO * K,
  localparam int unsigned DW   = K * G,
  localparam int unsigned A1W  = $clog2(D1),
  localparam int unsigned A2W  = $clog2(D2),
  localparam int unsigned AWW  = (DW > 1) ? $clog2(DW) : 1,
  localparam int unsigned KW_  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned ROWW = (IMAX > 1) ? $clog2(IMAX) + 1 : 2,
  localparam int unsigned GW   = (G > 1) ? $clog2(G) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // BRAM one write port (previous layer or input)
  input  logic                 x1_we,
  input  logic [A1W-1:0]       x1_addr,
  input  logic [R-1:0][N-1:0]  x1_data,
  input  logic                 x1_done,
  output logic                 x1_free,
  // weight load port
  input  logic                 w_we,
  input  logic [AWW-1:0]       w_addr,
  input  logic [P-1:0]         w_data,
  // to / from the processing unit
  output logic                 fi,
  output logic [P-1:0]         w,
  output logic                 enable_s,
  output logic [RP-1:0][N-1:0] x2,
  input  logic                 itter_done,
  // next layer
  input  logic                 dn_free,
  output logic [ROWW-1:0]      out_row,
  output logic [GW-1:0]        out_grp,
  output logic                 img_done,
  // status
  output mb_state_t            state_o
);

  mb_state_t state;
  assign state_o = state;

  // ---------------------------------------------------------------- BRAM one
  logic                bram1_full;
  logic [A1W-1:0]      b1_raddr;
  logic [R-1:0][N-1:0] b1_rdata;

  sdp_ram #(.WIDTH(R*N), .DEPTH(D1)) u_bram1 (
    .clk   (clk),
    .we    (x1_we),
    .waddr (x1_addr),
    .wdata (x1_data),
    .raddr (b1_raddr),
    .rdata (b1_rdata)
  );

  assign x1_free = !bram1_full;

  // ---------------------------------------------------------------- counters
  logic [ROWW-1:0] row;     // output row being copied / read
  logic [KW_-1:0]  kk;      // input feature map
  logic [3:0]      kpos;    // kk mod 9
  logic [GW-1:0]   grp;     // group of P output maps
  logic            last_k, last_row, last_grp;

  assign last_k   = (kk  == KW_'(K - 1));
  assign last_row = (row == ROWW'(IO - 1));
  assign last_grp = (grp == GW'(G - 1));

  // ------------------------------------------------------------------- copy
  logic [1:0]                iota, lambda;
  logic signed [ROWW+1:0]    irow;        // input row of the kept tap
  logic                      irow_ok;

  assign iota    = tap_row(kpos);
  assign lambda  = tap_col(kpos);
  assign irow    = $signed({2'b00, row}) * $signed((ROWW+2)'(STRIDE))
                 + $signed({{ROWW{1'b0}}, iota}) - 1;
  assign irow_ok = (irow >= 0) && (irow < $signed((ROWW+2)'(IMAX)));
  assign b1_raddr = irow_ok ? A1W'(irow[ROWW-1:0] * K + kk) : '0;

  // copy pipeline stage (BRAM one read latency)
  logic            cp_v, cp_rowok;
  logic [1:0]      cp_lambda;
  logic [A2W-1:0]  cp_waddr;
  logic [RP-1:0][N-1:0] cp_x2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cp_v      <= 1'b0;
      cp_rowok  <= 1'b0;
      cp_lambda <= '0;
      cp_waddr  <= '0;
    end else begin
      cp_v      <= (state == MB_COPY);
      cp_rowok  <= irow_ok;
      cp_lambda <= lambda;
      cp_waddr  <= A2W'(row * K + kk);
    end
  end

  x2_select #(.N(N), .JMAX(JMAX), .STRIDE(STRIDE)) u_sel (
    .x1        (b1_rdata),
    .lambda    (cp_lambda),
    .row_valid (cp_rowok),
    .x2        (cp_x2)
  );

  // ---------------------------------------------------------------- BRAM two
  logic                 rd_issue;
  logic [A2W-1:0]       b2_raddr;
  logic [RP-1:0][N-1:0] b2_rdata;
  logic [AWW-1:0]       wr_raddr;

  sdp_ram #(.WIDTH(RP*N), .DEPTH(D2)) u_bram2 (
    .clk   (clk),
    .we    (cp_v),
    .waddr (cp_waddr),
    .wdata (cp_x2),
    .raddr (b2_raddr),
    .rdata (b2_rdata)
  );

  sdp_ram #(.WIDTH(P), .DEPTH(DW)) u_wram (
    .clk   (clk),
    .we    (w_we),
    .waddr (w_addr),
    .wdata (w_data),
    .raddr (wr_raddr),
    .rdata (w)
  );

  assign b2_raddr = A2W'(row * K + kk);
  assign wr_raddr = AWW'(grp * K + kk);

  // A read is issued in every READ cycle, and in the DRAIN cycle that ends a
  // group when another group follows.
  logic final_issued;  // the last group of the image has been read
  assign rd_issue = (state == MB_READ) ||
                    (state == MB_DRAIN && itter_done && !final_issued);

  logic rd_v, rd_first, rd_last;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_v     <= 1'b0;
      rd_first <= 1'b0;
      rd_last  <= 1'b0;
    end else begin
      rd_v     <= rd_issue;
      rd_first <= rd_issue && (kk == '0);
      rd_last  <= rd_issue && last_k;
    end
  end

  assign x2       = rd_v ? b2_rdata : '0;
  assign fi       = rd_first;
  assign enable_s = rd_last;
  assign img_done = (state == MB_DRAIN) && itter_done && final_issued;

  // -------------------------------------------------------------- controller
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state        <= MB_IDLE;
      bram1_full   <= 1'b0;
      row          <= '0;
      kk           <= '0;
      kpos         <= '0;
      grp          <= '0;
      out_row      <= '0;
      out_grp      <= '0;
      final_issued <= 1'b0;
    end else begin
      if (x1_done) bram1_full <= 1'b1;

      // counter advance shared by COPY (row, k) and READ (row, group, k)
      if (state == MB_COPY || rd_issue) begin
        if (last_k) begin
          kk   <= '0;
          kpos <= '0;
        end else begin
          kk   <= kk + 1'b1;
          kpos <= tap_next(kpos);
        end
      end

      unique case (state)
        MB_IDLE: begin
          row <= '0;
          grp <= '0;
          if (bram1_full) state <= MB_COPY;
        end
        MB_COPY: begin
          if (last_k) begin
            row <= row + 1'b1;
            if (last_row) begin
              row        <= '0;
              bram1_full <= 1'b0;
              state      <= dn_free ? MB_READ : MB_WAIT;
            end
          end
        end
        MB_WAIT: begin
          if (dn_free) state <= MB_READ;
        end
        MB_READ, MB_DRAIN: begin
          if (rd_issue) begin
            if (last_k) begin
              out_row      <= row;
              out_grp      <= grp;
              final_issued <= last_row && last_grp;
              if (last_grp) begin
                grp <= '0;
                row <= last_row ? '0 : row + 1'b1;
              end else begin
                grp <= grp + 1'b1;
              end
              state <= MB_DRAIN;
            end else begin
              state <= MB_READ;
            end
          end else if (img_done) begin
            final_issued <= 1'b0;
            state        <= MB_IDLE;
          end
        end
        default: state <= MB_IDLE;
      endcase
    end
  end

  // BRAM one may only be written while it is free.
  assert property (@(posedge clk) disable iff (!rst_n) x1_we |-> !bram1_full)
    else $error("mem_block: write into BRAM one while it holds an image");

endmodule
