// qgp_env: self-checking environment for the qgp_top pipeline.
//
// Loads random binary weights into all NL layer blocks, streams NIMG random
// images (C maps of IMAX x JMAX values in [-AMP, AMP]) into the first block
// as fast as in_free allows, and compares every output row of the last
// block with a reference built here by applying the pruned-layer definition
// NL times (tap (k mod 9): row offset (k mod 9) mod 3, column offset
// (k mod 9) div 3, zero padding, weight bit 1 = +1, sums modulo 2^N, ReLU).
// The consumer drops out_free for a while after the first image (when
// OUT_STALL is set), so the back-pressure ripples up the pipeline.
// It counts the mechanisms of the design and fails when one never occurs:
// BRAM-one to BRAM-two copies, back-pressure waits, input back-pressure
// (in_free low while an image is ready), cycles with several layer blocks
// busy at once (pipelining) and ReLU clamps. It also checks the image rate:
// with the consumer always ready, consecutive images leave at most
// CCS + 3 cycles apart, CCS = IMAX*C + IMAX*C*C/P + IMAX*C being the clock
// cycle count of one layer.
module qgp_env #(
  parameter int unsigned NL        = 2,
  parameter int unsigned N         = 16,
  parameter int unsigned IMAX      = 8,
  parameter int unsigned JMAX      = 8,
  parameter int unsigned C         = 12,
  parameter int unsigned P         = 4,
  parameter int unsigned NIMG      = 4,
  parameter int          AMP       = 100,
  parameter int unsigned SEED      = 1,
  parameter bit          OUT_STALL = 1'b1
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import qgp_pkg::*;

  localparam int unsigned R   = JMAX + 2;
  localparam int unsigned A1W = $clog2(IMAX * C);
  localparam int unsigned AWW = $clog2(C * C / P);
  localparam int unsigned LW  = (NL > 1) ? $clog2(NL) : 1;
  localparam int unsigned CCS = IMAX*C + IMAX*C*C/P + IMAX*C;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                   in_we = 1'b0, in_done = 1'b0, in_free;
  logic [A1W-1:0]         in_addr = '0;
  logic [R-1:0][N-1:0]    in_data = '0;
  logic                   w_we = 1'b0;
  logic [LW-1:0]          w_layer = '0;
  logic [AWW-1:0]         w_addr = '0;
  logic [P-1:0]           w_data = '0;
  logic                   out_free = 1'b1;
  logic                   out_we, out_done;
  logic [A1W-1:0]         out_addr;
  logic [JMAX-1:0][N-1:0] out_data;
  logic [NL-1:0]          busy;

  qgp_top #(.NL(NL), .N(N), .IMAX(IMAX), .JMAX(JMAX), .C(C), .P(P)) dut (
    .clk(clk), .rst_n(rst_n),
    .in_we(in_we), .in_addr(in_addr), .in_data(in_data), .in_done(in_done),
    .in_free(in_free),
    .w_we(w_we), .w_layer(w_layer), .w_addr(w_addr), .w_data(w_data),
    .out_free(out_free), .out_we(out_we), .out_addr(out_addr),
    .out_data(out_data), .out_done(out_done), .busy(busy)
  );

  // feature maps of every image at every stage: stage 0 input, NL output
  int fm [NIMG][NL+1][IMAX][JMAX][C];
  bit sgn [NL][C][C];
  int n_clamp = 0;

  // loop bounds held in variables: the reference loops run at simulation
  // time instead of being unrolled at compile time
  int unsigned dn, dl, di, dj, dc, dk, dlo, dio, drp;

  function automatic int wrapn(input longint v);
    longint m;
    m = v & ((64'd1 << N) - 1);
    if (m >= (64'd1 << (N-1))) m -= (64'd1 << N);
    return int'(m);
  endfunction

  task automatic build_ref();
    for (int n = 0; n < int'(dn); n++)
      for (int s = 0; s < int'(dl); s++)
        for (int i = 0; i < int'(di); i++)
          for (int j = 0; j < int'(dj); j++)
            for (int l = 0; l < int'(dc); l++) begin
              longint acc = 0;
              int v;
              for (int k = 0; k < int'(dc); k++) begin
                int pos = k % 9;
                int r = i + (pos % 3) - 1;
                int c = j + (pos / 3) - 1;
                if (r >= 0 && r < int'(IMAX) && c >= 0 && c < int'(JMAX))
                  acc += sgn[s][k][l] ? longint'(fm[n][s][r][c][k]) : -longint'(fm[n][s][r][c][k]);
              end
              v = wrapn(acc);
              if (v < 0) n_clamp++;
              fm[n][s+1][i][j][l] = (v < 0) ? 0 : v;
            end
  endtask

  // ------------------------------------------------------ mechanism counters
  int cyc = 0, n_copy = 0, n_wait = 0, n_overlap = 0, n_inbp = 0;
  bit want_in = 1'b0;
  for (genvar b = 0; b < NL; b++) begin : g_mon
    mb_state_t prev = MB_IDLE;
    always @(posedge clk) begin
      if (rst_n && dut.g_layer[b].st == MB_COPY && prev != MB_COPY) n_copy++;
      if (rst_n && dut.g_layer[b].st == MB_WAIT) n_wait++;
      prev <= dut.g_layer[b].st;
    end
  end
  always @(posedge clk) begin
    cyc++;
    if ($countones(busy) >= 2) n_overlap++;
    if (want_in && !in_free) n_inbp++;
  end

  // -------------------------------------------------------------- stimulus
  initial begin
    dn = NIMG; dl = NL; di = IMAX; dj = JMAX; dc = C; dk = C; dlo = C; dio = IMAX; drp = JMAX;
    done = 1'b0; checks = 0; failures = 0;
    void'($urandom(SEED));
    for (int n = 0; n < int'(dn); n++)
      for (int i = 0; i < int'(di); i++)
        for (int j = 0; j < int'(dj); j++)
          for (int k = 0; k < int'(dc); k++)
            fm[n][0][i][j][k] = int'($urandom_range(2*AMP)) - AMP;
    for (int s = 0; s < int'(dl); s++)
      for (int k = 0; k < int'(dc); k++)
        for (int l = 0; l < int'(dc); l++) sgn[s][k][l] = 1'($urandom);
    build_ref();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int s = 0; s < int'(dl); s++)
      for (int g = 0; g < int'(dc/P); g++)
        for (int k = 0; k < int'(dc); k++) begin
          @(negedge clk);
          w_we = 1'b1; w_layer = LW'(s); w_addr = AWW'(g*C + k);
          for (int p = 0; p < int'(P); p++) w_data[p] = sgn[s][k][g*P + p];
        end
    @(negedge clk) w_we = 1'b0;
    for (int n = 0; n < int'(dn); n++) begin
      want_in = 1'b1;
      while (!in_free) @(negedge clk);
      want_in = 1'b0;
      for (int i = 0; i < int'(di); i++)
        for (int k = 0; k < int'(dc); k++) begin
          in_we = 1'b1; in_addr = A1W'(i*C + k);
          in_data = '0;
          for (int j = 0; j < int'(dj); j++) in_data[j+1] = N'(fm[n][0][i][j][k]);
          in_done = (i == int'(IMAX) - 1) && (k == int'(C) - 1);
          @(negedge clk);
        end
      in_we = 1'b0; in_done = 1'b0;
    end
  end

  // consumer: after the first image it is busy for a while (OUT_STALL)
  int img_out = 0;
  always @(posedge clk) begin
    if (OUT_STALL && out_done && img_out == 0) begin
      out_free <= 1'b0;
      fork begin
        repeat (2*CCS) @(posedge clk);
        out_free <= 1'b1;
      end join_none
    end
  end

  // -------------------------------------------------------------- checking
  int t_last = -1;
  always @(posedge clk) begin
    if (rst_n && out_we) begin
      int i, l;
      i = int'(out_addr) / int'(C);
      l = int'(out_addr) % int'(C);
      for (int j = 0; j < int'(dj); j++) begin
        checks++;
        if (img_out >= int'(NIMG) || int'(out_data[j]) != fm[img_out][NL][i][j][l]) begin
          failures++;
          if (failures < 10)
            $display("qgp_env: img %0d row %0d col %0d map %0d got %0d exp %0d",
                     img_out, i, j, l, out_data[j], fm[img_out][NL][i][j][l]);
        end
      end
    end
    if (rst_n && out_done) begin
      // image rate: only between images the consumer did not hold back
      if (t_last >= 0 && !(OUT_STALL && img_out == 1)) begin
        checks++;
        if (cyc - t_last > int'(CCS) + 3) begin
          failures++;
          $display("qgp_env: images %0d cycles apart, expected at most %0d",
                   cyc - t_last, CCS + 3);
        end
      end
      t_last = cyc;
      img_out++;
      if (img_out == int'(NIMG)) begin
        $display("qgp_env NL=%0d C=%0d P=%0d: copies %0d waits %0d overlap %0d in-backpressure %0d relu-clamps %0d cycles %0d",
                 NL, C, P, n_copy, n_wait, n_overlap, n_inbp, n_clamp, cyc);
        checks += 5;
        if (n_copy != int'(NL*NIMG)) begin failures++; $display("qgp_env: copy count wrong"); end
        if (OUT_STALL && n_wait == 0) begin failures++; $display("qgp_env: no back-pressure wait"); end
        if (NL > 1 && n_overlap == 0) begin failures++; $display("qgp_env: no pipelining"); end
        if (NIMG > NL && n_inbp == 0) begin failures++; $display("qgp_env: no input back-pressure"); end
        if (n_clamp == 0) begin failures++; $display("qgp_env: no ReLU clamp"); end
        done <= 1'b1;
      end
    end
  end

endmodule
