// lb_env: self-checking environment for one layer_block.
//
// Generates NIMG random images of K maps (IMAX x JMAX values in
// [-AMP, AMP]) and random binary weights, loads them, plays the previous
// layer (writes padded rows into BRAM one while x1_free, pulses x1_done)
// and the next layer (dn_free goes low for a random time after every
// y_done, so the WAIT back-pressure happens). Every output row-vector is
// compared with a reference convolution computed here from the definition
// of the pruned layer: tap (k mod 9) -> row offset (k mod 9) mod 3, column
// offset (k mod 9) div 3, weight bit 1 = +1, sums modulo 2^N, then ReLU.
// It also checks that each image takes exactly
//   IO*K + IO*K*L/P + IO*L + 1 cycles
// between the first copy cycle and the last output, not counting cycles
// spent waiting for dn_free: the paper's count plus the one cycle of BRAM
// read latency before the first vector reaches the processing unit. Reports on done / checks / failures.
module lb_env #(
  parameter int unsigned N      = 16,
  parameter int unsigned IMAX   = 8,
  parameter int unsigned JMAX   = 8,
  parameter int unsigned K      = 12,
  parameter int unsigned L      = 8,
  parameter int unsigned P      = 4,
  parameter int unsigned STRIDE = 1,
  parameter int unsigned NIMG   = 3,
  parameter int          AMP    = 300,
  parameter int unsigned SEED   = 1
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_stall,
  output int   n_relu0
);
  import qgp_pkg::*;

  localparam int unsigned R   = JMAX + 2;
  localparam int unsigned RP  = JMAX / STRIDE;
  localparam int unsigned IO  = IMAX / STRIDE;
  localparam int unsigned G   = L / P;
  localparam int unsigned A1W = $clog2(IMAX * K);
  localparam int unsigned AYW = $clog2(IO * L);
  localparam int unsigned AWW = (K * G > 1) ? $clog2(K * G) : 1;
  localparam int unsigned CCS = IO*K + IO*K*L/P + IO*L + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 x1_we = 1'b0, x1_done = 1'b0, x1_free;
  logic [A1W-1:0]       x1_addr = '0;
  logic [R-1:0][N-1:0]  x1_data = '0;
  logic                 w_we = 1'b0;
  logic [AWW-1:0]       w_addr = '0;
  logic [P-1:0]         w_data = '0;
  logic                 dn_free = 1'b1;
  logic                 y_we, y_done;
  logic [AYW-1:0]       y_addr;
  logic [RP-1:0][N-1:0] y_data;
  mb_state_t            st;

  layer_block #(
    .N(N), .IMAX(IMAX), .JMAX(JMAX), .K(K), .L(L), .P(P), .STRIDE(STRIDE)
  ) dut (
    .clk(clk), .rst_n(rst_n),
    .x1_we(x1_we), .x1_addr(x1_addr), .x1_data(x1_data), .x1_done(x1_done),
    .x1_free(x1_free),
    .w_we(w_we), .w_addr(w_addr), .w_data(w_data),
    .dn_free(dn_free),
    .y_we(y_we), .y_addr(y_addr), .y_data(y_data), .y_done(y_done),
    .state_o(st)
  );

  int xin [NIMG][IMAX][JMAX][K];
  bit sgn [K][L];
  int yref [NIMG][IO][RP][L];

  // loop bounds held in variables: the reference loops run at simulation
  // time instead of being unrolled at compile time
  int unsigned dn, dl, di, dj, dc, dk, dlo, dio, drp;

  function automatic int wrapn(input longint v);
    longint m;
    m = v & ((64'd1 << N) - 1);
    if (m >= (64'd1 << (N-1))) m -= (64'd1 << N);
    return int'(m);
  endfunction

  function automatic int xpad(input int n, input int r, input int c, input int k);
    if (r < 0 || r >= int'(IMAX) || c < 0 || c >= int'(JMAX)) return 0;
    return xin[n][r][c][k];
  endfunction

  task automatic build_ref();
    for (int n = 0; n < int'(dn); n++)
      for (int i = 0; i < int'(dio); i++)
        for (int j = 0; j < int'(drp); j++)
          for (int l = 0; l < int'(dlo); l++) begin
            longint acc = 0;
            int v;
            for (int k = 0; k < int'(dk); k++) begin
              int pos = k % 9;
              int r = int'(STRIDE)*i + (pos % 3) - 1;
              int c = int'(STRIDE)*j + (pos / 3) - 1;
              acc += longint'(sgn[k][l] ? xpad(n, r, c, k) : -xpad(n, r, c, k));
            end
            v = wrapn(acc);
            yref[n][i][j][l] = (v < 0) ? 0 : v;
          end
  endtask

  // ------------------------------------------------------------ stimulus
  int  img_out = 0;
  int  wait_cycles = 0;
  int  t_start [NIMG];
  int  cyc = 0;
  bit  in_copy_prev = 1'b0;
  int  n_start = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && st == MB_WAIT) wait_cycles <= wait_cycles + 1;
    if (rst_n && st == MB_COPY && !in_copy_prev && n_start < int'(NIMG)) begin
      t_start[n_start] <= cyc;
      n_start <= n_start + 1;
    end
    in_copy_prev <= (st == MB_COPY);
  end

  initial begin
    dn = NIMG; dl = 1; di = IMAX; dj = JMAX; dc = K; dk = K; dlo = L; dio = IO; drp = RP;
    done = 1'b0; checks = 0; failures = 0; n_stall = 0; n_relu0 = 0;
    void'($urandom(SEED));
    for (int n = 0; n < int'(dn); n++)
      for (int i = 0; i < int'(di); i++)
        for (int j = 0; j < int'(dj); j++)
          for (int k = 0; k < int'(dk); k++)
            xin[n][i][j][k] = int'($urandom_range(2*AMP)) - AMP;
    for (int k = 0; k < int'(dk); k++)
      for (int l = 0; l < int'(dlo); l++) sgn[k][l] = 1'($urandom);
    build_ref();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // weights
    for (int g = 0; g < int'(dlo/P); g++)
      for (int k = 0; k < int'(dk); k++) begin
        @(negedge clk);
        w_we = 1'b1; w_addr = AWW'(g*K + k);
        for (int p = 0; p < int'(P); p++) w_data[p] = sgn[k][g*P + p];
      end
    @(negedge clk) w_we = 1'b0;
    // images
    for (int n = 0; n < int'(dn); n++) begin
      while (!x1_free) @(negedge clk);
      for (int i = 0; i < int'(di); i++)
        for (int k = 0; k < int'(dk); k++) begin
          x1_we = 1'b1; x1_addr = A1W'(i*K + k);
          x1_data = '0;
          for (int j = 0; j < int'(dj); j++) x1_data[j+1] = N'(xin[n][i][j][k]);
          x1_done = (i == int'(IMAX) - 1) && (k == int'(K) - 1);
          @(negedge clk);
        end
      x1_we = 1'b0; x1_done = 1'b0;
    end
  end

  // next layer: busy for a random time after each image
  always @(posedge clk) begin
    if (y_done) begin
      dn_free <= 1'b0;
      fork begin
        repeat (IO*K + $urandom_range(40, 1)) @(posedge clk);
        dn_free <= 1'b1;
      end join_none
    end
  end

  // ------------------------------------------------------------ checking
  int got [IO*L];
  always @(posedge clk) begin
    if (rst_n && y_we) begin
      int i, l;
      i = int'(y_addr) / int'(L);
      l = int'(y_addr) % int'(L);
      got[y_addr]++;
      for (int j = 0; j < int'(drp); j++) begin
        checks++;
        if (img_out >= int'(NIMG) || int'(y_data[j]) != yref[img_out][i][j][l]) begin
          failures++;
          if (failures < 10)
            $display("lb_env: img %0d row %0d col %0d map %0d got %0d exp %0d",
                     img_out, i, j, l, y_data[j], yref[img_out][i][j][l]);
        end
        if (yref[img_out][i][j][l] == 0) n_relu0++;
      end
    end
    if (rst_n && y_done) begin
      int lat;
      lat = cyc - t_start[img_out] + 1 - wait_cycles;
      checks++;
      if (lat != int'(CCS)) begin
        failures++;
        $display("lb_env: image %0d took %0d cycles, expected %0d", img_out, lat, CCS);
      end
      // every output address exactly once
      checks++;
      foreach (got[a]) if (got[a] != 1) begin
        failures++;
        $display("lb_env: output address %0d written %0d times", a, got[a]);
        break;
      end
      foreach (got[a]) got[a] = 0;
      n_stall += (wait_cycles > 0);
      wait_cycles = 0;
      img_out++;
      if (img_out == int'(NIMG)) done <= 1'b1;
    end
  end

endmodule
