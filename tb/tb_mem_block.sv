// tb_mem_block: memory block with 6x6 maps, K = 10 input maps (all nine tap
// positions and the mod-9 wrap), L = 4 output maps, P = 2, stride 1. The
// testbench fills BRAM one and the weight store, plays the processing unit
// (Itter_done in the P-th cycle after Enable_s) and checks, for every read
// cycle, that X2 is the window of input row i + iota - 1 starting at column
// lambda (zero outside the map), that W is the weight word of (group, k),
// that FI marks k = 0 and Enable_s k = K-1, that X2 is zero between groups,
// that x1_free returns after the copy, and that one image takes
// IO*K + IO*K*L/P + IO*L + 1 cycles from the first copy cycle to img_done.
module tb_mem_block;
  import qgp_pkg::*;
  localparam int unsigned N = 16, IMAX = 6, JMAX = 6, K = 10, L = 4, P = 2;
  localparam int unsigned R = JMAX + 2, G = L / P;
  localparam int unsigned CCS = IMAX*K + IMAX*K*L/P + IMAX*L + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic x1_we = 1'b0, x1_done = 1'b0, x1_free, w_we = 1'b0;
  logic [5:0] x1_addr = '0;
  logic [R-1:0][N-1:0] x1_data = '0;
  logic [4:0] w_addr = '0;
  logic [P-1:0] w_data = '0;
  logic fi, enable_s, itter_done, dn_free = 1'b1, img_done;
  logic [P-1:0] w;
  logic [JMAX-1:0][N-1:0] x2;
  logic [3:0] out_row;
  logic [0:0] out_grp;
  mb_state_t state_o;

  mem_block #(.N(N), .IMAX(IMAX), .JMAX(JMAX), .K(K), .L(L), .P(P)) dut (.*);

  int xin [IMAX][JMAX][K];
  logic [P-1:0] wt [G][K];
  int checks = 0, failures = 0;

  // processing-unit stand-in
  int pcnt = -1;
  always @(posedge clk) begin
    if (enable_s) pcnt <= 0;
    else if (pcnt >= 0) pcnt <= (pcnt == int'(P) - 1) ? -1 : pcnt + 1;
  end
  assign itter_done = (pcnt == int'(P) - 1);

  // expected read sequence
  int ei = 0, eg = 0, ek = 0, cyc = 0, t0 = -1, nread = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && state_o == MB_COPY && t0 < 0) t0 <= cyc;
    if (rst_n && pcnt >= 0) begin
      checks++;
      if (x2 != '0) failures++;
    end
    if (rst_n && img_done) begin
      checks++;
      if (cyc - t0 + 1 != int'(CCS)) begin
        failures++;
        $display("image took %0d cycles, expected %0d", cyc - t0 + 1, CCS);
      end
      checks++;
      if (nread != int'(IMAX*G*K)) begin failures++; $display("reads %0d", nread); end
    end
  end

  // a data cycle is recognised by the read counter of the expected sequence
  logic in_grp = 1'b0;
  always @(posedge clk) begin
    if (rst_n && (fi || in_grp)) begin
      int pos, r, c;
      pos = ek % 9;
      nread++;
      checks += 3;
      if (fi != (ek == 0)) failures++;
      if (enable_s != (ek == int'(K) - 1)) failures++;
      if (w != wt[eg][ek]) failures++;
      for (int j = 0; j < int'(JMAX); j++) begin
        int e;
        r = ei + (pos % 3) - 1;
        c = j + (pos / 3) - 1;
        e = (r < 0 || r >= int'(IMAX) || c < 0 || c >= int'(JMAX)) ? 0 : xin[r][c][ek];
        checks++;
        if (x2[j] !== N'(e)) begin
          failures++;
          if (failures < 5) $display("row %0d k %0d col %0d got %0d exp %0d", ei, ek, j, x2[j], e);
        end
      end
      if (ek == int'(K) - 1) begin
        in_grp <= 1'b0;
        ek <= 0;
        if (eg == int'(G) - 1) begin eg <= 0; ei <= ei + 1; end else eg <= eg + 1;
      end else begin
        in_grp <= 1'b1;
        ek <= ek + 1;
      end
    end
  end

  initial begin
    for (int i = 0; i < int'(IMAX); i++)
      for (int j = 0; j < int'(JMAX); j++)
        for (int k = 0; k < int'(K); k++) xin[i][j][k] = int'($urandom_range(20000)) - 10000;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < int'(G); g++)
      for (int k = 0; k < int'(K); k++) begin
        wt[g][k] = P'($urandom);
        w_we = 1'b1; w_addr = 5'(g*K + k); w_data = wt[g][k];
        @(negedge clk);
      end
    w_we = 1'b0;
    checks++;
    if (!x1_free) failures++;
    for (int i = 0; i < int'(IMAX); i++)
      for (int k = 0; k < int'(K); k++) begin
        x1_we = 1'b1; x1_addr = 6'(i*K + k); x1_data = '0;
        for (int j = 0; j < int'(JMAX); j++) x1_data[j+1] = N'(xin[i][j][k]);
        x1_done = (i == int'(IMAX) - 1) && (k == int'(K) - 1);
        @(negedge clk);
      end
    x1_we = 1'b0; x1_done = 1'b0;
    @(negedge clk);
    checks++;
    if (x1_free) failures++;        // BRAM one holds the image until copied
    wait (state_o == MB_READ);
    @(negedge clk);
    checks++;
    if (!x1_free) failures++;       // copied: free again
    wait (img_done);
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("tb_mem_block: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
