// tb_sdp_ram: writes random words to random addresses of a 64 x 20 RAM and
// checks every read against a shadow copy, one clock after the address,
// including reads of the address being written (old data expected).
module tb_sdp_ram;
  localparam int unsigned W = 20, D = 64, AW = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0]  wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] shadow [D];
  logic [W-1:0] expq;

  sdp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    // fill every word once
    for (int a = 0; a < int'(D); a++) begin
      @(negedge clk) we = 1'b1; waddr = AW'(a); wdata = W'($urandom); shadow[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      we    = 1'($urandom);
      waddr = AW'($urandom);
      wdata = W'($urandom);
      raddr = ($urandom_range(3) == 0) ? waddr : AW'($urandom);
      expq  = shadow[raddr];
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expq) begin
        failures++;
        if (failures < 5) $display("addr %0d got %h exp %h", raddr, rdata, expq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("tb_sdp_ram: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
