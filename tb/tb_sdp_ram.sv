// tb_sdp_ram: writes random words, reads them back, and checks read-first behaviour when a
// read and a write hit the same address in one cycle, and that rdata holds without a read.
// The RAM's timing (one-cycle registered read, read-first) is this design's choice; the
// published design only names its on-chip RAMs. Runs a 64 x 12-bit instance with random
// write/read traffic against a model array.
module tb_sdp_ram;
  localparam int W = 12, D = 64;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  logic [W-1:0] expect_q;
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      re    = (i == 0) || (($urandom % 4) != 0);
      we    = ($urandom % 2) == 0;
      raddr = 6'($urandom);
      waddr = (($urandom % 3) == 0) ? raddr : 6'($urandom);
      wdata = W'($urandom);
      if (re) expect_q = model[raddr];
      @(posedge clk);
      #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 10) $display("read mismatch %0d: %h vs %h", i, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
