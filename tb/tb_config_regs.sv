// tb_config_regs: AXI-Lite writes and reads of every register with random handshake delays;
// checks read-back, the cfg fields, byte strobes, the one-cycle start pulse, the busy and done
// bits of STATUS and the write-1-to-clear of done, and that unmapped addresses read 0.
module tb_config_regs;
  import cgra_pkg::*;
  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;
  logic [7:0]  s_awaddr, s_araddr;
  logic        s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic        s_arvalid, s_arready, s_rvalid, s_rready;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  cfg_t        cfg;
  logic        start, busy, done;
  int checks = 0, failures = 0, starts = 0;
  logic [31:0] model [NUM_REGS];

  config_regs #(.ADDR_W(8)) dut (.*);

  always @(posedge clk) if (rstn && start) starts++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axil_write(input int idx, input logic [31:0] data, input logic [3:0] strb);
    @(negedge clk);
    repeat ($urandom % 3) @(negedge clk);
    s_awaddr = 8'(idx * 4); s_awvalid = 1; s_wdata = data; s_wstrb = strb; s_wvalid = 1;
    @(posedge clk);
    while (!s_awready) @(posedge clk);
    @(negedge clk) begin s_awvalid = 0; s_wvalid = 0; end
    s_bready = ($urandom % 2) == 0;
    @(posedge clk);
    while (!(s_bvalid && s_bready)) begin
      @(negedge clk) s_bready = ($urandom % 2) == 0;
      @(posedge clk);
    end
    checks++;
    if (s_bresp != 2'b00) failures++;
    @(negedge clk) s_bready = 0;
  endtask

  task automatic axil_read(input int idx, output logic [31:0] data);
    @(negedge clk);
    repeat ($urandom % 3) @(negedge clk);
    s_araddr = 8'(idx * 4); s_arvalid = 1;
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    @(negedge clk) s_arvalid = 0;
    s_rready = ($urandom % 2) == 0;
    @(posedge clk);
    while (!(s_rvalid && s_rready)) begin
      @(negedge clk) s_rready = ($urandom % 2) == 0;
      @(posedge clk);
    end
    data = s_rdata;
    @(negedge clk) s_rready = 0;
  endtask

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: %h vs %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] d, v;
    {s_awvalid, s_wvalid, s_bready, s_arvalid, s_rready} = '0;
    s_awaddr = '0; s_araddr = '0; s_wdata = '0; s_wstrb = '0;
    busy = 0; done = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rstn = 1'b1;
    for (int i = REG_KH; i < NUM_REGS; i++) begin
      v = $urandom;
      axil_write(i, v, 4'hf);
      model[i] = v;
    end
    // byte strobes: change only byte 1 of REG_WBASE
    axil_write(REG_WBASE, 32'hAABBCCDD, 4'b0010);
    model[REG_WBASE][15:8] = 8'hCC;
    for (int i = REG_KH; i < NUM_REGS; i++) begin
      axil_read(i, d);
      expect_eq($sformatf("reg %0d", i), d, model[i]);
    end
    expect_eq("cfg.kh", 32'(cfg.kh), 32'(model[REG_KH][15:0]));
    expect_eq("cfg.kw", 32'(cfg.kw), 32'(model[REG_KW][15:0]));
    expect_eq("cfg.os", 32'(cfg.os), 32'(model[REG_OS][15:0]));
    expect_eq("cfg.is", 32'(cfg.is), 32'(model[REG_IS][15:0]));
    expect_eq("cfg.w", 32'(cfg.w), 32'(model[REG_W][15:0]));
    expect_eq("cfg.ht", 32'(cfg.ht), 32'(model[REG_HT][15:0]));
    expect_eq("cfg.n", 32'(cfg.n), 32'(model[REG_N][15:0]));
    expect_eq("cfg.it", 32'(cfg.it), 32'(model[REG_IT][15:0]));
    expect_eq("cfg.ot", 32'(cfg.ot), 32'(model[REG_OT][15:0]));
    expect_eq("cfg.w_pkt", cfg.w_pkt_bytes, model[REG_WPKT]);
    expect_eq("cfg.x_base", cfg.x_base, model[REG_XBASE]);
    expect_eq("cfg.x_pkt", cfg.x_pkt_bytes, model[REG_XPKT]);
    expect_eq("cfg.y_base", cfg.y_base, model[REG_YBASE]);
    expect_eq("cfg.w_base", cfg.w_base, model[REG_WBASE]);
    expect_eq("cfg.y_pkt", cfg.y_pkt_bytes, model[REG_YPKT]);
    axil_read(30, d);
    expect_eq("unmapped", d, 32'd0);
    // start pulse
    axil_write(REG_CTRL, 32'd1, 4'hf);
    repeat (2) @(posedge clk);
    expect_eq("starts", 32'(starts), 32'd1);
    @(negedge clk) busy = 1;
    axil_read(REG_STATUS, d);
    expect_eq("status busy", d, 32'd1);
    @(negedge clk) begin busy = 0; done = 1; end
    @(negedge clk) done = 0;
    axil_read(REG_STATUS, d);
    expect_eq("status done", d, 32'd2);
    axil_write(REG_STATUS, 32'd2, 4'hf);
    axil_read(REG_STATUS, d);
    expect_eq("status cleared", d, 32'd0);
    expect_eq("starts after", 32'(starts), 32'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
