// tb_dma_controller: starts a layer with I_T = 3, O_T = 2 and acts as the three DMAs with
// random descriptor acceptance and random completion delays. Checks the descriptor sequence
// of each DMA (addresses and lengths as the engine's memory layout needs them), that no more
// than I_T*O_T descriptors are issued, busy while running, one done pulse at the end, and that
// a second layer can start after the first.
module tb_dma_controller;
  import cgra_pkg::*;
  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic start, busy, done;
  logic [2:0] desc_valid, desc_ready, stat_valid;
  logic [31:0] desc_addr [3];
  logic [31:0] desc_len [3];
  int checks = 0, failures = 0, dones = 0;
  int got [3];
  logic [31:0] exp_addr [3][$];
  int pending [3];

  dma_controller dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rstn && done) dones++;

  // DMA models: take descriptors at random, complete them some cycles later
  for (genvar i = 0; i < 3; i++) begin : g_dma
    initial begin
      desc_ready[i] = 0; stat_valid[i] = 0; pending[i] = 0;
      forever begin
        @(negedge clk);
        desc_ready[i] = ($urandom % 3) == 0;
        stat_valid[i] = (pending[i] > 0) && (($urandom % 4) == 0);
        if (stat_valid[i]) pending[i]--;
        @(posedge clk);
        if (desc_valid[i] && desc_ready[i]) begin
          logic [31:0] e, l;
          e = exp_addr[i].pop_front();
          l = (i == 0) ? cfg.w_pkt_bytes : (i == 1) ? cfg.x_pkt_bytes : cfg.y_pkt_bytes;
          checks++;
          if (desc_addr[i] !== e || desc_len[i] !== l) begin
            failures++;
            $display("dma %0d descriptor %0d: %h/%0d vs %h/%0d", i, got[i], desc_addr[i], desc_len[i], e, l);
          end
          got[i]++;
          pending[i]++;
        end
      end
    end
  end

  task automatic run_layer(input int it, input int ot);
    cfg = '0;
    cfg.it = cnt_t'(it); cfg.ot = cnt_t'(ot);
    cfg.w_base = 32'h1000_0000 + $urandom % 4096; cfg.w_pkt_bytes = 32'd4096 + $urandom % 100;
    cfg.x_base = 32'h2000_0000;                   cfg.x_pkt_bytes = 32'd1000;
    cfg.y_base = 32'h3000_0000;                   cfg.y_pkt_bytes = 32'd512;
    for (int i = 0; i < 3; i++) got[i] = 0;
    for (int a = 0; a < it; a++) for (int b = 0; b < ot; b++) begin
      exp_addr[0].push_back(cfg.w_base + 32'((a*ot + b)) * cfg.w_pkt_bytes);
      exp_addr[1].push_back(cfg.x_base + 32'(a) * cfg.x_pkt_bytes);
      exp_addr[2].push_back(cfg.y_base + 32'((a*ot + b)) * cfg.y_pkt_bytes);
    end
    dones = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (!busy) begin failures++; $display("not busy after start"); end
    @(negedge clk) start = 1;           // ignored while busy
    @(negedge clk) start = 0;
    while (busy) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (got[i] != it * ot) begin failures++; $display("dma %0d got %0d descriptors", i, got[i]); end
    end
    checks++;
    if (dones != 1) begin failures++; $display("%0d done pulses", dones); end
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rstn = 1'b1;
    run_layer(3, 2);
    run_layer(1, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
