// tb_workloads: workloads of the evaluation run on the engine at its default size (8 x 96 PEs,
// 4-bit data, 24-bit partial sums), with the testbench acting as host, memory and DMAs.
//   jet tagger: the four dense layers 16-64-32-32-5 on a batch of 16, run layer after layer.
//     Between layers the host does what the CPU does in this architecture: ReLU and
//     requantisation to 4 bits (shift right by 3, clip to 0..7). The network output read from
//     the engine is compared with an integer model of the whole network computed in the
//     testbench, and every layer's partial sums are also compared directly.
//   the worked example of the design: a 5x5 convolution of a 6 x 6 x 3 image to 4 channels.
//   ResNet-50 stem (crop): 7x7 convolution, 3 -> 64 channels (O_S = 13, O_T = 5) on a 16 x 12
//     crop of the image.
//   ResNet-50 stage-2 3x3 convolution (crop): 64 -> 64 channels, I_S = 64 (I_S*K_H = 192 of the
//     256 weight rows), O_S = 32, O_T = 2, on an 8 x 8 crop. With all streams always ready,
//     the cycles from the first bank swap to the last weight beat accepted by the array must
//     stay within 16 cycles of the model O_T*I_T*(1 + N*H_T*W*(1 + I_S*K_H)): weight loading is
//     hidden behind computation by the ping-pong banks.
// Layer shapes are those of the published models (jet tagger and ResNet-50 from their
// well-known definitions); crops keep the simulation short. Strides, pooling and bias are not
// part of the engine and are left out.
module tb_workloads;
  import cgra_pkg::*;
  localparam int R = DEF_ROWS, C = DEF_COLS, XB = DEF_X_BITS, KB = DEF_K_BITS, YB = DEF_Y_BITS;
  localparam int AXW = DEF_AXI_WIDTH, BPB = AXW / 8;
  localparam int MEMB = 1 << 20;
  localparam logic [31:0] WADDR = 32'h0000_0000, XADDR = 32'h0004_0000, YADDR = 32'h0008_0000;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  // ---- DUT ports ----
  logic [7:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic [2:0]  desc_valid, desc_ready, stat_valid;
  logic [31:0] desc_addr [3];
  logic [31:0] desc_len [3];
  logic        w_tvalid, w_tready, w_tlast, x_tvalid, x_tready, x_tlast, y_tvalid, y_tready, y_tlast;
  logic [AXW-1:0] w_tdata, x_tdata, y_tdata;
  logic        busy;

  axi_engine dut (
    .clk, .rstn,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .dma_desc_valid(desc_valid), .dma_desc_ready(desc_ready), .dma_desc_addr(desc_addr),
    .dma_desc_len(desc_len), .dma_stat_valid(stat_valid),
    .s_axis_w_tvalid(w_tvalid), .s_axis_w_tready(w_tready), .s_axis_w_tdata(w_tdata), .s_axis_w_tlast(w_tlast),
    .s_axis_x_tvalid(x_tvalid), .s_axis_x_tready(x_tready), .s_axis_x_tdata(x_tdata), .s_axis_x_tlast(x_tlast),
    .m_axis_y_tvalid(y_tvalid), .m_axis_y_tready(y_tready), .m_axis_y_tdata(y_tdata), .m_axis_y_tlast(y_tlast),
    .busy
  );

  int checks = 0, failures = 0;
  int prob = 70;   // percent probability of valid / ready in the stream models

  // ---- mechanism counters ----
  int n_mac, n_shift, n_chain_stall, n_backpressure, n_overlap, n_sram_top, n_zero_top, n_clr;
  int n_drop, n_pad, n_conv, n_dense, n_multi_it, n_multi_ot, n_wbeats;

  always @(posedge clk) if (rstn) begin
    n_mac          += int'(dut.u_array.fire_mac);
    n_shift        += int'(dut.u_array.fire_sh);
    n_wbeats       += int'(dut.wc_valid && dut.wc_ready);
    n_clr          += int'(dut.u_array.fire_sh && dut.wc_user.clr);
    n_chain_stall  += int'(dut.wc_valid && dut.wc_user.shift && !dut.wc_ready);
    n_backpressure += int'(y_tvalid && !y_tready);
    n_overlap      += int'(dut.u_wcache.s_fire && int'(dut.u_wcache.state) == 1);
    n_sram_top     += int'(dut.u_shift.load && !dut.u_shift.stg_zero && dut.u_shift.kh2 != 0);
    n_zero_top     += int'(dut.u_shift.load && dut.u_shift.stg_zero && dut.u_shift.kh2 != 0);
    n_drop         += int'((dut.x_pkt_end && dut.u_gx.cnt_a != 0) || (dut.w_pkt_end && dut.u_gw.cnt_a != 0));
    n_pad          += int'(y_tvalid && y_tready && y_tlast && dut.u_gy.cnt < AXW);
  end

  initial begin
    repeat (1000000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- memory and DMA models ----
  logic [7:0] mem [MEMB];

  // memory to stream (index 0: weights, 1: pixels)
  task automatic mm2s(input int ch);
    logic [31:0] a, len;
    forever begin
      @(negedge clk) desc_ready[ch] = 1;
      @(posedge clk);
      while (!desc_valid[ch]) @(posedge clk);
      a = desc_addr[ch]; len = desc_len[ch];
      @(negedge clk) desc_ready[ch] = 0;
      for (int b = 0; b < int'(len); b += BPB) begin
        logic [AXW-1:0] d;
        for (int k = 0; k < BPB; k++) d[k*8 +: 8] = mem[int'(a) + b + k];
        @(negedge clk);
        while (($urandom % 100) >= prob) @(negedge clk);
        if (ch == 0) begin w_tvalid = 1; w_tdata = d; w_tlast = (b + BPB >= int'(len)); end
        else         begin x_tvalid = 1; x_tdata = d; x_tlast = (b + BPB >= int'(len)); end
        @(posedge clk);
        while (!((ch == 0) ? w_tready : x_tready)) @(posedge clk);
        @(negedge clk);
        if (ch == 0) w_tvalid = 0; else x_tvalid = 0;
      end
      @(negedge clk) stat_valid[ch] = 1;
      @(negedge clk) stat_valid[ch] = 0;
    end
  endtask

  // stream to memory (index 2: outputs)
  task automatic s2mm();
    logic [31:0] a, len;
    int b;
    forever begin
      @(negedge clk) desc_ready[2] = 1;
      @(posedge clk);
      while (!desc_valid[2]) @(posedge clk);
      a = desc_addr[2]; len = desc_len[2];
      @(negedge clk) desc_ready[2] = 0;
      b = 0;
      forever begin
        @(negedge clk) y_tready = ($urandom % 100) < prob;
        @(posedge clk);
        if (y_tvalid && y_tready) begin
          if (b < int'(len))
            for (int k = 0; k < BPB; k++) mem[int'(a) + b + k] = y_tdata[k*8 +: 8];
          else begin
            failures++;
            $display("output packet longer than its descriptor");
          end
          b += BPB;
          if (y_tlast) break;
        end
      end
      @(negedge clk) begin y_tready = 0; stat_valid[2] = 1; end
      @(negedge clk) stat_valid[2] = 0;
    end
  endtask

  initial begin
    desc_ready = '0; stat_valid = '0;
    w_tvalid = 0; x_tvalid = 0; w_tlast = 0; x_tlast = 0; w_tdata = '0; x_tdata = '0; y_tready = 0;
    fork
      mm2s(0);
      mm2s(1);
      s2mm();
    join_none
  end

  // ---- AXI-Lite host ----
  task automatic reg_write(input int idx, input logic [31:0] v);
    @(negedge clk);
    awaddr = 8'(idx * 4); awvalid = 1; wdata = v; wstrb = 4'hf; wvalid = 1; bready = 1;
    @(posedge clk);
    while (!awready) @(posedge clk);
    @(negedge clk) begin awvalid = 0; wvalid = 0; end
    @(posedge clk);
    while (!bvalid) @(posedge clk);
    @(negedge clk) bready = 0;
  endtask

  task automatic reg_read(input int idx, output logic [31:0] v);
    @(negedge clk);
    araddr = 8'(idx * 4); arvalid = 1; rready = 1;
    @(posedge clk);
    while (!arready) @(posedge clk);
    @(negedge clk) arvalid = 0;
    @(posedge clk);
    while (!rvalid) @(posedge clk);
    v = rdata;
    @(negedge clk) rready = 0;
  endtask

  // ---- bit packing in memory ----
  function automatic void put_bits(input int base, input longint bitpos, input int nbits, input longint v);
    for (int k = 0; k < nbits; k++) begin
      longint p;
      p = bitpos + k;
      mem[base + int'(p / 8)][int'(p % 8)] = v[k];
    end
  endfunction

  function automatic longint get_bits(input int base, input longint bitpos, input int nbits);
    longint v;
    v = 0;
    for (int k = 0; k < nbits; k++) begin
      longint p;
      p = bitpos + k;
      v[k] = mem[base + int'(p / 8)][int'(p % 8)];
    end
    return v;
  endfunction

  // ---- one layer ----
  int NN, H, W, I, O, KH, KW;
  int xt [];   // X[n][h][w][i], signed
  int kt [];   // K[kh][kw][i][o], signed

  function automatic int xidx(int n, int h, int w, int i); return ((n*H + h)*W + w)*I + i; endfunction
  function automatic int kidx(int a, int b, int i, int o); return ((a*KW + b)*I + i)*O + o; endfunction

  int ydev [];   // engine outputs of the last layer, [n][h][w][o] (I_T = 1 only)
  int first_beat, last_beat, cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rstn && dut.wc_valid && dut.wc_ready) begin
      if (first_beat < 0) first_beat <= cyc;
      last_beat <= cyc;
    end
  end

  task automatic run_layer(input string name, input int n, input int h, input int w, input int ci,
                           input int co, input int kh, input int kw, input int is, input bit gen,
                           input int slack);
    int os, ot, it, ht, kh2, rows, wpkt, xwords, xpkt, ybeats, ypkt, bad, beats_before;
    logic [31:0] st;
    NN = n; H = h; W = w; I = ci; O = co; KH = kh; KW = kw;
    os = C / kw; ot = (co + os - 1) / os; it = (ci + is - 1) / is; ht = (h + R - 1) / R;
    kh2 = kh / 2; rows = is * kh;
    if (gen) begin
      xt = new[n*h*w*ci];
      foreach (xt[q]) xt[q] = int'($urandom % 16) - 8;
    end
    kt = new[kh*kw*ci*co];
    foreach (kt[q]) kt[q] = int'($urandom % 16) - 8;
    ydev = new[n*h*w*co];
    // weights: packet (i_t, o_t), rows (i_s, k_h), column c = o_s*K_W + k_w
    wpkt = ((rows * C * KB + AXW - 1) / AXW) * BPB;
    for (int a = 0; a < MEMB / 4; a++) mem[a] = '0;
    for (int ti = 0; ti < it; ti++) for (int to = 0; to < ot; to++)
      for (int s = 0; s < is; s++) for (int r = 0; r < kh; r++) for (int c = 0; c < C; c++) begin
        int g, j, i, o, v;
        g = c / kw; j = c % kw; i = ti*is + s; o = to*os + g;
        v = (g < os && i < ci && o < co) ? kt[kidx(r, j, i, o)] : 0;
        put_bits(int'(WADDR) + (ti*ot + to)*wpkt, longint'((s*kh + r)*C + c) * KB, KB, longint'(v));
      end
    // pixels: packet i_t, beats (n, h_t, w, i_s) of R + K_H/2 words
    xwords = n * ht * w * is * (R + kh2);
    xpkt = ((xwords * XB + AXW - 1) / AXW) * BPB;
    for (int a = 0; a < it * xpkt; a++) mem[int'(XADDR) + a] = '0;
    for (int ti = 0; ti < it; ti++) begin
      longint bp;
      bp = 0;
      for (int q = 0; q < n; q++) for (int t = 0; t < ht; t++) for (int x = 0; x < w; x++)
        for (int s = 0; s < is; s++) for (int j = 0; j < R + kh2; j++) begin
          int hh, i, v;
          hh = t*R + j; i = ti*is + s;
          v = (hh < h && i < ci) ? xt[xidx(q, hh, x, i)] : 0;
          put_bits(int'(XADDR) + ti*xpkt, bp, XB, longint'(v));
          bp += XB;
        end
    end
    ybeats = n * ht * w * os;
    ypkt = ((ybeats * R * YB + AXW - 1) / AXW) * BPB;
    for (int a = 0; a < it * ot * ypkt; a++) mem[int'(YADDR) + a] = 8'hEE;
    // program and run
    reg_write(REG_KH, 32'(kh)); reg_write(REG_KW, 32'(kw)); reg_write(REG_OS, 32'(os));
    reg_write(REG_IS, 32'(is)); reg_write(REG_W, 32'(w));   reg_write(REG_HT, 32'(ht));
    reg_write(REG_N, 32'(n));   reg_write(REG_IT, 32'(it)); reg_write(REG_OT, 32'(ot));
    reg_write(REG_WBASE, WADDR); reg_write(REG_WPKT, 32'(wpkt));
    reg_write(REG_XBASE, XADDR); reg_write(REG_XPKT, 32'(xpkt));
    reg_write(REG_YBASE, YADDR); reg_write(REG_YPKT, 32'(ypkt));
    beats_before = n_wbeats;
    first_beat = -1;
    reg_write(REG_CTRL, 32'd1);
    begin
      int waited;
      waited = 0;
      do begin
        repeat (50) @(posedge clk);
        waited += 50;
        reg_read(REG_STATUS, st);
        if (waited > 200000) begin
          $display("%s: layer did not finish", name);
          failures++;
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end while (!st[1]);
    end
    reg_write(REG_STATUS, 32'd2);
    // weight beats against the schedule of the cycle model
    checks++;
    if (n_wbeats - beats_before != it * ot * n * ht * w * (1 + is * kh)) begin
      failures++;
      $display("%s: %0d weight beats, expected %0d", name, n_wbeats - beats_before,
               it * ot * n * ht * w * (1 + is * kh));
    end
    if (slack >= 0) begin
      int model, span;
      model = ot * it * (1 + n * ht * w * (1 + is * kh));
      span = last_beat - first_beat + 2;   // + the bank swap cycle ahead of the first beat
      checks++;
      $display("%s: %0d cycles, model %0d", name, span, model);
      if (span > model + slack || span < model) begin
        failures++;
        $display("%s: cycle count outside [%0d, %0d]", name, model, model + slack);
      end
    end
    // outputs
    bad = 0;
    for (int ti = 0; ti < it; ti++) for (int to = 0; to < ot; to++) begin
      longint bp;
      bp = 0;
      for (int q = 0; q < n; q++) for (int t = 0; t < ht; t++) for (int x = 0; x < w; x++)
        for (int g = os - 1; g >= 0; g--) for (int r = 0; r < R; r++) begin
          logic [YB-1:0] e, got;
          int o;
          e = '0;
          o = to*os + g;
          if (o < co)
            for (int a = 0; a < kh; a++) for (int j = 0; j < kw; j++) for (int s = 0; s < is; s++) begin
              int hh, xx, i;
              hh = t*R + r + a - kh2; xx = x - kw + 1 + j; i = ti*is + s;
              if (hh >= 0 && hh < h && xx >= 0 && i < ci)
                e += YB'(kt[kidx(a, j, i, o)] * xt[xidx(q, hh, xx, i)]);
            end
          got = YB'(get_bits(int'(YADDR) + (ti*ot + to)*ypkt, bp, YB));
          bp += YB;
          if (ti == 0 && o < co && t*R + r < h) ydev[((q*h + t*R + r)*w + x)*co + o] = int'($signed(got));
          checks++;
          if (got !== e) begin
            failures++;
            bad++;
            if (bad < 6) $display("%s: it %0d ot %0d n %0d ht %0d w %0d os %0d r %0d: %0d vs %0d",
                                  name, ti, to, q, t, x, g, r, $signed(got), $signed(e));
          end
        end
      // padding at the end of the packet must be zero
      for (longint p = bp; p < longint'(ypkt) * 8; p++) begin
        if (get_bits(int'(YADDR) + (ti*ot + to)*ypkt, p, 1) != 0) begin
          failures++;
          $display("%s: non-zero padding", name);
          break;
        end
      end
    end
    if (kh == 1 && kw == 1) n_dense++; else n_conv++;
    if (it > 1) n_multi_it++;
    if (ot > 1) n_multi_ot++;
    $display("%s: done, %0d outputs mismatched", name, bad);
  endtask

  // host-side ReLU and requantisation to 4 bits
  function automatic int requant(input int y);
    int q;
    q = (y < 0) ? 0 : (y >>> 3);
    return (q > 7) ? 7 : q;
  endfunction

  initial begin
    int batch, dims [5], net [];
    int wts [4][];
    {awvalid, wvalid, bready, arvalid, rready} = '0;
    awaddr = '0; araddr = '0; wdata = '0; wstrb = '0;
    {n_mac, n_shift, n_chain_stall, n_backpressure, n_overlap, n_sram_top, n_zero_top, n_clr} = '0;
    {n_drop, n_pad, n_conv, n_dense, n_multi_it, n_multi_ot, n_wbeats} = '0;
    cyc = 0;
    repeat (5) @(posedge clk);
    @(negedge clk) rstn = 1'b1;
    // ---- jet tagger: dense 16-64-32-32-5, batch 16 along H ----
    batch = 16;
    dims = '{16, 64, 32, 32, 5};
    prob = 80;
    xt = new[batch * dims[0]];
    foreach (xt[q]) xt[q] = int'($urandom % 16) - 8;
    net = new[batch * dims[0]];
    foreach (net[q]) net[q] = xt[q];
    for (int l = 0; l < 4; l++) begin
      int nxt [];
      NN = 1; H = batch; W = 1; I = dims[l]; O = dims[l+1]; KH = 1; KW = 1;
      run_layer($sformatf("jet dense %0d", l), 1, batch, 1, dims[l], dims[l+1], 1, 1, dims[l], 1'b0, -1);
      wts[l] = kt;
      // independent integer model of the layer, from the model's own activations
      nxt = new[batch * dims[l+1]];
      for (int b = 0; b < batch; b++) for (int o = 0; o < dims[l+1]; o++) begin
        int acc;
        acc = 0;
        for (int i = 0; i < dims[l]; i++) acc += net[b*dims[l] + i] * wts[l][i*dims[l+1] + o];
        nxt[b*dims[l+1] + o] = (l < 3) ? requant(acc) : acc;
      end
      net = nxt;
      // next layer's input from the engine's outputs, through the host's ReLU/requantisation
      if (l < 3) begin
        xt = new[batch * dims[l+1]];
        foreach (xt[q]) xt[q] = requant(ydev[q]);
      end
    end
    begin
      int bad;
      bad = 0;
      for (int q = 0; q < batch * dims[4]; q++) begin
        checks++;
        if (ydev[q] != net[q]) begin
          failures++;
          bad++;
        end
      end
      $display("jet tagger: %0d of %0d network outputs differ from the integer model", bad, batch * dims[4]);
    end
    // ---- the worked 5x5 example of the design: N=1, H=W=6, I=3, O=4, K_H=K_W=5 ----
    run_layer("worked example 5x5", 1, 6, 6, 3, 4, 5, 5, 3, 1'b1, -1);
    // ---- ResNet-50 stem crop: 7x7, 3 -> 64 ----
    run_layer("resnet stem 7x7", 1, 16, 12, 3, 64, 7, 7, 3, 1'b1, -1);
    // ---- ResNet-50 stage-2 3x3 crop: 64 -> 64, streams always ready, cycle model ----
    prob = 100;
    run_layer("resnet 3x3 64->64", 1, 8, 8, 64, 64, 3, 3, 64, 1'b1, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
