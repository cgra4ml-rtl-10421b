// tb_pe_array: drives the 4 x 12 array of the paper's worked example directly, as the weights
// cache and pixel shifter would, for three groupings (K_W = 5, O_S = 2 as in the example;
// K_W = 3, O_S = 4; K_W = 1, O_S = 12) and compares every output beat with a direct
// computation of the horizontal convolution:
//   y[w][o_s][r] = sum_{j < K_W} sum_{s < I_S*K_H} K[o_s][j][s] * X[w - K_W + 1 + j][s][r]
// with X = 0 before the start of a row. Output beats must come in descending o_s, R words each,
// with m_last on the last one of the iteration. Random output stalls are applied, and the
// layer with few MAC beats per pixel must make the array wait for its output chain (counted).
module tb_pe_array;
  import cgra_pkg::*;
  localparam int R = 4, C = 12, XB = 4, KB = 4, YB = 24;
  localparam int MAXS = 6, MAXW = 8, MAXROWS = 3;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;
  logic s_w_valid, s_w_ready, s_x_valid, s_x_ready, m_valid, m_ready, m_last;
  logic [C*KB-1:0] s_w_data;
  wuser_t s_w_user;
  logic [R*XB-1:0] s_x_data;
  logic [R*YB-1:0] m_data;
  int checks = 0, failures = 0, stalls = 0, out_waits = 0;

  pe_array #(.R(R), .C(C), .X_BITS(XB), .K_BITS(KB), .Y_BITS(YB)) dut (.*);

  always @(posedge clk) begin
    if (s_w_valid && s_w_user.shift && !s_w_ready) stalls++;
    if (m_valid && !m_ready) out_waits++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [KB-1:0] kmem [C][MAXS];          // weight of column c at step s
  logic signed [XB-1:0] xmem [MAXROWS][MAXW][MAXS][R];
  logic signed [YB-1:0] expq [$];
  bit                   lastq [$];

  task automatic run(input int kw, input int os, input int steps, input int w, input int nrows,
                     input bit stall_out);
    for (int c = 0; c < C; c++) for (int s = 0; s < steps; s++) kmem[c][s] = KB'($urandom);
    for (int q = 0; q < nrows; q++) for (int p = 0; p < w; p++) for (int s = 0; s < steps; s++)
      for (int r = 0; r < R; r++) xmem[q][p][s][r] = XB'($urandom);
    // expected output beats
    for (int q = 0; q < nrows; q++) for (int p = 0; p < w; p++)
      for (int g = os - 1; g >= 0; g--) begin
        for (int r = 0; r < R; r++) begin
          logic signed [YB-1:0] acc;
          acc = '0;
          for (int j = 0; j < kw; j++) begin
            int pp;
            pp = p - kw + 1 + j;
            if (pp >= 0)
              for (int s = 0; s < steps; s++) acc += YB'(int'(kmem[g*kw + j][s]) * int'(xmem[q][pp][s][r]));
          end
          expq.push_back(acc);
        end
        lastq.push_back(q == nrows - 1 && p == w - 1 && g == 0);
      end
    fork
      begin : drive
        for (int q = 0; q < nrows; q++) for (int p = 0; p < w; p++) begin
          for (int s = 0; s <= steps; s++) begin
            @(negedge clk);
            s_w_valid = 1;
            s_w_user = '0;
            s_w_user.kw = cnt_t'(kw);
            s_w_user.os = cnt_t'(os);
            s_w_user.shift = (s == steps);
            s_w_user.clr = (s == steps) && (p == w - 1);
            s_w_user.last = (s == steps) && (p == w - 1) && (q == nrows - 1);
            for (int c = 0; c < C; c++) s_w_data[c*KB +: KB] = (s < steps) ? kmem[c][s] : KB'($urandom);
            s_x_valid = (s < steps);
            for (int r = 0; r < R; r++) s_x_data[r*XB +: XB] = (s < steps) ? xmem[q][p][s][r] : '0;
            @(posedge clk);
            while (!s_w_ready) @(posedge clk);
            if (s < steps && !s_x_ready) begin failures++; $display("pixel not taken with weight"); end
          end
        end
        @(negedge clk) begin s_w_valid = 0; s_x_valid = 0; end
      end
      begin : collect
        int nb;
        nb = nrows * w * os;
        for (int b = 0; b < nb; b++) begin
          @(negedge clk) m_ready = stall_out ? (($urandom % 2) == 0) : 1'b1;
          @(posedge clk);
          while (!(m_valid && m_ready)) begin
            @(negedge clk) m_ready = stall_out ? (($urandom % 2) == 0) : 1'b1;
            @(posedge clk);
          end
          for (int r = 0; r < R; r++) begin
            logic signed [YB-1:0] e;
            e = expq.pop_front();
            checks++;
            if ($signed(m_data[r*YB +: YB]) !== e) begin
              failures++;
              if (failures < 10) $display("kw %0d beat %0d row %0d: %0d vs %0d", kw, b, r, $signed(m_data[r*YB +: YB]), e);
            end
          end
          checks++;
          if (m_last !== lastq.pop_front()) begin failures++; $display("m_last wrong at beat %0d", b); end
        end
        @(negedge clk) m_ready = 0;
      end
    join
    repeat (3) @(posedge clk);
    checks++;
    if (m_valid) begin failures++; $display("extra output"); end
  endtask

  initial begin
    s_w_valid = 0; s_x_valid = 0; s_w_data = '0; s_x_data = '0; s_w_user = '0; m_ready = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rstn = 1'b1;
    run(5, 2, 6, 6, 2, 1'b1);     // the paper's example grouping: 12 columns, K_W = 5, O_S = 2
    run(3, 4, 4, 7, 2, 1'b0);
    run(1, 12, 1, 5, 2, 1'b1);    // one MAC beat per pixel: the output chain is the bottleneck
    run(5, 2, 2, 8, 3, 1'b0);
    checks++;
    if (stalls == 0 || out_waits == 0) begin
      failures++;
      $display("stall mechanisms not exercised: chain %0d output %0d", stalls, out_waits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
