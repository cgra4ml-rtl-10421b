// tb_pixel_shifter: runs three layers (K_H = 5, 3, 1) through the pixel shifter and compares
// every R-word output with the vertical window computed directly from the image: row r at
// kernel row k_h must see image row h_t*R + r + k_h - K_H/2, zero above the image (first
// slice) and below it. The layers with K_H > 1 depend on the top rows kept in the SRAM.
// The first layer runs with both streams always ready and must deliver one output per cycle;
// the others run with random valid/ready. s_pkt_end must mark the last beat of each packet.
module tb_pixel_shifter;
  import cgra_pkg::*;
  localparam int R = 4, XB = 4, KHM = 5, D = 64;
  localparam int IN_N = R + KHM / 2;
  localparam int HMAX = 16, WMAX = 4, IMAX = 3, NMAX = 2;

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic s_valid, s_ready, m_valid, m_ready, s_pkt_end;
  logic [IN_N*XB-1:0] s_data;
  logic [R*XB-1:0] m_data;
  int checks = 0, failures = 0, cycle = 0, sram_top_used = 0;
  logic [XB-1:0] img [NMAX][HMAX][WMAX][IMAX];
  int H, Wd, IS, NN, HT, KH;

  pixel_shifter #(.R(R), .X_BITS(XB), .KH_MAX(KHM), .DEPTH(D)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [XB-1:0] px(int n, int h, int w, int i);
    if (h < 0 || h >= H) return '0;
    return img[n][h][w][i];
  endfunction

  task automatic run_layer(input int kh, input int h, input int w, input int is, input int n,
                           input bit random_hs);
    int kh2, nbeats, nout, first_c, last_c;
    KH = kh; H = h; Wd = w; IS = is; NN = n; HT = (h + R - 1) / R;
    kh2 = kh / 2;
    cfg = '0;
    cfg.kh = cnt_t'(kh); cfg.is = cnt_t'(is); cfg.w = cnt_t'(w); cfg.ht = cnt_t'(HT); cfg.n = cnt_t'(n);
    for (int a = 0; a < NMAX; a++) for (int b = 0; b < HMAX; b++)
      for (int c = 0; c < WMAX; c++) for (int d = 0; d < IMAX; d++) img[a][b][c][d] = XB'($urandom);
    nbeats = n * HT * w * is;
    nout = nbeats * kh;
    fork
      begin : send
        int b;
        b = 0;
        for (int nn = 0; nn < n; nn++) for (int ht = 0; ht < HT; ht++)
          for (int ww = 0; ww < w; ww++) for (int ii = 0; ii < is; ii++) begin
            @(negedge clk);
            while (random_hs && ($urandom % 3) == 0) @(negedge clk);
            s_valid = 1;
            s_data = '0;
            for (int j = 0; j < R + kh2; j++) s_data[j*XB +: XB] = px(nn, ht*R + j, ww, ii);
            for (int j = R + kh2; j < IN_N; j++) s_data[j*XB +: XB] = XB'($urandom); // unused words
            @(posedge clk);
            while (!s_ready) @(posedge clk);
            checks++;
            if (s_pkt_end !== (b == nbeats - 1)) begin
              failures++;
              $display("s_pkt_end wrong at beat %0d", b);
            end
            b++;
            @(negedge clk) s_valid = 0;
          end
      end
      begin : recv
        int o;
        o = 0;
        for (int nn = 0; nn < n; nn++) for (int ht = 0; ht < HT; ht++)
          for (int ww = 0; ww < w; ww++) for (int ii = 0; ii < is; ii++)
            for (int k = 0; k < kh; k++) begin
              @(negedge clk) m_ready = random_hs ? (($urandom % 3) != 0) : 1'b1;
              @(posedge clk);
              while (!(m_valid && m_ready)) begin
                @(negedge clk) m_ready = random_hs ? (($urandom % 3) != 0) : 1'b1;
                @(posedge clk);
              end
              if (o == 0) first_c = cycle;
              last_c = cycle;
              o++;
              for (int r = 0; r < R; r++) begin
                logic [XB-1:0] e;
                e = px(nn, ht*R + r + k - kh2, ww, ii);
                if (ht > 0 && r + k < kh2) sram_top_used++;
                checks++;
                if (m_data[r*XB +: XB] !== e) begin
                  failures++;
                  if (failures < 10) $display("kh %0d n %0d ht %0d w %0d i %0d k %0d r %0d: %h vs %h",
                                              kh, nn, ht, ww, ii, k, r, m_data[r*XB +: XB], e);
                end
              end
            end
        @(negedge clk) m_ready = 0;
      end
    join
    if (!random_hs) begin
      checks++;
      if (last_c - first_c != nout - 1) begin
        failures++;
        $display("throughput: %0d outputs in %0d cycles", nout, last_c - first_c + 1);
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (m_valid) begin failures++; $display("extra output after layer"); end
  endtask

  initial begin
    s_valid = 0; s_data = '0; m_ready = 0; cfg = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rstn = 1'b1;
    run_layer(5, 10, 3, 2, 2, 1'b0);
    run_layer(3, 12, 4, 3, 1, 1'b1);
    run_layer(1, 7, 2, 2, 2, 1'b1);
    run_layer(5, 16, 2, 1, 1, 1'b1);
    checks++;
    if (sram_top_used == 0) begin failures++; $display("SRAM top rows never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
