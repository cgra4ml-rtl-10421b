// tb_weights_cache: streams 6 weight packets into the cache and checks every beat it sends to
// the array: the rows of the right packet in order, one shift beat after each pixel with clr
// at the end of each image row and last at the end of the iteration, and kw/os copied.
// Packets 0-2 run with the output always ready and check the cycle count of an iteration,
// 1 + N*H_T*W*(1 + I_S*K_H); packets 3-5 run with random output stalls. The ping-pong overlap
// (a bank written while the other is read) is counted and must occur.
module tb_weights_cache;
  import cgra_pkg::*;
  localparam int C = 8, KB = 4, D = 16;
  localparam int KH = 3, IS = 2, KW = 3, OS = 2, W = 3, HT = 2, N = 1, P = 6;
  localparam int ROWS = IS * KH, NPIX = N * HT * W, BEATS = NPIX * (ROWS + 1);

  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic s_valid, s_ready, m_valid, m_ready, s_pkt_end;
  logic [C*KB-1:0] s_data, m_data;
  wuser_t m_user;
  int checks = 0, failures = 0, overlap = 0, cycle = 0;
  logic [C*KB-1:0] rows [P][ROWS];
  int first_cycle [P];
  int stall_phase;

  weights_cache #(.C(C), .K_BITS(KB), .DEPTH(D)) dut (.*);

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (s_valid && s_ready && int'(dut.state) == 1) overlap++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: state %0d full %b rd_bank %0d m_valid %0d s_valid %0d", dut.state, dut.full, dut.rd_bank, m_valid, s_valid);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.kh = KH; cfg.is = IS; cfg.kw = KW; cfg.os = OS; cfg.w = W; cfg.ht = HT; cfg.n = N;
    for (int p = 0; p < P; p++)
      for (int r = 0; r < ROWS; r++) rows[p][r] = {$urandom};
    s_valid = 0; s_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rstn = 1'b1;
    for (int p = 0; p < P; p++)
      for (int r = 0; r < ROWS; r++) begin
        s_valid = 1; s_data = rows[p][r];
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        checks++;
        if (s_pkt_end !== (r == ROWS - 1)) begin
          failures++;
          $display("s_pkt_end wrong at packet %0d row %0d", p, r);
        end
        @(negedge clk);
        if (($urandom % 4) == 0) begin s_valid = 0; @(negedge clk); end
      end
    s_valid = 0;
  end

  // output checker
  initial begin
    m_ready = 1;
    stall_phase = 0;
    wait (rstn);
    for (int p = 0; p < P; p++) begin
      stall_phase = (p >= 3);
      for (int b = 0; b < BEATS; b++) begin
        int pix, j;
        pix = b / (ROWS + 1);
        j   = b % (ROWS + 1);
        @(posedge clk);
        while (!(m_valid && m_ready)) begin
          @(negedge clk) m_ready = stall_phase ? (($urandom % 3) != 0) : 1'b1;
          @(posedge clk);
        end
        if (b == 0) first_cycle[p] = cycle;
        checks++;
        if (m_user.shift !== (j == ROWS) || m_user.kw != KW || m_user.os != OS ||
            (j < ROWS && m_data !== rows[p][j]) ||
            (j == ROWS && (m_user.clr !== ((pix % W) == W - 1) || m_user.last !== (pix == NPIX - 1)))) begin
          failures++;
          if (failures < 10) $display("packet %0d beat %0d: shift %0d clr %0d last %0d data %h exp %h",
                                      p, b, m_user.shift, m_user.clr, m_user.last, m_data, rows[p][j % ROWS]);
        end
        @(negedge clk);
        m_ready = stall_phase ? (($urandom % 3) != 0) : 1'b1;
      end
    end
    // cycle count of an iteration with the output always ready
    for (int p = 1; p < 3; p++) begin
      checks++;
      if (first_cycle[p] - first_cycle[p-1] != 1 + BEATS) begin
        failures++;
        $display("iteration %0d took %0d cycles, expected %0d", p, first_cycle[p] - first_cycle[p-1], 1 + BEATS);
      end
    end
    checks++;
    if (overlap == 0) begin
      failures++;
      $display("no ping-pong overlap seen");
    end
    repeat (5) @(posedge clk);
    checks++;
    if (m_valid) begin failures++; $display("extra beat after the last packet"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
