// tb_axis_gearbox: two converters under random valid/ready.
//   A: 128 -> up to 44 bits, drop mode, `take` changed per packet (as for the pixel stream):
//      each packet carries M words of `take` bits packed LSB first and padded to whole
//      128-bit beats; the M words must come out and, after the flush that follows the
//      last one, nothing more: the padding is dropped.
//   B: 192 -> 128 bits, pad mode (as for the output stream): M input beats with s_last on the
//      last; the bit stream must come out in 128-bit beats, the final one zero-padded and
//      marked m_last.
module tb_axis_gearbox;
  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_drop = 0, n_pad = 0;

  // ---------------- A ----------------
  logic [7:0]   a_take;
  logic         a_sv, a_sr, a_sl, a_mv, a_mr, a_ml, a_fl;
  logic [127:0] a_sd;
  logic [43:0]  a_md;
  axis_gearbox #(.IN_W(128), .OUT_W(44), .PAD_LAST(1'b0)) dut_a (
    .clk, .rstn, .take(a_take), .flush(a_fl), .s_valid(a_sv), .s_ready(a_sr), .s_data(a_sd), .s_last(a_sl),
    .m_valid(a_mv), .m_ready(a_mr), .m_data(a_md), .m_last(a_ml));

  // ---------------- B ----------------
  logic         b_sv, b_sr, b_sl, b_mv, b_mr, b_ml;
  logic [191:0] b_sd;
  logic [127:0] b_md;
  axis_gearbox #(.IN_W(192), .OUT_W(128), .PAD_LAST(1'b1)) dut_b (
    .clk, .rstn, .take(8'd128), .flush(1'b0), .s_valid(b_sv), .s_ready(b_sr), .s_data(b_sd), .s_last(b_sl),
    .m_valid(b_mv), .m_ready(b_mr), .m_data(b_md), .m_last(b_ml));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // packet data for A
  logic [43:0]  a_words [64];
  logic [127:0] a_beats [32];
  int a_nbeats, a_nwords;
  bit a_done_send, a_done_recv;

  task automatic build_a(input int take, input int m);
    int bit_pos;
    bit_pos = 0;
    for (int b = 0; b < 32; b++) a_beats[b] = '0;
    for (int i = 0; i < m; i++) begin
      a_words[i] = 44'($urandom) | (44'($urandom) << 32);
      for (int j = 0; j < take; j++) begin
        a_beats[bit_pos / 128][bit_pos % 128] = a_words[i][j];
        bit_pos++;
      end
    end
    a_nbeats = (bit_pos + 127) / 128;
    a_nwords = m;
  endtask

  initial begin : a_test
    int takes [4] = '{44, 36, 32, 40};
    a_sv = 0; a_sl = 0; a_sd = '0; a_mr = 0; a_fl = 0; a_take = 8'd44;
    wait (rstn);
    for (int p = 0; p < 12; p++) begin
      a_take = 8'(takes[p % 4]);
      build_a(takes[p % 4], 5 + int'($urandom % 20));
      a_done_send = 0; a_done_recv = 0;
      fork
        begin
          for (int b = 0; b < a_nbeats; b++) begin
            @(negedge clk);
            while (($urandom % 3) == 0) @(negedge clk);
            a_sv = 1; a_sd = a_beats[b]; a_sl = (b == a_nbeats - 1);
            @(posedge clk);
            while (!a_sr) @(posedge clk);
            @(negedge clk) a_sv = 0;
          end
        end
        begin
          for (int i = 0; i < a_nwords; i++) begin
            @(negedge clk);
            a_mr = ($urandom % 3) != 0;
            a_fl = a_mr && a_mv && (i == a_nwords - 1);
            @(posedge clk);
            while (!(a_mv && a_mr)) begin
              @(negedge clk) a_mr = ($urandom % 3) != 0;
              a_fl = a_mr && a_mv && (i == a_nwords - 1);
              @(posedge clk);
            end
            checks++;
            if ((a_md & ((44'd1 << a_take) - 1)) !== (a_words[i] & ((44'd1 << a_take) - 1))) begin
              failures++;
              if (failures < 10) $display("A word %0d: %h vs %h", i, a_md, a_words[i]);
            end
          end
          @(negedge clk) begin a_mr = 0; a_fl = 0; end
        end
      join
      // after the packet nothing more may come out, and the padding is dropped
      repeat (4) @(posedge clk);
      checks++;
      if (a_mv) begin
        failures++;
        $display("A: extra output after packet %0d", p);
      end
      if ((a_nbeats * 128) - a_nwords * int'(a_take) > 0) n_drop++;
    end
    a_done_send = 1;
  end

  initial begin : b_test
    logic [191:0] beats [16];
    logic [127:0] outs [24];
    int m, nout, bit_pos;
    b_sv = 0; b_sl = 0; b_sd = '0; b_mr = 0;
    wait (rstn);
    for (int p = 0; p < 12; p++) begin
      m = 1 + int'($urandom % 10);
      for (int o = 0; o < 24; o++) outs[o] = '0;
      bit_pos = 0;
      for (int i = 0; i < m; i++) begin
        beats[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        for (int j = 0; j < 192; j++) begin
          outs[bit_pos / 128][bit_pos % 128] = beats[i][j];
          bit_pos++;
        end
      end
      nout = (bit_pos + 127) / 128;
      if (bit_pos % 128 != 0) n_pad++;
      fork
        begin
          for (int i = 0; i < m; i++) begin
            @(negedge clk);
            while (($urandom % 3) == 0) @(negedge clk);
            b_sv = 1; b_sd = beats[i]; b_sl = (i == m - 1);
            @(posedge clk);
            while (!b_sr) @(posedge clk);
            @(negedge clk) b_sv = 0;
          end
        end
        begin
          for (int o = 0; o < nout; o++) begin
            @(negedge clk) b_mr = ($urandom % 3) != 0;
            @(posedge clk);
            while (!(b_mv && b_mr)) begin
              @(negedge clk) b_mr = ($urandom % 3) != 0;
              @(posedge clk);
            end
            checks++;
            if (b_md !== outs[o] || b_ml !== (o == nout - 1)) begin
              failures++;
              if (failures < 10) $display("B beat %0d/%0d: %h vs %h last %0d", o, nout, b_md, outs[o], b_ml);
            end
          end
          @(negedge clk) b_mr = 0;
        end
      join
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rstn = 1'b1;
    wait (a_done_send);
    repeat (200) @(posedge clk);
    if (n_drop == 0 || n_pad == 0) begin
      failures++;
      $display("padding cases not exercised: drop %0d pad %0d", n_drop, n_pad);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
