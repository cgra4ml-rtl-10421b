// axis_gearbox: AXI-Stream width converter that packs bits, for any ratio of widths.
//
// Input beats of IN_W bits are appended, LSB first, to a bit buffer; every output beat takes
// the lowest `take` bits of it (take <= OUT_W, a runtime input so that the pixel stream can
// carry R + K_H/2 words per beat for the current K_H). The buffer holds IN_W + OUT_W bits, so
// ratios such as 128 -> 384 (weights), 128 -> 44 (pixels) and 192 -> 128 (outputs) all work.
// End of packet (s_last):
//   PAD_LAST = 0: the consumer, which knows how many words a packet holds, pulses `flush` in
//                 the cycle it takes the packet's last word; the bits left over (the padding
//                 that rounds a packet in memory up to whole bus words) are dropped.
//   PAD_LAST = 1: a last partial beat is sent padded with zeros and marked m_last; `flush`
//                 is not used and must be tied low.
// No input is taken after s_last until the packet has been flushed.
// Output data above `take` bits are not defined for the consumer (they show buffer bits).
// This is a stand-in for the stream width converters of an AXI-Stream library and is this
// design's own; the paper names only the bus widths.
module axis_gearbox #(
  parameter int unsigned IN_W     = 128,
  parameter int unsigned OUT_W    = 384,
  parameter bit          PAD_LAST = 1'b0,
  localparam int unsigned BUF_W   = IN_W + OUT_W,
  localparam int unsigned CW      = $clog2(BUF_W + 1)
) (
  input  logic              clk,
  input  logic              rstn,
  input  logic [CW-1:0]     take,
  input  logic              flush,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [IN_W-1:0]   s_data,
  input  logic              s_last,
  output logic              m_valid,
  input  logic              m_ready,
  output logic [OUT_W-1:0]  m_data,
  output logic              m_last
);
  logic [BUF_W-1:0] buffer, buf_a;
  logic [CW-1:0]    cnt, cnt_a;
  logic             last_seen, s_fire, m_fire;

  assign s_ready = !last_seen && (cnt <= CW'(OUT_W));
  assign s_fire  = s_valid && s_ready;
  assign m_valid = (cnt >= take && take != 0) || (PAD_LAST && last_seen && cnt != 0);
  assign m_last  = PAD_LAST && last_seen && (cnt <= take);
  assign m_fire  = m_valid && m_ready;
  assign m_data  = buffer[OUT_W-1:0];

  always_comb begin
    buf_a = buffer;
    cnt_a = cnt;
    if (m_fire) begin
      buf_a = buffer >> take;
      cnt_a = (cnt > take) ? cnt - take : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rstn) begin
      buffer    <= '0;
      cnt       <= '0;
      last_seen <= 1'b0;
    end else if (flush) begin
      buffer    <= '0;
      cnt       <= '0;
      last_seen <= 1'b0;
    end else begin
      if (s_fire) begin
        buffer    <= buf_a | (BUF_W'(s_data) << cnt_a);
        cnt       <= cnt_a + CW'(IN_W);
        last_seen <= s_last;
      end else begin
        buffer <= buf_a;
        cnt    <= cnt_a;
        if (last_seen && cnt_a == 0) last_seen <= 1'b0;
      end
    end
  end

  a_take: assert property (@(posedge clk) disable iff (!rstn) take <= CW'(OUT_W));
endmodule
