// weights_cache: ping-pong weight buffer that feeds the PE array.
//
// Two RAM banks, each C weights wide and D_W rows deep. While the array reads one bank, the
// next weight packet is written into the other, so loading weights from memory overlaps with
// computing. One packet holds the weights of one (i_t, o_t) iteration: I_S*K_H rows ordered
// (i_s, k_h), each row holding the C column weights (o_s, k_w).
//
// Write side: rows arrive on s (one row per beat) and fill the free bank from row 0; after row
// I_S*K_H-1 the bank is marked full and writing moves to the other bank, and s_pkt_end
// pulses (it lets the width converter in front drop the packet's padding). s_ready is low
// while both banks are full.
// Read side: a full bank is used once per pixel, N*H_T*W times ("rotated"). For each pixel it
// emits the I_S*K_H rows (MAC beats) and then one shift beat, whose TUSER tells the array to
// capture its outputs and move the accumulators; the shift beat at the end of an image row
// also sets clr, and the very last one sets last. Switching to a newly filled bank takes one
// cycle. With the output always ready, an iteration therefore takes
//   1 + N*H_T*W*(1 + I_S*K_H) cycles,
// the per-iteration term of the cycle count the paper gives for a layer.
// The bank is released as soon as its last row has been read, since the read data register
// keeps that row until the array takes it.
// Runtime parameters are read from cfg: kh and is when a write starts its rows, and all of
// kh, kw, os, is, w, ht, n when a bank is switched in; cfg must stay stable during a layer.
// The paper gives the two ping-pong RAMs, their size and the rotation; the beat order, the
// shift beat and its control bits are this design's choice.
module weights_cache #(
  parameter int unsigned C      = cgra_pkg::DEF_COLS,
  parameter int unsigned K_BITS = cgra_pkg::DEF_K_BITS,
  parameter int unsigned DEPTH  = cgra_pkg::DEF_WEIGHTS_DEPTH,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rstn,
  input  cgra_pkg::cfg_t          cfg,
  input  logic                    s_valid,
  output logic                    s_ready,
  input  logic [C*K_BITS-1:0]     s_data,
  output logic                    s_pkt_end,
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic [C*K_BITS-1:0]     m_data,
  output cgra_pkg::wuser_t        m_user
);
  typedef logic [31:0] u32_t;

  // ---- write side -----------------------------------------------------------------------
  logic [1:0]  full;
  logic        wr_bank;
  logic [AW:0] wr_row;
  u32_t        wr_rows;
  logic        s_fire;
  logic        free_rd;   // read side releases its bank this cycle

  assign wr_rows = u32_t'(cfg.is) * u32_t'(cfg.kh);
  assign s_ready = !full[wr_bank];
  assign s_fire  = s_valid && s_ready;
  assign s_pkt_end = s_fire && (u32_t'(wr_row) == wr_rows - 1);

  // ---- read side ------------------------------------------------------------------------
  typedef enum logic {S_SWAP, S_RUN} state_e;
  state_e       state;
  logic         rd_bank, data_bank;
  cgra_pkg::cnt_t kw_q, os_q, w_q;
  u32_t         rows_q, nht_q;
  u32_t         row, wcnt, nhtcnt;
  logic         issue, is_shift, is_eol, is_last;
  logic [AW-1:0] raddr;
  logic [C*K_BITS-1:0] rdata [2];

  assign is_shift = (row == rows_q);
  assign is_eol   = is_shift && (wcnt == u32_t'(w_q) - 1);
  assign is_last  = is_eol && (nhtcnt == nht_q - 1);
  assign issue    = (state == S_RUN) && (!m_valid || m_ready);
  assign free_rd  = issue && is_last;
  assign raddr    = is_shift ? '0 : AW'(row);

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sdp_ram #(.WIDTH(C*K_BITS), .DEPTH(DEPTH)) u_ram (
      .clk  (clk),
      .we   (s_fire && (wr_bank == 1'(b))),
      .waddr(wr_row[AW-1:0]),
      .wdata(s_data),
      .re   (issue && (rd_bank == 1'(b))),
      .raddr(raddr),
      .rdata(rdata[b])
    );
  end

  always_ff @(posedge clk) begin
    if (!rstn) begin
      full    <= '0;
      wr_bank <= 1'b0;
      wr_row  <= '0;
    end else begin
      if (s_fire) begin
        if (u32_t'(wr_row) == wr_rows - 1) begin
          wr_row  <= '0;
          wr_bank <= !wr_bank;
        end else begin
          wr_row <= wr_row + 1'b1;
        end
      end
      for (int b = 0; b < 2; b++) begin
        if (s_fire && wr_bank == 1'(b) && u32_t'(wr_row) == wr_rows - 1) full[b] <= 1'b1;
        else if (free_rd && rd_bank == 1'(b))                             full[b] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rstn) begin
      state     <= S_SWAP;
      rd_bank   <= 1'b0;
      data_bank <= 1'b0;
      m_valid   <= 1'b0;
      m_user    <= '0;
      row       <= '0;
      wcnt      <= '0;
      nhtcnt    <= '0;
      kw_q      <= '0;
      os_q      <= '0;
      w_q       <= '0;
      rows_q    <= '0;
      nht_q     <= '0;
    end else begin
      if (m_ready) m_valid <= 1'b0;
      case (state)
        S_SWAP: if (full[rd_bank]) begin
          state  <= S_RUN;
          kw_q   <= cfg.kw;
          os_q   <= cfg.os;
          w_q    <= cfg.w;
          rows_q <= u32_t'(cfg.is) * u32_t'(cfg.kh);
          nht_q  <= u32_t'(cfg.n) * u32_t'(cfg.ht);
          row    <= '0;
          wcnt   <= '0;
          nhtcnt <= '0;
        end
        S_RUN: if (issue) begin
          m_valid      <= 1'b1;
          data_bank    <= rd_bank;
          m_user.shift <= is_shift;
          m_user.clr   <= is_eol;
          m_user.last  <= is_last;
          m_user.kw    <= kw_q;
          m_user.os    <= os_q;
          if (!is_shift) begin
            row <= row + 1;
          end else begin
            row <= '0;
            if (is_eol) begin
              wcnt   <= '0;
              nhtcnt <= nhtcnt + 1;
            end else begin
              wcnt <= wcnt + 1;
            end
          end
          if (is_last) begin
            state   <= S_SWAP;
            rd_bank <= !rd_bank;
          end
        end
        default: state <= S_SWAP;
      endcase
    end
  end

  assign m_data = rdata[data_bank];

  a_stable: assert property (@(posedge clk) disable iff (!rstn)
                             m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_user));
endmodule
