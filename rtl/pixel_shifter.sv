// pixel_shifter: turns the input stream into one column of R pixels per cycle for the array.
//
// For each image column w and input channel i_s of a height slice h_t, the stream delivers
// one beat of R + K_H/2 words: the R rows of the slice and the K_H/2 rows below it (rows
// beyond the image are zeros in memory). The K_H/2 rows above the slice are not streamed
// again: the last K_H/2 of the R slice rows of every beat are kept in an on-chip SRAM at
// address w*I_S + i_s, and the next height slice reads them back as its top rows. The first
// slice of an image (h_t = 0) uses zeros instead, the zero padding at the top.
// The R + 2*(K_H/2) words are loaded into a bank of shift registers, which is then shifted
// K_H times; the top R registers go to the R PE rows, so row r sees input rows
// h_t*R + r - K_H/2 + k_h for k_h = 0 .. K_H-1: the vertical neighbourhood of the convolution.
// This cuts the input bandwidth by about K_H compared with streaming every window.
//
// Pipeline: an accepted beat waits in a staging register while its top rows are read from the
// SRAM (one cycle, written back in the same cycle with read-first behaviour); the bank loads
// from the staging register when its last shift is taken, so a new column is accepted every
// K_H cycles without bubbles.
// Interface: s carries IN_W = (R + KH_MAX/2) words of X_BITS (word i at bits i*X_BITS); only
// the low R + K_H/2 words are used. m carries R words (row r at bits r*X_BITS). The counters
// for w, i_s, h_t and n run from cfg (kh, is, w, ht, n), which must stay stable during a layer;
// s_pkt_end pulses when the last beat of a packet (one i_t slice of the input) is taken.
// The SRAM, the R + K_H/2 words per beat and the K_H shifts follow the paper; the staging
// pipeline and the SRAM addressing are this design's choice.
module pixel_shifter #(
  parameter int unsigned R      = cgra_pkg::DEF_ROWS,
  parameter int unsigned X_BITS = cgra_pkg::DEF_X_BITS,
  parameter int unsigned KH_MAX = cgra_pkg::DEF_KH_MAX,
  parameter int unsigned DEPTH  = cgra_pkg::DEF_PIX_SRAM_DEPTH,
  localparam int unsigned KH2_MAX = (KH_MAX / 2 > 0) ? KH_MAX / 2 : 1,
  localparam int unsigned IN_N    = R + KH_MAX / 2,
  localparam int unsigned BANK_N  = R + 2 * (KH_MAX / 2),
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                   clk,
  input  logic                   rstn,
  input  cgra_pkg::cfg_t         cfg,
  input  logic                   s_valid,
  output logic                   s_ready,
  input  logic [IN_N*X_BITS-1:0] s_data,
  output logic                   s_pkt_end,
  output logic                   m_valid,
  input  logic                   m_ready,
  output logic [R*X_BITS-1:0]    m_data
);
  typedef logic [X_BITS-1:0] word_t;
  typedef logic [31:0]       u32_t;

  u32_t kh2;
  assign kh2 = u32_t'(cfg.kh) >> 1;

  // ---- accept stage: counters, SRAM write/read ------------------------------------------
  logic            s_fire, load;
  logic [AW-1:0]   addr;
  u32_t            is_cnt, w_cnt, ht_cnt, n_cnt;
  logic            stg_full, stg_zero;
  logic [IN_N*X_BITS-1:0]    stg_words;
  logic [KH2_MAX*X_BITS-1:0] sram_wdata, sram_rdata;

  // Last K_H/2 words of the R slice rows, saved as the next slice's top rows.
  always_comb begin
    sram_wdata = '0;
    for (int unsigned j = 0; j < KH2_MAX; j++)
      if (j < kh2) sram_wdata[j*X_BITS +: X_BITS] = s_data[(R - kh2 + j)*X_BITS +: X_BITS];
  end

  sdp_ram #(.WIDTH(KH2_MAX*X_BITS), .DEPTH(DEPTH)) u_sram (
    .clk  (clk),
    .we   (s_fire),
    .waddr(addr),
    .wdata(sram_wdata),
    .re   (s_fire),
    .raddr(addr),
    .rdata(sram_rdata)
  );

  // ---- shift-register bank ----------------------------------------------------------------
  word_t bank [BANK_N];
  u32_t  bank_cnt;   // shifts left to emit for the loaded column

  assign m_valid = (bank_cnt != 0);
  assign load    = stg_full && (bank_cnt == 0 || (bank_cnt == 1 && m_ready));
  assign s_ready = !stg_full || load;
  assign s_fire  = s_valid && s_ready;
  assign s_pkt_end = s_fire && (is_cnt == u32_t'(cfg.is) - 1) && (w_cnt == u32_t'(cfg.w) - 1) &&
                     (ht_cnt == u32_t'(cfg.ht) - 1) && (n_cnt == u32_t'(cfg.n) - 1);

  for (genvar r = 0; r < R; r++) begin : g_out
    assign m_data[r*X_BITS +: X_BITS] = bank[r];
  end

  always_ff @(posedge clk) begin
    if (!rstn) begin
      addr      <= '0;
      is_cnt    <= '0;
      w_cnt     <= '0;
      ht_cnt    <= '0;
      n_cnt     <= '0;
      stg_full  <= 1'b0;
      stg_zero  <= 1'b0;
      stg_words <= '0;
    end else begin
      if (s_fire) begin
        stg_full  <= 1'b1;
        stg_zero  <= (ht_cnt == 0);
        stg_words <= s_data;
        if (is_cnt == u32_t'(cfg.is) - 1) begin
          is_cnt <= '0;
          if (w_cnt == u32_t'(cfg.w) - 1) begin
            w_cnt <= '0;
            addr  <= '0;
            if (ht_cnt == u32_t'(cfg.ht) - 1) begin
              ht_cnt <= '0;
              n_cnt  <= (n_cnt == u32_t'(cfg.n) - 1) ? '0 : n_cnt + 1;
            end else begin
              ht_cnt <= ht_cnt + 1;
            end
          end else begin
            w_cnt <= w_cnt + 1;
            addr  <= addr + 1'b1;
          end
        end else begin
          is_cnt <= is_cnt + 1;
          addr   <= addr + 1'b1;
        end
      end else if (load) begin
        stg_full <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rstn) begin
      bank_cnt <= '0;
      for (int unsigned j = 0; j < BANK_N; j++) bank[j] <= '0;
    end else if (load) begin
      bank_cnt <= u32_t'(cfg.kh);
      for (int unsigned j = 0; j < BANK_N; j++) begin
        if (j < kh2)
          bank[j] <= stg_zero ? '0 : sram_rdata[j*X_BITS +: X_BITS];
        else if (j - kh2 < IN_N)
          bank[j] <= stg_words[(j - kh2)*X_BITS +: X_BITS];
        else
          bank[j] <= '0;
      end
    end else if (m_valid && m_ready) begin
      bank_cnt <= bank_cnt - 1;
      for (int unsigned j = 0; j + 1 < BANK_N; j++) bank[j] <= bank[j+1];
      bank[BANK_N-1] <= '0;
    end
  end

  a_kh: assert property (@(posedge clk) disable iff (!rstn)
                         s_fire |-> (cfg.kh != 0 && u32_t'(cfg.kh) <= KH_MAX));
endmodule
