// config_regs: AXI-Lite subordinate with the engine's 32-bit control, status and
// runtime-parameter registers.
//
// The host writes the runtime parameters of a layer (K_H, K_W, O_S, I_S, W, H_T, N, I_T, O_T and
// the base addresses and packet sizes of the three tensors in memory), then writes 1 to bit 0
// of CTRL to start. STATUS bit 0 reads busy; bit 1 is set when the layer is done and stays set
// until the host writes 1 to it. The register map is cgra_pkg::reg_idx_e (word index = byte
// address / 4). Reads of unmapped addresses return 0; writes to them are ignored. Every access
// gets an OKAY response.
// Timing: a write is taken when AW and W are both valid and no response is pending; the B
// response follows one cycle later. A read is taken when no read data is pending; R follows one
// cycle later. start is a one-cycle pulse. The parameter registers are not locked while busy:
// the host must not change them during a layer.
// The paper specifies a bank of 32-bit control and status registers written over AXI-Lite; the
// map and the handshake details are this design's choice.
module config_regs #(
  parameter int unsigned ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rstn,
  // AXI-Lite write
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  // AXI-Lite read
  input  logic [ADDR_W-1:0] s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // engine side
  output cgra_pkg::cfg_t    cfg,
  output logic              start,
  input  logic              busy,
  input  logic              done
);
  import cgra_pkg::*;

  logic [31:0] regs [NUM_REGS];
  logic        done_flag;
  logic        wr_fire, rd_fire;
  logic [ADDR_W-3:0] widx, ridx;
  logic [31:0] wmask;

  assign s_awready = s_awvalid && s_wvalid && !s_bvalid;
  assign s_wready  = s_awready;
  assign wr_fire   = s_awready;
  assign s_arready = !s_rvalid;
  assign rd_fire   = s_arvalid && s_arready;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign widx      = s_awaddr[ADDR_W-1:2];
  assign ridx      = s_araddr[ADDR_W-1:2];

  always_comb
    for (int b = 0; b < 4; b++) wmask[b*8 +: 8] = {8{s_wstrb[b]}};

  always_ff @(posedge clk) begin
    if (!rstn) begin
      for (int i = 0; i < int'(NUM_REGS); i++) regs[i] <= '0;
      done_flag <= 1'b0;
      start     <= 1'b0;
      s_bvalid  <= 1'b0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
    end else begin
      start <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (done) done_flag <= 1'b1;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        if (int'(widx) == int'(REG_CTRL)) begin
          start <= s_wdata[0] && s_wstrb[0];
        end else if (int'(widx) == int'(REG_STATUS)) begin
          if (s_wdata[1] && s_wstrb[0] && !done) done_flag <= 1'b0;
        end else if (int'(widx) < int'(NUM_REGS)) begin
          regs[widx[4:0]] <= (regs[widx[4:0]] & ~wmask) | (s_wdata & wmask);
        end
      end
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        if (int'(ridx) == int'(REG_STATUS))   s_rdata <= {30'd0, done_flag, busy};
        else if (int'(ridx) == int'(REG_CTRL)) s_rdata <= '0;
        else if (int'(ridx) < int'(NUM_REGS))  s_rdata <= regs[ridx[4:0]];
        else                                   s_rdata <= '0;
      end
    end
  end

  assign cfg.kh          = cnt_t'(regs[REG_KH]);
  assign cfg.kw          = cnt_t'(regs[REG_KW]);
  assign cfg.os          = cnt_t'(regs[REG_OS]);
  assign cfg.is          = cnt_t'(regs[REG_IS]);
  assign cfg.w           = cnt_t'(regs[REG_W]);
  assign cfg.ht          = cnt_t'(regs[REG_HT]);
  assign cfg.n           = cnt_t'(regs[REG_N]);
  assign cfg.it          = cnt_t'(regs[REG_IT]);
  assign cfg.ot          = cnt_t'(regs[REG_OT]);
  assign cfg.w_base      = regs[REG_WBASE];
  assign cfg.w_pkt_bytes = regs[REG_WPKT];
  assign cfg.x_base      = regs[REG_XBASE];
  assign cfg.x_pkt_bytes = regs[REG_XPKT];
  assign cfg.y_base      = regs[REG_YBASE];
  assign cfg.y_pkt_bytes = regs[REG_YPKT];

  a_b_hold: assert property (@(posedge clk) disable iff (!rstn) s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rstn)
                             s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
