// axi_engine: the CGRA engine with its AXI-side plumbing (top level).
//
// A host configures a layer through the AXI-Lite register bank and starts it. The DMA
// controller then hands descriptors to three DMAs (outside this module): two stream weights
// and pixels in from memory, one writes the outputs back. Inside:
//
//   weights stream (AXI_W) -> width converter -> weights cache (2 ping-pong RAMs) --+
//                                                       C weights + control (TUSER) |
//                                                                                   v
//   pixels stream  (AXI_W) -> width converter -> pixel shifter (SRAM + shifter) -> PE array
//                                                       R pixels                    |
//   output stream  (AXI_W) <- width converter <------------- R results per beat ----+
//
// One layer is run as I_T x O_T iterations. In each, the weights of I_S input channels and
// O_S = floor(C/K_W) output channels sit in one weight bank and are reused for every pixel of
// the N images (H_T height slices of R rows, W columns), while the next iteration's weights
// load into the other bank. The array emits, per pixel, O_S beats of R accumulator values:
// the partial sums over the I_S channels of this iteration. Adding the I_T partial sums, bias,
// activation, pooling, the image edges and re-tiling for the next layer are left to the host,
// as the paper partitions them.
//
// Ports: AXI-Lite subordinate (s_axil_*); descriptor/status signals of the three DMAs, index
// 0 = weights, 1 = pixels, 2 = outputs (a descriptor is a byte address and length, a status
// pulse ends a transfer); three AXI-Stream ports of AXI_W bits, with TLAST ending each
// packet. Input packets may be padded to whole bus words; the output packet ends with a
// zero-padded beat when needed.
// Memory layout expected by the engine (LSB first, packed without gaps inside a packet):
//   weights packet (i_t, o_t): rows (i_s, k_h), each C words (o_s*K_W + k_w) of K_BITS
//   pixel packet i_t: beats (n, h_t, w, i_s), each R + K_H/2 words of X_BITS (rows of the slice
//                     and below it)
//   output packet (i_t, o_t): beats (n, h_t, w, o_s descending), each R words of Y_BITS
// The output for pixel column w is the horizontal window whose last tap is column w.
module axi_engine #(
  parameter int unsigned R         = cgra_pkg::DEF_ROWS,
  parameter int unsigned C         = cgra_pkg::DEF_COLS,
  parameter int unsigned X_BITS    = cgra_pkg::DEF_X_BITS,
  parameter int unsigned K_BITS    = cgra_pkg::DEF_K_BITS,
  parameter int unsigned Y_BITS    = cgra_pkg::DEF_Y_BITS,
  parameter int unsigned AXI_W     = cgra_pkg::DEF_AXI_WIDTH,
  parameter int unsigned W_DEPTH   = cgra_pkg::DEF_WEIGHTS_DEPTH,
  parameter int unsigned KH_MAX    = cgra_pkg::DEF_KH_MAX,
  parameter int unsigned PIX_DEPTH = cgra_pkg::DEF_PIX_SRAM_DEPTH,
  parameter int unsigned AXIL_ADDR_W = 8
) (
  input  logic                   clk,
  input  logic                   rstn,
  // AXI-Lite configuration port
  input  logic [AXIL_ADDR_W-1:0] s_axil_awaddr,
  input  logic                   s_axil_awvalid,
  output logic                   s_axil_awready,
  input  logic [31:0]            s_axil_wdata,
  input  logic [3:0]             s_axil_wstrb,
  input  logic                   s_axil_wvalid,
  output logic                   s_axil_wready,
  output logic [1:0]             s_axil_bresp,
  output logic                   s_axil_bvalid,
  input  logic                   s_axil_bready,
  input  logic [AXIL_ADDR_W-1:0] s_axil_araddr,
  input  logic                   s_axil_arvalid,
  output logic                   s_axil_arready,
  output logic [31:0]            s_axil_rdata,
  output logic [1:0]             s_axil_rresp,
  output logic                   s_axil_rvalid,
  input  logic                   s_axil_rready,
  // DMA descriptors and completion status
  output logic [2:0]             dma_desc_valid,
  input  logic [2:0]             dma_desc_ready,
  output logic [31:0]            dma_desc_addr [3],
  output logic [31:0]            dma_desc_len  [3],
  input  logic [2:0]             dma_stat_valid,
  // weights stream from memory
  input  logic                   s_axis_w_tvalid,
  output logic                   s_axis_w_tready,
  input  logic [AXI_W-1:0]       s_axis_w_tdata,
  input  logic                   s_axis_w_tlast,
  // pixel stream from memory
  input  logic                   s_axis_x_tvalid,
  output logic                   s_axis_x_tready,
  input  logic [AXI_W-1:0]       s_axis_x_tdata,
  input  logic                   s_axis_x_tlast,
  // output stream to memory
  output logic                   m_axis_y_tvalid,
  input  logic                   m_axis_y_tready,
  output logic [AXI_W-1:0]       m_axis_y_tdata,
  output logic                   m_axis_y_tlast,
  // layer status (also readable in STATUS)
  output logic                   busy
);
  localparam int unsigned WROW_W = C * K_BITS;
  localparam int unsigned XIN_W  = (R + KH_MAX / 2) * X_BITS;
  localparam int unsigned Y_W    = R * Y_BITS;
  localparam int unsigned GW_CW  = $clog2(AXI_W + WROW_W + 1);
  localparam int unsigned GX_CW  = $clog2(AXI_W + XIN_W + 1);
  localparam int unsigned GY_CW  = $clog2(Y_W + AXI_W + 1);

  cgra_pkg::cfg_t   cfg;
  logic             start, done;

  logic               wrow_valid, wrow_ready, w_pkt_end, x_pkt_end;
  logic [WROW_W-1:0]  wrow_data;
  logic               wc_valid, wc_ready;
  logic [WROW_W-1:0]  wc_data;
  cgra_pkg::wuser_t   wc_user;
  logic               xin_valid, xin_ready;
  logic [XIN_W-1:0]   xin_data;
  logic               px_valid, px_ready;
  logic [R*X_BITS-1:0] px_data;
  logic               y_valid, y_ready, y_last;
  logic [Y_W-1:0]     y_data;
  logic [GX_CW-1:0]   x_take;
  logic               w_tail, x_tail;   // always 0: input converters do not pad

  config_regs #(.ADDR_W(AXIL_ADDR_W)) u_regs (
    .clk, .rstn,
    .s_awaddr (s_axil_awaddr),  .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata  (s_axil_wdata),   .s_wstrb  (s_axil_wstrb),   .s_wvalid (s_axil_wvalid),
    .s_wready (s_axil_wready),  .s_bresp  (s_axil_bresp),   .s_bvalid (s_axil_bvalid),
    .s_bready (s_axil_bready),  .s_araddr (s_axil_araddr),  .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata  (s_axil_rdata),   .s_rresp  (s_axil_rresp),
    .s_rvalid (s_axil_rvalid),  .s_rready (s_axil_rready),
    .cfg, .start, .busy, .done
  );

  dma_controller u_dmac (
    .clk, .rstn, .cfg, .start, .busy, .done,
    .desc_valid(dma_desc_valid), .desc_ready(dma_desc_ready),
    .desc_addr (dma_desc_addr),  .desc_len  (dma_desc_len),
    .stat_valid(dma_stat_valid)
  );

  // weights: bus words -> weight rows of C words
  axis_gearbox #(.IN_W(AXI_W), .OUT_W(WROW_W), .PAD_LAST(1'b0)) u_gw (
    .clk, .rstn, .take(GW_CW'(WROW_W)), .flush(w_pkt_end),
    .s_valid(s_axis_w_tvalid), .s_ready(s_axis_w_tready), .s_data(s_axis_w_tdata),
    .s_last (s_axis_w_tlast),
    .m_valid(wrow_valid), .m_ready(wrow_ready), .m_data(wrow_data), .m_last(w_tail)
  );

  weights_cache #(.C(C), .K_BITS(K_BITS), .DEPTH(W_DEPTH)) u_wcache (
    .clk, .rstn, .cfg,
    .s_valid(wrow_valid), .s_ready(wrow_ready), .s_data(wrow_data), .s_pkt_end(w_pkt_end),
    .m_valid(wc_valid), .m_ready(wc_ready), .m_data(wc_data), .m_user(wc_user)
  );

  // pixels: bus words -> beats of R + K_H/2 words
  assign x_take = GX_CW'((R + int'(cfg.kh) / 2) * X_BITS);

  axis_gearbox #(.IN_W(AXI_W), .OUT_W(XIN_W), .PAD_LAST(1'b0)) u_gx (
    .clk, .rstn, .take(x_take), .flush(x_pkt_end),
    .s_valid(s_axis_x_tvalid), .s_ready(s_axis_x_tready), .s_data(s_axis_x_tdata),
    .s_last (s_axis_x_tlast),
    .m_valid(xin_valid), .m_ready(xin_ready), .m_data(xin_data), .m_last(x_tail)
  );

  pixel_shifter #(.R(R), .X_BITS(X_BITS), .KH_MAX(KH_MAX), .DEPTH(PIX_DEPTH)) u_shift (
    .clk, .rstn, .cfg,
    .s_valid(xin_valid), .s_ready(xin_ready), .s_data(xin_data), .s_pkt_end(x_pkt_end),
    .m_valid(px_valid), .m_ready(px_ready), .m_data(px_data)
  );

  pe_array #(.R(R), .C(C), .X_BITS(X_BITS), .K_BITS(K_BITS), .Y_BITS(Y_BITS)) u_array (
    .clk, .rstn,
    .s_w_valid(wc_valid), .s_w_ready(wc_ready), .s_w_data(wc_data), .s_w_user(wc_user),
    .s_x_valid(px_valid), .s_x_ready(px_ready), .s_x_data(px_data),
    .m_valid  (y_valid),  .m_ready  (y_ready),  .m_data  (y_data),  .m_last(y_last)
  );

  // outputs: R results per beat -> bus words, zero-padded at the end of each packet
  axis_gearbox #(.IN_W(Y_W), .OUT_W(AXI_W), .PAD_LAST(1'b1)) u_gy (
    .clk, .rstn, .take(GY_CW'(AXI_W)), .flush(1'b0),
    .s_valid(y_valid), .s_ready(y_ready), .s_data(y_data), .s_last(y_last),
    .m_valid(m_axis_y_tvalid), .m_ready(m_axis_y_tready), .m_data(m_axis_y_tdata),
    .m_last (m_axis_y_tlast)
  );
endmodule
