// cgra_pkg: shared constants and types of the CGRA engine.
//
// The static (design-time) parameters below are the defaults of every module. The array size
// R x C = 8 x 96 is the engine drawn in the system diagram of the design; 4-bit inputs and
// weights are the ResNet-50 build; the 24-bit accumulator and the 128-bit AXI width are the
// widths given for the benchmark builds. The weights-cache depth D_W, the largest kernel height
// and the depth of the pixel-shifter SRAM are not given numerically and are this design's choice.
//
// cfg_t is the set of runtime parameters (one layer, or "bundle") that the host writes into the
// AXI-Lite register bank before starting the engine. wuser_t is the control word that the
// weights cache sends to the PE array alongside every weight row (the stream's TUSER).
package cgra_pkg;

  // ---- static parameters -------------------------------------------------------------------
  localparam int unsigned DEF_ROWS           = 8;     // R: PE rows  = height slice H_S
  localparam int unsigned DEF_COLS           = 96;    // C: PE columns, grouped into O_S groups of K_W
  localparam int unsigned DEF_X_BITS         = 4;     // input (pixel) word width, signed
  localparam int unsigned DEF_K_BITS         = 4;     // weight word width, signed
  localparam int unsigned DEF_Y_BITS         = 24;    // accumulator / output word width, signed
  localparam int unsigned DEF_AXI_WIDTH      = 128;   // data width of the three DMA streams
  localparam int unsigned DEF_WEIGHTS_DEPTH  = 256;   // D_W: rows of each ping-pong weight RAM
  localparam int unsigned DEF_KH_MAX         = 7;     // largest kernel height the pixel shifter holds
  localparam int unsigned DEF_PIX_SRAM_DEPTH = 4096;  // entries (w, i_s) of the pixel-shifter SRAM
  localparam int unsigned CNT_BITS       = 16;    // width of the runtime-parameter registers

  typedef logic [CNT_BITS-1:0] cnt_t;

  // ---- runtime parameters of one layer (Table "runtime parameters of the unified dataflow") --
  typedef struct packed {
    cnt_t        kh;          // K_H kernel height (1 for a dense layer)
    cnt_t        kw;          // K_W kernel width  (1 for a dense layer)
    cnt_t        os;          // O_S = floor(C / K_W) output channels per iteration
    cnt_t        is;          // I_S input channels per iteration, I_S * K_H <= D_W
    cnt_t        w;           // W   image width (pixels streamed per row slice)
    cnt_t        ht;          // H_T = ceil(H / R) height slices
    cnt_t        n;           // N   batch
    cnt_t        it;          // I_T input-channel iterations
    cnt_t        ot;          // O_T output-channel iterations
    logic [31:0] w_base;      // byte address of weight packet (0,0)
    logic [31:0] w_pkt_bytes; // bytes per weight packet (one per i_t, o_t)
    logic [31:0] x_base;      // byte address of pixel packet i_t = 0
    logic [31:0] x_pkt_bytes; // bytes per pixel packet (one per i_t, re-read for each o_t)
    logic [31:0] y_base;      // byte address of output packet (0,0)
    logic [31:0] y_pkt_bytes; // bytes reserved per output packet
  } cfg_t;

  // ---- register map of the AXI-Lite bank (32-bit registers, word index) --------------------
  typedef enum logic [4:0] {
    REG_CTRL   = 5'd0,   // write bit 0 = 1: start the layer
    REG_STATUS = 5'd1,   // bit 0 busy (read only), bit 1 done (sticky, write 1 to clear)
    REG_KH     = 5'd2,
    REG_KW     = 5'd3,
    REG_OS     = 5'd4,
    REG_IS     = 5'd5,
    REG_W      = 5'd6,
    REG_HT     = 5'd7,
    REG_N      = 5'd8,
    REG_IT     = 5'd9,
    REG_OT     = 5'd10,
    REG_WBASE  = 5'd11,
    REG_WPKT   = 5'd12,
    REG_XBASE  = 5'd13,
    REG_XPKT   = 5'd14,
    REG_YBASE  = 5'd15,
    REG_YPKT   = 5'd16
  } reg_idx_e;

  localparam int unsigned NUM_REGS = 17;

  // ---- control bits sent with each weight row to the PE array ------------------------------
  typedef struct packed {
    logic shift;   // shift beat: capture outputs, pass accumulators one PE to the right (no MAC)
    logic clr;     // with shift: clear all accumulators (end of an image row)
    logic last;    // with shift: final shift beat of the (i_t, o_t) iteration
    cnt_t kw;      // K_W, sets the column grouping
    cnt_t os;      // O_S, number of column groups that produce outputs
  } wuser_t;

endpackage
