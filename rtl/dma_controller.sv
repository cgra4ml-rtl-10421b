// dma_controller: drives the three DMAs of the engine for one layer.
//
// On start it latches the layer's runtime parameters and issues, for each of the
// I_T * O_T iterations (i_t outer, o_t inner), one descriptor (byte address, byte length) to
// each DMA:
//   weights DMA (memory to stream): w_base + (i_t*O_T + o_t) * w_pkt_bytes, w_pkt_bytes
//   pixels  DMA (memory to stream): x_base + i_t * x_pkt_bytes,             x_pkt_bytes
//                                   (the input slice i_t is streamed again for every o_t)
//   output  DMA (stream to memory): y_base + (i_t*O_T + o_t) * y_pkt_bytes, y_pkt_bytes
// The three descriptor queues run independently; the streams' own flow control keeps them
// in step (the weights DMA runs one packet ahead into the free weight bank). Each DMA reports
// a finished transfer with a one-cycle status pulse; the layer is done when all three DMAs
// have reported all I_T * O_T packets. busy is high from start to done; done is a one-cycle
// pulse. A start while busy is ignored.
// The paper names this block and says that it moves the configuration and data through the
// DMAs; the descriptor scheme here is this design's choice.
module dma_controller (
  input  logic           clk,
  input  logic           rstn,
  input  cgra_pkg::cfg_t cfg,
  input  logic           start,
  output logic           busy,
  output logic           done,
  // descriptors: [0] weights, [1] pixels, [2] output
  output logic [2:0]     desc_valid,
  input  logic [2:0]     desc_ready,
  output logic [31:0]    desc_addr [3],
  output logic [31:0]    desc_len  [3],
  input  logic [2:0]     stat_valid
);
  typedef logic [31:0] u32_t;

  cgra_pkg::cfg_t cfg_q;
  u32_t total;              // I_T * O_T
  u32_t issued [3];
  u32_t ot_cnt_x;           // o_t of the next pixel descriptor
  u32_t stat_cnt [3];
  logic all_done;

  always_ff @(posedge clk) begin
    if (!rstn) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      cfg_q    <= '0;
      total    <= '0;
      ot_cnt_x <= '0;
      for (int i = 0; i < 3; i++) begin
        stat_cnt[i]  <= '0;
        issued[i]    <= '0;
        desc_addr[i] <= '0;
        desc_len[i]  <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy         <= 1'b1;
        cfg_q        <= cfg;
        total        <= u32_t'(cfg.it) * u32_t'(cfg.ot);
        ot_cnt_x     <= '0;
        desc_addr[0] <= cfg.w_base;
        desc_addr[1] <= cfg.x_base;
        desc_addr[2] <= cfg.y_base;
        desc_len[0]  <= cfg.w_pkt_bytes;
        desc_len[1]  <= cfg.x_pkt_bytes;
        desc_len[2]  <= cfg.y_pkt_bytes;
        for (int i = 0; i < 3; i++) begin
          issued[i]   <= '0;
          stat_cnt[i] <= '0;
        end
      end else if (busy) begin
        if (desc_valid[0] && desc_ready[0]) begin
          issued[0]    <= issued[0] + 1;
          desc_addr[0] <= desc_addr[0] + cfg_q.w_pkt_bytes;
        end
        if (desc_valid[1] && desc_ready[1]) begin
          issued[1] <= issued[1] + 1;
          if (ot_cnt_x == u32_t'(cfg_q.ot) - 1) begin
            ot_cnt_x     <= '0;
            desc_addr[1] <= desc_addr[1] + cfg_q.x_pkt_bytes;
          end else begin
            ot_cnt_x <= ot_cnt_x + 1;
          end
        end
        if (desc_valid[2] && desc_ready[2]) begin
          issued[2]    <= issued[2] + 1;
          desc_addr[2] <= desc_addr[2] + cfg_q.y_pkt_bytes;
        end
        for (int i = 0; i < 3; i++)
          if (stat_valid[i]) stat_cnt[i] <= stat_cnt[i] + 1;
        if (all_done) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign all_done = (stat_cnt[0] == total) && (stat_cnt[1] == total) && (stat_cnt[2] == total);

  always_comb
    for (int i = 0; i < 3; i++) desc_valid[i] = busy && (issued[i] < total);

  for (genvar i = 0; i < 3; i++) begin : g_chk
    a_desc_hold: assert property (@(posedge clk) disable iff (!rstn)
                                  desc_valid[i] && !desc_ready[i] |=> desc_valid[i] && $stable(desc_addr[i]));
  end
endmodule
