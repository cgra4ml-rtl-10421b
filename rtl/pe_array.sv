// pe_array: the R x C array of processing elements (the CGRA).
//
// Every cycle the array takes one weight row (C words, one per column) from the weights cache
// and one pixel column (R words, one per row) from the pixel shifter. Pixel r is broadcast along
// row r and weight c down column c, so PE (r, c) adds x[r] * k[c] to its accumulator: an
// output-stationary R x C tile of the output, H_S = R rows by C columns.
//
// Column grouping. The C columns split into O_S = floor(C/K_W) groups of K_W columns (the
// columns past O_S*K_W idle). Column k_w of a group holds the weight of horizontal tap k_w.
// After all input channels and kernel rows of one pixel have been accumulated, the weights
// cache sends a "shift" beat: every group's last column hands its finished sum to the output
// chain, and every accumulator moves one column to the right (the first column of a group
// starts again from 0). After pixel w the last column of a group therefore holds
//   sum_j K[j] * X[w - K_W + 1 + j],
// one horizontal convolution output, so one output per group and row leaves per pixel. A
// shift beat marked clr (end of an image row) clears all accumulators instead.
// The grouping masks are worked out here from K_W and O_S, which travel with the weights in
// TUSER, so a new layer's grouping takes effect with its first weight row.
//
// Output. The output registers of a row form a shift chain moving right; a tag bit per column
// marks the group ends that hold a result. The chain's right end is the output stream: one
// beat carries the R results of one output channel, groups leaving in descending o_s order.
// A shift beat waits (the array stalls) until the chain is empty; m_ready low holds the chain.
//
// Interface: valid/ready streams. s_w carries C*K_BITS bits (column c at bits c*K_BITS) and
// wuser_t; s_x carries R*X_BITS bits (row r at bits r*X_BITS); m carries R*Y_BITS bits and
// m_last on the final result of an (i_t, o_t) iteration. A MAC beat needs both input streams,
// a shift beat only s_w.
module pe_array
  import cgra_pkg::*;
#(
  parameter int unsigned R      = cgra_pkg::DEF_ROWS,
  parameter int unsigned C      = cgra_pkg::DEF_COLS,
  parameter int unsigned X_BITS = cgra_pkg::DEF_X_BITS,
  parameter int unsigned K_BITS = cgra_pkg::DEF_K_BITS,
  parameter int unsigned Y_BITS = cgra_pkg::DEF_Y_BITS
) (
  input  logic                  clk,
  input  logic                  rstn,
  input  logic                  s_w_valid,
  output logic                  s_w_ready,
  input  logic [C*K_BITS-1:0]   s_w_data,
  input  wuser_t                s_w_user,
  input  logic                  s_x_valid,
  output logic                  s_x_ready,
  input  logic [R*X_BITS-1:0]   s_x_data,
  output logic                  m_valid,
  input  logic                  m_ready,
  output logic [R*Y_BITS-1:0]   m_data,
  output logic                  m_last
);
  logic [C-1:0] gstart, gend, gfirst_end;
  logic [C-1:0] sval, slast;
  logic         chain_empty, fire_mac, fire_sh, chain_sh;

  logic signed [Y_BITS-1:0] acc  [R][C];
  logic signed [Y_BITS-1:0] sreg [R][C];

  // Group masks from K_W and O_S: gstart = first column of a group, gend = last column of a
  // group that produces an output, gfirst_end = gend of group 0 (its result leaves last).
  always_comb begin
    int unsigned kcnt, gcnt, kw;
    kw   = (s_w_user.kw == '0) ? 1 : int'(s_w_user.kw);
    kcnt = 0;
    gcnt = 0;
    for (int unsigned c = 0; c < C; c++) begin
      gstart[c]     = (kcnt == 0);
      gend[c]       = (kcnt == kw - 1) && (gcnt < int'(s_w_user.os));
      gfirst_end[c] = (kcnt == kw - 1) && (gcnt == 0);
      if (kcnt == kw - 1) begin
        kcnt = 0;
        gcnt = gcnt + 1;
      end else begin
        kcnt = kcnt + 1;
      end
    end
  end

  assign chain_empty = (sval == '0);
  assign fire_mac    = s_w_valid && !s_w_user.shift && s_x_valid;
  assign fire_sh     = s_w_valid &&  s_w_user.shift && chain_empty;
  assign s_w_ready   = s_w_user.shift ? chain_empty : s_x_valid;
  assign s_x_ready   = s_w_valid && !s_w_user.shift;
  assign chain_sh    = !sval[C-1] || m_ready;

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      logic signed [Y_BITS-1:0] acc_l, sreg_l;
      if (c == 0) begin : g_edge
        assign acc_l  = '0;
        assign sreg_l = '0;
      end else begin : g_inner
        assign acc_l  = acc[r][c-1];
        assign sreg_l = sreg[r][c-1];
      end
      pe #(.X_BITS(X_BITS), .K_BITS(K_BITS), .Y_BITS(Y_BITS)) u_pe (
        .clk      (clk),
        .rstn     (rstn),
        .en_mac   (fire_mac),
        .en_shift (fire_sh),
        .clr      (s_w_user.clr),
        .gstart   (gstart[c]),
        .x        (s_x_data[r*X_BITS +: X_BITS]),
        .k        (s_w_data[c*K_BITS +: K_BITS]),
        .acc_left (acc_l),
        .acc      (acc[r][c]),
        .cap      (fire_sh),
        .sh       (chain_sh),
        .sreg_left(sreg_l),
        .sreg     (sreg[r][c])
      );
    end
    assign m_data[r*Y_BITS +: Y_BITS] = sreg[r][C-1];
  end

  // Tags of the output chain.
  always_ff @(posedge clk) begin
    if (!rstn) begin
      sval  <= '0;
      slast <= '0;
    end else if (fire_sh) begin
      sval  <= gend;
      slast <= s_w_user.last ? gfirst_end : '0;
    end else if (chain_sh) begin
      sval  <= {sval[C-2:0], 1'b0};
      slast <= {slast[C-2:0], 1'b0};
    end
  end

  assign m_valid = sval[C-1];
  assign m_last  = slast[C-1];

  // A result must not be dropped while the output is stalled.
  a_hold: assert property (@(posedge clk) disable iff (!rstn)
                           m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
