// sdp_ram: simple dual-port synchronous RAM (one write port, one read port, one clock).
//
// Used for the two ping-pong weight banks of the weights cache and for the row SRAM of the
// pixel shifter. It stands in for the SRAM macros of an ASIC build or the block RAMs of an FPGA
// build. Timing: a write with we=1 lands at the clock edge. A read with re=1 returns
// mem[raddr] in rdata after the edge and rdata then holds until the next read. A read and a
// write to the same address in one cycle return the old word (read-first). The contents are
// not reset; readers must write before they read.
module sdp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
