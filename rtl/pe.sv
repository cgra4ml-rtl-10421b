// pe: one processing element of the CGRA.
//
// A PE holds a multiplier, an adder, two registers and two multiplexers. The accumulator
// register `acc` is fed by the first multiplexer, which picks one of:
//   - en_mac:   acc + x * k              (multiply-accumulate of one pixel and one weight)
//   - en_shift: acc_left, or 0 when this column starts a group (gstart) or when clr is set
//               (the accumulator moves one PE to the right inside its column group)
// The output register `sreg` is fed by the second multiplexer: on cap it copies acc (the
// finished sum), on sh it takes sreg_left, so the output registers of a row form a shift
// chain that drains results to the right-hand edge of the array.
// The paper gives the part list of the PE and the accumulate-then-pass-right behaviour; which
// operand each multiplexer selects and the clear input are this design's choice. The published
// PE drawing places one of its two registers ahead of the multiplier, on the incoming operand;
// here operands arrive unregistered (broadcast by the array) and the second register is the
// output-chain register instead.
// Timing: every action takes effect at the next rising edge; en_mac and en_shift are never
// both set. Reset (active low, synchronous) clears both registers.
module pe #(
  parameter int unsigned X_BITS = cgra_pkg::DEF_X_BITS,
  parameter int unsigned K_BITS = cgra_pkg::DEF_K_BITS,
  parameter int unsigned Y_BITS = cgra_pkg::DEF_Y_BITS
) (
  input  logic                     clk,
  input  logic                     rstn,
  input  logic                     en_mac,
  input  logic                     en_shift,
  input  logic                     clr,
  input  logic                     gstart,
  input  logic signed [X_BITS-1:0] x,
  input  logic signed [K_BITS-1:0] k,
  input  logic signed [Y_BITS-1:0] acc_left,
  output logic signed [Y_BITS-1:0] acc,
  input  logic                     cap,
  input  logic                     sh,
  input  logic signed [Y_BITS-1:0] sreg_left,
  output logic signed [Y_BITS-1:0] sreg
);
  logic signed [X_BITS+K_BITS-1:0] prod;
  logic signed [Y_BITS-1:0]        acc_next;

  assign prod = x * k;

  always_comb begin
    acc_next = acc;
    if (en_mac)        acc_next = acc + Y_BITS'(prod);
    else if (en_shift) acc_next = (clr || gstart) ? '0 : acc_left;
  end

  always_ff @(posedge clk) begin
    if (!rstn) begin
      acc  <= '0;
      sreg <= '0;
    end else begin
      acc <= acc_next;
      if (cap)     sreg <= acc;
      else if (sh) sreg <= sreg_left;
    end
  end
endmodule
