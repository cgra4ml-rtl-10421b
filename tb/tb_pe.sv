// tb_pe: random test of one processing element against a reference model.
// Each cycle picks a MAC, a shift (with random gstart/clr) or an idle step, and a random
// capture/shift of the output register; acc and sreg are compared after every edge.
// The reference follows the accumulate / shift-right rule of the unified dataflow
// (A[k_w] <- k_w == 0 ? 0 : A[k_w-1]); the capture/shift output register is this design's.
// Sizes: 4-bit pixel and weight, 24-bit accumulator (the default build).
module tb_pe;
  localparam int XB = 4, KB = 4, YB = 24;
  logic clk = 1'b0, rstn = 1'b0;
  always #5 clk = ~clk;

  logic en_mac, en_shift, clr, gstart, cap, sh;
  logic signed [XB-1:0] x;
  logic signed [KB-1:0] k;
  logic signed [YB-1:0] acc_left, acc, sreg_left, sreg;
  logic signed [YB-1:0] ref_acc, ref_sreg, nxt_acc, nxt_sreg;
  int checks = 0, failures = 0;
  int n_mac = 0, n_shift = 0, n_cap = 0;

  pe #(.X_BITS(XB), .K_BITS(KB), .Y_BITS(YB)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {en_mac, en_shift, clr, gstart, cap, sh} = '0;
    x = '0; k = '0; acc_left = '0; sreg_left = '0;
    ref_acc = '0; ref_sreg = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rstn = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      case ($urandom % 4)
        0, 1: begin en_mac = 1; en_shift = 0; end
        2:    begin en_mac = 0; en_shift = 1; end
        default: begin en_mac = 0; en_shift = 0; end
      endcase
      clr       = ($urandom % 8) == 0;
      gstart    = ($urandom % 3) == 0;
      cap       = ($urandom % 4) == 0;
      sh        = !cap && (($urandom % 2) == 1);
      x         = XB'($urandom);
      k         = KB'($urandom);
      acc_left  = YB'($urandom);
      sreg_left = YB'($urandom);
      // reference: products are sign-extended before the accumulate
      nxt_acc = ref_acc;
      if (en_mac) nxt_acc = ref_acc + YB'(int'(x) * int'(k));
      else if (en_shift) nxt_acc = (clr || gstart) ? '0 : acc_left;
      nxt_sreg = cap ? ref_acc : (sh ? sreg_left : ref_sreg);
      n_mac   += int'(en_mac);
      n_shift += int'(en_shift);
      n_cap   += int'(cap);
      @(posedge clk);
      #1;
      ref_acc  = nxt_acc;
      ref_sreg = nxt_sreg;
      checks++;
      if (acc !== ref_acc || sreg !== ref_sreg) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d: acc %0d/%0d sreg %0d/%0d", i, acc, ref_acc, sreg, ref_sreg);
      end
    end
    if (n_mac == 0 || n_shift == 0 || n_cap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
