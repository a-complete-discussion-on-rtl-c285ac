// tb_pp_array: checks both write structures of the partial-products array:
// the NEM-C2 3:1 multiplexer (BR / ECT / zero per row) and the NEM-C3 AND
// broadcast (row j = bank read AND H bit j), including per-row enables.
`include "tb_util.svh"
module tb_pp_array;
  import nem_pkg::*;
  localparam int DW = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [HBITS-1:0] we2 = 0, we3 = 0, h = 0;
  pp_sel_e sel [HBITS];
  logic [DW-1:0] br = 0, ect = 0;
  logic [DW-1:0] pp2 [HBITS], pp3 [HBITS], m2 [HBITS], m3 [HBITS];

  pp_array #(.DW(DW), .C3(1'b0)) u2 (.clk, .we(we2), .sel, .br, .ect, .h, .pp(pp2));
  pp_array #(.DW(DW), .C3(1'b1)) u3 (.clk, .we(we3), .sel, .br, .ect, .h, .pp(pp3));
  `TB_WATCHDOG(clk, 10000)

  initial begin
    for (int j = 0; j < HBITS; j++) sel[j] = SEL_ZERO;
    @(negedge clk); we2 = '1; we3 = '1; br = '0; h = '0;
    @(negedge clk);
    for (int j = 0; j < HBITS; j++) begin m2[j] = '0; m3[j] = '0; end
    for (int t = 0; t < 50; t++) begin
      we2 = HBITS'($urandom); we3 = HBITS'($urandom); h = HBITS'($urandom);
      br = DW'($urandom); ect = DW'($urandom);
      for (int j = 0; j < HBITS; j++) begin
        sel[j] = pp_sel_e'($urandom_range(0, 2));
        if (we2[j]) m2[j] = (sel[j] == SEL_BR) ? br : (sel[j] == SEL_ECT) ? ect : '0;
        if (we3[j]) m3[j] = h[j] ? br : '0;
      end
      @(negedge clk);
      for (int j = 0; j < HBITS; j++) begin
        `TB_CHECK(pp2[j] == m2[j], $sformatf("C2 row %0d", j))
        `TB_CHECK(pp3[j] == m3[j], $sformatf("C3 row %0d", j))
      end
    end
    `TB_FINISH
  end
endmodule
