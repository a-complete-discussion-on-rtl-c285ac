// tb_shift_add: for random signed weights W and unsigned H builds the
// partial products W AND H[k] and checks the shift-add result equals W*H,
// including the extremes W = -128 / 127 and H = 0 / 255.
`include "tb_util.svh"
module tb_shift_add;
  import nem_pkg::*;
  int checks = 0, failures = 0;
  logic [WBITS-1:0] pp [HBITS];
  logic signed [PROD_W-1:0] prod;
  shift_add dut (.pp, .prod);
  initial begin
    for (int t = 0; t < 400; t++) begin
      int w, hv;
      w  = (t < 4) ? ((t & 1) ? 127 : -128) : $urandom_range(0, 255) - 128;
      hv = (t < 4) ? ((t & 2) ? 255 : 0)    : $urandom_range(0, 255);
      for (int k = 0; k < HBITS; k++) pp[k] = hv[k] ? WBITS'(w) : '0;
      #1;
      `TB_CHECK(prod == PROD_W'(w * hv), $sformatf("%0d*%0d got %0d", w, hv, prod))
    end
    `TB_FINISH
  end
endmodule
