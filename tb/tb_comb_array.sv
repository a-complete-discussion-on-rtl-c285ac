// tb_comb_array: random sequences of clear / accumulate / clear+load on the
// combination array compared with a software accumulator per column.
`include "tb_util.svh"
module tb_comb_array;
  localparam int COLS = 6, W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr = 0, acc_en = 0;
  logic signed [W-1:0] add [COLS], q [COLS];
  int m [COLS];
  comb_array #(.COLS(COLS), .ACC_W(W)) dut (.*);
  `TB_WATCHDOG(clk, 10000)
  initial begin
    for (int c = 0; c < COLS; c++) begin add[c] = '0; m[c] = 0; end
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      clr = ($urandom_range(0, 9) == 0); acc_en = 1'($urandom);
      for (int c = 0; c < COLS; c++) begin
        add[c] = W'($urandom_range(0, 2000) - 1000);
        if (clr) m[c] = acc_en ? int'(add[c]) : 0;
        else if (acc_en) m[c] += int'(add[c]);
      end
      @(negedge clk);
      for (int c = 0; c < COLS; c++) `TB_CHECK(q[c] == W'(m[c]), $sformatf("col %0d", c))
    end
    `TB_FINISH
  end
endmodule
