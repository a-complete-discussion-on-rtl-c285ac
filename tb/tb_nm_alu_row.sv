// tb_nm_alu_row: the near-memory ALU row. Random 32-bit signed operands and
// random 17-bit scale factors go through all four operations (PASS, ADD, MAC,
// SCALE); each column is compared with an integer reference computed in
// 64-bit arithmetic and truncated to 32 bits. Purely combinational, so the
// check is made 1 time unit after the inputs change.
`include "tb_util.svh"
module tb_nm_alu_row;
  import nem_pkg::*;
  localparam int COLS = 4, W = 32;
  int checks = 0, failures = 0;
  alu_op_e op;
  logic signed [W-1:0] a [COLS], b [COLS], y [COLS];
  logic [SCAL_W-1:0] s;
  logic clk = 0;
  always #5 clk = ~clk;
  nm_alu_row #(.COLS(COLS), .W(W)) dut (.op, .a, .b, .s, .y);
  `TB_WATCHDOG(clk, 100000)
  initial begin
    for (int t = 0; t < 400; t++) begin
      op = alu_op_e'(t % 4);
      s = (t % 8 < 4) ? SCAL_W'($urandom_range(0, 255)) : SCAL_W'($urandom);
      for (int c = 0; c < COLS; c++) begin
        a[c] = (t % 5 == 0) ? W'($urandom) : W'(int'($urandom_range(0, 200000)) - 100000);
        b[c] = (t % 5 == 0) ? W'($urandom) : W'(int'($urandom_range(0, 200000)) - 100000);
      end
      #1;
      for (int c = 0; c < COLS; c++) begin
        longint e;
        unique case (op)
          ALU_PASS:  e = longint'(b[c]);
          ALU_ADD:   e = longint'(a[c]) + longint'(b[c]);
          ALU_MAC:   e = longint'(a[c]) + longint'(s) * longint'(b[c]);
          ALU_SCALE: e = (longint'(a[c]) * longint'(s)) >>> FRAC;
        endcase
        `TB_CHECK(y[c] == W'(e), $sformatf("op %0d col %0d a %0d b %0d s %0d y %0d exp %0d",
                                           op, c, a[c], b[c], s, y[c], W'(e)))
      end
      #1;
    end
    `TB_FINISH
  end
endmodule
