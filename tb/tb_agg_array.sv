// tb_agg_array: the aggregation array with 2 banks of 8 rows and 4 columns.
// Random row operations (PASS, ADD, MAC, SCALE) are applied, one per cycle,
// to random rows of both banks; a software copy of the array is updated the
// same way and every row is compared through the combinational read port
// after each operation (read-modify-write completes in one cycle).
`include "tb_util.svh"
module tb_agg_array;
  import nem_pkg::*;
  localparam int BN = 8, AB = 2, COLS = 4, W = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic op_valid = 0;
  alu_op_e op = ALU_PASS;
  logic [NODE_W-1:0] op_row = 0, rd_row = 0;
  logic signed [W-1:0] op_vec [COLS], rd_data [COLS];
  logic [SCAL_W-1:0] op_s = 0;
  longint m [BN*AB][COLS];
  agg_array #(.BANK_NODES(BN), .AGG_BANKS(AB), .COLS(COLS), .W(W)) dut (.*);
  `TB_WATCHDOG(clk, 100000)
  initial begin
    for (int c = 0; c < COLS; c++) op_vec[c] = '0;
    @(negedge clk);
    // initialise all rows with PASS
    for (int r = 0; r < BN*AB; r++) begin
      op_valid = 1; op = ALU_PASS; op_row = NODE_W'(r);
      for (int c = 0; c < COLS; c++) begin op_vec[c] = W'(int'($urandom_range(0, 2000)) - 1000); m[r][c] = op_vec[c]; end
      @(negedge clk);
    end
    for (int t = 0; t < 300; t++) begin
      int r;
      @(negedge clk);  // re-align after the read-back loop
      r = $urandom_range(0, BN*AB - 1);
      op_valid = ($urandom_range(0, 3) != 0);
      op = alu_op_e'($urandom_range(0, 3)); op_row = NODE_W'(r);
      op_s = (op == ALU_SCALE) ? SCAL_W'($urandom_range(1, 65536)) : SCAL_W'($urandom_range(0, 255));
      for (int c = 0; c < COLS; c++) op_vec[c] = W'(int'($urandom_range(0, 2000)) - 1000);
      if (op_valid)
        for (int c = 0; c < COLS; c++) begin
          unique case (op)
            ALU_PASS:  m[r][c] = op_vec[c];
            ALU_ADD:   m[r][c] = m[r][c] + op_vec[c];
            ALU_MAC:   m[r][c] = m[r][c] + longint'(op_s) * op_vec[c];
            ALU_SCALE: m[r][c] = (m[r][c] * longint'(op_s)) >>> FRAC;
          endcase
          m[r][c] = longint'(int'(m[r][c]));
        end
      @(negedge clk);
      op_valid = 0;
      for (int q = 0; q < BN*AB; q++) begin
        rd_row = NODE_W'(q); #1;
        for (int c = 0; c < COLS; c++)
          `TB_CHECK(longint'(rd_data[c]) == m[q][c], $sformatf("row %0d col %0d got %0d exp %0d", q, c, rd_data[c], m[q][c]))
      end
    end
    `TB_FINISH
  end
endmodule
