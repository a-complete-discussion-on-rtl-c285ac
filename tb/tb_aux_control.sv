// tb_aux_control: the auxiliary ReLU / softmax unit on a model of the
// aggregation array (16 rows x 8 columns, combinational read, write on
// wr_valid). ReLU rows must come back with exactly the negative elements
// zeroed. Softmax rows (inputs with 8 fraction bits, spread up to +-12.0) are
// compared against a floating-point softmax computed with $exp: every output
// (Q0.16) must be within 6 % of 1.0 + 1 LSB of the exact value, the row must
// sum to 1.0 within COLS LSBs, and the largest input must give the largest
// output. Cycle counts: ReLU 2 cycles, softmax 3*COLS + 3 cycles, start to
// done. Rows other than the addressed one must not change.
`include "tb_util.svh"
module tb_aux_control;
  import nem_pkg::*;
  localparam int COLS = 8, ROWS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic start = 0, mode = 0, wr_valid, busy, done;
  logic [NODE_W-1:0] row = 0, rd_row, wr_row;
  logic signed [ACC_W-1:0] rd_data [COLS], wr_data [COLS];
  logic signed [ACC_W-1:0] mem [ROWS][COLS];
  aux_control #(.COLS(COLS), .IN_FRAC(8)) dut (.*);
  `TB_WATCHDOG(clk, 200000)
  always_comb for (int c = 0; c < COLS; c++) rd_data[c] = mem[rd_row % ROWS][c];
  always @(posedge clk) if (wr_valid) for (int c = 0; c < COLS; c++) mem[wr_row % ROWS][c] <= wr_data[c];

  initial begin
    logic signed [ACC_W-1:0] old [ROWS][COLS];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int r, t0, sum, imax;
      bit m;
      real ex [COLS], se;
      r = $urandom_range(0, ROWS - 1);
      m = (t % 2);
      for (int q = 0; q < ROWS; q++) for (int c = 0; c < COLS; c++) begin
        mem[q][c] = ACC_W'(int'($urandom_range(0, 6144)) - 3072);
        old[q][c] = mem[q][c];
      end
      if (t % 7 == 3) for (int c = 0; c < COLS; c++) mem[r][c] = 0;   // flat row
      for (int c = 0; c < COLS; c++) old[r][c] = mem[r][c];
      start = 1; mode = m; row = NODE_W'(r); t0 = cyc;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      `TB_CHECK(cyc - t0 == (m ? 3 * COLS + 3 : 2), $sformatf("mode %0d cycles %0d", m, cyc - t0))
      for (int q = 0; q < ROWS; q++) if (q != r)
        for (int c = 0; c < COLS; c++) `TB_CHECK(mem[q][c] == old[q][c], "other rows untouched")
      if (!m) begin
        for (int c = 0; c < COLS; c++)
          `TB_CHECK(mem[r][c] == (old[r][c] < 0 ? 0 : old[r][c]), $sformatf("relu col %0d", c))
      end else begin
        se = 0; imax = 0;
        for (int c = 0; c < COLS; c++) begin
          ex[c] = $exp(real'(old[r][c]) / 256.0);
          se += ex[c];
          if (old[r][c] > old[r][imax]) imax = c;
        end
        sum = 0;
        for (int c = 0; c < COLS; c++) begin
          real p, d;
          p = ex[c] / se * 65536.0;
          d = real'(mem[r][c]) - p;
          if (d < 0) d = -d;
          `TB_CHECK(d <= 0.06 * 65536.0 + 1.0, $sformatf("softmax col %0d got %0d exp %0f", c, mem[r][c], p))
          `TB_CHECK(mem[r][c] <= mem[r][imax], "max input gives max output")
          sum += mem[r][c];
        end
        `TB_CHECK(sum <= 65536 && sum >= 65536 - COLS, $sformatf("softmax row sum %0d", sum))
      end
      @(negedge clk);
    end
    `TB_FINISH
  end
endmodule
