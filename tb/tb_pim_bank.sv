// tb_pim_bank: writes random rows into a bank, then checks that a compute
// read returns row AND rwl one cycle after rd_en (all-zero for RWL = 0, the
// stored row for RWL = 1), and that a write to one row while another is
// computed does not disturb the computed row.
`include "tb_util.svh"
module tb_pim_bank;
  localparam int ROWS = 8, COLS = 4, WBITS = 8, DW = COLS * WBITS;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0, rwl = 0;
  logic [2:0] wr_row = 0, rd_row = 0;
  logic [DW-1:0] wr_data = 0, rbl;
  logic [DW-1:0] model [ROWS];

  pim_bank #(.ROWS(ROWS), .COLS(COLS), .WBITS(WBITS)) dut (.*);
  `TB_WATCHDOG(clk, 10000)

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 3'(r); wr_data = {$urandom, $urandom} ; model[r] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      rd_en = 1; rd_row = 3'($urandom_range(0, ROWS-1)); rwl = 1'($urandom);
      // simultaneous write to a different row
      wr_en = 1; wr_row = rd_row + 3'd1; wr_data = {$urandom, $urandom};
      begin
        logic [DW-1:0] exp_v;
        exp_v = rwl ? model[rd_row] : '0;
        model[wr_row] = wr_data;
        @(negedge clk);
        rd_en = 0; wr_en = 0;
        `TB_CHECK(rbl == exp_v, $sformatf("row %0d rwl %0d: got %h exp %h", rd_row, rwl, rbl, exp_v))
      end
    end
    `TB_FINISH
  end
endmodule
