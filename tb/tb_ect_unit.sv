// tb_ect_unit: applies H elements bit-serially (bit 0 first) as the pim_slice
// does and checks: Valid rises after the first '1', `hit` pulses exactly
// once, the ECT register holds the bank read of that bit, and the select of
// every row follows V1 = ~Valid (BR), V2 = Valid & H (ECT), V3 = Valid & ~H.
`include "tb_util.svh"
module tb_ect_unit;
  import nem_pkg::*;
  localparam int DW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, probe = 0, hbit = 0, br_valid = 0, valid, hit;
  logic [DW-1:0] br = 0, ect_reg;
  logic [HBITS-1:0] h = 0;
  pp_sel_e sel [HBITS];

  ect_unit #(.DW(DW)) dut (.*);
  `TB_WATCHDOG(clk, 20000)

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [HBITS-1:0] hv;
      logic [DW-1:0] row;
      int first, hits;
      hv  = (t % 5 == 0) ? '0 : HBITS'($urandom);
      row = DW'($urandom);
      first = -1;
      for (int k = 0; k < HBITS; k++) if (hv[k] && first < 0) first = k;
      @(negedge clk); start = 1; h = hv; probe = 0; br_valid = 0;
      @(negedge clk); start = 0;
      `TB_CHECK(!valid, "valid cleared by start")
      hits = 0;
      for (int k = 0; k < HBITS; k++) begin
        probe = 1; hbit = hv[k];
        br_valid = (k > 0); br = (k > 0 && hv[k-1]) ? row : '0;
        #1 if (hit) hits++;
        @(negedge clk);
        `TB_CHECK(valid == (first >= 0 && k >= first), $sformatf("valid after bit %0d", k))
        if (first >= 0 && k == first) break;
      end
      probe = 0; br_valid = 1; br = (first >= 0) ? row : '0;
      @(negedge clk); br_valid = 0;
      `TB_CHECK(hits == (first >= 0 ? 1 : 0), "one hit")
      if (first >= 0) begin
        `TB_CHECK(ect_reg == row, "ECT register holds the row")
        for (int j = 0; j < HBITS; j++)
          `TB_CHECK(sel[j] == (hv[j] ? SEL_ECT : SEL_ZERO), $sformatf("sel row %0d", j))
      end else begin
        for (int j = 0; j < HBITS; j++) `TB_CHECK(sel[j] == SEL_BR, "sel BR while not valid")
      end
    end
    `TB_FINISH
  end
endmodule
