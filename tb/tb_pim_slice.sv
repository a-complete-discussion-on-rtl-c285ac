// tb_pim_slice: one bank slice in both combination schemes.
// NEM-C3: requests are issued back to back, one per cycle; every result must
// appear exactly 3 cycles after its request, in order, equal to W*h per column.
// NEM-C2: one request at a time; the products must equal W*h and the latency
// must be (position of the first '1' of h) + 4 cycles, or HBITS + 2 for h = 0,
// and `ect_hit` must pulse once exactly when h is non-zero.
`include "tb_util.svh"
module tb_pim_slice;
  import nem_pkg::*;
  localparam int ROWS = 4, COLS = 4, DW = COLS * WBITS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, start3 = 0, start2 = 0;
  logic [1:0] wr_row = 0, row = 0;
  logic [DW-1:0] wr_data = 0, l1a, l1b;
  logic [HBITS-1:0] h = 0;
  logic busy3, busy2, pv3, pv2, hit3, hit2;
  logic signed [PROD_W-1:0] prod3 [COLS], prod2 [COLS];
  logic [3:0] pr3, pr2;
  logic [WBITS-1:0] w [ROWS][COLS];

  pim_slice #(.C3(1'b1), .ROWS(ROWS), .COLS(COLS)) u3 (.clk, .rst_n, .wr_en, .wr_row, .wr_data,
    .l1_rd_en(1'b0), .l1_rd_row(2'd0), .l1_rdata(l1a), .start(start3), .row, .h,
    .busy(busy3), .prod_valid(pv3), .prod(prod3), .ect_hit(hit3), .probes(pr3));
  pim_slice #(.C3(1'b0), .ROWS(ROWS), .COLS(COLS)) u2 (.clk, .rst_n, .wr_en, .wr_row, .wr_data,
    .l1_rd_en(1'b0), .l1_rd_row(2'd0), .l1_rdata(l1b), .start(start2), .row, .h,
    .busy(busy2), .prod_valid(pv2), .prod(prod2), .ect_hit(hit2), .probes(pr2));
  `TB_WATCHDOG(clk, 20000)

  // expected results of the C3 pipeline, checked when they come out
  int q_row[$], q_h[$], q_t[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && pv3) begin
    if (q_row.size() == 0) `TB_CHECK(0, "C3 unexpected result")
    else begin
      int r, hv, t0;
      r = q_row.pop_front(); hv = q_h.pop_front(); t0 = q_t.pop_front();
      `TB_CHECK(cyc - t0 == 3, $sformatf("C3 latency %0d", cyc - t0))
      for (int c = 0; c < COLS; c++)
        `TB_CHECK(prod3[c] == PROD_W'(int'($signed(w[r][c])) * hv), $sformatf("C3 col %0d", c))
    end
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = WBITS'($urandom);
        wr_data[c*WBITS +: WBITS] = w[r][c];
      end
      wr_en = 1; wr_row = 2'(r);
      @(negedge clk);
    end
    wr_en = 0;
    // NEM-C3, back to back
    for (int t = 0; t < 40; t++) begin
      start3 = 1; row = 2'($urandom); h = HBITS'($urandom);
      q_row.push_back(row); q_h.push_back(h); q_t.push_back(cyc);
      @(negedge clk);
    end
    start3 = 0;
    repeat (5) @(negedge clk);
    `TB_CHECK(q_row.size() == 0, "C3 all results returned")
    // NEM-C2, one at a time
    for (int t = 0; t < 40; t++) begin
      int t0, first, hits, lat;
      row = 2'($urandom);
      h = (t % 6 == 0) ? '0 : HBITS'($urandom) << $urandom_range(0, 7);
      first = -1;
      for (int k = HBITS - 1; k >= 0; k--) if (h[k]) first = k;
      start2 = 1; t0 = cyc; hits = 0;
      @(negedge clk); start2 = 0;
      while (!pv2) begin
        if (hit2) hits++;
        @(negedge clk);
      end
      lat = cyc - t0;
      `TB_CHECK(lat == (first >= 0 ? first + 4 : HBITS + 2), $sformatf("C2 latency %0d first %0d", lat, first))
      `TB_CHECK(hits == (first >= 0 ? 1 : 0), "C2 ect hit count")
      for (int c = 0; c < COLS; c++)
        `TB_CHECK(prod2[c] == PROD_W'(int'($signed(w[row][c])) * int'(h)), $sformatf("C2 col %0d", c))
      @(negedge clk);
    end
    `TB_FINISH
  end
endmodule
