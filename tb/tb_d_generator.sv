// tb_d_generator: the degree-matrix generator. Random adjacency rows (random
// length, random direction bits) are played as row_start / ent_valid /
// row_end event streams, with random idle cycles, for undirected and
// directed graphs. For each node the stored D^-1 must be 65536/(1 + counted
// entries), where directed graphs count only direction-bit-1 entries.
// After that, rows are played again with en = 0 (gated, later layers) and the
// stored values must not change and wr_event must never pulse.
`include "tb_util.svh"
module tb_d_generator;
  import nem_pkg::*;
  localparam int NODES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, directed = 0, row_start = 0, ent_valid = 0, ent_dir = 0, row_end = 0, wr_event;
  logic [NODE_W-1:0] row_node = 0, rd_node = 0;
  logic [SCAL_W-1:0] dinv;
  int exp_d [NODES];
  int wr_events = 0;
  d_generator #(.NODES(NODES)) dut (.*);
  `TB_WATCHDOG(clk, 100000)
  always @(posedge clk) if (wr_event) wr_events++;

  task automatic play_row(input int n, input bit dirg, output int cnt);
    int len;
    len = $urandom_range(0, 9);
    cnt = 1;
    directed = dirg;
    row_start = 1; row_node = NODE_W'(n); @(negedge clk); row_start = 0;
    for (int i = 0; i < len; i++) begin
      repeat ($urandom_range(0, 1)) @(negedge clk);
      ent_valid = 1; ent_dir = 1'($urandom);
      if (!dirg || ent_dir) cnt++;
      row_end = (i == len - 1);
      @(negedge clk);
      ent_valid = 0; row_end = 0;
    end
    if (len == 0) begin row_end = 1; @(negedge clk); row_end = 0; end
  endtask

  initial begin
    int cnt, w_before;
    repeat (2) @(negedge clk); rst_n = 1;
    en = 1;
    for (int pass = 0; pass < 2; pass++)
      for (int n = 0; n < NODES; n++) begin
        play_row(n, pass == 1, cnt);
        exp_d[n] = 65536 / cnt;
        rd_node = NODE_W'(n); #1;
        `TB_CHECK(dinv == SCAL_W'(exp_d[n]), $sformatf("node %0d dinv %0d exp %0d", n, dinv, exp_d[n]))
      end
    `TB_CHECK(wr_events == 2 * NODES, "one write per row")
    en = 0; w_before = wr_events;
    for (int n = 0; n < NODES; n++) play_row(n, 1'b0, cnt);
    `TB_CHECK(wr_events == w_before, "gated generator does not write")
    for (int n = 0; n < NODES; n++) begin
      rd_node = NODE_W'(n); #1;
      `TB_CHECK(dinv == SCAL_W'(exp_d[n]), $sformatf("gated node %0d", n))
    end
    rd_node = NODE_W'(NODES + 3); #1;
    `TB_CHECK(dinv == '0, "out-of-range node reads 0")
    `TB_FINISH
  end
endmodule
