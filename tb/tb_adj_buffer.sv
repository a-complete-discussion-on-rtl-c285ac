// tb_adj_buffer: the CSR adjacency buffer. A random CSR graph (16 nodes,
// up to 60 entries) is written through the write ports; then every node's
// pointer pair and every entry are read back in random order and compared
// (reads are synchronous: data valid on the cycle after the read strobe).
// Reads beyond the written range (node >= NODES) must return zero.
`include "tb_util.svh"
module tb_adj_buffer;
  import nem_pkg::*;
  localparam int NODES = 16, EDGES = 64;
  localparam int EA_W = $clog2(EDGES + 1), NA_W = $clog2(NODES + 1);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic ptr_we = 0, ent_we = 0, ptr_rd = 0, ent_rd = 0;
  logic [NA_W-1:0] ptr_addr = 0;
  logic [EA_W-1:0] ptr_wdata = 0, ent_addr = 0, ent_rd_addr = 0, ptr_lo, ptr_hi;
  adj_entry_t ent_wdata = '0, ent_rdata;
  logic [NODE_W-1:0] ptr_rd_node = 0;
  int ptr [NODES + 1];
  adj_entry_t ent [EDGES];
  adj_buffer #(.NODES(NODES), .EDGES(EDGES)) dut (.*);
  `TB_WATCHDOG(clk, 100000)
  initial begin
    ptr[0] = 0;
    for (int n = 0; n < NODES; n++) ptr[n+1] = ptr[n] + $urandom_range(0, 3);
    for (int e = 0; e < EDGES; e++) begin
      ent[e].node = NODE_W'($urandom_range(0, NODES - 1));
      ent[e].dir = 1'($urandom);
      ent[e].weight = GW_W'($urandom);
    end
    @(negedge clk);
    for (int n = 0; n <= NODES; n++) begin
      ptr_we = 1; ptr_addr = NA_W'(n); ptr_wdata = EA_W'(ptr[n]); @(negedge clk);
    end
    ptr_we = 0;
    for (int e = 0; e < EDGES; e++) begin
      ent_we = 1; ent_addr = EA_W'(e); ent_wdata = ent[e]; @(negedge clk);
    end
    ent_we = 0;
    for (int t = 0; t < 300; t++) begin
      int n, e;
      n = (t % 10 == 9) ? NODES + $urandom_range(0, 5) : $urandom_range(0, NODES - 1);
      e = $urandom_range(0, EDGES - 1);
      ptr_rd = 1; ptr_rd_node = NODE_W'(n); ent_rd = 1; ent_rd_addr = EA_W'(e);
      @(negedge clk);
      ptr_rd = 0; ent_rd = 0;
      if (n < NODES) begin
        `TB_CHECK(ptr_lo == EA_W'(ptr[n]) && ptr_hi == EA_W'(ptr[n+1]), $sformatf("ptr node %0d", n))
      end else begin
        `TB_CHECK(ptr_lo == '0 && ptr_hi == '0, $sformatf("out-of-range node %0d", n))
      end
      `TB_CHECK(ent_rdata == ent[e], $sformatf("entry %0d", e))
    end
    `TB_FINISH
  end
endmodule
