// tb_nem_gnn_full: the NEM-GNN core at its full default size (32 tiles x 8
// banks of 32 x 128 weights, 256-node aggregation array, 4096 adjacency
// entries, Update Index register of 64) through one complete GCN layer:
// out = relu(D^-1 A H W) on a small random undirected, weighted graph of
// 6 nodes, with A including self-loops.
// Only bank row 0 (features 0..255, one H slot per node) is loaded with
// random signed weights; W is checked back through the normal-mode L1 port
// on a few rows. Then: LCONF (compute mode, weighted, D generation on),
// CLEAR, one MACC per node with one 256-element H slot, DSCALE, RELU.
// All 128 columns of the 6 result rows are compared with a software model;
// the event counters must show slots, broadcast updates and D writes.
`include "tb_util.svh"
module tb_nem_gnn_full;
  import nem_pkg::*;
  localparam int NB = 256, COLS = 128, ROWS = 32, NODES = 256, EDGES = 4096, N = 6;
  localparam int DW = COLS * WBITS;
  localparam int BA_W = $clog2(NB), RA_W = $clog2(ROWS), EA_W = $clog2(EDGES + 1), NA_W = $clog2(NODES + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, h_valid = 0, w_we = 0, l1_rd_en = 0, adj_ptr_we = 0, adj_ent_we = 0;
  op_e cmd_op = OP_LCONF;
  logic [NODE_W-1:0] cmd_node = 0, agg_rd_row = 0;
  logic [15:0] cmd_arg = 0;
  logic [NB-1:0][HBITS-1:0] h_data = '0;
  logic [BA_W-1:0] w_bank = 0, l1_rd_bank = 0;
  logic [RA_W-1:0] w_row = 0, l1_rd_row = 0;
  logic [DW-1:0] w_data = 0, l1_rdata;
  logic [NA_W-1:0] adj_ptr_addr = 0;
  logic [EA_W-1:0] adj_ptr_wdata = 0, adj_ent_addr = 0;
  adj_entry_t adj_ent_wdata = '0;
  logic cmd_ready, h_ready, busy, compute_mode;
  logic signed [ACC_W-1:0] agg_rd_data [COLS];
  perf_t perf;

  nem_gnn_core dut (.*);
  `TB_WATCHDOG(clk, 100000)

  logic signed [WBITS-1:0] w [NB][COLS];
  int unsigned h [N][NB];
  int ptr [NODES + 1];
  adj_entry_t ent [64];
  int n_ent;
  longint comb [N][COLS], res [N][COLS];

  task automatic send_cmd(input op_e op, input int node, input int arg);
    @(negedge clk);
    cmd_op = op; cmd_node = NODE_W'(node); cmd_arg = 16'(arg); cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // weights, row 0 of every bank = features 0..255
    for (int b = 0; b < NB; b++) begin
      for (int c = 0; c < COLS; c++) begin
        w[b][c] = WBITS'($urandom);
        w_data[c*WBITS +: WBITS] = w[b][c];
      end
      w_we = 1; w_bank = BA_W'(b); w_row = '0; @(negedge clk);
    end
    w_we = 0;
    for (int b = 0; b < NB; b += 37) begin
      logic ok;
      l1_rd_en = 1; l1_rd_bank = BA_W'(b); l1_rd_row = '0; @(negedge clk); l1_rd_en = 0;
      ok = 1;
      for (int c = 0; c < COLS; c++) if ($signed(l1_rdata[c*WBITS +: WBITS]) != w[b][c]) ok = 0;
      `TB_CHECK(ok, $sformatf("L1 read bank %0d", b))
    end
    // graph: ring 0-1-2-3-4-5-0 plus chord 0-3, weights 1..3, both directions stored
    n_ent = 0;
    for (int n = 0; n < N; n++) begin
      int nb [$];
      ptr[n] = n_ent;
      nb.push_back((n + 1) % N); nb.push_back((n + N - 1) % N);
      if (n == 0) nb.push_back(3);
      if (n == 3) nb.push_back(0);
      foreach (nb[i]) begin
        ent[n_ent].node = NODE_W'(nb[i]);
        ent[n_ent].dir = 1'b0;
        ent[n_ent].weight = GW_W'(1 + (n + nb[i]) % 3);
        n_ent++;
      end
    end
    for (int n = N; n <= NODES; n++) ptr[n] = n_ent;
    for (int n = 0; n <= NODES; n++) begin
      adj_ptr_we = 1; adj_ptr_addr = NA_W'(n); adj_ptr_wdata = EA_W'(ptr[n]); @(negedge clk);
    end
    adj_ptr_we = 0;
    for (int e = 0; e < n_ent; e++) begin
      adj_ent_we = 1; adj_ent_addr = EA_W'(e); adj_ent_wdata = ent[e]; @(negedge clk);
    end
    adj_ent_we = 0;
    // layer
    send_cmd(OP_LCONF, 0, 1 | 2 | 8);
    send_cmd(OP_CLEAR, 0, N);
    wait_idle();
    for (int n = 0; n < N; n++) begin
      for (int j = 0; j < NB; j++) h[n][j] = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(0, 255);
      send_cmd(OP_MACC, n, 1);
      for (int b = 0; b < NB; b++) h_data[b] = HBITS'(h[n][b]);
      h_valid = 1;
      #1; while (!h_ready) begin @(negedge clk); #1; end
      @(negedge clk); h_valid = 0;
    end
    wait_idle();
    send_cmd(OP_DSCALE, 0, N);
    send_cmd(OP_RELU, 0, N);
    wait_idle();
    // reference
    for (int n = 0; n < N; n++) for (int c = 0; c < COLS; c++) begin
      comb[n][c] = 0;
      for (int j = 0; j < NB; j++) comb[n][c] += longint'(w[j][c]) * longint'(h[n][j]);
      res[n][c] = 0;
    end
    for (int n = 0; n < N; n++) begin
      for (int c = 0; c < COLS; c++) res[n][c] += comb[n][c];
      for (int e = ptr[n]; e < ptr[n+1]; e++)
        for (int c = 0; c < COLS; c++) res[ent[e].node][c] += longint'(ent[e].weight) * comb[n][c];
    end
    for (int n = 0; n < N; n++) begin
      int dv;
      dv = 65536 / (1 + ptr[n+1] - ptr[n]);
      @(negedge clk);
      agg_rd_row = NODE_W'(n); #1;
      for (int c = 0; c < COLS; c++) begin
        longint e;
        e = longint'(int'((res[n][c] * dv) >>> 16));
        if (e < 0) e = 0;
        `TB_CHECK(longint'(agg_rd_data[c]) == e, $sformatf("node %0d col %0d got %0d exp %0d", n, c, agg_rd_data[c], e))
      end
    end
    `TB_CHECK(perf.slots == N && perf.macc == N, "one slot and one MACC per node")
    `TB_CHECK(perf.updates == N + n_ent, "one broadcast update per candidate")
    `TB_CHECK(perf.dgen == N, "one D^-1 value per node")
    `TB_CHECK(perf.dscale == N && perf.relu == N, "DSCALE and ReLU rows")
    `TB_FINISH
  end
endmodule
