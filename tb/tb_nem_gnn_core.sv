// tb_nem_gnn_core: end-to-end test of the NEM-GNN core running a two-layer
// GCN, out = softmax(D^-1 A relu(D^-1 A H W1) W2) with A including self-loops,
// on random graphs of 8 nodes.
//
// Two cores are built at reduced size (2 tiles x 2 banks, 4 rows, 4 columns,
// 8 aggregation rows, 64 adjacency entries, Update Index register of 3):
// one in NEM-C3 (pre-compute) form and one in NEM-C2 (early termination)
// form. Both receive the same weight and adjacency writes; `sel3` picks
// which one gets commands and H slots. Each run:
//   - writes W1 (16 x 4, signed) and reads it back through the normal-mode
//     L1 port; issues one MACC in normal mode (must be refused);
//   - layer 1: LCONF compute mode with D generation on, CLEAR, one MACC per
//     node with 4 H slots (random unsigned features, some zero), DSCALE,
//     RELU; the aggregation array must equal the software GCN layer exactly;
//   - layer 2: writes W2 (4 x 4) into row 0 of the banks, LCONF with the
//     D generator gated, CLEAR, MACC per node with the layer-1 output
//     quantised to 8 bits (>> 11, clipped) as H, DSCALE with the stored
//     D^-1, SOFTMAX; compared with a floating-point softmax (6 % tolerance)
//     and the exact integer values before softmax for the argmax.
// Graph types: undirected/unweighted, directed/weighted, undirected/weighted
// on the NEM-C3 core and directed/weighted on the NEM-C2 core.
// Mechanisms counted from the cores' event counters and the test itself:
// pipelined slots, back-to-back slot acceptance, early termination, stalls
// of a finished combination, combination/aggregation overlap, broadcast
// updates, Update Index overflow, direction drops, weighted MAC, D generator
// writes and its gating, DSCALE, ReLU, softmax, refused MACC, L1 mode
// switch. Each must occur at least once.
`include "tb_util.svh"
module tb_nem_gnn_core;
  import nem_pkg::*;
  localparam int NT = 2, BPT = 2, NB = NT * BPT, ROWS = 4, COLS = 4, NODES = 8, EDGES = 64, UPD = 3;
  localparam int F1 = NB * ROWS, DW = COLS * WBITS;
  localparam int BA_W = $clog2(NB), RA_W = $clog2(ROWS), EA_W = $clog2(EDGES + 1), NA_W = $clog2(NODES + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic sel3 = 1;
  logic cmd_valid = 0, h_valid = 0, w_we = 0, l1_rd_en = 0, adj_ptr_we = 0, adj_ent_we = 0;
  op_e cmd_op = OP_LCONF;
  logic [NODE_W-1:0] cmd_node = 0, agg_rd_row = 0;
  logic [15:0] cmd_arg = 0;
  logic [NB-1:0][HBITS-1:0] h_data = '0;
  logic [BA_W-1:0] w_bank = 0, l1_rd_bank = 0;
  logic [RA_W-1:0] w_row = 0, l1_rd_row = 0;
  logic [DW-1:0] w_data = 0, l1_rdata3, l1_rdata2;
  logic [NA_W-1:0] adj_ptr_addr = 0;
  logic [EA_W-1:0] adj_ptr_wdata = 0, adj_ent_addr = 0;
  adj_entry_t adj_ent_wdata = '0;
  logic cmd_ready3, cmd_ready2, h_ready3, h_ready2, busy3, busy2, cm3, cm2;
  logic signed [ACC_W-1:0] agg3 [COLS], agg2 [COLS];
  perf_t perf3, perf2;

  nem_gnn_core #(.C3(1'b1), .N_TILES(NT), .BANKS_PER_TILE(BPT), .ROWS(ROWS), .COLS(COLS),
    .BANK_NODES(NODES), .AGG_BANKS(1), .ADJ_EDGES(EDGES), .UPD_MAX(UPD)) u_c3 (
    .clk, .rst_n, .cmd_valid(cmd_valid && sel3), .cmd_ready(cmd_ready3), .cmd_op, .cmd_node, .cmd_arg,
    .h_valid(h_valid && sel3), .h_ready(h_ready3), .h_data, .w_we, .w_bank, .w_row, .w_data,
    .l1_rd_en, .l1_rd_bank, .l1_rd_row, .l1_rdata(l1_rdata3), .adj_ptr_we, .adj_ptr_addr,
    .adj_ptr_wdata, .adj_ent_we, .adj_ent_addr, .adj_ent_wdata, .agg_rd_row, .agg_rd_data(agg3),
    .busy(busy3), .compute_mode(cm3), .perf(perf3));
  nem_gnn_core #(.C3(1'b0), .N_TILES(NT), .BANKS_PER_TILE(BPT), .ROWS(ROWS), .COLS(COLS),
    .BANK_NODES(NODES), .AGG_BANKS(1), .ADJ_EDGES(EDGES), .UPD_MAX(UPD)) u_c2 (
    .clk, .rst_n, .cmd_valid(cmd_valid && !sel3), .cmd_ready(cmd_ready2), .cmd_op, .cmd_node, .cmd_arg,
    .h_valid(h_valid && !sel3), .h_ready(h_ready2), .h_data, .w_we, .w_bank, .w_row, .w_data,
    .l1_rd_en, .l1_rd_bank, .l1_rd_row, .l1_rdata(l1_rdata2), .adj_ptr_we, .adj_ptr_addr,
    .adj_ptr_wdata, .adj_ent_we, .adj_ent_addr, .adj_ent_wdata, .agg_rd_row, .agg_rd_data(agg2),
    .busy(busy2), .compute_mode(cm2), .perf(perf2));
  `TB_WATCHDOG(clk, 400000)

  // mechanism counters kept by the test itself
  int n_b2b = 0, n_mode_sw = 0, n_gated_ok = 0;
  logic h_acc_q = 0, cm_q = 0;
  always @(posedge clk) begin
    logic h_acc;
    h_acc = h_valid && (sel3 ? h_ready3 : h_ready2);
    if (h_acc && h_acc_q) n_b2b++;
    h_acc_q <= h_acc;
    if ((sel3 ? cm3 : cm2) != cm_q) n_mode_sw++;
    cm_q <= sel3 ? cm3 : cm2;
  end

  // ---- reference data ----
  logic signed [WBITS-1:0] w1 [F1][COLS], w2 [COLS][COLS];
  int unsigned h1 [NODES][F1], h2 [NODES][COLS];
  int ptr [NODES + 1];
  adj_entry_t ent [EDGES];
  int n_ent;
  longint out1 [NODES][COLS], pre2 [NODES][COLS];
  int dinv [NODES];

  function automatic perf_t perf_m();
    return sel3 ? perf3 : perf2;
  endfunction

  task automatic send_cmd(input op_e op, input int node, input int arg);
    cmd_op = op; cmd_node = NODE_W'(node); cmd_arg = 16'(arg); cmd_valid = 1;
    #1; while (!(sel3 ? cmd_ready3 : cmd_ready2)) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (sel3 ? busy3 : busy2) @(negedge clk);
  endtask

  task automatic write_row(input int b, input int r, input logic [DW-1:0] d);
    w_we = 1; w_bank = BA_W'(b); w_row = RA_W'(r); w_data = d; @(negedge clk); w_we = 0;
  endtask

  // random graph in CSR form; each edge appears in both end rows
  task automatic make_graph(input bit dirg, input bit wg);
    int adj [NODES][$];
    int dirs [NODES][$];
    int wts [NODES][$];
    for (int n = 0; n < NODES; n++) begin adj[n].delete(); dirs[n].delete(); wts[n].delete(); end
    for (int e = 0; e < 14; e++) begin
      int u, v, wt;
      u = $urandom_range(0, NODES - 1);
      v = $urandom_range(0, NODES - 1);
      if (u == v) continue;
      wt = wg ? $urandom_range(1, 3) : 1;
      adj[u].push_back(v); dirs[u].push_back(0); wts[u].push_back(wt);  // u -> v leaves u
      adj[v].push_back(u); dirs[v].push_back(1); wts[v].push_back(wt);  // and enters v
    end
    // one long row so the Update Index register overflows
    for (int k = 1; k < NODES; k++) begin
      adj[0].push_back(k); dirs[0].push_back(0); wts[0].push_back(wg ? 2 : 1);
      adj[k].push_back(0); dirs[k].push_back(1); wts[k].push_back(wg ? 2 : 1);
    end
    n_ent = 0;
    for (int n = 0; n < NODES; n++) begin
      ptr[n] = n_ent;
      foreach (adj[n][i]) begin
        ent[n_ent].node = NODE_W'(adj[n][i]);
        ent[n_ent].dir = 1'(dirs[n][i]);
        ent[n_ent].weight = GW_W'(wts[n][i]);
        n_ent++;
      end
    end
    ptr[NODES] = n_ent;
    for (int n = 0; n <= NODES; n++) begin
      adj_ptr_we = 1; adj_ptr_addr = NA_W'(n); adj_ptr_wdata = EA_W'(ptr[n]); @(negedge clk);
    end
    adj_ptr_we = 0;
    for (int e = 0; e < n_ent; e++) begin
      adj_ent_we = 1; adj_ent_addr = EA_W'(e); adj_ent_wdata = ent[e]; @(negedge clk);
    end
    adj_ent_we = 0;
    for (int n = 0; n < NODES; n++) begin
      int c;
      c = 1;
      for (int e = ptr[n]; e < ptr[n+1]; e++) if (!dirg || ent[e].dir) c++;
      dinv[n] = 65536 / c;
    end
  endtask

  // reference: one GCN layer without the activation
  task automatic ref_layer(input bit dirg, input bit wg, input int nf, input bit l2,
                           output longint res [NODES][COLS]);
    longint comb [NODES][COLS];
    for (int n = 0; n < NODES; n++) for (int c = 0; c < COLS; c++) begin
      comb[n][c] = 0;
      for (int j = 0; j < nf; j++)
        comb[n][c] += longint'(l2 ? w2[j][c] : w1[j][c]) * longint'(l2 ? h2[n][j] : h1[n][j]);
      res[n][c] = 0;
    end
    for (int n = 0; n < NODES; n++) begin
      for (int c = 0; c < COLS; c++) res[n][c] += comb[n][c];
      for (int e = ptr[n]; e < ptr[n+1]; e++)
        if (!dirg || !ent[e].dir)
          for (int c = 0; c < COLS; c++)
            res[ent[e].node][c] += (wg ? longint'(ent[e].weight) : 1) * comb[n][c];
    end
    for (int n = 0; n < NODES; n++) for (int c = 0; c < COLS; c++)
      res[n][c] = longint'(int'((res[n][c] * dinv[n]) >>> 16));
  endtask

  // one layer on the selected core: MACC per node with nslots H slots
  task automatic run_layer(input int ns, input bit l2);
    for (int n = 0; n < NODES; n++) begin
      send_cmd(OP_MACC, n, ns);
      for (int s = 0; s < ns; s++) begin
        for (int b = 0; b < NB; b++) h_data[b] = HBITS'(l2 ? h2[n][s * NB + b] : h1[n][s * NB + b]);
        h_valid = 1;
        #1; while (!(sel3 ? h_ready3 : h_ready2)) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      h_valid = 0;
    end
    wait_idle();
  endtask

  task automatic read_row(input int n, output logic signed [ACC_W-1:0] r [COLS]);
    @(negedge clk);
    agg_rd_row = NODE_W'(n); #1;
    for (int c = 0; c < COLS; c++) r[c] = sel3 ? agg3[c] : agg2[c];
  endtask

  task automatic run_gcn(input bit c3, input bit dirg, input bit wg);
    logic signed [ACC_W-1:0] r [COLS];
    longint dgen0;
    sel3 = c3;
    @(negedge clk);
    // weights of layer 1, written in normal (cache) mode
    send_cmd(OP_LCONF, 0, 0);
    for (int j = 0; j < F1; j++) for (int c = 0; c < COLS; c++) w1[j][c] = WBITS'($urandom);
    for (int b = 0; b < NB; b++) for (int rr = 0; rr < ROWS; rr++) begin
      logic [DW-1:0] d;
      for (int c = 0; c < COLS; c++) d[c*WBITS +: WBITS] = w1[rr * NB + b][c];
      write_row(b, rr, d);
      l1_rd_en = 1; l1_rd_bank = BA_W'(b); l1_rd_row = RA_W'(rr); @(negedge clk); l1_rd_en = 0;
      `TB_CHECK((sel3 ? l1_rdata3 : l1_rdata2) == d, "normal-mode L1 read")
    end
    send_cmd(OP_MACC, 0, 1);       // normal mode: refused
    make_graph(dirg, wg);
    for (int n = 0; n < NODES; n++) for (int j = 0; j < F1; j++)
      h1[n][j] = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(0, 255);
    // ---- layer 1 ----
    send_cmd(OP_LCONF, 0, 1 | (int'(wg) << 1) | (int'(dirg) << 2) | 8);
    send_cmd(OP_CLEAR, 0, NODES);
    wait_idle();
    run_layer(ROWS, 1'b0);
    send_cmd(OP_DSCALE, 0, NODES);
    send_cmd(OP_RELU, 0, NODES);
    wait_idle();
    ref_layer(dirg, wg, F1, 1'b0, out1);
    for (int n = 0; n < NODES; n++) begin
      read_row(n, r);
      for (int c = 0; c < COLS; c++) begin
        longint e;
        e = out1[n][c] < 0 ? 0 : out1[n][c];
        `TB_CHECK(longint'(r[c]) == e, $sformatf("C%0d layer 1 node %0d col %0d got %0d exp %0d",
                                                 c3 ? 3 : 2, n, c, r[c], e))
        h2[n][c] = (e >>> 11) > 255 ? 255 : int'(e >>> 11);
      end
    end
    // ---- layer 2 ----
    send_cmd(OP_LCONF, 0, 0);
    for (int j = 0; j < COLS; j++) for (int c = 0; c < COLS; c++) w2[j][c] = WBITS'(int'($urandom_range(0, 16)) - 8);
    for (int b = 0; b < NB; b++) begin
      logic [DW-1:0] d;
      for (int c = 0; c < COLS; c++) d[c*WBITS +: WBITS] = w2[b][c];
      write_row(b, 0, d);
    end
    send_cmd(OP_LCONF, 0, 1 | (int'(wg) << 1) | (int'(dirg) << 2));   // D generator gated
    dgen0 = perf_m().dgen;
    send_cmd(OP_CLEAR, 0, NODES);
    wait_idle();
    run_layer(1, 1'b1);
    send_cmd(OP_DSCALE, 0, NODES);
    wait_idle();
    `TB_CHECK(perf_m().dgen == dgen0, "D generator gated in layer 2")
    if (perf_m().dgen == dgen0) n_gated_ok++;
    ref_layer(dirg, wg, COLS, 1'b1, pre2);
    for (int n = 0; n < NODES; n++) begin
      read_row(n, r);
      for (int c = 0; c < COLS; c++)
        `TB_CHECK(longint'(r[c]) == pre2[n][c], $sformatf("C%0d layer 2 node %0d col %0d got %0d exp %0d",
                                                          c3 ? 3 : 2, n, c, r[c], pre2[n][c]))
    end
    send_cmd(OP_SOFTMAX, 0, NODES);
    wait_idle();
    for (int n = 0; n < NODES; n++) begin
      real ex [COLS], se;
      longint mx;
      read_row(n, r);
      se = 0; mx = pre2[n][0];
      for (int c = 0; c < COLS; c++) if (pre2[n][c] > mx) mx = pre2[n][c];
      for (int c = 0; c < COLS; c++) begin ex[c] = $exp(real'(pre2[n][c] - mx) / 256.0); se += ex[c]; end
      for (int c = 0; c < COLS; c++) begin
        real p, d;
        p = ex[c] / se * 65536.0;
        d = real'(r[c]) - p;
        if (d < 0) d = -d;
        `TB_CHECK(d <= 0.06 * 65536.0 + 1.0, $sformatf("softmax node %0d col %0d got %0d exp %0f", n, c, r[c], p))
      end
    end
  endtask

  initial begin
    perf_t p3, p2;
    repeat (3) @(negedge clk); rst_n = 1;
    run_gcn(1'b1, 1'b0, 1'b0);
    run_gcn(1'b1, 1'b1, 1'b1);
    run_gcn(1'b1, 1'b0, 1'b1);
    run_gcn(1'b0, 1'b1, 1'b1);
    p3 = perf3; p2 = perf2;
    $display("mechanisms: slots=%0d back_to_back=%0d ect=%0d stall=%0d overlap=%0d updates=%0d overflow=%0d",
             p3.slots + p2.slots, n_b2b, p2.ect, p3.stall + p2.stall, p3.overlap + p2.overlap,
             p3.updates + p2.updates, p3.overflow + p2.overflow);
    $display("mechanisms: dropped=%0d dgen=%0d dgen_gated=%0d dscale=%0d relu=%0d softmax=%0d refused=%0d mode_switch=%0d macc=%0d",
             p3.dropped + p2.dropped, p3.dgen + p2.dgen, n_gated_ok, p3.dscale + p2.dscale,
             p3.relu + p2.relu, p3.softmax + p2.softmax, p3.refused + p2.refused, n_mode_sw,
             p3.macc + p2.macc);
    `TB_CHECK(p3.slots > 0 && p2.slots > 0, "slots on both cores")
    `TB_CHECK(n_b2b > 0, "back-to-back slot acceptance (NEM-C3 pipeline)")
    `TB_CHECK(p2.ect > 0, "early compute termination (NEM-C2)")
    `TB_CHECK(p3.ect == 0, "no early termination in NEM-C3")
    `TB_CHECK(p3.stall + p2.stall > 0, "finished combination stalled")
    `TB_CHECK(p3.overlap + p2.overlap > 0, "combination overlapped aggregation")
    `TB_CHECK(p3.updates + p2.updates > 0, "broadcast updates")
    `TB_CHECK(p3.overflow + p2.overflow > 0, "Update Index overflow")
    `TB_CHECK(p3.dropped + p2.dropped > 0, "direction drops")
    `TB_CHECK(p3.dgen + p2.dgen == 4 * NODES, "D generator wrote once per node in layer 1")
    `TB_CHECK(n_gated_ok == 4, "D generator gated in every second layer")
    `TB_CHECK(p3.dscale + p2.dscale == 8 * NODES, "DSCALE rows")
    `TB_CHECK(p3.relu + p2.relu == 4 * NODES, "ReLU rows")
    `TB_CHECK(p3.softmax + p2.softmax == 4 * NODES, "softmax rows")
    `TB_CHECK(p3.refused + p2.refused == 4, "refused MACC in normal mode")
    `TB_CHECK(p3.macc + p2.macc == 8 * NODES, "accepted MACC")
    `TB_CHECK(n_mode_sw >= 4, "L1 mode switches")
    `TB_FINISH
  end
endmodule
