// tb_agg_engine: the aggregation engine together with the adjacency buffer
// and the aggregation array (8 nodes, 4 columns, Update Index register of 3
// entries so long rows overflow and are processed in chunks).
// Random CSR graphs (rows of 0..6 entries, random direction bits and
// weights, some entries naming nodes outside the array) are aggregated for
// three graph types: undirected/unweighted, directed/weighted and
// undirected/weighted. Every node is handed in, then its combination vector
// arrives after a random delay. The final array is compared with a software
// reference agg[n] += v(n) (self-loop) and agg[m] += w*v(n) for every kept
// neighbour m. The test also counts overflow and dropped-entry events and
// checks the D-generator event stream (one row_start and one row_end per
// node, one ent_valid per stored entry).
`include "tb_util.svh"
module tb_agg_engine;
  import nem_pkg::*;
  localparam int NODES = 8, EDGES = 64, COLS = 4, UPD = 3;
  localparam int EA_W = $clog2(EDGES + 1), NA_W = $clog2(NODES + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic weighted = 0, directed = 0, node_valid = 0, node_ready, vec_valid = 0, vec_ready;
  logic [NODE_W-1:0] node = 0, ptr_rd_node, e_row, rd_row = 0;
  logic ptr_rd, ent_rd, e_valid, row_start, ent_valid, ent_dir, row_end, idle, overflow, dropped;
  logic [EA_W-1:0] ptr_lo, ptr_hi, ent_rd_addr, ent_addr = 0, ptr_wdata = 0;
  logic [NA_W-1:0] ptr_addr = 0;
  logic ptr_we = 0, ent_we = 0;
  adj_entry_t ent_rdata, ent_wdata = '0;
  logic signed [ACC_W-1:0] vec [COLS], e_vec [COLS], rd_data [COLS], m_vec [COLS], zero [COLS];
  alu_op_e e_op;
  logic [SCAL_W-1:0] e_s;
  logic clr = 0;
  logic [NODE_W-1:0] clr_row = 0;

  adj_buffer #(.NODES(NODES), .EDGES(EDGES)) u_adj (.clk, .ptr_we, .ptr_addr, .ptr_wdata, .ent_we,
    .ent_addr, .ent_wdata, .ptr_rd, .ptr_rd_node, .ptr_lo, .ptr_hi, .ent_rd, .ent_rd_addr, .ent_rdata);
  agg_engine #(.UPD_MAX(UPD), .NODES(NODES), .EDGES(EDGES), .COLS(COLS)) dut (.clk, .rst_n,
    .weighted, .directed, .node_valid, .node_ready, .node, .ptr_rd, .ptr_rd_node, .ptr_lo, .ptr_hi,
    .ent_rd, .ent_rd_addr, .ent_rdata, .vec_valid, .vec_ready, .vec, .op_valid(e_valid), .op(e_op),
    .op_row(e_row), .op_vec(e_vec), .op_s(e_s), .row_start, .ent_valid, .ent_dir, .row_end, .idle,
    .overflow, .dropped);
  always_comb for (int c = 0; c < COLS; c++) begin zero[c] = '0; m_vec[c] = clr ? zero[c] : e_vec[c]; end
  agg_array #(.BANK_NODES(NODES), .AGG_BANKS(1), .COLS(COLS)) u_arr (.clk,
    .op_valid(clr || e_valid), .op(clr ? ALU_PASS : e_op), .op_row(clr ? clr_row : e_row),
    .op_vec(m_vec), .op_s(e_s), .rd_row, .rd_data);
  `TB_WATCHDOG(clk, 200000)

  int n_ovf = 0, n_drop = 0, n_rs = 0, n_re = 0, n_ev = 0;
  always @(posedge clk) begin
    if (overflow) n_ovf++;
    if (dropped) n_drop++;
    if (row_start) n_rs++;
    if (row_end) n_re++;
    if (ent_valid) n_ev++;
  end

  int ptr [NODES + 1];
  adj_entry_t ent [EDGES];
  longint ref_agg [NODES][COLS];

  task automatic run_graph(input bit dirg, input bit wg);
    int rs0, re0, ev0;
    directed = dirg; weighted = wg;
    // new random graph
    ptr[0] = 0;
    for (int n = 0; n < NODES; n++) ptr[n+1] = ptr[n] + $urandom_range(0, 6);
    for (int e = 0; e < ptr[NODES]; e++) begin
      ent[e].node = NODE_W'(($urandom_range(0, 9) == 0) ? NODES + 1 : $urandom_range(0, NODES - 1));
      ent[e].dir = 1'($urandom);
      ent[e].weight = GW_W'($urandom_range(1, 255));
    end
    for (int n = 0; n <= NODES; n++) begin
      ptr_we = 1; ptr_addr = NA_W'(n); ptr_wdata = EA_W'(ptr[n]); @(negedge clk);
    end
    ptr_we = 0;
    for (int e = 0; e < ptr[NODES]; e++) begin
      ent_we = 1; ent_addr = EA_W'(e); ent_wdata = ent[e]; @(negedge clk);
    end
    ent_we = 0;
    for (int n = 0; n < NODES; n++) begin
      clr = 1; clr_row = NODE_W'(n); @(negedge clk);
      for (int c = 0; c < COLS; c++) ref_agg[n][c] = 0;
    end
    clr = 0;
    rs0 = n_rs; re0 = n_re; ev0 = n_ev;
    for (int n = 0; n < NODES; n++) begin
      longint v [COLS];
      while (!node_ready) @(negedge clk);
      node_valid = 1; node = NODE_W'(n); @(negedge clk); node_valid = 0;
      repeat ($urandom_range(0, 8)) @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        vec[c] = ACC_W'(int'($urandom_range(0, 2000)) - 1000); v[c] = vec[c];
      end
      vec_valid = 1;
      #1; while (!vec_ready) begin @(negedge clk); #1; end
      @(negedge clk); vec_valid = 0;
      for (int c = 0; c < COLS; c++) ref_agg[n][c] += v[c];
      for (int e = ptr[n]; e < ptr[n+1]; e++)
        if ((!dirg || !ent[e].dir) && ent[e].node < NODES)
          for (int c = 0; c < COLS; c++) ref_agg[ent[e].node][c] += (wg ? longint'(ent[e].weight) : 1) * v[c];
    end
    while (!idle) @(negedge clk);
    for (int n = 0; n < NODES; n++) begin
      rd_row = NODE_W'(n); #1;
      for (int c = 0; c < COLS; c++)
        `TB_CHECK(longint'(rd_data[c]) == ref_agg[n][c], $sformatf("dir %0d wg %0d node %0d col %0d got %0d exp %0d",
                  dirg, wg, n, c, rd_data[c], ref_agg[n][c]))
    end
    `TB_CHECK(n_rs - rs0 == NODES && n_re - re0 == NODES, "one row_start and row_end per node")
    `TB_CHECK(n_ev - ev0 == ptr[NODES], "one ent_valid per stored entry")
    @(negedge clk);
  endtask

  initial begin
    for (int c = 0; c < COLS; c++) vec[c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      run_graph(1'b0, 1'b0);
      run_graph(1'b1, 1'b1);
      run_graph(1'b0, 1'b1);
    end
    `TB_CHECK(n_ovf > 0, "Update Index overflow handled")
    `TB_CHECK(n_drop > 0, "entries dropped by direction / range")
    `TB_FINISH
  end
endmodule
