// nem_gnn_core: the near-memory GNN logic of one CPU core (NEM-GNN).
//
// Combination (H x W) runs inside the re-purposed L1 banks (comb_engine:
// bit-serial AND on the 8T read port, pre-compute or early termination,
// shift-add, adder trees, combination array). Aggregation runs next to the
// memory: the aggregation engine (UWC for unweighted, WC for weighted graphs)
// reads the node's CSR adjacency row from adj_buffer while the node is being
// combined, and broadcasts the finished combination vector into the
// aggregation array rows of all its candidates through the shared
// multiplier/adder row. The D generator builds the diagonal of D^-1 from the
// same adjacency reads; DSCALE scales every aggregated row by it, and the
// auxiliary control applies ReLU or softmax. nem_ctrl sequences it all.
//
// Ports (all synchronous to clk, active-low asynchronous reset):
//   cmd_*    commands, see nem_ctrl (LCONF, MACC, DSCALE, RELU, SOFTMAX, CLEAR)
//   h_*      H slots of the node under combination, NB elements per slot
//            (element b for bank b), valid/ready; supplied from L1/L2 storage
//   w_*      weight-row writes into the L1 banks (from the shared L2)
//   l1_rd_*  normal-mode row read of a bank (data one cycle later)
//   adj_*    adjacency buffer fill (CSR row pointers and entries)
//   agg_rd_* result read-out of the aggregation array (combinational)
//   perf     event counters
// Host CPU, L2 and DRAM are outside this block; their data arrive on these
// ports. The split into blocks follows the published organisation; sizes not
// given by the paper, all handshakes and the command set are this design's.
module nem_gnn_core
  import nem_pkg::*;
#(
  parameter bit          C3             = 1'b1,
  parameter int unsigned N_TILES        = 32,
  parameter int unsigned BANKS_PER_TILE = 8,
  parameter int unsigned ROWS           = 32,
  parameter int unsigned COLS           = 128,
  parameter int unsigned BANK_NODES     = 256,
  parameter int unsigned AGG_BANKS      = 1,
  parameter int unsigned ADJ_EDGES      = 4096,
  parameter int unsigned UPD_MAX        = 64,
  parameter int unsigned SM_IN_FRAC     = 8,
  localparam int unsigned NB    = N_TILES * BANKS_PER_TILE,
  localparam int unsigned NODES = BANK_NODES * AGG_BANKS,
  localparam int unsigned DW    = COLS * WBITS,
  localparam int unsigned BA_W  = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned RA_W  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned EA_W  = $clog2(ADJ_EDGES + 1),
  localparam int unsigned NA_W  = $clog2(NODES + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cmd_valid,
  output logic                     cmd_ready,
  input  op_e                      cmd_op,
  input  logic [NODE_W-1:0]        cmd_node,
  input  logic [15:0]              cmd_arg,
  input  logic                     h_valid,
  output logic                     h_ready,
  input  logic [NB-1:0][HBITS-1:0] h_data,
  input  logic                     w_we,
  input  logic [BA_W-1:0]          w_bank,
  input  logic [RA_W-1:0]          w_row,
  input  logic [DW-1:0]            w_data,
  input  logic                     l1_rd_en,
  input  logic [BA_W-1:0]          l1_rd_bank,
  input  logic [RA_W-1:0]          l1_rd_row,
  output logic [DW-1:0]            l1_rdata,
  input  logic                     adj_ptr_we,
  input  logic [NA_W-1:0]          adj_ptr_addr,
  input  logic [EA_W-1:0]          adj_ptr_wdata,
  input  logic                     adj_ent_we,
  input  logic [EA_W-1:0]          adj_ent_addr,
  input  adj_entry_t               adj_ent_wdata,
  input  logic [NODE_W-1:0]        agg_rd_row,
  output logic signed [ACC_W-1:0]  agg_rd_data [COLS],
  output logic                     busy,
  output logic                     compute_mode,
  output perf_t                    perf
);

  // configuration
  logic weighted, directed, d_en;

  // combination
  logic        comb_idle, comb_start, vec_valid, vec_ready, ect_event, slot_event;
  logic [15:0] comb_nslots;
  logic signed [ACC_W-1:0] comb_vec [COLS];

  // aggregation engine
  logic              eng_node_valid, eng_node_ready, eng_idle;
  logic [NODE_W-1:0] eng_node;
  logic              ptr_rd, ent_rd;
  logic [NODE_W-1:0] ptr_rd_node;
  logic [EA_W-1:0]   ptr_lo, ptr_hi, ent_rd_addr;
  adj_entry_t        ent_rdata;
  logic              e_op_valid;
  alu_op_e           e_op;
  logic [NODE_W-1:0] e_op_row;
  logic signed [ACC_W-1:0] e_op_vec [COLS];
  logic [SCAL_W-1:0] e_op_s;
  logic              row_start, ent_valid, ent_dir, row_end, overflow, dropped;
  logic [NODE_W-1:0] eng_node_q;

  // sweeps
  logic [1:0]        owner;
  logic              c_op_valid;
  alu_op_e           c_op;
  logic [NODE_W-1:0] c_row;
  logic              aux_start, aux_mode, aux_busy, aux_done;
  logic [NODE_W-1:0] aux_rd_row, aux_wr_row;
  logic              aux_wr_valid;
  logic signed [ACC_W-1:0] aux_wr_data [COLS];
  logic [SCAL_W-1:0] dinv;
  logic              dgen_ev;

  // aggregation array port
  logic              a_op_valid;
  alu_op_e           a_op;
  logic [NODE_W-1:0] a_op_row, a_rd_row;
  logic signed [ACC_W-1:0] a_op_vec [COLS];
  logic signed [ACC_W-1:0] zero_vec [COLS];
  logic [SCAL_W-1:0] a_op_s;

  comb_engine #(.C3(C3), .N_TILES(N_TILES), .BANKS_PER_TILE(BANKS_PER_TILE),
                .ROWS(ROWS), .COLS(COLS)) u_comb (
    .clk, .rst_n,
    .wr_en(w_we), .wr_bank(w_bank), .wr_row(w_row), .wr_data(w_data),
    .l1_rd_en, .l1_rd_bank, .l1_rd_row, .l1_rdata,
    .start(comb_start), .nslots(($clog2(ROWS+1))'(comb_nslots)), .idle(comb_idle),
    .h_valid, .h_ready, .h_data,
    .vec_valid, .vec_ready, .vec(comb_vec),
    .ect_event, .slot_event
  );

  adj_buffer #(.NODES(NODES), .EDGES(ADJ_EDGES)) u_adj (
    .clk,
    .ptr_we(adj_ptr_we), .ptr_addr(adj_ptr_addr), .ptr_wdata(adj_ptr_wdata),
    .ent_we(adj_ent_we), .ent_addr(adj_ent_addr), .ent_wdata(adj_ent_wdata),
    .ptr_rd, .ptr_rd_node, .ptr_lo, .ptr_hi,
    .ent_rd, .ent_rd_addr, .ent_rdata
  );

  agg_engine #(.UPD_MAX(UPD_MAX), .NODES(NODES), .EDGES(ADJ_EDGES), .COLS(COLS)) u_eng (
    .clk, .rst_n, .weighted, .directed,
    .node_valid(eng_node_valid), .node_ready(eng_node_ready), .node(eng_node),
    .ptr_rd, .ptr_rd_node, .ptr_lo, .ptr_hi,
    .ent_rd, .ent_rd_addr, .ent_rdata,
    .vec_valid, .vec_ready, .vec(comb_vec),
    .op_valid(e_op_valid), .op(e_op), .op_row(e_op_row), .op_vec(e_op_vec), .op_s(e_op_s),
    .row_start, .ent_valid, .ent_dir, .row_end,
    .idle(eng_idle), .overflow, .dropped
  );

  // NodeProc as seen by the D generator (the engine latches it on row_start)
  always_ff @(posedge clk) if (eng_node_valid && eng_node_ready) eng_node_q <= eng_node;

  d_generator #(.NODES(NODES)) u_dgen (
    .clk, .rst_n, .en(d_en), .directed,
    .row_start, .row_node(eng_node_q), .ent_valid, .ent_dir, .row_end,
    .rd_node(c_row), .dinv, .wr_event(dgen_ev)
  );

  aux_control #(.COLS(COLS), .IN_FRAC(SM_IN_FRAC)) u_aux (
    .clk, .rst_n, .start(aux_start), .mode(aux_mode), .row(c_row),
    .rd_row(aux_rd_row), .rd_data(agg_rd_data),
    .wr_valid(aux_wr_valid), .wr_row(aux_wr_row), .wr_data(aux_wr_data),
    .busy(aux_busy), .done(aux_done)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_zero
    assign zero_vec[c] = '0;
  end

  always_comb begin
    unique case (owner)
      2'd1: begin
        a_op_valid = c_op_valid;
        a_op       = c_op;
        a_op_row   = c_row;
        a_op_vec   = zero_vec;
        a_op_s     = dinv;
      end
      2'd2: begin
        a_op_valid = aux_wr_valid;
        a_op       = ALU_PASS;
        a_op_row   = aux_wr_row;
        a_op_vec   = aux_wr_data;
        a_op_s     = '0;
      end
      default: begin
        a_op_valid = e_op_valid;
        a_op       = e_op;
        a_op_row   = e_op_row;
        a_op_vec   = e_op_vec;
        a_op_s     = e_op_s;
      end
    endcase
  end
  assign a_rd_row = aux_busy ? aux_rd_row : agg_rd_row;

  agg_array #(.BANK_NODES(BANK_NODES), .AGG_BANKS(AGG_BANKS), .COLS(COLS), .W(ACC_W)) u_agg (
    .clk, .op_valid(a_op_valid), .op(a_op), .op_row(a_op_row), .op_vec(a_op_vec), .op_s(a_op_s),
    .rd_row(a_rd_row), .rd_data(agg_rd_data)
  );

  nem_ctrl u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_node, .cmd_arg,
    .compute_mode, .weighted, .directed, .d_en,
    .comb_idle, .comb_start, .comb_nslots,
    .eng_node_valid, .eng_node, .eng_node_ready, .eng_idle,
    .owner, .ctl_op_valid(c_op_valid), .ctl_op(c_op), .ctl_row(c_row),
    .aux_start, .aux_mode, .aux_busy, .aux_done,
    .ev_slot(slot_event), .ev_ect(ect_event),
    .ev_stall(vec_valid && !vec_ready),
    .ev_overlap(e_op_valid && !comb_idle),
    .ev_update(e_op_valid), .ev_overflow(overflow), .ev_dropped(dropped),
    .ev_dgen(dgen_ev),
    .busy, .perf
  );

endmodule
