// agg_engine: UWC/WC aggregation engine (graph- and sparsity-aware,
// compute-as-soon-as-ready, broadcast).
//
// A node handed in on node/node_valid becomes NodeProc. While that node's
// combination is still being computed, the engine
//   step 1  reads the node's CSR row of the adjacency buffer, one entry per
//           cycle (pipelined, synchronous buffer),
//   step 2  keeps only the neighbours the node's result must reach: all of
//           them for undirected graphs, those with direction bit 0 (edge going
//           out of NodeProc) for directed graphs,
// and fills the Update Index register: NodeProc itself first (self-loop,
// weight 1), then the kept neighbours with their edge weight (Weight_G).
// When the combination vector arrives (vec/vec_valid; it is latched as soon as
// the engine holds a node, freeing the combination array) the engine
//   step 3  broadcasts it to every candidate: one aggregation-array row per
//           cycle, agg[idx] += vec (UWC, unweighted) or += Weight_G*vec (WC).
// Only non-zero adjacency entries are visited, so no work is spent on
// non-neighbours. If a row holds more kept entries than UPD_MAX, the engine
// broadcasts the register's contents, then continues reading the row
// (`overflow` pulses); the vector stays latched throughout.
// Entries naming a node outside the aggregation array (>= NODES) are dropped.
//
// Events for the D generator: row_start (with NodeProc), ent_valid/ent_dir
// for every entry read, row_end when the row is exhausted.
// The three steps, the self-loop-first order and the direction convention
// follow the published description; the single update per cycle, the chunking
// and all handshakes are this design's own.
//
// ptr_rd_node and ent_dir are the node input and the read entry's direction
// bit passed straight on, and the upper bits of op_s are zero because edge
// weights are 8 bits wide; they are wired this way on purpose.
module agg_engine
  import nem_pkg::*;
#(
  parameter int unsigned UPD_MAX = 64,
  parameter int unsigned NODES   = 256,
  parameter int unsigned EDGES   = 4096,
  parameter int unsigned COLS    = 128,
  localparam int unsigned EA_W   = $clog2(EDGES + 1),
  localparam int unsigned UC_W   = $clog2(UPD_MAX + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    weighted,
  input  logic                    directed,
  // NodeProc
  input  logic                    node_valid,
  output logic                    node_ready,
  input  logic [NODE_W-1:0]       node,
  // adjacency buffer
  output logic                    ptr_rd,
  output logic [NODE_W-1:0]       ptr_rd_node,
  input  logic [EA_W-1:0]         ptr_lo,
  input  logic [EA_W-1:0]         ptr_hi,
  output logic                    ent_rd,
  output logic [EA_W-1:0]         ent_rd_addr,
  input  adj_entry_t              ent_rdata,
  // incoming combination vector
  input  logic                    vec_valid,
  output logic                    vec_ready,
  input  logic signed [ACC_W-1:0] vec [COLS],
  // aggregation-array row operation
  output logic                    op_valid,
  output alu_op_e                 op,
  output logic [NODE_W-1:0]       op_row,
  output logic signed [ACC_W-1:0] op_vec [COLS],
  output logic [SCAL_W-1:0]       op_s,
  // D generator events
  output logic                    row_start,
  output logic                    ent_valid,
  output logic                    ent_dir,
  output logic                    row_end,
  // status
  output logic                    idle,
  output logic                    overflow,
  output logic                    dropped      // entry filtered out by direction
);

  typedef enum logic [2:0] {G_IDLE, G_PTR, G_READ, G_WAITV, G_UPD} gst_e;
  gst_e st_q;

  typedef struct packed {
    logic [NODE_W-1:0] node;
    logic [GW_W-1:0]   weight;
  } upd_t;

  upd_t              upd [UPD_MAX];       // Update Index register (+ Weight_G)
  logic [UC_W-1:0]   cnt_q, ui_q;
  logic [NODE_W-1:0] nodeproc_q;
  logic [EA_W-1:0]   addr_q, hi_q;
  logic              inflight_q, more_q, have_vec_q;
  logic signed [ACC_W-1:0] vec_q [COLS];
  logic              issue, keep, push;

  assign node_ready  = (st_q == G_IDLE);
  assign idle        = (st_q == G_IDLE);
  assign ptr_rd      = node_valid && node_ready;
  assign ptr_rd_node = node;
  assign row_start   = (st_q == G_PTR);

  // step 1: pipelined entry read, limited so the register cannot overflow
  assign issue       = (st_q == G_READ) && (addr_q < hi_q) &&
                       ({1'b0, cnt_q} + UC_W'(inflight_q) < (UC_W+1)'(UPD_MAX));
  assign ent_rd      = issue;
  assign ent_rd_addr = addr_q;

  // step 2: direction check on the returned entry
  assign ent_valid = inflight_q;
  assign ent_dir   = ent_rdata.dir;
  assign keep      = (!directed || !ent_rdata.dir) && (ent_rdata.node < NODE_W'(NODES));
  assign push      = inflight_q && keep;
  assign dropped   = inflight_q && !keep;
  assign row_end   = (st_q == G_READ) && !issue && !inflight_q && (addr_q == hi_q);
  assign overflow  = (st_q == G_READ) && !issue && !inflight_q && (addr_q != hi_q);

  // incoming vector register
  assign vec_ready = have_vec_q ? 1'b0 : (st_q != G_IDLE);

  // step 3: broadcast to the candidates, one row per cycle
  assign op_valid = (st_q == G_UPD);
  assign op       = weighted ? ALU_MAC : ALU_ADD;
  assign op_row   = upd[ui_q].node;
  assign op_s     = SCAL_W'(upd[ui_q].weight);
  assign op_vec   = vec_q;

  always_ff @(posedge clk) begin
    if (vec_valid && vec_ready) vec_q <= vec;
    if (st_q == G_PTR) upd[0] <= '{node: nodeproc_q, weight: GW_W'(1)};
    if (push) upd[cnt_q] <= '{node: ent_rdata.node, weight: weighted ? ent_rdata.weight : GW_W'(1)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= G_IDLE;
      cnt_q      <= '0;
      ui_q       <= '0;
      nodeproc_q <= '0;
      addr_q     <= '0;
      hi_q       <= '0;
      inflight_q <= 1'b0;
      more_q     <= 1'b0;
      have_vec_q <= 1'b0;
    end else begin
      if (vec_valid && vec_ready) have_vec_q <= 1'b1;
      inflight_q <= issue;
      if (issue) addr_q <= addr_q + 1'b1;
      if (push)  cnt_q  <= cnt_q + 1'b1;
      unique case (st_q)
        G_IDLE: if (node_valid) begin
          nodeproc_q <= node;
          st_q       <= G_PTR;
        end
        G_PTR: begin
          addr_q <= ptr_lo;
          hi_q   <= ptr_hi;
          cnt_q  <= UC_W'(1);               // self-loop entry
          st_q   <= G_READ;
        end
        G_READ: if (!issue && !inflight_q) begin
          more_q <= (addr_q != hi_q);
          st_q   <= G_WAITV;
        end
        G_WAITV: if (have_vec_q && cnt_q != '0) begin
          ui_q <= '0;
          st_q <= G_UPD;
        end else if (have_vec_q) begin
          st_q <= more_q ? G_READ : G_IDLE; // empty chunk
          if (!more_q) have_vec_q <= 1'b0;
        end
        G_UPD: begin
          if (ui_q + 1'b1 == cnt_q) begin
            cnt_q <= '0;
            if (more_q) st_q <= G_READ;
            else begin
              st_q       <= G_IDLE;
              have_vec_q <= 1'b0;
            end
          end else ui_q <= ui_q + 1'b1;
        end
        default: st_q <= G_IDLE;
      endcase
    end
  end

  a_no_push_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> cnt_q < UC_W'(UPD_MAX));

endmodule
