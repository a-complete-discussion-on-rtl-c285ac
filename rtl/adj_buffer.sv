// adj_buffer: near-memory buffer holding the graph adjacency matrix in
// compressed sparse row (CSR) form.
//
// ptr[n] is the offset of node n's first entry in the entry table; node n's
// row is entries ptr[n] .. ptr[n+1]-1. Each entry (nem_pkg::adj_entry_t)
// carries the neighbour index, a direction bit (0: edge leaves node n,
// 1: edge enters node n; ignored for undirected graphs) and the edge weight
// (ignored for unweighted graphs). The host fills both tables through the
// write ports. Reads are synchronous: the row bounds of `ptr_rd_node` and the
// entry at `ent_rd_addr` appear one cycle after their enables.
// The CSR form and entry fields are the published ones; sizes and the port
// structure are this design's.
module adj_buffer
  import nem_pkg::*;
#(
  parameter int unsigned NODES = 256,
  parameter int unsigned EDGES = 4096,
  localparam int unsigned EA_W = $clog2(EDGES + 1),
  localparam int unsigned NA_W = $clog2(NODES + 1)
) (
  input  logic              clk,
  input  logic              ptr_we,
  input  logic [NA_W-1:0]   ptr_addr,
  input  logic [EA_W-1:0]   ptr_wdata,
  input  logic              ent_we,
  input  logic [EA_W-1:0]   ent_addr,
  input  adj_entry_t        ent_wdata,
  input  logic              ptr_rd,
  input  logic [NODE_W-1:0] ptr_rd_node,
  output logic [EA_W-1:0]   ptr_lo,
  output logic [EA_W-1:0]   ptr_hi,
  input  logic              ent_rd,
  input  logic [EA_W-1:0]   ent_rd_addr,
  output adj_entry_t        ent_rdata
);

  logic [EA_W-1:0] ptr [NODES+1];
  adj_entry_t      ent [EDGES];

  always_ff @(posedge clk) begin
    if (ptr_we && ptr_addr <= NA_W'(NODES)) ptr[ptr_addr] <= ptr_wdata;
    if (ent_we && ent_addr < EA_W'(EDGES))  ent[ent_addr] <= ent_wdata;
  end

  always_ff @(posedge clk) begin
    if (ptr_rd) begin
      if (ptr_rd_node < NODE_W'(NODES)) begin
        ptr_lo <= ptr[ptr_rd_node];
        ptr_hi <= ptr[ptr_rd_node + 1'b1];
      end else begin
        ptr_lo <= '0;               // node outside the buffer: empty row
        ptr_hi <= '0;
      end
    end
    if (ent_rd) ent_rdata <= (ent_rd_addr < EA_W'(EDGES)) ? ent[ent_rd_addr] : '0;
  end

endmodule
