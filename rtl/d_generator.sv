// d_generator: sparsity-aware degree-matrix generator.
//
// D^-1 is diagonal, so only its diagonal is kept: one Q0.16 value per node.
// The generator listens to the aggregation engine while it reads a node's
// adjacency row (so D is built in parallel with the first aggregation step):
// row_start loads the counter with 1 (the self-loop), every entry read adds
// one (for directed graphs only entries with direction bit 1, i.e. edges that
// bring a neighbour's result into this node), and row_end stores
// 2^16 / count for that node. The aggregated row of node n is later scaled
// by its single D^-1 value (element-by-vector) in the shared multiplier row.
// With en = 0 the generator is idle (gated): D is built during the first
// layer and reused afterwards. `dinv` reads combinationally (rd_node).
// The counter-per-node idea and the diagonal-only storage are the published
// ones; counting the self-loop follows the text's D_ii = sum of A_i with a
// self-loop in A; the reciprocal by division is this design's choice.
module d_generator
  import nem_pkg::*;
#(
  parameter int unsigned NODES = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               directed,
  input  logic               row_start,
  input  logic [NODE_W-1:0]  row_node,
  input  logic               ent_valid,
  input  logic               ent_dir,
  input  logic               row_end,
  input  logic [NODE_W-1:0]  rd_node,
  output logic [SCAL_W-1:0]  dinv,
  output logic               wr_event
);

  logic [SCAL_W-1:0] diag [NODES];
  logic [NODE_W-1:0] node_q;
  logic [NODE_W:0]   count_q;
  logic [NODE_W:0]   count_d;
  logic              inc;

  assign inc      = ent_valid && (!directed || ent_dir);
  assign count_d  = count_q + (inc ? 1'b1 : 1'b0);
  assign wr_event = en && row_end && (node_q < NODE_W'(NODES));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_q <= '0;
      node_q  <= '0;
    end else if (en) begin
      if (row_start) begin
        count_q <= (NODE_W+1)'(1);
        node_q  <= row_node;
      end else begin
        count_q <= count_d;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_event) diag[node_q[$clog2(NODES)-1:0]] <= SCAL_W'((NODE_W+SCAL_W)'(1 << FRAC) / (NODE_W+SCAL_W)'(count_d));
  end

  assign dinv = (rd_node < NODE_W'(NODES)) ? diag[rd_node[$clog2(NODES)-1:0]] : '0;

endmodule
