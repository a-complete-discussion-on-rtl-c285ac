// agg_array: aggregation array, banked by node number.
//
// AGG_BANKS banks of BANK_NODES rows; node n lives in bank n / BANK_NODES.
// Every row holds COLS values of W bits (the running aggregate of node n).
// One row operation per cycle (op_valid): the addressed row is read, passed
// through the shared multiplier/adder row with the broadcast vector op_vec
// and scalar op_s, and written back at the clock edge (read-modify-write in
// one cycle). A separate combinational read port (rd_row/rd_data) serves the
// result read-out and the auxiliary control. Rows outside the array are
// ignored (and flagged by an assertion).
// Bank size and row width are the published ones; the one-operation-per-cycle
// port and the number of banks are this design's choices.
module agg_array
  import nem_pkg::*;
#(
  parameter int unsigned BANK_NODES = 256,
  parameter int unsigned AGG_BANKS  = 1,
  parameter int unsigned COLS       = 128,
  parameter int unsigned W          = 32,
  localparam int unsigned NODES     = BANK_NODES * AGG_BANKS,
  localparam int unsigned RW        = (BANK_NODES > 1) ? $clog2(BANK_NODES) : 1
) (
  input  logic                clk,
  input  logic                op_valid,
  input  alu_op_e             op,
  input  logic [NODE_W-1:0]   op_row,
  input  logic signed [W-1:0] op_vec [COLS],
  input  logic [SCAL_W-1:0]   op_s,
  input  logic [NODE_W-1:0]   rd_row,
  output logic signed [W-1:0] rd_data [COLS]
);

  logic signed [W-1:0] cur [COLS];
  logic signed [W-1:0] nxt [COLS];
  logic [COLS*W-1:0]   nxt_flat;
  logic [COLS*W-1:0]   b_op [AGG_BANKS];
  logic [COLS*W-1:0]   b_rd [AGG_BANKS];
  logic [NODE_W-1:0]   op_bank, rd_bank;
  logic [RW-1:0]       op_idx, rd_idx;

  assign op_bank = op_row / NODE_W'(BANK_NODES);
  assign rd_bank = rd_row / NODE_W'(BANK_NODES);
  assign op_idx  = RW'(op_row % NODE_W'(BANK_NODES));
  assign rd_idx  = RW'(rd_row % NODE_W'(BANK_NODES));

  for (genvar c = 0; c < COLS; c++) begin : g_flat
    assign nxt_flat[c*W +: W] = nxt[c];
  end

  for (genvar k = 0; k < AGG_BANKS; k++) begin : g_bank
    logic [COLS*W-1:0] mem [BANK_NODES];
    always_ff @(posedge clk) begin
      if (op_valid && op_bank == NODE_W'(k)) mem[op_idx] <= nxt_flat;
    end
    assign b_op[k] = mem[op_idx];
    assign b_rd[k] = mem[rd_idx];
  end

  always_comb begin
    logic [COLS*W-1:0] row_op, row_rd;
    row_op = '0;
    row_rd = '0;
    for (int k = 0; k < AGG_BANKS; k++) begin
      if (op_bank == NODE_W'(k)) row_op = b_op[k];
      if (rd_bank == NODE_W'(k)) row_rd = b_rd[k];
    end
    for (int c = 0; c < COLS; c++) begin
      cur[c]     = row_op[c*W +: W];
      rd_data[c] = row_rd[c*W +: W];
    end
  end

  nm_alu_row #(.COLS(COLS), .W(W)) u_alu (.op, .a(cur), .b(op_vec), .s(op_s), .y(nxt));

  a_row_in_range: assert property (@(posedge clk) op_valid |-> op_row < NODE_W'(NODES))
    else $error("agg_array: row %0d outside the array", op_row);

endmodule
