// nem_pkg: sizes, types and command codes shared by the NEM-GNN near-memory
// logic.
//
// Default sizes follow the published micro-architecture: 32 tiles of 8 banks
// (256 banks), each bank 32 weight rows of 128 weights of 8 bits (4 KB), a
// 128 x 32-bit combination array and aggregation banks of 256 nodes x 128 x
// 32 bits. Widths of node indices, edge weights, the D^-1 fraction and the
// command encoding are this design's own choices.
package nem_pkg;

  localparam int unsigned HBITS    = 8;   // feature (H) element width
  localparam int unsigned WBITS    = 8;   // weight element width
  localparam int unsigned PROD_W   = HBITS + WBITS; // signed W*H
  localparam int unsigned ACC_W    = 32;  // combination / aggregation element
  localparam int unsigned NODE_W   = 16;  // node index width
  localparam int unsigned GW_W     = 8;   // graph edge weight (Weight_G)
  localparam int unsigned FRAC     = 16;  // fraction bits of D^-1 (Q0.16)
  localparam int unsigned SCAL_W   = 17;  // scalar operand of the multiplier row

  // One CSR entry of the adjacency buffer: neighbour, direction, edge weight.
  // dir = 0: edge goes out of the row's node; dir = 1: edge comes in.
  typedef struct packed {
    logic [NODE_W-1:0] node;
    logic              dir;
    logic [GW_W-1:0]   weight;
  } adj_entry_t;


  // Operation of the shared near-memory multiplier/adder row.
  typedef enum logic [1:0] {
    ALU_PASS  = 2'd0,  // y = b            (write a vector)
    ALU_ADD   = 2'd1,  // y = a + b        (unweighted aggregation)
    ALU_MAC   = 2'd2,  // y = a + s*b      (weighted aggregation)
    ALU_SCALE = 2'd3   // y = (a*s)>>>FRAC (D^-1 scaling)
  } alu_op_e;

  // Commands of the controller.
  typedef enum logic [2:0] {
    OP_LCONF   = 3'd0, // arg[0] compute mode, [1] weighted, [2] directed, [3] build D
    OP_MACC    = 3'd1, // node: combination + compute-as-soon-as-ready aggregation; arg: H slots
    OP_DSCALE  = 3'd2, // arg: node count; agg[n] *= D^-1[n]
    OP_RELU    = 3'd3, // arg: node count
    OP_SOFTMAX = 3'd4, // arg: node count
    OP_CLEAR   = 3'd5  // arg: node count; agg[n] = 0
  } op_e;

  typedef enum logic [1:0] {SEL_BR = 2'd0, SEL_ECT = 2'd1, SEL_ZERO = 2'd2} pp_sel_e;

  // Event counters of the controller (performance / mechanism counters).
  typedef struct packed {
    logic [31:0] macc;      // MACC commands executed
    logic [31:0] refused;   // MACC refused because the L1 was in normal mode
    logic [31:0] slots;     // H slots computed
    logic [31:0] ect;       // bank-level early compute terminations (NEM-C2)
    logic [31:0] stall;     // cycles a finished combination vector waited
    logic [31:0] overlap;   // cycles aggregation updates ran during combination
    logic [31:0] updates;   // aggregation-array rows updated by broadcast
    logic [31:0] overflow;  // Update Index register full, row continued
    logic [31:0] dropped;   // adjacency entries filtered out by direction
    logic [31:0] dgen;      // D^-1 values generated
    logic [31:0] dscale;    // rows scaled by D^-1
    logic [31:0] relu;      // rows through ReLU
    logic [31:0] softmax;   // rows through softmax
  } perf_t;

endpackage
