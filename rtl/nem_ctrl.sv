// nem_ctrl: command controller and event counters of the near-memory logic.
//
// Commands (cmd_valid/cmd_ready, nem_pkg::op_e):
//   LCONF    arg[0] = compute mode of the L1 banks, arg[1] = weighted graph
//            (WC engine), arg[2] = directed graph, arg[3] = build D^-1 while
//            aggregating (first layer; 0 keeps the generator gated).
//            Accepted when everything is idle.
//   MACC     combination of node `cmd_node` over arg H slots. Accepted as soon
//            as the combination engine is free, so node n+1's combination
//            overlaps node n's aggregation. The node is passed to the
//            aggregation engine as NodeProc as soon as that engine is free;
//            the engine then reads adjacency during the combination and
//            broadcasts the result the moment it is ready (compute as soon
//            as ready). In normal mode a MACC is consumed and counted as
//            refused.
//   DSCALE   rows 0..arg-1: agg[n] = agg[n] * D^-1[n] (shared multiplier row)
//   RELU     rows 0..arg-1 through the auxiliary ReLU
//   SOFTMAX  rows 0..arg-1 through the auxiliary softmax
//   CLEAR    rows 0..arg-1 set to zero (start of a layer)
// The row sweeps wait until combination and aggregation have drained.
// `owner` tells the top who drives the aggregation-array row port:
// 0 aggregation engine, 1 this controller (CLEAR/DSCALE), 2 auxiliary control.
// The instruction names LCONF/MACC and the two L1 modes are from the paper;
// the encoding, the sweep commands and the counters are this design's own.
//
// comb_nslots is cmd_arg passed straight on; it is qualified by comb_start.
module nem_ctrl
  import nem_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  op_e               cmd_op,
  input  logic [NODE_W-1:0] cmd_node,
  input  logic [15:0]       cmd_arg,
  // configuration
  output logic              compute_mode,
  output logic              weighted,
  output logic              directed,
  output logic              d_en,
  // combination engine
  input  logic              comb_idle,
  output logic              comb_start,
  output logic [15:0]       comb_nslots,
  // aggregation engine
  output logic              eng_node_valid,
  output logic [NODE_W-1:0] eng_node,
  input  logic              eng_node_ready,
  input  logic              eng_idle,
  // row sweeps
  output logic [1:0]        owner,
  output logic              ctl_op_valid,
  output alu_op_e           ctl_op,
  output logic [NODE_W-1:0] ctl_row,
  output logic              aux_start,
  output logic              aux_mode,
  input  logic              aux_busy,
  input  logic              aux_done,
  // events
  input  logic              ev_slot,
  input  logic              ev_ect,
  input  logic              ev_stall,
  input  logic              ev_overlap,
  input  logic              ev_update,
  input  logic              ev_overflow,
  input  logic              ev_dropped,
  input  logic              ev_dgen,
  output logic              busy,
  output perf_t             perf
);

  typedef enum logic [1:0] {C_IDLE, C_SWEEP, C_AUXWAIT} cst_e;
  cst_e st_q;

  op_e               sop_q;
  logic [NODE_W-1:0] row_q;
  logic [15:0]       nrow_q;
  logic              pend_q;
  logic [NODE_W-1:0] pend_node_q;
  logic              all_idle, accept;

  assign all_idle  = comb_idle && eng_idle && !pend_q && !aux_busy && (st_q == C_IDLE);
  always_comb begin
    if (st_q != C_IDLE)       cmd_ready = 1'b0;
    else if (cmd_op == OP_MACC) cmd_ready = !compute_mode || (comb_idle && !pend_q);
    else                      cmd_ready = all_idle;
  end
  assign accept      = cmd_valid && cmd_ready;
  assign comb_start  = accept && cmd_op == OP_MACC && compute_mode;
  assign comb_nslots = cmd_arg;

  assign eng_node_valid = pend_q;
  assign eng_node       = pend_node_q;
  assign busy           = !all_idle;

  assign owner        = (st_q == C_IDLE) ? 2'd0 :
                        (sop_q inside {OP_RELU, OP_SOFTMAX}) ? 2'd2 : 2'd1;
  assign ctl_op_valid = (st_q == C_SWEEP) && (sop_q inside {OP_DSCALE, OP_CLEAR}) &&
                        (16'(row_q) < nrow_q);
  assign ctl_op       = (sop_q == OP_DSCALE) ? ALU_SCALE : ALU_PASS;
  assign ctl_row      = row_q;
  assign aux_start    = (st_q == C_SWEEP) && (sop_q inside {OP_RELU, OP_SOFTMAX}) &&
                        (16'(row_q) < nrow_q) && !aux_busy;
  assign aux_mode     = (sop_q == OP_SOFTMAX);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= C_IDLE;
      compute_mode <= 1'b0;
      weighted     <= 1'b0;
      directed     <= 1'b0;
      d_en         <= 1'b0;
      pend_q       <= 1'b0;
      pend_node_q  <= '0;
      sop_q        <= OP_CLEAR;
      row_q        <= '0;
      nrow_q       <= '0;
      perf         <= '0;
    end else begin
      // NodeProc hand-over to the aggregation engine
      if (pend_q && eng_node_ready) pend_q <= 1'b0;
      if (comb_start) begin
        pend_q      <= 1'b1;
        pend_node_q <= cmd_node;
      end

      if (accept) begin
        unique case (cmd_op)
          OP_LCONF: begin
            compute_mode <= cmd_arg[0];
            weighted     <= cmd_arg[1];
            directed     <= cmd_arg[2];
            d_en         <= cmd_arg[3];
          end
          OP_MACC: begin
            if (compute_mode) perf.macc    <= perf.macc + 1;
            else              perf.refused <= perf.refused + 1;
          end
          default: begin
            sop_q  <= cmd_op;
            row_q  <= '0;
            nrow_q <= cmd_arg;
            st_q   <= C_SWEEP;
          end
        endcase
      end

      unique case (st_q)
        C_SWEEP: begin
          if (16'(row_q) >= nrow_q) st_q <= C_IDLE;
          else if (ctl_op_valid) row_q <= row_q + 1'b1;
          else if (aux_start) st_q <= C_AUXWAIT;
        end
        C_AUXWAIT: if (aux_done) begin
          row_q <= row_q + 1'b1;
          st_q  <= C_SWEEP;
        end
        default: ;
      endcase

      if (ev_slot)     perf.slots    <= perf.slots + 1;
      if (ev_ect)      perf.ect      <= perf.ect + 1;
      if (ev_stall)    perf.stall    <= perf.stall + 1;
      if (ev_overlap)  perf.overlap  <= perf.overlap + 1;
      if (ev_update)   perf.updates  <= perf.updates + 1;
      if (ev_overflow) perf.overflow <= perf.overflow + 1;
      if (ev_dropped)  perf.dropped  <= perf.dropped + 1;
      if (ev_dgen)     perf.dgen     <= perf.dgen + 1;
      if (ctl_op_valid && sop_q == OP_DSCALE) perf.dscale <= perf.dscale + 1;
      if (aux_done && sop_q == OP_RELU)       perf.relu    <= perf.relu + 1;
      if (aux_done && sop_q == OP_SOFTMAX)    perf.softmax <= perf.softmax + 1;
    end
  end

endmodule
