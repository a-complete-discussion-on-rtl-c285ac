// tb_nem_ctrl: the command controller against simple behavioural stand-ins
// for the combination engine (busy for a random time after comb_start), the
// aggregation engine (accepts a node when idle, then busy for a random time)
// and the auxiliary unit (busy a random time per row, then done).
// A random command stream (LCONF with random fields, MACC, DSCALE, RELU,
// SOFTMAX, CLEAR) is applied. Checked: LCONF fields land in the config
// outputs; MACC in normal mode never starts the engine and counts as refused;
// MACC in compute mode starts it with the right slot count and the same node
// is handed to the aggregation engine exactly once, in order; sweeps produce
// exactly rows 0..arg-1 in order with the right operation and owner, and no
// sweep starts while an engine is busy; all event counters match the number
// of event pulses driven.
`include "tb_util.svh"
module tb_nem_ctrl;
  import nem_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cmd_valid = 0, cmd_ready;
  op_e cmd_op = OP_LCONF;
  logic [NODE_W-1:0] cmd_node = 0, eng_node, ctl_row;
  logic [15:0] cmd_arg = 0, comb_nslots;
  logic compute_mode, weighted, directed, d_en, comb_start, eng_node_valid, ctl_op_valid, aux_start, aux_mode, busy;
  logic comb_idle, eng_node_ready, eng_idle, aux_busy, aux_done;
  logic [1:0] owner;
  alu_op_e ctl_op;
  logic ev_slot = 0, ev_ect = 0, ev_stall = 0, ev_overlap = 0, ev_update = 0, ev_overflow = 0, ev_dropped = 0, ev_dgen = 0;
  perf_t perf;
  nem_ctrl dut (.*);
  `TB_WATCHDOG(clk, 400000)

  // stand-ins
  int comb_cnt = 0, eng_cnt = 0, aux_cnt = 0;
  logic aux_on = 0;
  assign comb_idle = (comb_cnt == 0);
  assign eng_idle = (eng_cnt == 0);
  assign eng_node_ready = eng_idle;
  assign aux_busy = aux_on;
  always @(posedge clk) begin
    aux_done <= 0;
    if (comb_start) comb_cnt <= $urandom_range(1, 6); else if (comb_cnt > 0) comb_cnt <= comb_cnt - 1;
    if (eng_node_valid && eng_node_ready) eng_cnt <= $urandom_range(1, 10); else if (eng_cnt > 0) eng_cnt <= eng_cnt - 1;
    if (aux_start) begin aux_on <= 1; aux_cnt <= $urandom_range(1, 4); end
    else if (aux_on) begin
      if (aux_cnt == 1) begin aux_on <= 0; aux_done <= 1; end
      aux_cnt <= aux_cnt - 1;
    end
  end

  // scoreboard
  int exp_nodes[$];
  int n_macc = 0, n_ref = 0, n_dscale = 0, n_relu = 0, n_sm = 0;
  int ev_n [8] = '{default: 0};
  op_e cur_sweep;
  int sweep_row = 0;
  always @(posedge clk) if (rst_n) begin
    if (comb_start) begin
      `TB_CHECK(compute_mode, "no engine start in normal mode")
      `TB_CHECK(comb_nslots == cmd_arg, "slot count passed")
      exp_nodes.push_back(cmd_node);
    end
    if (eng_node_valid && eng_node_ready) begin
      if (exp_nodes.size() == 0) `TB_CHECK(0, "node handed over twice")
      else `TB_CHECK(eng_node == NODE_W'(exp_nodes.pop_front()), "node order")
    end
    if (ctl_op_valid) begin
      `TB_CHECK(owner == 2'd1, "owner ctrl")
      `TB_CHECK(ctl_row == NODE_W'(sweep_row), $sformatf("sweep row %0d exp %0d", ctl_row, sweep_row))
      `TB_CHECK(ctl_op == (cur_sweep == OP_DSCALE ? ALU_SCALE : ALU_PASS), "sweep op")
      `TB_CHECK(comb_idle && eng_idle, "sweep only when drained")
      sweep_row++;
    end
    if (aux_start) begin
      `TB_CHECK(owner == 2'd2, "owner aux")
      `TB_CHECK(ctl_row == NODE_W'(sweep_row), "aux row")
      `TB_CHECK(aux_mode == (cur_sweep == OP_SOFTMAX), "aux mode")
      sweep_row++;
    end
    ev_n[0] += ev_slot; ev_n[1] += ev_ect; ev_n[2] += ev_stall; ev_n[3] += ev_overlap;
    ev_n[4] += ev_update; ev_n[5] += ev_overflow; ev_n[6] += ev_dropped; ev_n[7] += ev_dgen;
  end
  always @(negedge clk) begin
    {ev_slot, ev_ect, ev_stall, ev_overlap, ev_update, ev_overflow, ev_dropped, ev_dgen} = 8'($urandom);
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int k;
      k = $urandom_range(0, 9);
      cmd_op = (k < 2) ? OP_LCONF : (k < 6) ? OP_MACC : op_e'($urandom_range(2, 5));
      cmd_node = NODE_W'($urandom_range(0, 255));
      cmd_arg = (cmd_op == OP_LCONF) ? 16'($urandom_range(0, 15)) | 16'(t % 5 != 0) : 16'($urandom_range(0, 5));
      cmd_valid = 1;
      #1; while (!cmd_ready) begin @(negedge clk); #1; end
      if (cmd_op == OP_MACC) begin if (compute_mode) n_macc++; else n_ref++; end
      if (!(cmd_op inside {OP_LCONF, OP_MACC})) begin
        `TB_CHECK(comb_idle && eng_idle && exp_nodes.size() == 0, "sweep accepted only when idle")
        cur_sweep = cmd_op; sweep_row = 0;
        if (cmd_op == OP_DSCALE) n_dscale += cmd_arg;
        if (cmd_op == OP_RELU) n_relu += cmd_arg;
        if (cmd_op == OP_SOFTMAX) n_sm += cmd_arg;
      end
      @(negedge clk); cmd_valid = 0;
      if (cmd_op == OP_LCONF)
        `TB_CHECK({d_en, directed, weighted, compute_mode} == cmd_arg[3:0], "LCONF fields")
      if (!(cmd_op inside {OP_LCONF, OP_MACC})) begin
        while (busy && dut.st_q != 0) @(negedge clk);
        `TB_CHECK(sweep_row == int'(cmd_arg), $sformatf("sweep covered %0d of %0d rows", sweep_row, cmd_arg))
      end
    end
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
    `TB_CHECK(perf.macc == n_macc && perf.refused == n_ref, "macc / refused counters")
    `TB_CHECK(n_ref > 0 && n_macc > 0, "both MACC outcomes exercised")
    `TB_CHECK(perf.dscale == n_dscale && perf.relu == n_relu && perf.softmax == n_sm, "sweep counters")
    `TB_CHECK(perf.slots == ev_n[0] && perf.ect == ev_n[1] && perf.stall == ev_n[2] && perf.overlap == ev_n[3],
              "event counters 1")
    `TB_CHECK(perf.updates == ev_n[4] && perf.overflow == ev_n[5] && perf.dropped == ev_n[6] && perf.dgen == ev_n[7],
              "event counters 2")
    `TB_FINISH
  end
endmodule
