// comb_engine: combination datapath (H x W) on the re-purposed L1 banks.
//
// N_TILES x BANKS_PER_TILE pim_slices work on the same node. Row r of bank b
// holds row j = r*NB + b of the weight matrix (NB = number of banks), so one
// "H slot" (NB feature elements, element b for bank b) is consumed per weight
// row index r; a node with F features needs ceil(F/NB) slots. For every slot
// the COLS products of all banks are summed column-wise by adder trees
// (bank-level parallelism), registered, and accumulated into the combination
// array. After `nslots` slots the combination vector is offered on vec/
// vec_valid and held until vec_ready; only then is a new `start` accepted.
//
// NEM-C3 (C3 = 1): one slot is accepted per cycle (h_ready stays high) and
//   flows through the slices' four-stage pipeline; the adder stage adds one
//   cycle, so a node takes nslots + 5 cycles from start to vec_valid.
// NEM-C2 (C3 = 0): a slot is accepted only when every slice is idle; the
//   slot ends when the slowest bank has found its first '1' (or used all
//   HBITS bits), so latency depends on the data.
//
// Also provides the normal cache path: weight rows are written through
// wr_* and any row can be read back (l1_rd_*, data valid one cycle later).
// Bank numbering, slot order and the handshakes are this design's choices.
module comb_engine
  import nem_pkg::*;
#(
  parameter bit          C3             = 1'b1,
  parameter int unsigned N_TILES        = 32,
  parameter int unsigned BANKS_PER_TILE = 8,
  parameter int unsigned ROWS           = 32,
  parameter int unsigned COLS           = 128,
  localparam int unsigned NB   = N_TILES * BANKS_PER_TILE,
  localparam int unsigned DW   = COLS * WBITS,
  localparam int unsigned BA_W = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned RA_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned SL_W = $clog2(ROWS + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // L1 write / normal read
  input  logic                    wr_en,
  input  logic [BA_W-1:0]         wr_bank,
  input  logic [RA_W-1:0]         wr_row,
  input  logic [DW-1:0]           wr_data,
  input  logic                    l1_rd_en,
  input  logic [BA_W-1:0]         l1_rd_bank,
  input  logic [RA_W-1:0]         l1_rd_row,
  output logic [DW-1:0]           l1_rdata,
  // node control
  input  logic                    start,
  input  logic [SL_W-1:0]         nslots,
  output logic                    idle,
  // H slots
  input  logic                    h_valid,
  output logic                    h_ready,
  input  logic [NB-1:0][HBITS-1:0] h_data,
  // combination vector out
  output logic                    vec_valid,
  input  logic                    vec_ready,
  output logic signed [ACC_W-1:0] vec [COLS],
  // statistics
  output logic                    ect_event,   // some bank terminated early
  output logic                    slot_event   // a slot was accepted
);

  typedef enum logic [1:0] {E_IDLE, E_RUN, E_DRAIN, E_HOLD} est_e;
  est_e st_q;

  logic [SL_W-1:0] slot_q, nslots_q, done_q;
  logic            slot_go;
  logic [NB-1:0]   s_busy, s_pvalid, s_hit;
  logic signed [PROD_W-1:0] s_prod [NB][COLS];
  logic [DW-1:0]   s_l1 [NB];
  logic [BA_W-1:0] l1_bank_q;
  logic            c2_pending, acc_pulse;
  logic signed [ACC_W-1:0] red_d [COLS];
  logic signed [ACC_W-1:0] red_q [COLS];
  logic            red_v;

  assign idle      = (st_q == E_IDLE);
  assign h_ready   = (st_q == E_RUN) && (slot_q < nslots_q) &&
                     (C3 ? 1'b1 : (!(|s_busy) && !c2_pending));
  assign slot_go   = h_valid && h_ready;
  assign vec_valid = (st_q == E_HOLD);
  assign ect_event = |s_hit;
  assign slot_event = slot_go;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    pim_slice #(.C3(C3), .ROWS(ROWS), .COLS(COLS)) u_slice (
      .clk, .rst_n,
      .wr_en(wr_en && wr_bank == BA_W'(b)), .wr_row, .wr_data,
      .l1_rd_en(l1_rd_en && l1_rd_bank == BA_W'(b)), .l1_rd_row, .l1_rdata(s_l1[b]),
      .start(slot_go), .row(slot_q[RA_W-1:0]), .h(h_data[b]),
      .busy(s_busy[b]), .prod_valid(s_pvalid[b]), .prod(s_prod[b]),
      .ect_hit(s_hit[b]), .probes()
    );
  end

  always_ff @(posedge clk) if (l1_rd_en) l1_bank_q <= l1_rd_bank;
  assign l1_rdata = s_l1[l1_bank_q];

  // products of every bank are ready: in NEM-C3 all slices run in lock-step,
  // in NEM-C2 wait until the slowest slice is idle again (its array holds).
  if (C3) begin : g_acc3
    assign acc_pulse = s_pvalid[0];
    assign c2_pending = 1'b0;
  end else begin : g_acc2
    logic pend;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                 pend <= 1'b0;
      else if (slot_go)           pend <= 1'b1;
      else if (pend && !(|s_busy)) pend <= 1'b0;
    end
    assign c2_pending = pend;
    assign acc_pulse  = pend && !(|s_busy) && !slot_go;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_red
    logic signed [PROD_W-1:0] col [NB];
    for (genvar b = 0; b < NB; b++) begin : g_in
      assign col[b] = s_prod[b][c];
    end
    adder_reduction #(.N(NB), .IW(PROD_W), .OW(ACC_W)) u_tree (.in(col), .sum(red_d[c]));
    always_ff @(posedge clk) if (acc_pulse) red_q[c] <= red_d[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) red_v <= 1'b0;
    else        red_v <= acc_pulse;
  end

  comb_array #(.COLS(COLS), .ACC_W(ACC_W)) u_comb (
    .clk, .rst_n, .clr(start && idle), .acc_en(red_v), .add(red_q), .q(vec)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= E_IDLE;
      slot_q   <= '0;
      nslots_q <= '0;
      done_q   <= '0;
    end else begin
      if (red_v) done_q <= done_q + 1'b1;
      unique case (st_q)
        E_IDLE: if (start) begin
          st_q     <= (nslots == '0) ? E_HOLD : E_RUN;
          slot_q   <= '0;
          nslots_q <= nslots;
          done_q   <= '0;
        end
        E_RUN: begin
          if (slot_go) slot_q <= slot_q + 1'b1;
          if (slot_go && slot_q + 1'b1 == nslots_q) st_q <= E_DRAIN;
        end
        E_DRAIN: if (red_v && done_q + 1'b1 == nslots_q) st_q <= E_HOLD;
        E_HOLD:  if (vec_ready) st_q <= E_IDLE;
        default: st_q <= E_IDLE;
      endcase
    end
  end

endmodule
