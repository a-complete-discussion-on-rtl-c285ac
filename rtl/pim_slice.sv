// pim_slice: one compute bank with its per-bank near-memory logic.
//
// Holds ROWS weight rows (COLS weights each) in a pim_bank. For a request
// (weight row `row`, feature element `h`) it produces the COLS signed
// products W*h through the partial-products array and COLS shift-add units.
//
// C3 = 1, NEM-C3 (pre-compute), a four-stage pipeline taking one request per
// cycle:
//   1. H*W compute  : read the row with RWL = 1 (both outcomes are known:
//                     the row for an H bit of 1, zero for 0)
//   2. store        : latch the bank read and h
//   3. broadcast    : write every partial-products row with read AND h[j]
//   4. products     : shift-add of the array, prod_valid = 1
// `busy` is always 0.
//
// C3 = 0, NEM-C2 (early compute termination): the H bits are applied one per
// cycle, bit 0 first, and each bank read is stored into its partial-products
// row. The ECT unit detects the first '1'; after its read returns, one
// broadcast write fills the rows still to compute from the ECT register (or
// zero) and the bank stops. An all-zero element takes HBITS reads and needs
// no broadcast. Latency is data dependent; `busy` is 1 until prod_valid.
// `ect_hit` pulses when a '1' terminates the compute; `probes` counts the
// read cycles used for the request.
//
// The step structure follows the published NEM-C2/NEM-C3 datapaths; the
// pipelining of NEM-C3 and the request handshake are this design's own.
//
// In NEM-C3 form busy, ect_hit and probes are constant (no early
// termination exists there); the ports are kept so both forms share one
// interface.
module pim_slice
  import nem_pkg::*;
#(
  parameter bit          C3   = 1'b1,
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 128,
  localparam int unsigned DW   = COLS * WBITS,
  localparam int unsigned RA_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight write port (from L2)
  input  logic                     wr_en,
  input  logic [RA_W-1:0]          wr_row,
  input  logic [DW-1:0]            wr_data,
  // normal-mode read (cache read, result one cycle later on l1_rdata)
  input  logic                     l1_rd_en,
  input  logic [RA_W-1:0]          l1_rd_row,
  output logic [DW-1:0]            l1_rdata,
  // compute request
  input  logic                     start,
  input  logic [RA_W-1:0]          row,
  input  logic [HBITS-1:0]         h,
  output logic                     busy,
  output logic                     prod_valid,
  output logic signed [PROD_W-1:0] prod [COLS],
  output logic                     ect_hit,
  output logic [$clog2(HBITS+1)-1:0] probes
);

  logic            rd_en, rwl;
  logic [RA_W-1:0] rd_row;
  logic [DW-1:0]   rbl;
  logic [HBITS-1:0] pp_we;
  pp_sel_e         pp_sel [HBITS];
  logic [DW-1:0]   pp_br, ect_q;
  logic [HBITS-1:0] pp_h;
  logic [DW-1:0]   pp [HBITS];

  pim_bank #(.ROWS(ROWS), .COLS(COLS), .WBITS(WBITS)) u_bank (
    .clk, .wr_en, .wr_row, .wr_data,
    .rd_en, .rd_row, .rwl, .rbl
  );

  assign l1_rdata = rbl;

  pp_array #(.DW(DW), .C3(C3)) u_pp (
    .clk, .we(pp_we), .sel(pp_sel), .br(pp_br), .ect(ect_q), .h(pp_h), .pp
  );

  // shift-add, one unit per weight column
  for (genvar c = 0; c < COLS; c++) begin : g_sa
    logic [WBITS-1:0] col_pp [HBITS];
    for (genvar k = 0; k < HBITS; k++) begin : g_k
      assign col_pp[k] = pp[k][c*WBITS +: WBITS];
    end
    shift_add u_sa (.pp(col_pp), .prod(prod[c]));
  end

  if (C3) begin : g_c3
    logic             v1, v2, v3;
    logic [HBITS-1:0] h1, h2;
    logic [DW-1:0]    st;

    assign rd_en  = start | l1_rd_en;
    assign rd_row = start ? row : l1_rd_row;
    assign rwl    = 1'b1;            // pre-compute: evaluate the row for H bit = 1

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) {v1, v2, v3} <= '0;
      else        {v1, v2, v3} <= {start, v1, v2};
    end
    always_ff @(posedge clk) begin
      h1 <= h;
      if (v1) begin
        st <= rbl;                   // step 2: store
        h2 <= h1;
      end
    end

    assign pp_br      = st;
    assign pp_h       = h2;
    assign pp_we      = {HBITS{v2}}; // step 3: broadcast write of all rows
    assign ect_q      = '0;
    for (genvar j = 0; j < HBITS; j++) begin : g_sel
      assign pp_sel[j] = SEL_BR;
    end
    assign prod_valid = v3;
    assign busy       = 1'b0;
    assign ect_hit    = 1'b0;
    assign probes     = 1;

  end else begin : g_c2
    typedef enum logic [2:0] {S_IDLE, S_PROBE, S_WAIT, S_BCAST, S_DONE} st_e;
    st_e st_q;
    logic [HBITS-1:0]         h_q;
    logic [RA_W-1:0]          row_q;
    logic [$clog2(HBITS)-1:0] k_q, k_ret;
    logic                     probe, br_valid, valid;
    logic [$clog2(HBITS+1)-1:0] n_probe;
    pp_sel_e                  ect_sel [HBITS];

    assign probe  = (st_q == S_PROBE);
    assign rd_en  = probe | l1_rd_en;
    assign rd_row = probe ? row_q : l1_rd_row;
    assign rwl    = probe ? h_q[k_q] : 1'b1;
    assign busy   = (st_q != S_IDLE);

    ect_unit #(.DW(DW)) u_ect (
      .clk, .rst_n, .start, .probe, .hbit(h_q[k_q]), .br_valid, .br(rbl), .h(h_q),
      .valid, .hit(ect_hit), .ect_reg(ect_q), .sel(ect_sel)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st_q     <= S_IDLE;
        br_valid <= 1'b0;
        k_q      <= '0;
        k_ret    <= '0;
        n_probe  <= '0;
      end else begin
        br_valid <= probe;
        k_ret    <= k_q;
        unique case (st_q)
          S_IDLE: if (start) begin
            st_q    <= S_PROBE;
            k_q     <= '0;
            n_probe <= '0;
          end
          S_PROBE: begin
            n_probe <= n_probe + 1'b1;
            if (h_q[k_q] || k_q == $clog2(HBITS)'(HBITS - 1)) st_q <= S_WAIT;
            else k_q <= k_q + 1'b1;
          end
          S_WAIT:  st_q <= valid ? S_BCAST : S_DONE;
          S_BCAST: st_q <= S_DONE;
          default: st_q <= S_IDLE;
        endcase
      end
    end
    always_ff @(posedge clk) begin
      if (st_q == S_IDLE && start) begin
        h_q   <= h;
        row_q <= row;
      end
    end

    // store each returned bank read in its own row (select BR); the broadcast
    // writes every row with the ECT control (rows below the first '1' hold
    // zero already and get zero again).
    always_comb begin
      pp_we = '0;
      for (int j = 0; j < HBITS; j++) pp_sel[j] = SEL_BR;
      if (br_valid) begin
        pp_we[k_ret] = 1'b1;
      end else if (st_q == S_BCAST) begin
        pp_we = '1;
        for (int j = 0; j < HBITS; j++) pp_sel[j] = ect_sel[j];
      end
    end
    assign pp_br      = rbl;
    assign pp_h       = h_q;
    assign prod_valid = (st_q == S_DONE);
    assign probes     = n_probe;
  end

endmodule
