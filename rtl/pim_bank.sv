// pim_bank: one L1 cache bank of 8T SRAM used as a bit-serial compute array.
//
// Each row holds COLS weights of WBITS bits (one row of the GNN weight
// matrix). The write port (WWL/WBL) stores a row. The decoupled read port
// drives the H bit `rwl` onto the read word line of row `rd_row`; a bit line
// "discharges" (reads 1) only where the stored bit and the RWL are both 1, so
// the bank returns the row ANDed with the H bit. With rwl = 1 this is an
// ordinary cache read.
//
// The analog bitcell, precharge and sense amplifiers are not modelled: the
// bank is a register array whose compute result is registered one cycle after
// rd_en (the sense-amplifier latch). Write and compute are independent ports,
// so one row may be written while another is computed; a same-row collision
// returns the old contents. The AND behaviour follows the published truth
// table; the one-cycle timing is this design's choice.
module pim_bank #(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned COLS  = 128,
  parameter int unsigned WBITS = 8,
  localparam int unsigned DW   = COLS * WBITS,
  localparam int unsigned RA_W = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [RA_W-1:0] wr_row,
  input  logic [DW-1:0]   wr_data,
  input  logic            rd_en,
  input  logic [RA_W-1:0] rd_row,
  input  logic            rwl,
  output logic [DW-1:0]   rbl
);

  logic [DW-1:0] cells [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) cells[wr_row] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rbl <= cells[rd_row] & {DW{rwl}};
  end

endmodule
