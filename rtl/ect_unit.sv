// ect_unit: early compute termination (ECT) datapath of one bank, NEM-C2.
//
// While the H element is applied bit-serially (bit 0 first) to the bank's
// read word line, a content match on the applied bit detects the first '1'
// and sets the Valid bit (step 1). The bank read of that bit, the weight row
// itself, is written into the ECT register when it returns one cycle later
// (step 2). From then on the write select of every partial-products row is
// generated from Valid and the H bit of that row (step 3):
//   V1 = ~Valid          -> bank read (BR)
//   V2 =  Valid &  H[j]  -> ECT register
//   V3 =  Valid & ~H[j]  -> '0'
// so all rows not yet computed can be filled in one broadcast write and the
// bank stops computing. The three equations are the published ones; the
// register timing (Valid visible the cycle after the probe) is this design's.
//
// Interface: `start` clears Valid for a new element; `probe`/`hbit` give the
// bit on the RWL this cycle; `br_valid`/`br` the bank read of the previous
// probe. `hit` pulses in the cycle the first '1' is probed.
module ect_unit
  import nem_pkg::*;
#(
  parameter int unsigned DW = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             probe,
  input  logic             hbit,
  input  logic             br_valid,
  input  logic [DW-1:0]    br,
  input  logic [HBITS-1:0] h,
  output logic             valid,
  output logic             hit,
  output logic [DW-1:0]    ect_reg,
  output pp_sel_e          sel [HBITS]
);

  logic pending; // ECT register waits for the bank read of the matched bit

  assign hit = probe && hbit && !valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid   <= 1'b0;
      pending <= 1'b0;
    end else if (start) begin
      valid   <= 1'b0;
      pending <= 1'b0;
    end else begin
      if (hit) begin
        valid   <= 1'b1;
        pending <= 1'b1;
      end
      if (br_valid && pending) pending <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (br_valid && pending) ect_reg <= br;
  end

  always_comb begin
    for (int j = 0; j < HBITS; j++) begin
      if (!valid)    sel[j] = SEL_BR;
      else if (h[j]) sel[j] = SEL_ECT;
      else           sel[j] = SEL_ZERO;
    end
  end

endmodule
