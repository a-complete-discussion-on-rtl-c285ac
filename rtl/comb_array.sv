// comb_array: combination array of COLS accumulators of ACC_W bits.
//
// Holds the combination vector of the node under computation. Each cycle with
// acc_en the reduced partial dot products of one weight row (one H slot) are
// added column-wise; clr empties the array (clr together with acc_en loads
// `add`). Two's complement, wrapping on overflow. q shows the registers.
// The 128 x 32-bit size is the published one; overflow behaviour is this
// design's choice.
module comb_array #(
  parameter int unsigned COLS  = 128,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    acc_en,
  input  logic signed [ACC_W-1:0] add [COLS],
  output logic signed [ACC_W-1:0] q   [COLS]
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)      q[c] <= '0;
      else if (clr)    q[c] <= acc_en ? add[c] : '0;
      else if (acc_en) q[c] <= q[c] + add[c];
    end
  end

endmodule
