// shift_add: near-memory shift-and-add of one weight column (one unit per
// WBITS bit lines of a bank).
//
// Input: the HBITS partial products of one weight, pp[k] = W AND H[k], each a
// WBITS-bit two's complement value. Output: sum over k of pp[k] * 2^k, which
// is the signed product W*H for an unsigned H. Purely combinational.
// The shift-and-add follows the published datapath; signed weights and an
// unsigned H are this design's choice.
module shift_add
  import nem_pkg::*;
(
  input  logic [WBITS-1:0]         pp [HBITS],
  output logic signed [PROD_W-1:0] prod
);

  always_comb begin
    prod = '0;
    for (int k = 0; k < HBITS; k++) begin
      prod = prod + (PROD_W'(signed'(pp[k])) <<< k);
    end
  end

endmodule
