// tb_adder_reduction: random signed inputs for a non-power-of-two N; the
// tree's sum must equal a plain loop sum.
`include "tb_util.svh"
module tb_adder_reduction;
  localparam int N = 13, IW = 16, OW = 32;
  int checks = 0, failures = 0;
  logic signed [IW-1:0] in [N];
  logic signed [OW-1:0] sum;
  adder_reduction #(.N(N), .IW(IW), .OW(OW)) dut (.in, .sum);
  initial begin
    for (int t = 0; t < 300; t++) begin
      int s;
      s = 0;
      for (int i = 0; i < N; i++) begin
        in[i] = IW'($urandom);
        s += int'(in[i]);
      end
      #1;
      `TB_CHECK(sum == OW'(s), $sformatf("sum %0d exp %0d", sum, s))
    end
    `TB_FINISH
  end
endmodule
