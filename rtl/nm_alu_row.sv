// nm_alu_row: the shared near-memory multiplier/adder row.
//
// One lane per column, all lanes share the scalar s:
//   ALU_PASS : y = b
//   ALU_ADD  : y = a + b            (unweighted aggregation, UWC engine)
//   ALU_MAC  : y = a + s*b          (weighted aggregation, WC engine, s = Weight_G)
//   ALU_SCALE: y = (a*s) >>> FRAC   (D^-1 scaling, s = D^-1 in Q0.FRAC)
// a is the aggregation-array row, b the broadcast vector. s is unsigned.
// Results wrap to W bits. Combinational.
// The paper states that the UWC/WC engines and the D generator share this
// adder and multiplier; one lane per column is this design's choice.
module nm_alu_row
  import nem_pkg::*;
#(
  parameter int unsigned COLS = 128,
  parameter int unsigned W    = 32
) (
  input  alu_op_e             op,
  input  logic signed [W-1:0] a [COLS],
  input  logic signed [W-1:0] b [COLS],
  input  logic [SCAL_W-1:0]   s,
  output logic signed [W-1:0] y [COLS]
);

  localparam int unsigned PW = W + SCAL_W + 1;

  for (genvar c = 0; c < COLS; c++) begin : g_lane
    logic signed [PW-1:0] s_ext, mul_in, prod;
    assign s_ext  = PW'($signed({1'b0, s}));
    assign mul_in = (op == ALU_SCALE) ? PW'(a[c]) : PW'(b[c]);
    assign prod   = mul_in * s_ext;
    always_comb begin
      unique case (op)
        ALU_PASS:  y[c] = b[c];
        ALU_ADD:   y[c] = a[c] + b[c];
        ALU_MAC:   y[c] = a[c] + W'(prod);
        default:   y[c] = W'(prod >>> FRAC);
      endcase
    end
  end

endmodule
