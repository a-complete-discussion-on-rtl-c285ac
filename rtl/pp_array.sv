// pp_array: partial products array of one bank.
//
// HBITS rows, row j holding (weight row AND bit j of the H element). Each row
// has its own write enable. The write data depends on the combination scheme:
//   C3 = 0 (NEM-C2): a 3:1 multiplexer per row chooses the bank read (BR), the
//                    ECT register or zero, steered by the ECT control `sel`.
//   C3 = 1 (NEM-C3): the pre-computed bank read (weight row read with RWL = 1)
//                    is ANDed with bit j of the H element, so one broadcast
//                    write fills every row.
// Both write structures are the published ones. Writes take effect at the
// clock edge; `pp` shows the stored rows.
module pp_array
  import nem_pkg::*;
#(
  parameter int unsigned DW = 1024,
  parameter bit          C3 = 1'b1
) (
  input  logic             clk,
  input  logic [HBITS-1:0] we,
  input  pp_sel_e          sel [HBITS],
  input  logic [DW-1:0]    br,
  input  logic [DW-1:0]    ect,
  input  logic [HBITS-1:0] h,
  output logic [DW-1:0]    pp [HBITS]
);

  for (genvar j = 0; j < HBITS; j++) begin : g_row
    logic [DW-1:0] wdata;
    if (C3) begin : g_and
      assign wdata = br & {DW{h[j]}};
    end else begin : g_mux
      always_comb begin
        unique case (sel[j])
          SEL_BR:   wdata = br;
          SEL_ECT:  wdata = ect;
          default:  wdata = '0;
        endcase
      end
    end
    always_ff @(posedge clk) begin
      if (we[j]) pp[j] <= wdata;
    end
  end

endmodule
