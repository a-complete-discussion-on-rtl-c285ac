// aux_control: auxiliary ReLU and softmax control on the aggregation array.
//
// For one row (`row`) per `start`:
//   ReLU    (mode 0): read the row, check the sign of every element, write
//                     the row back with negative elements set to 0. Takes 2
//                     cycles.
//   softmax (mode 1): read the row into a local buffer, then one element per
//                     cycle: pass 1 finds the maximum m; pass 2 computes
//                     e_i = exp(x_i - m) and the sum; pass 3 writes
//                     p_i = e_i * 2^16 / sum (Q0.16, sum of the row ~ 1.0);
//                     then the row is written back. Takes 3*COLS + 3 cycles.
// Inputs x are read as fixed point with IN_FRAC fraction bits. exp is
// evaluated as 2^t with t = (x - m)*log2(e): the integer part of t is a right
// shift, the fraction f is linearised, 2^f ~ 1 + f (Q0.16 result, exactly 1.0
// at the maximum).
// The write-back goes through the aggregation array's row port as a PASS
// operation. `done` pulses when the row has been written.
// The paper names the sign checker and the summation/exponential units; the
// exponential approximation, fixed-point formats and pass structure are this
// design's own.
module aux_control
  import nem_pkg::*;
#(
  parameter int unsigned COLS    = 128,
  parameter int unsigned IN_FRAC = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    mode,       // 0 ReLU, 1 softmax
  input  logic [NODE_W-1:0]       row,
  output logic [NODE_W-1:0]       rd_row,
  input  logic signed [ACC_W-1:0] rd_data [COLS],
  output logic                    wr_valid,
  output logic [NODE_W-1:0]       wr_row,
  output logic signed [ACC_W-1:0] wr_data [COLS],
  output logic                    busy,
  output logic                    done
);

  localparam int unsigned CI_W  = $clog2(COLS + 1);
  localparam logic [15:0] LOG2E = 16'd47274;   // log2(e) in Q1.15

  typedef enum logic [2:0] {A_IDLE, A_RELU, A_LOAD, A_MAX, A_EXP, A_DIV, A_WR} ast_e;
  ast_e st_q;

  logic [NODE_W-1:0]       row_q;
  logic signed [ACC_W-1:0] buf_q [COLS];
  logic signed [ACC_W-1:0] max_q;
  logic [31:0]             sum_q;
  logic [CI_W-1:0]         i_q;
  logic [16:0]             e_cur;

  // 2^t for t = (x - max) * log2(e), t <= 0, t in units of 2^-IN_FRAC
  function automatic logic [16:0] exp_q16(input logic signed [ACC_W-1:0] y);
    logic signed [ACC_W+17:0] t;
    logic signed [ACC_W+17:0] ip;
    logic [IN_FRAC-1:0]       f;
    logic [ACC_W+17:0]        n;
    logic [16:0]              mant;
    t    = ((ACC_W+18)'(y) * $signed({1'b0, LOG2E})) >>> 15;
    ip   = t >>> IN_FRAC;
    f    = t[IN_FRAC-1:0];
    n    = -ip;
    mant = 17'(((1 << IN_FRAC) + f) << (16 - IN_FRAC));
    return (n > 16) ? 17'd0 : (mant >> n);
  endfunction

  assign rd_row  = (st_q == A_IDLE) ? row : row_q;
  assign busy    = (st_q != A_IDLE);
  assign wr_row  = row_q;
  assign e_cur   = exp_q16(buf_q[i_q] - max_q);

  always_comb begin
    wr_valid = 1'b0;
    for (int c = 0; c < COLS; c++) wr_data[c] = buf_q[c];
    if (st_q == A_RELU) begin
      wr_valid = 1'b1;
      for (int c = 0; c < COLS; c++) wr_data[c] = rd_data[c][ACC_W-1] ? '0 : rd_data[c];
    end else if (st_q == A_WR) begin
      wr_valid = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= A_IDLE;
      done <= 1'b0;
      i_q  <= '0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        A_IDLE: if (start) st_q <= mode ? A_LOAD : A_RELU;
        A_RELU: begin st_q <= A_IDLE; done <= 1'b1; end
        A_LOAD: begin st_q <= A_MAX; i_q <= '0; end
        A_MAX:  if (i_q == CI_W'(COLS - 1)) begin st_q <= A_EXP; i_q <= '0; end
                else i_q <= i_q + 1'b1;
        A_EXP:  if (i_q == CI_W'(COLS - 1)) begin st_q <= A_DIV; i_q <= '0; end
                else i_q <= i_q + 1'b1;
        A_DIV:  if (i_q == CI_W'(COLS - 1)) st_q <= A_WR;
                else i_q <= i_q + 1'b1;
        A_WR:   begin st_q <= A_IDLE; done <= 1'b1; end
        default: st_q <= A_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st_q == A_IDLE && start) row_q <= row;
    if (st_q == A_LOAD) begin
      for (int c = 0; c < COLS; c++) buf_q[c] <= rd_data[c];
      max_q <= rd_data[0];
      sum_q <= '0;
    end
    if (st_q == A_MAX && buf_q[i_q] > max_q) max_q <= buf_q[i_q];
    if (st_q == A_EXP) begin
      buf_q[i_q] <= ACC_W'(e_cur);
      sum_q      <= sum_q + 32'(e_cur);
    end
    if (st_q == A_DIV) buf_q[i_q] <= ACC_W'((48'(buf_q[i_q]) << 16) / 48'(sum_q));
  end

endmodule
