// redmule_datapath: the RedMulE compute array, L rows of H chained FP16
// FMAs (redmule_row).
//
// Column c of every row receives the same W element (broadcast over the L
// rows), while each of the L*H FMAs has its own X operand.  Row r
// accumulates, over the passes of an operation, H*(P+1) consecutive
// elements of row r of the Z tile being computed.  The accumulate and
// store selects are common to all rows.
//
// Timing: one multiply-add per FMA per cycle with en_i=1; a partial result
// moves one column every P+1 enabled cycles; z_o[r] shows the result that
// left the last column of row r, P+1 enabled cycles after that column's
// operands were presented.
//
// Follows the original design: L x H semi-systolic FMA rows, one register
// after each FMA, the feedback from the last to the first column through
// an accumulate/zero multiplexer and the store multiplexer on the output.
// Own choice: one accumulate and one store select shared by all rows.
module redmule_datapath
  import redmule_pkg::*;
#(
  parameter int unsigned H = H_DEF,
  parameter int unsigned L = L_DEF,
  parameter int unsigned P = P_DEF
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   en_i,
  input  fp16_t [L-1:0][H-1:0]   x_i,
  input  fp16_t [H-1:0]          w_i,
  input  logic                   accumulate_i,
  input  logic                   store_i,
  output fp16_t [L-1:0]          z_o
);

  for (genvar r = 0; r < L; r++) begin : g_row
    redmule_row #(.H(H), .P(P)) i_row (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .en_i        (en_i),
      .x_i         (x_i[r]),
      .w_i         (w_i),
      .accumulate_i(accumulate_i),
      .store_i     (store_i),
      .z_o         (z_o[r])
    );
  end

endmodule
