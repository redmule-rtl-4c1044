// redmule_row: one row of the RedMulE datapath, H FP16 FMAs chained
// semi-systolically.
//
// Column c multiplies its own X operand by the W element broadcast to the
// whole column and adds the partial result handed on by column c-1.  Every
// FMA has P internal pipeline registers and is followed by one more
// register, so a partial result takes D = P+1 cycles per column and
// H*(P+1) partial results (consecutive Z elements of one Z row) circulate
// in the row at the same time.  The register after the last FMA feeds the
// accumulation input of the first FMA through a two-way multiplexer that
// selects either this feedback (accumulate_i=1) or zero (start of a new
// group of Z elements); the same register drives the output through a
// second multiplexer that passes it when store_i=1 and gives zero
// otherwise.  These two multiplexers and the register after each FMA are
// the ones drawn in the paper's figure of a datapath row.
//
// Timing: everything advances only in cycles with en_i=1.  The operands
// presented to column c in a cycle reach column c+1 (or, from the last
// column, the feedback and z_o) D enabled cycles later.
module redmule_row
  import redmule_pkg::*;
#(
  parameter int unsigned H = H_DEF,
  parameter int unsigned P = P_DEF
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                en_i,
  input  fp16_t [H-1:0]       x_i,           // X operand of each column
  input  fp16_t [H-1:0]       w_i,           // W element broadcast to each column
  input  logic                accumulate_i,  // 1: feed back, 0: start from zero
  input  logic                store_i,       // 1: drive the row result on z_o
  output fp16_t               z_o
);

  fp16_t [H-1:0] acc_in;
  fp16_t [H-1:0] fma_z;
  fp16_t [H-1:0] stage_q;

  for (genvar c = 0; c < H; c++) begin : g_col
    if (c == 0) begin : g_first
      assign acc_in[c] = accumulate_i ? stage_q[H-1] : fp16_t'(0);
    end else begin : g_next
      assign acc_in[c] = stage_q[c-1];
    end

    redmule_fma #(.P(P)) i_fma (
      .clk_i (clk_i),
      .rst_ni(rst_ni),
      .en_i  (en_i),
      .a_i   (x_i[c]),
      .b_i   (w_i[c]),
      .c_i   (acc_in[c]),
      .z_o   (fma_z[c])
    );

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)   stage_q[c] <= '0;
      else if (en_i) stage_q[c] <= fma_z[c];
    end
  end

  assign z_o = store_i ? stage_q[H-1] : fp16_t'(0);

endmodule
