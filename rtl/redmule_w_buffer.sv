// redmule_w_buffer: the W-buffer, H shift registers of T = H*(P+1) FP16
// elements, one per datapath column.
//
// A column's shift register is (re)loaded with one row of W, i.e. T
// consecutive elements of a W row as read in one 256-bit memory access,
// at the step in which that column starts a pass (load_i[c]=1).  In that
// step the column already receives element 0 straight from the W FIFO head
// (row_i); the other T-1 elements are kept in the register and shifted out
// one per enabled step, so each column broadcasts a new W element to its L
// FMAs every cycle.  Because the columns start their passes P+1 steps
// apart, at most one column loads in a step and the FIFO is popped at most
// once per step (pop_o).  Loading follows the paper; taking element 0 from
// the FIFO head in the loading step is this design's choice.
module redmule_w_buffer
  import redmule_pkg::*;
#(
  parameter int unsigned H = H_DEF,
  parameter int unsigned P = P_DEF,
  localparam int unsigned T = H * (P + 1)
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 en_i,
  input  logic [H-1:0]         load_i,   // column c starts a pass in this step
  input  fp16_t [T-1:0]        row_i,    // head of the W FIFO
  output logic                 pop_o,    // the W FIFO head is consumed
  output fp16_t [H-1:0]        w_o       // element broadcast to each column
);

  fp16_t [H-1:0][T-1:0] sr_q;

  assign pop_o = en_i && (|load_i);

  for (genvar c = 0; c < H; c++) begin : g_col
    assign w_o[c] = load_i[c] ? row_i[0] : sr_q[c][0];

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        sr_q[c] <= '0;
      end else if (en_i) begin
        if (load_i[c]) sr_q[c] <= {fp16_t'(0), row_i[T-1:1]};
        else           sr_q[c] <= {fp16_t'(0), sr_q[c][T-1:1]};
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(load_i))
    else $error("redmule_w_buffer: two columns load in the same step");

endmodule
