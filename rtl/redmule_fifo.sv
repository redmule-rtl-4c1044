// redmule_fifo: synchronous first-in first-out buffer built from registers.
//
// Used three times in RedMulE, between the streamer and the W-, X- and
// Z-buffers.  The head entry is visible on data_o whenever empty_o is low
// (fall-through read from the register array); pop_i removes it at the
// clock edge, push_i writes data_i at the tail.  Pushing and popping in
// the same cycle is allowed, also when the FIFO is full (the pop frees the
// slot first).  count_o is the number of stored entries.  Depth and width
// are parameters; the depths used are this design's choice.
module redmule_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       clear_i,
  input  logic                       push_i,
  input  logic [WIDTH-1:0]           data_i,
  input  logic                       pop_i,
  output logic [WIDTH-1:0]           data_o,
  output logic                       empty_o,
  output logic                       full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [AW-1:0]    rd_ptr_q, wr_ptr_q;
  logic [CW-1:0]    count_q;
  logic             do_push, do_pop;

  assign empty_o = (count_q == '0);
  assign full_o  = (count_q == CW'(DEPTH));
  assign count_o = count_q;
  assign data_o  = mem_q[rd_ptr_q];
  assign do_pop  = pop_i && !empty_o;
  assign do_push = push_i && (!full_o || do_pop);

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      count_q  <= '0;
    end else if (clear_i) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      count_q  <= '0;
    end else begin
      if (do_push) wr_ptr_q <= incr(wr_ptr_q);
      if (do_pop)  rd_ptr_q <= incr(rd_ptr_q);
      count_q <= count_q + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 0; i < DEPTH; i++) mem_q[i] <= '0;
    end else if (do_push) begin
      mem_q[wr_ptr_q] <= data_i;
    end
  end

  // A push into a full FIFO without a pop, or a pop from an empty one, is
  // a protocol error of the user.
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push_i && full_o && !pop_i))
    else $error("redmule_fifo: push while full");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(pop_i && empty_o))
    else $error("redmule_fifo: pop while empty");

endmodule
