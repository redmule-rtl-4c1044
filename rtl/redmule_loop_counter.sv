// redmule_loop_counter: four nested loop indices, idx[0] outermost and
// idx[3] innermost, counting from zero to lim-1.
//
// clear_i restarts the loop at all-zero indices; next_i advances it by one
// iteration; after the last iteration done_o goes high and stays high
// until the next clear.  Used by the scheduler to walk the tiles of an
// operation for the W loads, X loads and Z stores.  All limits must be at
// least one.
//
// This helper is not described in the original design; it is a choice of
// this implementation of the scheduler.
module redmule_loop_counter #(
  parameter int unsigned W = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  input  logic                next_i,
  input  logic [3:0][W-1:0]   lim_i,
  output logic [3:0][W-1:0]   idx_o,
  output logic                done_o
);

  logic [3:0][W-1:0] idx_q;
  logic              done_q;

  assign idx_o  = idx_q;
  assign done_o = done_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      idx_q  <= '0;
      done_q <= 1'b1;
    end else if (clear_i) begin
      idx_q  <= '0;
      done_q <= 1'b0;
    end else if (next_i && !done_q) begin
      logic carry;
      carry = 1'b1;
      for (int i = 3; i >= 0; i--) begin
        if (carry) begin
          if (idx_q[i] == lim_i[i] - W'(1)) begin
            idx_q[i] <= '0;
          end else begin
            idx_q[i] <= idx_q[i] + W'(1);
            carry = 1'b0;
          end
        end
      end
      if (carry) done_q <= 1'b1;
    end
  end

endmodule
