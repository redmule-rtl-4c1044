// redmule_z_buffer: the Z-buffer, collecting the finished elements of one
// Z tile (L rows by T = H*(P+1) columns) and handing them out row by row.
//
// While a tile's last pass leaves the array, one Z column (one element per
// row) arrives per enabled step (wr_i, col_i, z_i).  When column T-1 has
// arrived the buffer is full and offers its rows, one T-element row (one
// 256-bit memory word) at a time, on rd_valid_o/rd_row_o; rd_ready_i takes
// a row.  After the L-th row it is empty again.  full_o tells the
// scheduler to stall the array if the next tile finishes before the
// buffer has been emptied.  The transposition from columns to rows is the
// buffer's job in the paper; its single-bank structure is this design's
// choice (the Z FIFO behind it adds the slack).
module redmule_z_buffer
  import redmule_pkg::*;
#(
  parameter int unsigned H = H_DEF,
  parameter int unsigned L = L_DEF,
  parameter int unsigned P = P_DEF,
  localparam int unsigned T = H * (P + 1),
  localparam int unsigned TW = (T > 1) ? $clog2(T) : 1
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               clear_i,
  input  logic               en_i,
  input  logic               wr_i,
  input  logic [TW-1:0]      col_i,
  input  fp16_t [L-1:0]      z_i,
  output logic               full_o,
  output logic               rd_valid_o,
  output fp16_t [T-1:0]      rd_row_o,
  input  logic               rd_ready_i
);

  localparam int unsigned RW = (L > 1) ? $clog2(L) : 1;

  fp16_t [L-1:0][T-1:0] zb_q;
  logic                 full_q;
  logic [RW-1:0]        rd_row_q;

  assign full_o     = full_q;
  assign rd_valid_o = full_q;
  assign rd_row_o   = zb_q[rd_row_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      zb_q     <= '0;
      full_q   <= 1'b0;
      rd_row_q <= '0;
    end else if (clear_i) begin
      full_q   <= 1'b0;
      rd_row_q <= '0;
    end else begin
      if (en_i && wr_i && !full_q) begin
        for (int unsigned r = 0; r < L; r++) zb_q[r][col_i] <= z_i[r];
        if (col_i == TW'(T - 1)) full_q <= 1'b1;
      end
      if (full_q && rd_ready_i) begin
        if (rd_row_q == RW'(L - 1)) begin
          rd_row_q <= '0;
          full_q   <= 1'b0;
        end else begin
          rd_row_q <= rd_row_q + RW'(1);
        end
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) !(en_i && wr_i && full_q))
    else $error("redmule_z_buffer: write while full");

endmodule
