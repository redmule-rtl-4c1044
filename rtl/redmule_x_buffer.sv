// redmule_x_buffer: the X-buffer, holding L rows of T = H*(P+1) FP16 X
// elements (one 256-bit memory word per row) and the X operand of every
// FMA.
//
// A chunk of X is T consecutive elements of each of L consecutive X rows.
// Column c of the array uses, in the j-th pass over a chunk, element
// j*H + c of each row and holds it for the whole pass (T steps), so each
// column's L inputs change once every H*(P+1) cycles.  The element is
// latched in a per-FMA register in the step the column starts its pass
// (load_i[c]=1) and, in that step, also passed straight through.
//
// The buffer has two banks used alternately (ping-pong): while the array
// reads a chunk from one bank, the streamer can fill the other, one row
// per write (wr_valid_i/wr_ready_o), so that the X loads can be spread
// between the W loads.  A bank becomes valid when its L-th row is written
// and is released by release_i, issued when the last column latches its
// last element of the chunk.  Two banks are this design's choice; the
// paper gives the buffer's function and its refill policy, not its
// insides.
module redmule_x_buffer
  import redmule_pkg::*;
#(
  parameter int unsigned H = H_DEF,
  parameter int unsigned L = L_DEF,
  parameter int unsigned P = P_DEF,
  localparam int unsigned D = P + 1,
  localparam int unsigned T = H * D,
  localparam int unsigned DW = (D > 1) ? $clog2(D) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      clear_i,
  // write side (from the X FIFO)
  input  logic                      wr_valid_i,
  input  fp16_t [T-1:0]             wr_row_i,
  output logic                      wr_ready_o,
  // read side (to the datapath)
  input  logic                      en_i,
  input  logic [H-1:0]              load_i,     // column c starts a pass
  input  logic [H-1:0][DW-1:0]      sel_i,      // pass index within the chunk
  input  logic [H-1:0]              bank_i,     // bank of the chunk in use
  input  logic                      release_i,  // last use of bank_i[H-1]
  output logic [1:0]                bank_valid_o,
  output fp16_t [L-1:0][H-1:0]      x_o
);

  localparam int unsigned RW = (L > 1) ? $clog2(L) : 1;

  fp16_t [1:0][L-1:0][T-1:0] bank_q;
  logic  [1:0]               valid_q;
  logic                      wr_bank_q;
  logic  [RW-1:0]            wr_row_q;
  fp16_t [L-1:0][H-1:0]      xr_q;

  assign bank_valid_o = valid_q;
  assign wr_ready_o   = !valid_q[wr_bank_q];

  // Write side.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bank_q    <= '0;
      valid_q   <= '0;
      wr_bank_q <= 1'b0;
      wr_row_q  <= '0;
    end else if (clear_i) begin
      valid_q   <= '0;
      wr_bank_q <= 1'b0;
      wr_row_q  <= '0;
    end else begin
      if (en_i && release_i) valid_q[bank_i[H-1]] <= 1'b0;
      if (wr_valid_i && wr_ready_o) begin
        bank_q[wr_bank_q][wr_row_q] <= wr_row_i;
        if (wr_row_q == RW'(L - 1)) begin
          wr_row_q           <= '0;
          valid_q[wr_bank_q] <= 1'b1;
          wr_bank_q          <= !wr_bank_q;
        end else begin
          wr_row_q <= wr_row_q + RW'(1);
        end
      end
    end
  end

  // Read side: per-FMA operand registers.
  for (genvar c = 0; c < H; c++) begin : g_col
    for (genvar r = 0; r < L; r++) begin : g_row
      fp16_t sel_x;
      assign sel_x     = bank_q[bank_i[c]][r][32'(sel_i[c]) * H + c];
      assign x_o[r][c] = load_i[c] ? sel_x : xr_q[r][c];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni)                  xr_q[r][c] <= '0;
        else if (en_i && load_i[c])   xr_q[r][c] <= sel_x;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   en_i && load_i[0] |-> valid_q[bank_i[0]])
    else $error("redmule_x_buffer: chunk read from an empty bank");

endmodule
