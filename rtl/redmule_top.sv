// redmule_top: the RedMulE accelerator, an FP16 matrix-multiplication
// engine (Z = X * W) that sits in a cluster of small RISC-V cores and works
// directly on the cluster's shared tightly-coupled data memory.
//
// Inside: the controller (register file written by the cores), the
// scheduler (tile order, control tokens, stall logic, address
// generation), the streamer (the 288-bit memory port), three FIFOs behind
// the streamer (W, X and Z), the W-buffer (one shift register per array
// column), the X-buffer (two banks of L x T elements and the per-FMA X
// registers), the Z-buffer (tile transposition for storing) and the
// datapath (L x H FP16 FMAs with P pipeline registers each).  With the
// defaults H=4, L=8, P=3 it has 32 FMAs and moves 256 bits (16 FP16
// values) per memory access over nine 32-bit ports.
//
// Interfaces: a peripheral slave port for the configuration registers, a
// master port towards the shallow branch of the cluster interconnect
// (single-cycle latency memory: read data one cycle after the grant), and
// the end-of-job event.  stall_o marks cycles in which a job is running
// but the array is held.
//
// The partition into these blocks and their connections follow the
// original block diagram; the FIFO depths (W 4, X 2, Z 2), the register
// map and the end-of-job event are choices of this implementation.
module redmule_top
  import redmule_pkg::*;
#(
  parameter int unsigned H = H_DEF,
  parameter int unsigned L = L_DEF,
  parameter int unsigned P = P_DEF,
  parameter int unsigned ID_W = 8,
  localparam int unsigned T  = H * (P + 1),
  localparam int unsigned NW = T / 2 + 1
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // configuration port (peripheral interconnect)
  input  logic               periph_req_i,
  input  logic [31:0]        periph_add_i,
  input  logic               periph_we_i,
  input  logic [31:0]        periph_wdata_i,
  input  logic [3:0]         periph_be_i,
  input  logic [ID_W-1:0]    periph_id_i,
  output logic               periph_gnt_o,
  output logic               periph_r_valid_o,
  output logic [31:0]        periph_r_data_o,
  output logic [ID_W-1:0]    periph_r_id_o,
  // memory port (shallow branch of the cluster interconnect)
  output logic               tcdm_req_o,
  output logic [31:0]        tcdm_add_o,
  output logic               tcdm_we_o,
  output logic [4*NW-1:0]    tcdm_be_o,
  output logic [32*NW-1:0]   tcdm_data_o,
  input  logic               tcdm_gnt_i,
  input  logic [32*NW-1:0]   tcdm_r_data_i,
  input  logic               tcdm_r_valid_i,
  // status
  output logic               evt_o,
  output logic               busy_o,
  output logic               stall_o
);

  localparam int unsigned D  = P + 1;
  localparam int unsigned DW = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned TW = (T > 1) ? $clog2(T) : 1;
  localparam int unsigned W_FIFO_DEPTH = 4;
  localparam int unsigned X_FIFO_DEPTH = 2;
  localparam int unsigned Z_FIFO_DEPTH = 2;

  // controller <-> scheduler
  logic             start, sched_busy, sched_done;
  logic [31:0]      x_addr, w_addr, z_addr;
  logic [DIM_W-1:0] m, n, k;

  redmule_controller #(.ID_W(ID_W)) i_controller (
    .clk_i, .rst_ni,
    .req_i(periph_req_i), .add_i(periph_add_i), .we_i(periph_we_i), .wdata_i(periph_wdata_i),
    .be_i(periph_be_i), .id_i(periph_id_i), .gnt_o(periph_gnt_o), .r_valid_o(periph_r_valid_o),
    .r_data_o(periph_r_data_o), .r_id_o(periph_r_id_o),
    .start_o(start), .x_addr_o(x_addr), .w_addr_o(w_addr), .z_addr_o(z_addr),
    .m_o(m), .n_o(n), .k_o(k), .busy_i(sched_busy), .done_i(sched_done), .evt_o(evt_o));

  assign busy_o = sched_busy;

  // scheduler <-> datapath, buffers, FIFOs, streamer
  logic                 en, x_release, accumulate, store, clear;
  logic [H-1:0]         col_load, col_bank;
  logic [H-1:0][DW-1:0] col_sel;
  logic [TW-1:0]        z_col;

  logic                 w_req, w_skip, w_gnt, w_rsp_valid;
  logic                 x_req, x_skip, x_gnt, x_rsp_valid;
  logic                 z_req, z_skip, z_gnt;
  logic [31:0]          w_req_addr, x_req_addr, z_req_addr;
  logic [T-1:0]         w_keep, x_keep, z_strb;
  fp16_t [T-1:0]        rsp_data;

  logic                 w_fifo_empty, w_fifo_full, w_pop;
  logic [$clog2(W_FIFO_DEPTH+1)-1:0] w_fifo_count;
  fp16_t [T-1:0]        w_head;
  logic                 x_fifo_empty, x_fifo_full, x_wr_ready;
  logic [$clog2(X_FIFO_DEPTH+1)-1:0] x_fifo_count;
  fp16_t [T-1:0]        x_head;
  logic [1:0]           x_bank_valid;
  logic                 z_fifo_empty, z_fifo_full;
  logic [$clog2(Z_FIFO_DEPTH+1)-1:0] z_fifo_count;
  fp16_t [T-1:0]        z_head, z_buf_row;
  logic                 z_buf_full, z_buf_valid, z_buf_take;

  fp16_t [L-1:0][H-1:0] x_ops;
  fp16_t [H-1:0]        w_ops;
  fp16_t [L-1:0]        z_out;

  redmule_scheduler #(.H(H), .L(L), .P(P), .W_FIFO_DEPTH(W_FIFO_DEPTH),
                      .X_FIFO_DEPTH(X_FIFO_DEPTH)) i_scheduler (
    .clk_i, .rst_ni,
    .start_i(start), .x_addr_i(x_addr), .w_addr_i(w_addr), .z_addr_i(z_addr),
    .m_i(m), .n_i(n), .k_i(k), .busy_o(sched_busy), .done_o(sched_done),
    .en_o(en), .col_load_o(col_load), .col_sel_o(col_sel), .col_bank_o(col_bank),
    .x_release_o(x_release), .accumulate_o(accumulate), .store_o(store), .z_col_o(z_col),
    .clear_o(clear),
    .w_fifo_empty_i(w_fifo_empty), .w_fifo_count_i(w_fifo_count), .x_fifo_count_i(x_fifo_count),
    .x_bank_valid_i(x_bank_valid), .z_buf_full_i(z_buf_full), .z_buf_valid_i(z_buf_valid),
    .z_fifo_empty_i(z_fifo_empty),
    .w_req_o(w_req), .w_addr_o(w_req_addr), .w_keep_o(w_keep), .w_skip_o(w_skip), .w_gnt_i(w_gnt),
    .x_req_o(x_req), .x_addr_o(x_req_addr), .x_keep_o(x_keep), .x_skip_o(x_skip), .x_gnt_i(x_gnt),
    .z_req_o(z_req), .z_addr_o(z_req_addr), .z_strb_o(z_strb), .z_skip_o(z_skip), .z_gnt_i(z_gnt),
    .stall_o(stall_o));

  redmule_streamer #(.H(H), .P(P)) i_streamer (
    .clk_i, .rst_ni,
    .w_req_i(w_req), .w_addr_i(w_req_addr), .w_keep_i(w_keep), .w_skip_i(w_skip),
    .w_gnt_o(w_gnt), .w_rsp_valid_o(w_rsp_valid),
    .x_req_i(x_req), .x_addr_i(x_req_addr), .x_keep_i(x_keep), .x_skip_i(x_skip),
    .x_gnt_o(x_gnt), .x_rsp_valid_o(x_rsp_valid),
    .rsp_data_o(rsp_data),
    .z_req_i(z_req), .z_addr_i(z_req_addr), .z_strb_i(z_strb), .z_skip_i(z_skip),
    .z_data_i(z_head), .z_gnt_o(z_gnt),
    .tcdm_req_o, .tcdm_add_o, .tcdm_we_o, .tcdm_be_o, .tcdm_data_o,
    .tcdm_gnt_i, .tcdm_r_data_i, .tcdm_r_valid_i);

  redmule_fifo #(.WIDTH(16*T), .DEPTH(W_FIFO_DEPTH)) i_w_fifo (
    .clk_i, .rst_ni, .clear_i(clear), .push_i(w_rsp_valid), .data_i(rsp_data),
    .pop_i(w_pop), .data_o(w_head), .empty_o(w_fifo_empty), .full_o(w_fifo_full),
    .count_o(w_fifo_count));

  redmule_fifo #(.WIDTH(16*T), .DEPTH(X_FIFO_DEPTH)) i_x_fifo (
    .clk_i, .rst_ni, .clear_i(clear), .push_i(x_rsp_valid), .data_i(rsp_data),
    .pop_i(x_wr_ready && !x_fifo_empty), .data_o(x_head), .empty_o(x_fifo_empty),
    .full_o(x_fifo_full), .count_o(x_fifo_count));

  assign z_buf_take = z_buf_valid && !z_fifo_full;

  redmule_fifo #(.WIDTH(16*T), .DEPTH(Z_FIFO_DEPTH)) i_z_fifo (
    .clk_i, .rst_ni, .clear_i(clear), .push_i(z_buf_take), .data_i(z_buf_row),
    .pop_i(z_gnt), .data_o(z_head), .empty_o(z_fifo_empty), .full_o(z_fifo_full),
    .count_o(z_fifo_count));

  redmule_w_buffer #(.H(H), .P(P)) i_w_buffer (
    .clk_i, .rst_ni, .en_i(en), .load_i(col_load), .row_i(w_head), .pop_o(w_pop), .w_o(w_ops));

  redmule_x_buffer #(.H(H), .L(L), .P(P)) i_x_buffer (
    .clk_i, .rst_ni, .clear_i(clear),
    .wr_valid_i(!x_fifo_empty), .wr_row_i(x_head), .wr_ready_o(x_wr_ready),
    .en_i(en), .load_i(col_load), .sel_i(col_sel), .bank_i(col_bank), .release_i(x_release),
    .bank_valid_o(x_bank_valid), .x_o(x_ops));

  redmule_datapath #(.H(H), .L(L), .P(P)) i_datapath (
    .clk_i, .rst_ni, .en_i(en), .x_i(x_ops), .w_i(w_ops), .accumulate_i(accumulate),
    .store_i(store), .z_o(z_out));

  redmule_z_buffer #(.H(H), .L(L), .P(P)) i_z_buffer (
    .clk_i, .rst_ni, .clear_i(clear), .en_i(en), .wr_i(store), .col_i(z_col), .z_i(z_out),
    .full_o(z_buf_full), .rd_valid_o(z_buf_valid), .rd_row_o(z_buf_row), .rd_ready_i(z_buf_take));

endmodule
