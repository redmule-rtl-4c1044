// redmule_scheduler: sequences one matrix multiplication Z = X * W on the
// RedMulE array, with X of M x N, W of N x K and Z of M x K FP16 elements,
// all stored row by row.
//
// Work split.  Z is computed in tiles of L rows by T = H*(P+1) columns; the
// tiles are visited row-block by row-block (outer) and column-block by
// column-block (inner).  A tile takes NP = ceil(N/H) passes; in pass q,
// column c of the array multiplies X[m][q*H+c] by the T elements of row
// q*H+c of W, so each pass adds H terms to each of the L*T partial sums
// circulating in the array.  X is delivered in chunks of T elements per
// row, each used for up to P+1 passes.  Sizes that are not multiples of
// the array are padded with zeros: rows of X or W outside the matrix are
// not read, elements past the end of a row are masked to zero, and Z
// elements outside the matrix are not written.
//
// Control tokens.  Every enabled step the first column is given a token
// (Z column t, pass number, chunk and tile boundaries).  The tokens travel
// through a delay line of T stages; column c uses the token delayed c*(P+1)
// steps and the array output the token delayed T steps, so each control
// signal reaches each column exactly when the data it describes does.
//
// Stall.  The whole array advances only when en_o is high.  en_o drops
// when a column must start a pass and the W FIFO is empty, when the first
// column must start a chunk whose X bank is not loaded yet, or when a tile
// must be written to the Z-buffer before that buffer has been emptied.
//
// Memory traffic.  Three address generators walk the same tile order: W
// rows (one per column per pass, kept up to the W FIFO depth ahead), X
// rows (L per chunk) and Z rows (L per tile).  Their requests go to the
// streamer, which gives priority to W.
//
// The dataflow (X held for H*(P+1) cycles, W streamed and broadcast per
// column, feedback from the last column, Z stored at the end of a tile,
// X loads and Z stores interleaved between W loads) follows the paper; the
// tile order, the token mechanism, the stall rules and the padding are
// this design's choices.  busy_o is high from start_i until the last Z row
// has been accepted by the memory; done_o pulses then.
module redmule_scheduler
  import redmule_pkg::*;
#(
  parameter int unsigned H = H_DEF,
  parameter int unsigned L = L_DEF,
  parameter int unsigned P = P_DEF,
  parameter int unsigned W_FIFO_DEPTH = 4,
  parameter int unsigned X_FIFO_DEPTH = 2,
  localparam int unsigned D  = P + 1,
  localparam int unsigned T  = H * D,
  localparam int unsigned DW = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned TW = (T > 1) ? $clog2(T) : 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // job
  input  logic                    start_i,
  input  logic [31:0]             x_addr_i,
  input  logic [31:0]             w_addr_i,
  input  logic [31:0]             z_addr_i,
  input  logic [DIM_W-1:0]        m_i,
  input  logic [DIM_W-1:0]        n_i,
  input  logic [DIM_W-1:0]        k_i,
  output logic                    busy_o,
  output logic                    done_o,
  // datapath and buffers
  output logic                    en_o,
  output logic [H-1:0]            col_load_o,
  output logic [H-1:0][DW-1:0]    col_sel_o,
  output logic [H-1:0]            col_bank_o,
  output logic                    x_release_o,
  output logic                    accumulate_o,
  output logic                    store_o,
  output logic [TW-1:0]           z_col_o,
  output logic                    clear_o,
  input  logic                    w_fifo_empty_i,
  input  logic [$clog2(W_FIFO_DEPTH+1)-1:0] w_fifo_count_i,
  input  logic [$clog2(X_FIFO_DEPTH+1)-1:0] x_fifo_count_i,
  input  logic [1:0]              x_bank_valid_i,
  input  logic                    z_buf_full_i,
  input  logic                    z_buf_valid_i,
  input  logic                    z_fifo_empty_i,
  // streamer channels
  output logic                    w_req_o,
  output logic [31:0]             w_addr_o,
  output logic [T-1:0]            w_keep_o,
  output logic                    w_skip_o,
  input  logic                    w_gnt_i,
  output logic                    x_req_o,
  output logic [31:0]             x_addr_o,
  output logic [T-1:0]            x_keep_o,
  output logic                    x_skip_o,
  input  logic                    x_gnt_i,
  output logic                    z_req_o,
  output logic [31:0]             z_addr_o,
  output logic [T-1:0]            z_strb_o,
  output logic                    z_skip_o,
  input  logic                    z_gnt_i,
  // event counters for observation: stalled steps
  output logic                    stall_o
);

  typedef struct packed {
    logic          valid;
    logic          first;       // t == 0: the column starts a pass
    logic [TW-1:0] t;           // Z column within the tile
    logic [DW-1:0] pi;          // pass index within the X chunk
    logic          xpar;        // X-buffer bank of the chunk
    logic          chunk_last;  // last pass over this X chunk
    logic          tile_first;  // first pass of a tile
    logic          tile_last;   // last pass of a tile
  } token_t;

  // Derived loop bounds.
  logic [DIM_W-1:0] mb_n, kb_n, np_n, nc_n;
  logic [31:0]      tiles_n;
  always_comb begin
    mb_n    = DIM_W'((32'(m_i) + L - 1) / L);
    kb_n    = DIM_W'((32'(k_i) + T - 1) / T);
    np_n    = DIM_W'((32'(n_i) + H - 1) / H);
    nc_n    = DIM_W'((32'(n_i) + T - 1) / T);
    tiles_n = 32'(mb_n) * 32'(kb_n);
  end

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state_q;

  logic empty_job;
  assign empty_job = (m_i == '0) || (n_i == '0) || (k_i == '0);

  // ---------------------------------------------------------------------
  // Token generation for the first column.
  logic [TW-1:0]    t_q;
  logic [DIM_W-1:0] p_q;
  logic [DW-1:0]    pi_q;
  logic             xpar_q;
  logic [31:0]      tile_q;
  logic             gen_q;
  logic [TW:0]      flush_q;
  token_t           tok0;
  token_t           tokd_q [1:T];
  token_t           tok [0:T];

  always_comb begin
    tok0.valid      = gen_q;
    tok0.first      = (t_q == '0);
    tok0.t          = t_q;
    tok0.pi         = pi_q;
    tok0.xpar       = xpar_q;
    tok0.tile_last  = (p_q == np_n - DIM_W'(1));
    tok0.chunk_last = (pi_q == DW'(D - 1)) || tok0.tile_last;
    tok0.tile_first = (p_q == '0);
    tok[0] = tok0;
    for (int unsigned i = 1; i <= T; i++) tok[i] = tokd_q[i];
  end

  // ---------------------------------------------------------------------
  // Stall logic and column controls.
  logic w_need, x_need, z_need;
  always_comb begin
    w_need = 1'b0;
    for (int unsigned c = 0; c < H; c++) begin
      col_load_o[c] = tok[c*D].valid && tok[c*D].first;
      col_sel_o[c]  = tok[c*D].pi;
      col_bank_o[c] = tok[c*D].xpar;
      w_need        = w_need || col_load_o[c];
    end
    x_need       = col_load_o[0];
    x_release_o  = col_load_o[H-1] && tok[(H-1)*D].chunk_last;
    accumulate_o = !tok0.tile_first;
    store_o      = tok[T].valid && tok[T].tile_last;
    z_col_o      = tok[T].t;
    z_need       = store_o;
    stall_o      = (state_q == S_RUN) &&
                   ((w_need && w_fifo_empty_i) ||
                    (x_need && !x_bank_valid_i[tok0.xpar]) ||
                    (z_need && z_buf_full_i));
    // The array runs while tokens are issued and for T more steps, which
    // bring the last tile out; then it is frozen until the next job.
    en_o         = (state_q == S_RUN) && (gen_q || (flush_q != (TW+1)'(T))) && !stall_o;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned i = 1; i <= T; i++) tokd_q[i] <= '0;
    end else if (clear_o) begin
      for (int unsigned i = 1; i <= T; i++) tokd_q[i] <= '0;
    end else if (en_o) begin
      tokd_q[1] <= tok0;
      for (int unsigned i = 2; i <= T; i++) tokd_q[i] <= tokd_q[i-1];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      t_q <= '0; p_q <= '0; pi_q <= '0; xpar_q <= 1'b0; tile_q <= '0;
      gen_q <= 1'b0; flush_q <= '0;
    end else if (clear_o) begin
      t_q <= '0; p_q <= '0; pi_q <= '0; xpar_q <= 1'b0; tile_q <= '0;
      gen_q <= 1'b1; flush_q <= '0;
    end else if (en_o) begin
      if (gen_q) begin
        if (t_q == TW'(T - 1)) begin
          t_q <= '0;
          if (tok0.chunk_last) begin
            pi_q   <= '0;
            xpar_q <= !xpar_q;
          end else begin
            pi_q <= pi_q + DW'(1);
          end
          if (tok0.tile_last) begin
            p_q <= '0;
            if (tile_q == tiles_n - 32'd1) gen_q <= 1'b0;
            else tile_q <= tile_q + 32'd1;
          end else begin
            p_q <= p_q + DIM_W'(1);
          end
        end else begin
          t_q <= t_q + TW'(1);
        end
      end else if (flush_q != (TW+1)'(T)) begin
        flush_q <= flush_q + (TW+1)'(1);
      end
    end
  end

  // ---------------------------------------------------------------------
  // Address generators.
  logic [3:0][DIM_W-1:0] w_idx, x_idx, z_idx;
  logic                  w_done, x_done, z_done;
  logic                  w_inflight_q, x_inflight_q;

  redmule_loop_counter #(.W(DIM_W)) i_w_loop (
    .clk_i, .rst_ni, .clear_i(clear_o), .next_i(w_gnt_i),
    .lim_i({DIM_W'(H), np_n, kb_n, mb_n}), .idx_o(w_idx), .done_o(w_done));
  redmule_loop_counter #(.W(DIM_W)) i_x_loop (
    .clk_i, .rst_ni, .clear_i(clear_o), .next_i(x_gnt_i),
    .lim_i({DIM_W'(L), nc_n, kb_n, mb_n}), .idx_o(x_idx), .done_o(x_done));
  redmule_loop_counter #(.W(DIM_W)) i_z_loop (
    .clk_i, .rst_ni, .clear_i(clear_o), .next_i(z_gnt_i),
    .lim_i({DIM_W'(L), DIM_W'(1), kb_n, mb_n}), .idx_o(z_idx), .done_o(z_done));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_inflight_q <= 1'b0;
      x_inflight_q <= 1'b0;
    end else begin
      w_inflight_q <= w_gnt_i;
      x_inflight_q <= x_gnt_i;
    end
  end

  always_comb begin
    logic [31:0] n_row, k_col, m_row, n_col;
    // W: row n = p*H + c, columns from kb*T.
    n_row    = 32'(w_idx[2]) * H + 32'(w_idx[3]);
    k_col    = 32'(w_idx[1]) * T;
    w_addr_o = w_addr_i + ((n_row * 32'(k_i) + k_col) << 1);
    w_skip_o = (n_row >= 32'(n_i));
    for (int unsigned e = 0; e < T; e++) w_keep_o[e] = (k_col + e < 32'(k_i));
    w_req_o  = (state_q == S_RUN) && !w_done &&
               (32'(w_fifo_count_i) + 32'(w_inflight_q) < W_FIFO_DEPTH);
    // X: row m = mb*L + r, columns from chunk*T.
    m_row    = 32'(x_idx[0]) * L + 32'(x_idx[3]);
    n_col    = 32'(x_idx[2]) * T;
    x_addr_o = x_addr_i + ((m_row * 32'(n_i) + n_col) << 1);
    x_skip_o = (m_row >= 32'(m_i));
    for (int unsigned e = 0; e < T; e++) x_keep_o[e] = (n_col + e < 32'(n_i));
    x_req_o  = (state_q == S_RUN) && !x_done &&
               (32'(x_fifo_count_i) + 32'(x_inflight_q) < X_FIFO_DEPTH);
  end

  always_comb begin
    logic [31:0] m_row, k_col;
    m_row    = 32'(z_idx[0]) * L + 32'(z_idx[3]);
    k_col    = 32'(z_idx[1]) * T;
    z_addr_o = z_addr_i + ((m_row * 32'(k_i) + k_col) << 1);
    z_skip_o = (m_row >= 32'(m_i));
    for (int unsigned e = 0; e < T; e++) z_strb_o[e] = (k_col + e < 32'(k_i));
    z_req_o  = (state_q == S_RUN) && !z_done && !z_fifo_empty_i;
  end

  // ---------------------------------------------------------------------
  // Job state.
  logic finished;
  assign finished = !gen_q && (flush_q == (TW+1)'(T)) && z_done && !z_buf_valid_i &&
                    z_fifo_empty_i;
  assign clear_o  = (state_q == S_IDLE) && start_i && !empty_job;
  assign busy_o   = (state_q != S_IDLE);
  assign done_o   = (state_q == S_DONE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
    end else begin
      unique case (state_q)
        S_IDLE:  if (start_i) state_q <= empty_job ? S_DONE : S_RUN;
        S_RUN:   if (finished) state_q <= S_DONE;
        S_DONE:  state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
