// tb_redmule_scheduler: self-checking testbench of the scheduler.
//
// The scheduler is surrounded by small models of what it controls: FIFO
// and buffer occupancy counters for W, X and Z, a memory that grants every
// request at once, and a Z-buffer that fills with the store strobes and
// drains one row per cycle.  For a job that is not a multiple of the
// array (M=11, N=10, K=20) the testbench checks:
//  - the W, X and Z request streams (address, keep mask or strobe, skip)
//    against lists built independently from the tile order;
//  - that in every enabled step exactly the columns c with
//    (s - c*(P+1)) % T == 0 start a pass, and the W FIFO is never read empty;
//  - that store_o is high in exactly T steps per tile, with z_col_o
//    counting 0..T-1;
//  - busy during the job, one done pulse at the end, and the number of
//    enabled steps (passes*T + T).
module tb_redmule_scheduler;
  localparam int unsigned H = 4, L = 8, P = 3, D = P + 1, T = H * D;
  localparam int M = 11, N = 10, K = 20;
  localparam int XA = 'h100, WA = 'h1002, ZA = 'h2000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, en, x_release, accumulate, store, clear;
  logic [H-1:0] col_load, col_bank;
  logic [H-1:0][1:0] col_sel;
  logic [3:0] z_col;
  logic [2:0] w_cnt;
  logic [1:0] x_cnt;
  logic [1:0] x_bank_valid;
  logic z_buf_full, z_fifo_empty, stall;
  logic w_req, w_skip, x_req, x_skip, z_req, z_skip;
  logic [31:0] w_addr, x_addr, z_addr;
  logic [T-1:0] w_keep, x_keep, z_strb;
  int unsigned checks = 0, failures = 0;

  redmule_scheduler #(.H(H), .L(L), .P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .x_addr_i(XA), .w_addr_i(WA), .z_addr_i(ZA),
    .m_i(16'(M)), .n_i(16'(N)), .k_i(16'(K)), .busy_o(busy), .done_o(done),
    .en_o(en), .col_load_o(col_load), .col_sel_o(col_sel), .col_bank_o(col_bank),
    .x_release_o(x_release), .accumulate_o(accumulate), .store_o(store), .z_col_o(z_col),
    .clear_o(clear), .w_fifo_empty_i(w_cnt == 0), .w_fifo_count_i(w_cnt),
    .x_fifo_count_i(x_cnt), .x_bank_valid_i(x_bank_valid), .z_buf_full_i(z_buf_full),
    .z_buf_valid_i(z_buf_full), .z_fifo_empty_i(z_fifo_empty),
    .w_req_o(w_req), .w_addr_o(w_addr), .w_keep_o(w_keep), .w_skip_o(w_skip), .w_gnt_i(w_req),
    .x_req_o(x_req), .x_addr_o(x_addr), .x_keep_o(x_keep), .x_skip_o(x_skip),
    .x_gnt_i(x_req && !w_req),
    .z_req_o(z_req), .z_addr_o(z_addr), .z_strb_o(z_strb), .z_skip_o(z_skip),
    .z_gnt_i(z_req && !w_req && !x_req), .stall_o(stall));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected request streams: {addr, mask, skip}.
  typedef struct { int unsigned addr; logic [T-1:0] mask; bit skip; } rq_t;
  rq_t exp_w [$], exp_x [$], exp_z [$];

  function automatic logic [T-1:0] mask_upto(input int from, input int lim);
    logic [T-1:0] m;
    for (int e = 0; e < T; e++) m[e] = (from + e) < lim;
    return m;
  endfunction

  initial begin
    int mb_n, kb_n, np, nc;
    mb_n = (M + L - 1) / L; kb_n = (K + T - 1) / T; np = (N + H - 1) / H; nc = (N + T - 1) / T;
    for (int mb = 0; mb < mb_n; mb++)
      for (int kb = 0; kb < kb_n; kb++) begin
        for (int n = 0; n < np * H; n++)
          exp_w.push_back('{WA + 2 * (n * K + kb * T), mask_upto(kb * T, K), n >= N});
        for (int ch = 0; ch < nc; ch++)
          for (int r = 0; r < L; r++)
            exp_x.push_back('{XA + 2 * ((mb * L + r) * N + ch * T), mask_upto(ch * T, N),
                               mb * L + r >= M});
        for (int r = 0; r < L; r++)
          exp_z.push_back('{ZA + 2 * ((mb * L + r) * K + kb * T), mask_upto(kb * T, K),
                             mb * L + r >= M});
      end
  end

  // Models of the FIFOs and buffers.
  int wq, xq, xrows, xwb, zfill, zdrain, zq, steps, stores, n_done, ztile_col;
  logic w_rsp, x_rsp;

  always @(posedge clk) begin
    if (!rst_n) begin
      wq = 0; xq = 0; xrows = 0; xwb = 0; x_bank_valid = 0; zfill = 0; zdrain = 0; zq = 0;
      w_rsp = 0; x_rsp = 0;
    end else begin
      if (en && (|col_load)) wq--;
      if (w_rsp) wq++;
      w_rsp = w_req;
      if (en && x_release) x_bank_valid[col_bank[H-1]] = 1'b0;
      if (xq > 0 && !x_bank_valid[xwb]) begin
        xq--; xrows++;
        if (xrows == L) begin x_bank_valid[xwb] = 1'b1; xwb ^= 1; xrows = 0; end
      end
      if (x_rsp) xq++;
      x_rsp = x_req && !w_req;
      if (z_req && !w_req && !x_req) zq--;
      if (zdrain > 0 && zq < 2) begin zdrain--; zq++; end
      if (en && store) begin
        zfill++;
        if (zfill == T) begin zfill = 0; zdrain = L; end
      end
    end
    w_cnt <= 3'(wq);
    x_cnt <= 2'(xq);
  end
  assign z_buf_full   = (zdrain > 0);
  assign z_fifo_empty = (zq == 0);

  // Checks.
  always @(negedge clk) if (rst_n && busy) begin
    if (w_req) begin
      rq_t e;
      checks++;
      e = exp_w.pop_front();
      if (w_addr != e.addr || w_keep != e.mask || w_skip != e.skip) begin
        failures++;
        if (failures < 8) $display("W request %h/%h/%0d exp %h/%h/%0d", w_addr, w_keep, w_skip, e.addr, e.mask, e.skip);
      end
    end
    if (x_req && !w_req) begin
      rq_t e;
      checks++;
      e = exp_x.pop_front();
      if (x_addr != e.addr || x_keep != e.mask || x_skip != e.skip) begin
        failures++;
        if (failures < 8) $display("X request %h/%h/%0d exp %h/%h/%0d", x_addr, x_keep, x_skip, e.addr, e.mask, e.skip);
      end
    end
    if (z_req && !w_req && !x_req) begin
      rq_t e;
      checks++;
      e = exp_z.pop_front();
      if (z_addr != e.addr || z_strb != e.mask || z_skip != e.skip) begin
        failures++;
        if (failures < 8) $display("Z request %h/%h/%0d exp %h/%h/%0d", z_addr, z_strb, z_skip, e.addr, e.mask, e.skip);
      end
    end
    if (en) begin
      logic [H-1:0] exp_load;
      int passes;
      passes = ((M + L - 1) / L) * ((K + T - 1) / T) * ((N + H - 1) / H);
      for (int c = 0; c < H; c++)
        exp_load[c] = (steps >= c * D) && ((steps - c * D) % T == 0) && (steps - c * D < passes * T);
      checks++;
      if (col_load != exp_load || (|col_load && w_cnt == 0)) begin
        failures++;
        if (failures < 8) $display("step %0d: col_load %b exp %b", steps, col_load, exp_load);
      end
      if (store) begin
        checks++;
        if (z_col != 4'(ztile_col)) failures++;
        ztile_col = (ztile_col + 1) % T;
        stores++;
      end
      steps++;
    end
  end

  always @(posedge clk) if (done) n_done++;

  initial begin
    int passes;
    start = 0; steps = 0; stores = 0; n_done = 0; ztile_col = 0;
    passes = ((M + L - 1) / L) * ((K + T - 1) / T) * ((N + H - 1) / H);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("not busy after start"); end
    while (!done) @(negedge clk);
    @(negedge clk);
    @(negedge clk);
    checks += 6;
    if (busy) begin failures++; $display("busy after done"); end
    if (n_done != 1) begin failures++; $display("done pulses %0d", n_done); end
    if (steps != passes * T + T) begin failures++; $display("steps %0d exp %0d", steps, passes * T + T); end
    if (stores != ((M + L - 1) / L) * ((K + T - 1) / T) * T) begin failures++; $display("store steps %0d", stores); end
    if (exp_w.size() != 0 || exp_x.size() != 0) begin failures++; $display("loads missing"); end
    if (exp_z.size() != 0) begin failures++; $display("stores missing %0d", exp_z.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
