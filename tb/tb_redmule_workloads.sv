// tb_redmule_workloads: the accelerator at its default size (H=4, L=8,
// P=3) on the matrix sizes of the published performance sweep and on
// GEMM shapes of the TinyMLPerf AutoEncoder.
//
// Same harness as tb_redmule_top (behavioural shared memory, jobs
// programmed through the peripheral port, Z compared bit-exactly with a
// sequential chain of reference FMAs and a guard zone after Z), but with
// the memory always granting.  The sizes M x N x K are:
//  - 8x8x8, 16x16x20, 24x32x32, 24x48x64, 32x48x64, 64x64x64, the sweep
//    over which the engine is expected to approach 32 MAC/cycle;
//  - AutoEncoder layer shapes with batch 1 (K=1: 128x8x1, 8x128x1,
//    128x128x1) and batch 16 (8x128x16, 128x8x16), the layer widths
//    640/128/8 being scaled to the 64 kB memory model where needed.
// For every job the cycle count must stay within 5% + 64 cycles of the
// padded ideal ceil(M/8)*ceil(N/4)*ceil(K/16)*16; the 64 cycles cover the
// fixed cost of the X preload, the pipeline drain and the Z store.  The
// printed utilization shows how much of the array small or thin (K=1)
// shapes leave idle.
module tb_redmule_workloads;
  import tb_fp16_pkg::*;
  import redmule_pkg::*;

  localparam int unsigned NW = 9;
  localparam int unsigned WORDS = 16384;
  localparam int unsigned MAXE = 4096;   // elements per matrix region

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               p_req, p_we, p_gnt, p_rvalid;
  logic [31:0]        p_add, p_wdata, p_rdata;
  logic [3:0]         p_be;
  logic [7:0]         p_id, p_rid;
  logic               m_req, m_we, m_gnt, m_rvalid, deny;
  logic [31:0]        m_add;
  logic [4*NW-1:0]    m_be;
  logic [32*NW-1:0]   m_wdata, m_rdata;
  logic               evt, busy, stall;

  int unsigned checks = 0, failures = 0;

  redmule_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .periph_req_i(p_req), .periph_add_i(p_add), .periph_we_i(p_we), .periph_wdata_i(p_wdata),
    .periph_be_i(p_be), .periph_id_i(p_id), .periph_gnt_o(p_gnt), .periph_r_valid_o(p_rvalid),
    .periph_r_data_o(p_rdata), .periph_r_id_o(p_rid),
    .tcdm_req_o(m_req), .tcdm_add_o(m_add), .tcdm_we_o(m_we), .tcdm_be_o(m_be),
    .tcdm_data_o(m_wdata), .tcdm_gnt_i(m_gnt), .tcdm_r_data_i(m_rdata), .tcdm_r_valid_i(m_rvalid),
    .evt_o(evt), .busy_o(busy), .stall_o(stall));

  tb_tcdm_model #(.NW(NW), .WORDS(WORDS)) i_mem (
    .clk_i(clk), .deny_i(deny), .req_i(m_req), .add_i(m_add), .we_i(m_we), .be_i(m_be),
    .data_i(m_wdata), .gnt_o(m_gnt), .r_data_o(m_rdata), .r_valid_o(m_rvalid));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------------
  // Mechanism counters.
  int unsigned n_stall, n_stall_w, n_stall_x, n_stall_z, n_deny, n_feedback, n_restart,
               n_skip_load, n_skip_store, n_masked, n_misaligned, n_x_between_w,
               n_z_between_w, n_bank_swap, n_partial_store;
  int          last_kind, prev_kind;   // 0 none, 1 W, 2 X, 3 Z

  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (stall && dut.i_scheduler.w_need && dut.w_fifo_empty) n_stall_w++;
    if (stall && dut.i_scheduler.x_need && !dut.x_bank_valid[dut.i_scheduler.tok0.xpar]) n_stall_x++;
    if (stall && dut.i_scheduler.z_need && dut.z_buf_full) n_stall_z++;
    if (m_req && !m_gnt) n_deny++;
    if (dut.en && dut.col_load[0] && dut.accumulate) n_feedback++;
    if (dut.en && dut.col_load[0] && !dut.accumulate) n_restart++;
    if ((dut.w_gnt && dut.w_skip) || (dut.x_gnt && dut.x_skip)) n_skip_load++;
    if (dut.z_gnt && dut.z_skip) n_skip_store++;
    if ((dut.w_gnt && !dut.w_skip && !(&dut.w_keep)) ||
        (dut.x_gnt && !dut.x_skip && !(&dut.x_keep))) n_masked++;
    if (m_req && m_gnt && dut.i_streamer.addr[1]) n_misaligned++;
    if (m_req && m_gnt && m_we && (m_be != '1)) n_partial_store++;
    if (dut.en && dut.x_release) n_bank_swap++;
    if (dut.w_gnt || dut.x_gnt || dut.z_gnt) begin
      int kind;
      kind = dut.w_gnt ? 1 : (dut.x_gnt ? 2 : 3);
      if (kind == 1 && last_kind == 2 && prev_kind == 1) n_x_between_w++;
      if (kind == 1 && last_kind == 3 && prev_kind == 1) n_z_between_w++;
      prev_kind = last_kind;
      last_kind = kind;
    end
  end

  // ---------------------------------------------------------------------
  // Peripheral port.
  task automatic reg_write(input logic [7:0] off, input logic [31:0] val);
    @(negedge clk);
    p_req = 1'b1; p_we = 1'b1; p_add = {24'h0, off}; p_wdata = val; p_be = 4'hF;
    @(negedge clk);
    p_req = 1'b0; p_we = 1'b0;
  endtask

  task automatic reg_read(input logic [7:0] off, output logic [31:0] val);
    @(negedge clk);
    p_req = 1'b1; p_we = 1'b0; p_add = {24'h0, off}; p_id = 8'h5A;
    @(negedge clk);
    p_req = 1'b0;
    if (!p_rvalid || p_rid != 8'h5A) begin
      failures++;
      $display("peripheral read response missing");
    end
    checks++;
    val = p_rdata;
  endtask

  // ---------------------------------------------------------------------
  // Memory access helpers (byte addresses, FP16 elements).
  function automatic logic [15:0] mem_rd16(input int unsigned ba);
    logic [31:0] w;
    w = i_mem.mem[(ba >> 2) % WORDS];
    return ba[1] ? w[31:16] : w[15:0];
  endfunction

  task automatic mem_wr16(input int unsigned ba, input logic [15:0] v);
    if (ba[1]) i_mem.mem[(ba >> 2) % WORDS][31:16] = v;
    else       i_mem.mem[(ba >> 2) % WORDS][15:0]  = v;
  endtask

  function automatic logic [15:0] rnd_fp16();
    logic [15:0] v;
    v = 16'($urandom);
    v[14:10] = 5'(10 + $urandom % 8);
    return v;
  endfunction

  // ---------------------------------------------------------------------
  // One job.
  task automatic run_job(input int m, input int n, input int k,
                         input int unsigned xa, input int unsigned wa, input int unsigned za,
                         input int deny_pct, input bit check_cycles);
    logic [15:0] xs [];
    logic [15:0] ws [];
    logic [15:0] zr;
    logic [31:0] st;
    int          np, cycles, zerr;
    xs = new[m * n];
    ws = new[n * k];
    np = (n + 3) / 4;
    for (int i = 0; i < m * n; i++) begin xs[i] = rnd_fp16(); mem_wr16(xa + 2 * i, xs[i]); end
    for (int i = 0; i < n * k; i++) begin ws[i] = rnd_fp16(); mem_wr16(wa + 2 * i, ws[i]); end
    // Fill Z and a guard zone after it with a marker.
    for (int i = 0; i < m * k + 16; i++) mem_wr16(za + 2 * i, 16'hDEAD);

    reg_write(REG_X_ADDR, xa);
    reg_write(REG_W_ADDR, wa);
    reg_write(REG_Z_ADDR, za);
    reg_write(REG_M, m);
    reg_write(REG_N, n);
    reg_write(REG_K, k);
    reg_read(REG_X_ADDR, st);
    if (st != xa) begin failures++; $display("X_ADDR read back %h", st); end
    fork
      begin
        while (1) begin
          @(negedge clk);
          deny = ($urandom % 100) < deny_pct;
        end
      end
      begin
        reg_write(REG_TRIGGER, 0);
        cycles = 0;
        reg_read(REG_STATUS, st);
        checks++;
        if (st[0] !== 1'b1) begin failures++; $display("STATUS not busy during job"); end
        cycles = 2;
        while (!evt) begin @(posedge clk); cycles++; end
      end
    join_any
    disable fork;
    deny = 1'b0;
    @(negedge clk);
    reg_read(REG_STATUS, st);
    checks++;
    if (st[0] !== 1'b0) begin failures++; $display("STATUS busy after job"); end

    zerr = 0;
    for (int i = 0; i < m; i++) begin
      for (int j = 0; j < k; j++) begin
        zr = 16'h0000;
        for (int l = 0; l < np * 4; l++)
          zr = fma_ref(l < n ? xs[i * n + l] : 16'h0, l < n ? ws[l * k + j] : 16'h0, zr);
        checks++;
        if (mem_rd16(za + 2 * (i * k + j)) !== zr) begin
          failures++;
          zerr++;
          if (zerr < 6) $display("job %0dx%0dx%0d Z[%0d][%0d]=%h exp %h", m, n, k, i, j,
                                 mem_rd16(za + 2 * (i * k + j)), zr);
        end
      end
    end
    for (int i = m * k; i < m * k + 16; i++) begin
      checks++;
      if (mem_rd16(za + 2 * i) !== 16'hDEAD) begin
        failures++;
        $display("job %0dx%0dx%0d wrote past Z at element %0d", m, n, k, i);
      end
    end
    $display("job %0dx%0dx%0d: %0d cycles, ideal %0d, utilization %0.1f%%", m, n, k, cycles,
             (m * n * k) / 32, 100.0 * real'(m * n * k) / 32.0 / real'(cycles));
    if (check_cycles) begin
      int padded;
      padded = ((m + 7) / 8) * ((n + 3) / 4) * ((k + 15) / 16) * 16;
      checks++;
      if (real'(cycles) > real'(padded) * 1.05 + 64.0) begin
        failures++;
        $display("job %0dx%0dx%0d too slow", m, n, k);
      end
    end
  endtask

  initial begin
    p_req = 0; p_we = 0; p_add = 0; p_wdata = 0; p_be = 0; p_id = 0; deny = 0;
    last_kind = 0; prev_kind = 0;
    for (int i = 0; i < WORDS; i++) i_mem.mem[i] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    run_job(8, 8, 8, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(16, 16, 20, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(24, 32, 32, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(24, 48, 64, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(32, 48, 64, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(64, 64, 64, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(128, 8, 1, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(8, 128, 1, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(128, 128, 1, 32'h6000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(8, 128, 16, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    run_job(128, 8, 16, 32'h0000, 32'h2000, 32'h4000, 0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
