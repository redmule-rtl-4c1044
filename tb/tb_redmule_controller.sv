// tb_redmule_controller: self-checking testbench of the register file.
//
// Writes random values (with random byte enables) to the six
// configuration registers and reads them back through the peripheral
// port, checking the one-cycle read latency and the returned id.  A write
// to TRIGGER must give one start pulse; while the (modelled) job runs,
// STATUS must read busy and writes to the registers and to TRIGGER must be
// ignored; the scheduler's done pulse must appear on evt_o.
module tb_redmule_controller;
  import redmule_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        req, we, gnt, rvalid, start, busy, done, evt;
  logic [31:0] add, wdata, rdata, xa, wa, za;
  logic [3:0]  be;
  logic [7:0]  id, rid;
  logic [15:0] m, n, k;
  int unsigned checks = 0, failures = 0, starts = 0;

  redmule_controller dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .add_i(add), .we_i(we), .wdata_i(wdata),
    .be_i(be), .id_i(id), .gnt_o(gnt), .r_valid_o(rvalid), .r_data_o(rdata), .r_id_o(rid),
    .start_o(start), .x_addr_o(xa), .w_addr_o(wa), .z_addr_o(za), .m_o(m), .n_o(n), .k_o(k),
    .busy_i(busy), .done_i(done), .evt_o(evt));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (start) starts++;

  task automatic acc(input logic w, input logic [7:0] off, input logic [31:0] d,
                     input logic [3:0] b, output logic [31:0] r);
    @(negedge clk);
    req = 1; we = w; add = {24'h0, off}; wdata = d; be = b; id = 8'($urandom);
    #1;
    checks++;
    if (!gnt) failures++;
    @(negedge clk);
    req = 0;
    checks++;
    if (!rvalid || rid != id) begin failures++; $display("response missing"); end
    r = rdata;
  endtask

  logic [31:0] shadow [6];
  logic [7:0]  offs [6] = '{REG_X_ADDR, REG_W_ADDR, REG_Z_ADDR, REG_M, REG_N, REG_K};

  initial begin
    logic [31:0] r, v;
    logic [3:0]  b;
    req = 0; we = 0; add = 0; wdata = 0; be = 0; id = 0; busy = 0; done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6; i++) shadow[i] = 0;
    for (int it = 0; it < 60; it++) begin
      int j;
      j = $urandom % 6;
      v = $urandom;
      b = 4'($urandom);
      acc(1, offs[j], v, b, r);
      for (int q = 0; q < 4; q++) if (b[q]) shadow[j][q*8 +: 8] = v[q*8 +: 8];
      j = $urandom % 6;
      acc(0, offs[j], 0, 0, r);
      checks++;
      if (r != shadow[j]) begin failures++; $display("reg %0d read %h exp %h", j, r, shadow[j]); end
    end
    checks += 6;
    if (xa != shadow[0] || wa != shadow[1] || za != shadow[2]) failures++;
    if (m != shadow[3][15:0] || n != shadow[4][15:0] || k != shadow[5][15:0]) failures++;
    // start a job
    acc(1, REG_TRIGGER, 0, 4'hF, r);
    busy = 1;
    @(negedge clk);
    checks++;
    if (starts != 1) begin failures++; $display("start pulses %0d", starts); end
    acc(0, REG_STATUS, 0, 0, r);
    if (r[0] != 1'b1) begin failures++; $display("STATUS not busy"); end
    acc(1, REG_X_ADDR, 32'h1234_5678, 4'hF, r);
    acc(1, REG_TRIGGER, 0, 4'hF, r);
    @(negedge clk);
    checks += 2;
    if (xa != shadow[0]) begin failures++; $display("register written while busy"); end
    if (starts != 1) begin failures++; $display("start while busy"); end
    @(negedge clk);
    done = 1;
    #1;
    checks++;
    if (!evt) begin failures++; $display("no event"); end
    @(negedge clk);
    done = 0; busy = 0;
    acc(0, REG_STATUS, 0, 0, r);
    checks++;
    if (r[0] != 1'b0) begin failures++; $display("STATUS busy after job"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
