// tb_redmule_streamer: self-checking testbench of the streamer.
//
// The streamer is connected to the behavioural memory.  Random W loads, X
// loads and Z stores, at 16-bit aligned addresses (half of them not word
// aligned), with random keep masks, strobes and skip flags, are offered on
// the three channels and held until accepted; the memory withholds its
// grant in random cycles.  Checked: each load returns, one cycle after its
// acceptance, the T elements at its address with masked elements zero
// (skipped loads return zeros and never reach the memory); stores change
// exactly the strobed elements (a shadow copy of the store region is
// compared at the end); when W and another channel request together W is
// served first, and X before Z.
module tb_redmule_streamer;
  localparam int unsigned H = 4, P = 3, T = H * (P + 1), NW = T / 2 + 1, WORDS = 4096;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic w_req, w_skip, w_gnt, w_rsp, x_req, x_skip, x_gnt, x_rsp, z_req, z_skip, z_gnt;
  logic [31:0] w_addr, x_addr, z_addr;
  logic [T-1:0] w_keep, x_keep, z_strb;
  logic [T-1:0][15:0] rsp_data, z_data;
  logic m_req, m_we, m_gnt, m_rvalid, deny;
  logic [31:0] m_add;
  logic [4*NW-1:0] m_be;
  logic [32*NW-1:0] m_wdata, m_rdata;
  int unsigned checks = 0, failures = 0, n_prio = 0;

  redmule_streamer #(.H(H), .P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .w_req_i(w_req), .w_addr_i(w_addr), .w_keep_i(w_keep), .w_skip_i(w_skip), .w_gnt_o(w_gnt),
    .w_rsp_valid_o(w_rsp),
    .x_req_i(x_req), .x_addr_i(x_addr), .x_keep_i(x_keep), .x_skip_i(x_skip), .x_gnt_o(x_gnt),
    .x_rsp_valid_o(x_rsp), .rsp_data_o(rsp_data),
    .z_req_i(z_req), .z_addr_i(z_addr), .z_strb_i(z_strb), .z_skip_i(z_skip), .z_data_i(z_data),
    .z_gnt_o(z_gnt),
    .tcdm_req_o(m_req), .tcdm_add_o(m_add), .tcdm_we_o(m_we), .tcdm_be_o(m_be),
    .tcdm_data_o(m_wdata), .tcdm_gnt_i(m_gnt), .tcdm_r_data_i(m_rdata), .tcdm_r_valid_i(m_rvalid));

  tb_tcdm_model #(.NW(NW), .WORDS(WORDS)) i_mem (
    .clk_i(clk), .deny_i(deny), .req_i(m_req), .add_i(m_add), .we_i(m_we), .be_i(m_be),
    .data_i(m_wdata), .gnt_o(m_gnt), .r_data_o(m_rdata), .r_valid_o(m_rvalid));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Loads read from bytes 0..4095; stores go to bytes 8192..12287.
  logic [15:0] shadow [2048];
  function automatic logic [15:0] rd16(input int unsigned ba);
    logic [31:0] w;
    w = i_mem.mem[ba >> 2];
    return ba[1] ? w[31:16] : w[15:0];
  endfunction

  // expected response of the load accepted in the previous cycle
  logic               exp_valid, exp_is_w;
  logic [T-1:0][15:0] exp_data;

  function automatic logic [31:0] rnd_addr(input int unsigned base);
    return base + 2 * ($urandom % 1900);
  endfunction

  initial begin
    for (int i = 0; i < WORDS; i++) i_mem.mem[i] = $urandom;
    for (int i = 0; i < 2048; i++) shadow[i] = rd16(8192 + 2 * i);
    w_req = 0; x_req = 0; z_req = 0; deny = 0; exp_valid = 0;
    w_addr = 0; x_addr = 0; z_addr = 0; w_keep = 0; x_keep = 0; z_strb = 0;
    w_skip = 0; x_skip = 0; z_skip = 0; z_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // check the response of last cycle's load
      checks++;
      if ((w_rsp !== (exp_valid && exp_is_w)) || (x_rsp !== (exp_valid && !exp_is_w)) ||
          (exp_valid && rsp_data !== exp_data)) begin
        failures++;
        if (failures < 5) $display("cycle %0d: bad load response", cyc);
      end
      // new requests where the channel is idle
      if (!w_req && ($urandom % 3 == 0)) begin
        w_req = 1; w_addr = rnd_addr(0); w_keep = T'($urandom); w_skip = ($urandom % 8 == 0);
      end
      if (!x_req && ($urandom % 3 == 0)) begin
        x_req = 1; x_addr = rnd_addr(0); x_keep = '1; x_skip = ($urandom % 8 == 0);
      end
      if (!z_req && ($urandom % 3 == 0)) begin
        z_req = 1; z_addr = rnd_addr(8192); z_strb = T'($urandom); z_skip = ($urandom % 8 == 0);
        for (int e = 0; e < T; e++) z_data[e] = 16'($urandom);
      end
      deny = ($urandom % 4 == 0);
      #1;
      // priority
      if (w_req && (x_gnt || z_gnt)) begin failures++; $display("W not served first"); end
      if (x_req && z_gnt) begin failures++; $display("X not served before Z"); end
      if (w_req && (x_req || z_req)) n_prio++;
      checks++;
      // expected response for an accepted load
      exp_valid = w_gnt || x_gnt;
      exp_is_w  = w_gnt;
      for (int e = 0; e < T; e++) begin
        logic [31:0] a;
        logic        kp, sk;
        a  = w_gnt ? w_addr : x_addr;
        kp = w_gnt ? w_keep[e] : x_keep[e];
        sk = w_gnt ? w_skip : x_skip;
        exp_data[e] = (sk || !kp) ? 16'h0 : rd16(a + 2 * e);
      end
      if ((w_gnt && w_skip) || (x_gnt && x_skip) || (z_gnt && z_skip)) begin
        checks++;
        if (m_req) begin failures++; $display("skipped request reached the memory"); end
      end
      if (z_gnt && !z_skip)
        for (int e = 0; e < T; e++) if (z_strb[e]) shadow[(z_addr - 8192) / 2 + e] = z_data[e];
      @(posedge clk);
      #1;
      if (w_gnt) w_req = 0;
      if (x_gnt) x_req = 0;
      if (z_gnt) z_req = 0;
    end
    @(negedge clk);
    for (int i = 0; i < 2048; i++) begin
      checks++;
      if (rd16(8192 + 2 * i) !== shadow[i]) begin
        failures++;
        if (failures < 10) $display("store region halfword %0d: %h exp %h", i, rd16(8192 + 2 * i), shadow[i]);
      end
    end
    checks++;
    if (n_prio == 0) begin failures++; $display("no concurrent requests"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
