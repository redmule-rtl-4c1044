// redmule_streamer: RedMulE's memory access unit on the shallow branch of
// the cluster interconnect, a single 288-bit port made of nine adjacent
// 32-bit memory ports, used alternately for loads and stores.
//
// It serves three channels: W-row loads, X-row loads and Z-row stores.
// Each request moves T = H*(P+1) FP16 elements (256 bits) that start at any
// 16-bit aligned byte address.  The port always accesses the nine words
// from the word containing that address, and the data are shifted by one
// element when the address is not word aligned: this is what the ninth,
// extra 32-bit port is for.  Load requests carry a keep mask (elements
// outside the matrix read as zero) and may be marked skip (a row entirely
// outside the matrix: zeros are returned without a memory access); store
// requests carry a per-element strobe and may be marked skip (dropped).
//
// Arbitration is by fixed priority, W loads first, then X loads, then Z
// stores.  With the W FIFO full, the W channel stops requesting, so X
// loads and Z stores fall in between two W loads, as in the access
// schedule the paper shows; the priority order itself is this design's
// choice.
//
// Timing: a request is accepted (its *_gnt_o high) in the cycle the port
// grants it, or at once when skipped.  Following the single-cycle latency
// of the cluster memory, the read data come back in the next cycle
// (tcdm_r_valid_i) and are returned on the matching *_rsp_valid_o in that
// same cycle.
module redmule_streamer
  import redmule_pkg::*;
#(
  parameter int unsigned H = H_DEF,
  parameter int unsigned P = P_DEF,
  localparam int unsigned T  = H * (P + 1),
  localparam int unsigned NW = T / 2 + 1     // 32-bit words on the port
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // W load channel
  input  logic                 w_req_i,
  input  logic [31:0]          w_addr_i,
  input  logic [T-1:0]         w_keep_i,
  input  logic                 w_skip_i,
  output logic                 w_gnt_o,
  output logic                 w_rsp_valid_o,
  // X load channel
  input  logic                 x_req_i,
  input  logic [31:0]          x_addr_i,
  input  logic [T-1:0]         x_keep_i,
  input  logic                 x_skip_i,
  output logic                 x_gnt_o,
  output logic                 x_rsp_valid_o,
  // common load data
  output fp16_t [T-1:0]        rsp_data_o,
  // Z store channel
  input  logic                 z_req_i,
  input  logic [31:0]          z_addr_i,
  input  logic [T-1:0]         z_strb_i,
  input  logic                 z_skip_i,
  input  fp16_t [T-1:0]        z_data_i,
  output logic                 z_gnt_o,
  // memory port (shallow branch of the interconnect)
  output logic                 tcdm_req_o,
  output logic [31:0]          tcdm_add_o,
  output logic                 tcdm_we_o,
  output logic [4*NW-1:0]      tcdm_be_o,
  output logic [32*NW-1:0]     tcdm_data_o,
  input  logic                 tcdm_gnt_i,
  input  logic [32*NW-1:0]     tcdm_r_data_i,
  input  logic                 tcdm_r_valid_i
);

  typedef enum logic [1:0] {SEL_NONE, SEL_W, SEL_X, SEL_Z} sel_e;

  sel_e         sel;
  logic [31:0]  addr;
  logic         skip;

  // Fixed-priority choice of the channel served in this cycle.
  always_comb begin
    if (w_req_i)      begin sel = SEL_W; addr = w_addr_i; skip = w_skip_i; end
    else if (x_req_i) begin sel = SEL_X; addr = x_addr_i; skip = x_skip_i; end
    else if (z_req_i) begin sel = SEL_Z; addr = z_addr_i; skip = z_skip_i; end
    else              begin sel = SEL_NONE; addr = '0; skip = 1'b0; end
  end

  // Store data and byte enables, shifted by one element when the address is
  // not word aligned.
  logic [32*NW-1:0] st_data;
  logic [4*NW-1:0]  st_be;
  always_comb begin
    st_data = '0;
    st_be   = '0;
    for (int unsigned e = 0; e < T; e++) begin
      st_data[(e + 32'(addr[1])) * 16 +: 16] = z_data_i[e];
      st_be  [(e + 32'(addr[1])) * 2  +: 2]  = {2{z_strb_i[e]}};
    end
  end

  assign tcdm_req_o  = (sel != SEL_NONE) && !skip;
  assign tcdm_add_o  = {addr[31:2], 2'b00};
  assign tcdm_we_o   = (sel == SEL_Z);
  assign tcdm_be_o   = (sel == SEL_Z) ? st_be : '1;
  assign tcdm_data_o = st_data;

  logic accepted;
  assign accepted = skip || tcdm_gnt_i;
  assign w_gnt_o  = (sel == SEL_W) && accepted;
  assign x_gnt_o  = (sel == SEL_X) && accepted;
  assign z_gnt_o  = (sel == SEL_Z) && accepted;

  // Bookkeeping of the load accepted in the previous cycle.
  logic         pend_w_q, pend_x_q, pend_skip_q, pend_off_q;
  logic [T-1:0] pend_keep_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_w_q    <= 1'b0;
      pend_x_q    <= 1'b0;
      pend_skip_q <= 1'b0;
      pend_off_q  <= 1'b0;
      pend_keep_q <= '0;
    end else begin
      pend_w_q    <= w_gnt_o;
      pend_x_q    <= x_gnt_o;
      pend_skip_q <= skip;
      pend_off_q  <= addr[1];
      pend_keep_q <= (sel == SEL_W) ? w_keep_i : x_keep_i;
    end
  end

  assign w_rsp_valid_o = pend_w_q && (pend_skip_q || tcdm_r_valid_i);
  assign x_rsp_valid_o = pend_x_q && (pend_skip_q || tcdm_r_valid_i);

  always_comb begin
    for (int unsigned e = 0; e < T; e++) begin
      if (pend_skip_q || !pend_keep_q[e]) rsp_data_o[e] = '0;
      else rsp_data_o[e] = tcdm_r_data_i[(e + 32'(pend_off_q)) * 16 +: 16];
    end
  end

  // The memory answers a granted read in the next cycle, and only then.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (pend_w_q || pend_x_q) && !pend_skip_q |-> tcdm_r_valid_i)
    else $error("redmule_streamer: read data not returned after one cycle");

  if ((T % 2) != 0) begin : g_check
    $error("redmule_streamer: H*(P+1) must be even");
  end

endmodule
