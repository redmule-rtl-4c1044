// redmule_controller: RedMulE's register file and job control, programmed
// by the cluster cores over the peripheral interconnect.
//
// Registers (32-bit, byte offsets, see redmule_pkg): X_ADDR, W_ADDR,
// Z_ADDR (byte addresses of the three matrices, 16-bit aligned), M, N, K
// (matrix sizes, low DIM_W bits used), TRIGGER (a write starts the job)
// and STATUS (bit 0: busy; read only).  While a job runs, writes to the
// configuration registers and to TRIGGER are ignored, so the scheduler
// sees a stable configuration.  At the end of a job evt_o pulses for one
// cycle; in a cluster it goes to the event unit (HW SYNC), which wakes up
// the waiting core.
//
// Peripheral port: a request is granted in the same cycle (gnt_o = req_i);
// the read data (or, for a write, zero) come back with r_valid_o one cycle
// later, together with the request's id.  The paper states only that the
// cores program the accelerator through this register file: the register
// set, offsets and protocol details are this design's choice.
module redmule_controller
  import redmule_pkg::*;
#(
  parameter int unsigned ID_W = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // peripheral (configuration) port
  input  logic               req_i,
  input  logic [31:0]        add_i,
  input  logic               we_i,
  input  logic [31:0]        wdata_i,
  input  logic [3:0]         be_i,
  input  logic [ID_W-1:0]    id_i,
  output logic               gnt_o,
  output logic               r_valid_o,
  output logic [31:0]        r_data_o,
  output logic [ID_W-1:0]    r_id_o,
  // job configuration and control towards the scheduler
  output logic               start_o,
  output logic [31:0]        x_addr_o,
  output logic [31:0]        w_addr_o,
  output logic [31:0]        z_addr_o,
  output logic [DIM_W-1:0]   m_o,
  output logic [DIM_W-1:0]   n_o,
  output logic [DIM_W-1:0]   k_o,
  input  logic               busy_i,
  input  logic               done_i,
  output logic               evt_o
);

  logic [31:0] x_addr_q, w_addr_q, z_addr_q, m_q, n_q, k_q;
  logic        start_q;

  assign gnt_o    = req_i;
  assign x_addr_o = x_addr_q;
  assign w_addr_o = w_addr_q;
  assign z_addr_o = z_addr_q;
  assign m_o      = m_q[DIM_W-1:0];
  assign n_o      = n_q[DIM_W-1:0];
  assign k_o      = k_q[DIM_W-1:0];
  assign start_o  = start_q;
  assign evt_o    = done_i;

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw,
                                        input logic [3:0] be);
    logic [31:0] r;
    for (int unsigned b = 0; b < 4; b++) r[b*8 +: 8] = be[b] ? nw[b*8 +: 8] : old[b*8 +: 8];
    return r;
  endfunction

  logic busy;
  assign busy = busy_i || start_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      x_addr_q <= '0; w_addr_q <= '0; z_addr_q <= '0;
      m_q <= '0; n_q <= '0; k_q <= '0;
      start_q <= 1'b0;
    end else begin
      start_q <= 1'b0;
      if (req_i && we_i && !busy) begin
        unique case (add_i[7:0])
          REG_X_ADDR:  x_addr_q <= merge(x_addr_q, wdata_i, be_i);
          REG_W_ADDR:  w_addr_q <= merge(w_addr_q, wdata_i, be_i);
          REG_Z_ADDR:  z_addr_q <= merge(z_addr_q, wdata_i, be_i);
          REG_M:       m_q      <= merge(m_q, wdata_i, be_i);
          REG_N:       n_q      <= merge(n_q, wdata_i, be_i);
          REG_K:       k_q      <= merge(k_q, wdata_i, be_i);
          REG_TRIGGER: start_q  <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  // Read port, one cycle latency.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_valid_o <= 1'b0;
      r_data_o  <= '0;
      r_id_o    <= '0;
    end else begin
      r_valid_o <= req_i;
      r_id_o    <= id_i;
      r_data_o  <= '0;
      if (req_i && !we_i) begin
        unique case (add_i[7:0])
          REG_X_ADDR: r_data_o <= x_addr_q;
          REG_W_ADDR: r_data_o <= w_addr_q;
          REG_Z_ADDR: r_data_o <= z_addr_q;
          REG_M:      r_data_o <= m_q;
          REG_N:      r_data_o <= n_q;
          REG_K:      r_data_o <= k_q;
          REG_STATUS: r_data_o <= {31'd0, busy};
          default:    r_data_o <= '0;
        endcase
      end
    end
  end

endmodule
