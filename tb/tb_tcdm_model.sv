// tb_tcdm_model: behavioural model of the cluster's shared data memory as
// seen through the shallow branch of the interconnect: one port NW 32-bit
// words wide, word addressed from the byte address, with byte enables.
//
// A request is granted in the same cycle unless deny_i is high (this
// models a cycle lost to the cores' branch of the interconnect); read data
// come back one cycle after the grant with r_valid_o.  The memory wraps
// around at WORDS words.  Testbench code reads and writes it directly
// through mem.
module tb_tcdm_model #(
  parameter int unsigned NW    = 9,
  parameter int unsigned WORDS = 16384
) (
  input  logic              clk_i,
  input  logic              deny_i,
  input  logic              req_i,
  input  logic [31:0]       add_i,
  input  logic              we_i,
  input  logic [4*NW-1:0]   be_i,
  input  logic [32*NW-1:0]  data_i,
  output logic              gnt_o,
  output logic [32*NW-1:0]  r_data_o,
  output logic              r_valid_o
);

  logic [31:0] mem [WORDS];

  assign gnt_o = req_i && !deny_i;

  initial r_valid_o = 1'b0;

  always @(posedge clk_i) begin
    r_valid_o <= gnt_o && !we_i;
    if (gnt_o) begin
      for (int unsigned w = 0; w < NW; w++) begin
        int unsigned a;
        a = ((add_i >> 2) + w) % WORDS;
        if (we_i) begin
          for (int unsigned b = 0; b < 4; b++)
            if (be_i[w*4+b]) mem[a][b*8 +: 8] <= data_i[w*32 + b*8 +: 8];
        end else begin
          r_data_o[w*32 +: 32] <= mem[a];
        end
      end
    end
  end

endmodule
