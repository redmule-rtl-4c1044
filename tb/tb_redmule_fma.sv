// tb_redmule_fma: self-checking testbench of the FP16 FMA.
//
// Drives directed corner cases (zeros of both signs, infinities, NaNs,
// subnormals, overflow, exact cancellation, rounding ties) and random
// operands into a P=3 instance with a randomly toggled enable, and checks
// that each result equals the reference (tb_fp16_pkg::fma_ref) exactly P
// enabled cycles after its operands.  A P=0 instance is checked
// combinationally on the same operands.
module tb_redmule_fma;
  import tb_fp16_pkg::*;

  localparam int unsigned P = 3;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        en;
  logic [15:0] a, b, c, z, z0;
  int unsigned checks = 0, failures = 0;

  always #5 clk = ~clk;

  redmule_fma #(.P(P)) dut  (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .a_i(a), .b_i(b), .c_i(c), .z_o(z));
  redmule_fma #(.P(0)) dut0 (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .a_i(a), .b_i(b), .c_i(c), .z_o(z0));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] dir_a [16] = '{16'h3C00, 16'h3C00, 16'h8000, 16'h7C00, 16'h7C00, 16'h7E01, 16'h0001,
                              16'h7BFF, 16'h3C01, 16'h3C00, 16'h0200, 16'h3C00, 16'hFC00, 16'h0000,
                              16'h3555, 16'h3800};
  logic [15:0] dir_b [16] = '{16'h3C00, 16'h3C00, 16'h3C00, 16'h0000, 16'h3C00, 16'h3C00, 16'h0001,
                              16'h4000, 16'h3C01, 16'hBC00, 16'h0200, 16'h1400, 16'h3C00, 16'h0000,
                              16'h3555, 16'h0001};
  logic [15:0] dir_c [16] = '{16'h0000, 16'hBC00, 16'h8000, 16'h3C00, 16'hFC00, 16'h3C00, 16'h0000,
                              16'h0000, 16'h0000, 16'h3C00, 16'h0001, 16'h3C00, 16'h7C00, 16'h8000,
                              16'h8000, 16'h0000};

  function automatic logic [15:0] rnd_fp16(input int mode);
    logic [15:0] v;
    v = 16'($urandom);
    // mode 1: moderate exponents, so that products and sums stay finite.
    if (mode == 1) v[14:10] = 5'(8 + ($urandom % 16));
    return v;
  endfunction

  logic [15:0] exp_pipe [P];
  int          filled = 0;

  task automatic apply(input logic [15:0] ta, input logic [15:0] tb_, input logic [15:0] tc);
    logic [15:0] r;
    a  = ta; b = tb_; c = tc;
    en = ($urandom % 4) != 0;
    #1;
    r = fma_ref(a, b, c);
    checks++;
    if (z0 !== r) begin
      failures++;
      if (failures < 10) $display("P=0 mismatch %h*%h+%h: got %h exp %h", a, b, c, z0, r);
    end
    @(posedge clk);
    if (en) begin
      for (int i = P - 1; i > 0; i--) exp_pipe[i] = exp_pipe[i-1];
      exp_pipe[0] = r;
      filled++;
    end
    #1;
    if (filled >= P) begin
      checks++;
      if (z !== exp_pipe[P-1]) begin
        failures++;
        if (failures < 10) $display("P=%0d mismatch: got %h exp %h", P, z, exp_pipe[P-1]);
      end
    end
  endtask

  initial begin
    en = 1'b0; a = '0; b = '0; c = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < 16; i++) apply(dir_a[i], dir_b[i], dir_c[i]);
    for (int i = 0; i < 20000; i++) apply(rnd_fp16(0), rnd_fp16(0), rnd_fp16(0));
    for (int i = 0; i < 20000; i++) apply(rnd_fp16(1), rnd_fp16(1), rnd_fp16(1));
    // Products close to -c to exercise cancellation.
    for (int i = 0; i < 5000; i++) begin
      logic [15:0] ta, tb2;
      ta = rnd_fp16(1); tb2 = rnd_fp16(1);
      apply(ta, tb2, {~(ta[15] ^ tb2[15]), fma_ref(ta, tb2, 16'h0000) ^ 15'(($urandom % 4))});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
