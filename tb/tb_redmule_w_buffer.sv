// tb_redmule_w_buffer: self-checking testbench of the W-buffer.
//
// Column c is told to load at steps c*D + q*T (D = P+1, T = H*D), as in
// the array; the rows come from a FIFO model in the testbench.  At step s
// column c must broadcast element (s - c*D) % T of the W row it loaded
// last, and the FIFO must be popped exactly once per load.  The enable is
// held low at random to check that the buffer freezes.
module tb_redmule_w_buffer;
  localparam int unsigned H = 4, P = 3, D = P + 1, T = H * D, ROWS = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic                    en, pop;
  logic [H-1:0]            load;
  logic [T-1:0][15:0]      row;
  logic [H-1:0][15:0]      w;
  logic [15:0]             rows [ROWS][T];
  int unsigned             head, s, checks = 0, failures = 0;

  redmule_w_buffer #(.H(H), .P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .load_i(load), .row_i(row), .pop_o(pop), .w_o(w));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb begin
    for (int c = 0; c < H; c++) load[c] = (s >= c * D) && ((s - c * D) % T == 0) && (s < ROWS / H * T);
    for (int e = 0; e < T; e++) row[e] = (head < ROWS) ? rows[head][e] : 16'h0;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int e = 0; e < T; e++) rows[r][e] = 16'($urandom);
    en = 0; s = 0; head = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (s < ROWS / H * T + T) begin
      for (int c = 0; c < H; c++) begin
        if (s >= c * D && s < ROWS / H * T + c * D) begin
          int q, t;
          q = (s - c * D) / T;
          t = (s - c * D) % T;
          checks++;
          if (w[c] !== rows[q * H + c][t]) begin
            failures++;
            if (failures < 5) $display("s=%0d col %0d: got %h exp %h", s, c, w[c], rows[q*H+c][t]);
          end
        end
      end
      en = ($urandom % 4) != 0;
      #1;
      checks++;
      if (pop !== (en && |load)) failures++;
      @(negedge clk);
      if (en) begin
        if (|load) head++;
        s++;
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
