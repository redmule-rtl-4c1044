// tb_redmule_fifo: self-checking testbench of the register FIFO.
//
// Random pushes and pops (never a push into a full FIFO without a pop,
// never a pop from an empty one) are mirrored in a queue; the head data,
// the count and the empty/full flags are compared every cycle, and a
// clear in the middle must empty the FIFO.
module tb_redmule_fifo;
  localparam int unsigned WIDTH = 20, DEPTH = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic             clear, push, pop, empty, full;
  logic [WIDTH-1:0] din, dout;
  logic [1:0]       count;
  logic [WIDTH-1:0] q [$];
  int unsigned checks = 0, failures = 0;

  redmule_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .push_i(push), .data_i(din), .pop_i(pop),
    .data_o(dout), .empty_o(empty), .full_o(full), .count_o(count));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (count != 2'(q.size()) || empty != (q.size() == 0) || full != (q.size() == DEPTH) ||
          (q.size() > 0 && dout != q[0])) begin
        failures++;
        if (failures < 5) $display("cycle %0d: count %0d exp %0d", i, count, q.size());
      end
      clear = (i == 1500);
      pop   = (q.size() > 0) && ($urandom % 2);
      push  = ($urandom % 2) && (q.size() < DEPTH || pop);
      din   = WIDTH'($urandom);
      @(posedge clk);
      #1;
      if (clear) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
