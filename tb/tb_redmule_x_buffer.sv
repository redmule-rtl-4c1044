// tb_redmule_x_buffer: self-checking testbench of the X-buffer.
//
// Four chunks (L rows of T elements each) are written row by row, at
// random times, while the read side walks them the way the array does:
// column c starts pass j of a chunk at step j*T + c*D (relative to the
// chunk) and must see element j*H + c of every row in that step and for
// the whole pass, passed through in the loading step and held afterwards.
// The last column's last load releases the bank.  The bank flags are
// checked against the chunks written and released, and reads only start
// when the bank is valid (the testbench stalls otherwise, as the
// scheduler does).
module tb_redmule_x_buffer;
  localparam int unsigned H = 4, L = 8, P = 3, D = P + 1, T = H * D, CH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic                    wr_valid, wr_ready, en, release_x;
  logic [T-1:0][15:0]      wr_row;
  logic [H-1:0]            load, bank;
  logic [H-1:0][1:0]       sel;
  logic [1:0]              bank_valid;
  logic [L-1:0][H-1:0][15:0] x;
  logic [15:0]             chunk [CH][L][T];
  int unsigned checks = 0, failures = 0;
  int          wch, wr_r, s, stalls;
  logic        wrote;

  redmule_x_buffer #(.H(H), .L(L), .P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(1'b0), .wr_valid_i(wr_valid), .wr_row_i(wr_row),
    .wr_ready_o(wr_ready), .en_i(en), .load_i(load), .sel_i(sel), .bank_i(bank),
    .release_i(release_x), .bank_valid_o(bank_valid), .x_o(x));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Read-side schedule, from the enabled step counter s.
  always_comb begin
    for (int c = 0; c < H; c++) begin
      int rel;
      rel     = s - c * D;
      load[c] = (rel >= 0) && (rel % T == 0) && (rel < CH * D * T);
      sel[c]  = 2'((rel / T) % D);
      bank[c] = ((rel / T) / D) % 2;
    end
    release_x = load[H-1] && (sel[H-1] == 2'(D - 1));
    for (int e = 0; e < T; e++) wr_row[e] = (wch < CH) ? chunk[wch][wr_r][e] : 16'h0;
  end

  initial begin
    for (int ch = 0; ch < CH; ch++) for (int r = 0; r < L; r++) for (int e = 0; e < T; e++)
      chunk[ch][r][e] = 16'($urandom);
    wr_valid = 0; en = 0; s = 0; wch = 0; wr_r = 0; stalls = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (s < CH * D * T + H * D) begin
      @(negedge clk);
      #1;
      wr_valid = (wch < CH) && ($urandom % 3 != 0);
      // stall when the first column would start a chunk that is not loaded
      en = !(load[0] && !bank_valid[bank[0]]);
      if (!en) stalls++;
      #1;
      if (en) begin
        for (int c = 0; c < H; c++) begin
          int rel, q;
          rel = s - c * D;
          if (rel >= 0 && rel < CH * D * T) begin
            q = rel / T;
            for (int r = 0; r < L; r++) begin
              checks++;
              if (x[r][c] !== chunk[q / D][r][(q % D) * H + c]) begin
                failures++;
                if (failures < 5) $display("s=%0d r=%0d c=%0d got %h", s, r, c, x[r][c]);
              end
            end
          end
        end
      end
      wrote = wr_valid && wr_ready;
      @(posedge clk);
      #1;
      if (wrote) begin
        if (wr_r == L - 1) begin wr_r = 0; wch++; end else wr_r++;
      end
      if (en) s++;
    end
    checks++;
    if (stalls == 0) begin failures++; $display("read side never waited for a bank"); end
    checks++;
    if (bank_valid != 2'b00) begin failures++; $display("banks not released"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
