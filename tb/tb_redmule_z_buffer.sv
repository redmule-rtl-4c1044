// tb_redmule_z_buffer: self-checking testbench of the Z-buffer.
//
// Three tiles are written column by column (one element per row per
// enabled step, columns 0..T-1) and read back row by row with a random
// ready.  Each row read must equal the tile's row; full_o must be set from
// the last column until the last row has been read, and writes are only
// offered while the buffer is not full.
module tb_redmule_z_buffer;
  localparam int unsigned H = 4, L = 8, P = 3, T = H * (P + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic               en, wr, full, rd_valid, rd_ready;
  logic [3:0]         col;
  logic [L-1:0][15:0] zin;
  logic [T-1:0][15:0] rd_row;
  logic [15:0]        tile [3][L][T];
  int unsigned checks = 0, failures = 0;

  redmule_z_buffer #(.H(H), .L(L), .P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(1'b0), .en_i(en), .wr_i(wr), .col_i(col), .z_i(zin),
    .full_o(full), .rd_valid_o(rd_valid), .rd_row_o(rd_row), .rd_ready_i(rd_ready));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wt, wc, rt, rr;  // write tile/column, read tile/row

  initial begin
    for (int t = 0; t < 3; t++) for (int r = 0; r < L; r++) for (int c = 0; c < T; c++)
      tile[t][r][c] = 16'($urandom);
    en = 0; wr = 0; col = 0; zin = '0; rd_ready = 0;
    wt = 0; wc = 0; rt = 0; rr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (rt < 3) begin
      @(negedge clk);
      // read side
      checks++;
      if (rd_valid !== full) failures++;
      rd_ready = rd_valid && ($urandom % 2);
      if (rd_ready) begin
        logic bad;
        checks++;
        bad = 1'b0;
        for (int c = 0; c < T; c++) if (rd_row[c] !== tile[rt][rr][c]) bad = 1'b1;
        if (bad) begin
          failures++;
          if (failures < 5) $display("tile %0d row %0d mismatch", rt, rr);
        end
      end
      // write side
      wr  = (wt < 3) && !full && ($urandom % 4 != 0);
      en  = wr || ($urandom % 2);
      col = 4'(wc);
      for (int r = 0; r < L; r++) zin[r] = (wt < 3) ? tile[wt][r][wc] : 16'h0;
      @(posedge clk);
      #1;
      if (rd_ready) begin
        if (rr == L - 1) begin rr = 0; rt++; end else rr++;
      end
      if (wr && en) begin
        if (wc == T - 1) begin wc = 0; wt++; end else wc++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
