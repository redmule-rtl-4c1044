// tb_redmule_datapath: self-checking testbench of the FMA array.
//
// Feeds the array the way the accelerator does: in enabled step s, column c
// works on pass q = (s - c*D) / T and Z column t = (s - c*D) % T, with
// D = P+1 and T = H*D; it gets W[q*H+c][t] and, in every row r, X[r][q*H+c].
// The first column starts from zero in the first pass of a tile and takes
// the feedback otherwise.  After the last pass of a tile, the row outputs
// in steps T*(tile passes)+t are the finished Z elements, which are checked
// against a sequential FMA chain computed with the reference FMA.  Two
// tiles of NP passes are run back to back, with a randomly held enable,
// which also checks the latency of T enabled steps per pass.
module tb_redmule_datapath;
  import tb_fp16_pkg::*;

  localparam int unsigned H = 4, L = 8, P = 3;
  localparam int unsigned D = P + 1, T = H * D;
  localparam int unsigned NP = 3, N = NP * H, TILES = 2;

  logic clk = 1'b0, rst_n = 1'b0, en;
  logic [L-1:0][H-1:0][15:0] x;
  logic [H-1:0][15:0]        w;
  logic                      acc, store;
  logic [L-1:0][15:0]        z;
  int unsigned checks = 0, failures = 0;

  logic [15:0] X [TILES][L][N];
  logic [15:0] W [TILES][N][T];
  logic [15:0] Zr[TILES][L][T];

  always #5 clk = ~clk;

  redmule_datapath #(.H(H), .L(L), .P(P)) dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .x_i(x), .w_i(w),
    .accumulate_i(acc), .store_i(store), .z_o(z));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] rnd();
    logic [15:0] v = 16'($urandom);
    v[14:10] = 5'(11 + $urandom % 8);
    return v;
  endfunction

  int unsigned s;  // enabled step counter

  // Drive the inputs of step s.
  always_comb begin
    for (int c = 0; c < H; c++) begin
      int q, t, tile, n;
      q = (int'(s) - c * int'(D)) / int'(T);
      t = (int'(s) - c * int'(D)) % int'(T);
      if (int'(s) < c * int'(D) || q >= int'(TILES * NP)) begin
        w[c] = '0;
        for (int r = 0; r < L; r++) x[r][c] = '0;
      end else begin
        tile = q / NP;
        n    = (q % NP) * H + c;
        w[c] = W[tile][n][t];
        for (int r = 0; r < L; r++) x[r][c] = X[tile][r][n];
      end
    end
    acc   = ((s / T) % NP) != 0;
    store = (s >= T) && (((s / T) - 1) % NP == NP - 1);
  end

  initial begin
    for (int tl = 0; tl < TILES; tl++) begin
      for (int r = 0; r < L; r++) for (int n = 0; n < N; n++) X[tl][r][n] = rnd();
      for (int n = 0; n < N; n++) for (int t = 0; t < T; t++) W[tl][n][t] = rnd();
      for (int r = 0; r < L; r++) for (int t = 0; t < T; t++) begin
        logic [15:0] a;
        a = 16'h0000;
        for (int n = 0; n < N; n++) a = fma_ref(X[tl][r][n], W[tl][n][t], a);
        Zr[tl][r][t] = a;
      end
    end
    s = 0; en = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    while (s < TILES * NP * T + T) begin
      // Outputs visible in this step: check finished Z elements.
      if (store) begin
        int tl, t;
        tl = int'((s / T) - 1) / int'(NP);
        t  = int'(s % T);
        for (int r = 0; r < L; r++) begin
          checks++;
          if (z[r] !== Zr[tl][r][t]) begin
            failures++;
            if (failures < 10) $display("tile %0d row %0d col %0d: got %h exp %h", tl, r, t, z[r], Zr[tl][r][t]);
          end
        end
      end else begin
        checks++;
        if (z !== '0) failures++;   // the store multiplexer must give zero
      end
      en = ($urandom % 5) != 0;
      @(negedge clk);
      if (en) s++;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
