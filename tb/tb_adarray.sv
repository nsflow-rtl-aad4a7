// tb_adarray: a 3 x 4 AdArray in two sub-arrays of two columns: sub-array 0
// runs a weight-stationary GEMM, sub-array 1 runs circular operations on
// 3-element vectors in each column at the same time. Column 2 streams B in
// the order of the paper's Fig. 4(b) (B3, B2, B1, B3, B2) and must produce
// (A1B1+A2B2+A3B3, A1B3+A2B1+A3B2, A1B2+A2B3+A3B1) on consecutive cycles;
// column 3 streams the binding order and must produce the circular
// convolution. Then the VSA sub-array repeats in packed INT4 and the whole
// array runs NN. Outputs are compared with sums computed here, at the
// cycles the schedule predicts (NN: output t of column c at k = t+H+c;
// VSA: output s at k = s+2H, k counted from the first streamed cycle).
module tb_adarray;
  import nsf_pkg::*;
  localparam int H = 3, W = 2, N = 2, C = W * N, M = 4, D = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e sa_mode [N];
  prec_e prec_nn, prec_vsa;
  logic stat_load [C];
  logic [7:0] top_in [C], left_in [H];
  logic [31:0] psum_top [C], psum_bot [C];
  int checks = 0, failures = 0;

  adarray #(.H(H), .W(W), .N(N)) dut (.clk(clk), .rst_n(rst_n), .sa_mode(sa_mode),
    .prec_nn(prec_nn), .prec_vsa(prec_vsa), .stat_load(stat_load), .top_in(top_in),
    .left_in(left_in), .psum_top(psum_top), .psum_bot(psum_bot));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] Wt [H][C], X [M][H], A [C][D], B [C][D];

  function automatic int mul(prec_e p, logic [7:0] x, logic [7:0] y, int half);
    if (p == PREC_INT8) return int'($signed(x)) * int'($signed(y));
    if (half == 0) return int'($signed(x[3:0])) * int'($signed(y[3:0]));
    return int'($signed(x[7:4])) * int'($signed(y[7:4]));
  endfunction

  function automatic logic [31:0] expect_vsa(int c, int s, bit unbind, prec_e p);
    int a0 = 0, a1 = 0;
    for (int k = 0; k < D; k++) begin
      int bi;
      bi = unbind ? ((k - s + D) % D) : ((s - k + D) % D);
      a0 += mul(p, A[c][k], B[c][bi], 0);
      a1 += mul(p, A[c][k], B[c][bi], 1);
    end
    return (p == PREC_INT8) ? 32'(a0) : {16'(a1), 16'(a0)};
  endfunction

  function automatic int expect_nn(int t, int c);
    int acc = 0;
    for (int r = 0; r < H; r++) acc += int'($signed(X[t][r])) * int'($signed(Wt[r][c]));
    return acc;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // One run: load stationaries, then stream; nn_cols = number of NN columns.
  task automatic run(input int nn_cols, input prec_e pv);
    // load: cycle j presents row H-1-j at the top
    for (int j = 0; j < H; j++) begin
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        stat_load[c] = 1;
        top_in[c] = (c < nn_cols) ? Wt[H-1-j][c] : A[c][H-1-j];
      end
    end
    @(negedge clk);
    for (int c = 0; c < C; c++) stat_load[c] = 0;
    // stream
    for (int k = 0; k < M + H + C + 2*H + D; k++) begin
      for (int r = 0; r < H; r++) left_in[r] = (k - r >= 0 && k - r < M) ? X[k-r][r] : 8'h00;
      for (int c = nn_cols; c < C; c++) begin
        int j, bi;
        bit unbind;
        j = k - (H - 1);
        unbind = (c % 2 == 0);
        bi = unbind ? (((-j) % D) + D) % D : ((j % D) + D) % D;
        top_in[c] = (j <= D - 1) ? B[c][bi] : 8'h00;
      end
      @(posedge clk);
      #1;
      for (int c = 0; c < C; c++) begin
        if (c < nn_cols) begin
          int t;
          t = k - H - c + 1;
          if (t >= 0 && t < M)
            check($signed(psum_bot[c]) == expect_nn(t, c), $sformatf("NN c=%0d t=%0d got %0d exp %0d", c, t, $signed(psum_bot[c]), expect_nn(t, c)));
        end else begin
          int s;
          s = k - 2*H + 1;
          if (s >= 0 && s < D)
            check(psum_bot[c] == expect_vsa(c, s, c % 2 == 0, pv),
                  $sformatf("VSA c=%0d s=%0d got %h exp %h", c, s, psum_bot[c], expect_vsa(c, s, c % 2 == 0, pv)));
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    for (int r = 0; r < H; r++) for (int c = 0; c < C; c++) Wt[r][c] = 8'($urandom);
    for (int t = 0; t < M; t++) for (int r = 0; r < H; r++) X[t][r] = 8'($urandom);
    for (int c = 0; c < C; c++) for (int k = 0; k < D; k++) begin A[c][k] = 8'($urandom); B[c][k] = 8'($urandom); end
    for (int c = 0; c < C; c++) begin stat_load[c] = 0; top_in[c] = 0; psum_top[c] = 0; end
    for (int r = 0; r < H; r++) left_in[r] = 0;
    prec_nn = PREC_INT8; prec_vsa = PREC_INT8;
    sa_mode[0] = MODE_NN; sa_mode[1] = MODE_VSA;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(2, PREC_INT8);
    prec_vsa = PREC_INT4;
    run(2, PREC_INT4);
    sa_mode[1] = MODE_NN;
    run(4, PREC_INT8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
