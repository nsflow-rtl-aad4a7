// tb_nsflow_top: end-to-end test of the accelerator at the size of the
// paper's Fig. 4(a) example (a 4 x 6 array in 3 sub-arrays of 2 columns).
//
// The host program below loads weights, vectors and input features from a
// DRAM model over AXI (with a burst that crosses a 4 KB boundary), fills
// Mem_A1/A2/B through the cache, swaps the double buffers, then runs an NN
// fold on sub-arrays 0-1 while sub-array 2 runs circular convolution (bind)
// and correlation (unbind) in two accumulated chunks each, repeats the
// binding in packed INT4, runs SIMD passes (ReLU, a dot-product reduction,
// a shift written back to Mem_A2, a split-lane add), re-folds the whole
// array to NN with Mem_A1/A2 merged, and finally drains Mem_C and Mem_A2 to
// DRAM. Every drained value is compared with a reference computed here from
// the definitions (GEMM, circular convolution/correlation, SIMD ops).
// Mechanisms counted: NN/VSA overlap, command-queue stalls, buffer swaps,
// accumulation, INT4 mode, Mem_A merge, SIMD write-back to Mem_A, AXI
// bursts split at 4 KB. The NN and VSA run times are checked against
// 2H + W_nn + M + 2 and 3H + d + 3 cycles.
module tb_nsflow_top;
  import nsf_pkg::*;

  localparam int H = 4, W = 2, N = 3, L = 2;
  localparam int C = W * N;
  localparam int DA1 = 64, DA2 = 64, DB = 64, DC = 64, CD = 512;
  localparam int M = 5, D = 6;
  localparam longint IN_BASE  = 64'd3456;    // 4096 - 640: the load crosses 4 KB
  localparam longint OUT_BASE = 64'd65536;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy;
  cmd_t cmd;
  logic [31:0] issued_cnt, stall_cycles, overlap_cycles, simd_scalar;
  logic [3:0]  bank_sel;
  logic awvalid, awready, wvalid, wready, wlast, bvalid, bready, arvalid, arready;
  logic rvalid, rready, rlast;
  logic [63:0] awaddr, araddr;
  logic [7:0]  awlen, arlen;
  logic [2:0]  awsize, arsize;
  logic [1:0]  awburst, arburst, bresp, rresp;
  logic [511:0] wdata, rdata;
  logic [63:0]  wstrb;
  int rd_bursts, wr_bursts, prot_err;

  nsflow_top #(.H(H), .W(W), .N(N), .SIMD_L(L), .DA1(DA1), .DA2(DA2), .DB(DB), .DC(DC),
               .CACHE_D(CD)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .busy(busy), .issued_cnt(issued_cnt), .stall_cycles(stall_cycles),
    .overlap_cycles(overlap_cycles), .simd_scalar(simd_scalar), .bank_sel(bank_sel),
    .m_awvalid(awvalid), .m_awready(awready), .m_awaddr(awaddr), .m_awlen(awlen),
    .m_awsize(awsize), .m_awburst(awburst), .m_wvalid(wvalid), .m_wready(wready),
    .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast), .m_bvalid(bvalid), .m_bready(bready),
    .m_bresp(bresp), .m_arvalid(arvalid), .m_arready(arready), .m_araddr(araddr),
    .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_rvalid(rvalid),
    .m_rready(rready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast)
  );

  axi_dram_model #(.DW(512), .WORDS(2048), .SEED(7)) dram (
    .clk(clk), .rst_n(rst_n), .awvalid(awvalid), .awready(awready), .awaddr(awaddr),
    .awlen(awlen), .wvalid(wvalid), .wready(wready), .wdata(wdata), .wlast(wlast),
    .bvalid(bvalid), .bready(bready), .bresp(bresp), .arvalid(arvalid), .arready(arready),
    .araddr(araddr), .arlen(arlen), .rvalid(rvalid), .rready(rready), .rdata(rdata),
    .rresp(rresp), .rlast(rlast), .rd_bursts(rd_bursts), .wr_bursts(wr_bursts),
    .protocol_errors(prot_err)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ test data
  logic signed [7:0] Wt [H][C];       // NN weights (cols 0..3 used in phase 2)
  logic signed [7:0] Wm [H][C];       // weights for the merged, all-NN phase
  logic signed [7:0] X  [M][H];       // input vectors
  logic signed [7:0] Av [2][D], Bv [2][D];   // INT8 vectors, lanes 4, 5
  logic [7:0]        Aq [2][D], Bq [2][D];   // packed INT4 vectors, lanes 4, 5

  function automatic int s4(input logic [3:0] v); return int'($signed(v)); endfunction

  function automatic int conv(input int c, input int s, input bit unbind);
    int acc = 0;
    for (int k = 0; k < D; k++)
      acc += int'(Av[c][k]) * int'(Bv[c][unbind ? ((k - s + D) % D) : ((s - k + D) % D)]);
    return acc;
  endfunction

  function automatic logic [31:0] conv4(input int c, input int s);
    int a0 = 0, a1 = 0;
    for (int k = 0; k < D; k++) begin
      a0 += s4(Aq[c][k][3:0]) * s4(Bq[c][(s - k + D) % D][3:0]);
      a1 += s4(Aq[c][k][7:4]) * s4(Bq[c][(s - k + D) % D][7:4]);
    end
    return {16'(a1), 16'(a0)};
  endfunction

  function automatic int gemm(input int t, input int c, input bit merged);
    int acc = 0;
    for (int r = 0; r < H; r++) acc += int'(X[t][r]) * int'(merged ? Wm[r][c] : Wt[r][c]);
    return acc;
  endfunction

  // ------------------------------------------------------------ host side
  task automatic push(input cmd_t c);
    // drive after the falling edge, sample ready before the rising edge
    @(negedge clk);
    cmd       = c;
    cmd_valid = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    cmd_valid <= 1'b0;
  endtask

  function automatic cmd_t mk(input opcode_e op, input logic [15:0] flags, input int len,
                              input int src, input int dst, input int aux, input longint ext);
    cmd_t c;
    c.op = op; c.flags = flags; c.len = len; c.src = src; c.dst = dst; c.aux = aux; c.ext = ext;
    return c;
  endfunction

  // run-time measurement of the NN and VSA engines
  int nn_t0, nn_len, vsa_t0, vsa_len, cyc;
  int nn_runs = 0, vsa_runs = 0, nn_time_ok = 0, vsa_time_ok = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.nn_start)  nn_t0  <= cyc;
    if (dut.vsa_start) vsa_t0 <= cyc;
    if (dut.nn_done)  begin nn_len  = cyc - nn_t0;  nn_runs++;
      if (nn_len == 2*H + dut.u_nn.ncols_q + M + 2) nn_time_ok++;
      else $display("NN fold took %0d cycles", nn_len); end
    if (dut.vsa_done) begin vsa_len = cyc - vsa_t0; vsa_runs++;
      if (vsa_len == 3*H + D + 3) vsa_time_ok++;
      else $display("VSA chunk took %0d cycles", vsa_len); end
  end
  int swaps = 0;
  always @(posedge clk) if (dut.swap != 0) swaps++;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int A2_A = 0, A2_B = 6, A2_AQ = 12, A2_BQ = 18, A2_WM = 24;
  initial begin
    logic [511:0] w;
    cyc = 0;
    cmd_valid = 0;
    cmd = '0;
    // data
    for (int r = 0; r < H; r++) for (int c = 0; c < C; c++) begin
      Wt[r][c] = 8'($urandom_range(0, 255)); Wm[r][c] = 8'($urandom_range(0, 255));
    end
    for (int t = 0; t < M; t++) for (int r = 0; r < H; r++) X[t][r] = 8'($urandom_range(0, 255));
    for (int c = 0; c < 2; c++) for (int k = 0; k < D; k++) begin
      Av[c][k] = 8'($urandom_range(0, 255)); Bv[c][k] = 8'($urandom_range(0, 255));
      Aq[c][k] = 8'($urandom_range(0, 255)); Bq[c][k] = 8'($urandom_range(0, 255));
    end
    // DRAM image: cache word i = DRAM word IN_BASE/64 + i
    for (int i = 0; i < 64; i++) begin
      w = '0;
      if (i < 4) for (int c = 0; c < C; c++) w[c*8 +: 8] = Wt[i][c];
      else if (i < 4 + 28) begin
        int a;
        a = i - 4;
        for (int c = 4; c < 6; c++) begin
          if (a < 6)       w[c*8 +: 8] = Av[c-4][a];
          else if (a < 12) w[c*8 +: 8] = Bv[c-4][a-6];
          else if (a < 18) w[c*8 +: 8] = Aq[c-4][a-12];
          else if (a < 24) w[c*8 +: 8] = Bq[c-4][a-18];
        end
        if (a >= 24) for (int c = 0; c < C; c++) w[c*8 +: 8] = Wm[a-24][c];
      end else if (i < 37) for (int r = 0; r < H; r++) w[r*8 +: 8] = X[i-32][r];
      dram.mem[IN_BASE/64 + i] = w;
    end

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // phase 1: load
    push(mk(OP_CFG, 16'b000, 0, 0, 0, 2, 0));
    push(mk(OP_DMA_RD, 0, 37, 0, 0, 0, IN_BASE));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    push(mk(OP_XFER_IN, 16'(MEM_A1), 4, 0, 0, 0, 0));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    push(mk(OP_XFER_IN, 16'(MEM_A2), 28, 4, 0, 0, 0));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    push(mk(OP_XFER_IN, 16'(MEM_B), 5, 32, 0, 0, 0));
    push(mk(OP_SWAP, 16'b0111, 0, 0, 0, 0, 0));
    // phase 2: NN fold on sub-arrays 0-1, VSA bind/unbind on sub-array 2
    push(mk(OP_NN, 0, M, 0, 0, 0, 0));
    push(mk(OP_VSA, 16'b00, D, A2_B, 8, A2_A, 0));
    push(mk(OP_VSA, 16'b01, D, A2_B, 8, A2_A, 1));
    push(mk(OP_VSA, 16'b10, D, A2_B, 16, A2_A, 0));
    push(mk(OP_VSA, 16'b11, D, A2_B, 16, A2_A, 1));
    // phase 3: INT4 binding
    push(mk(OP_CFG, 16'b010, 0, 0, 0, 2, 0));
    push(mk(OP_VSA, 16'b00, D, A2_BQ, 24, A2_AQ, 0));
    push(mk(OP_VSA, 16'b01, D, A2_BQ, 24, A2_AQ, 1));
    // phase 4: SIMD
    push(mk(OP_SIMD, {4'd0, 4'd0, 2'b00, 1'b0, 1'b0, 4'(SIMD_RELU)}, M, 0, 32, 0, 0));
    push(mk(OP_SIMD, {4'd0, 4'd2, 2'b00, 1'b0, 1'b0, 4'(SIMD_DOT)}, D, 8, 40, 16, 0));
    push(mk(OP_SIMD, {4'd0, 4'd2, 2'b00, 1'b1, 1'b0, 4'(SIMD_SHR)}, D, 8, 40, 0, 2));
    push(mk(OP_SIMD, {4'd0, 4'd2, 2'b00, 1'b0, 1'b1, 4'(SIMD_ADD)}, D, 24, 48, 24, 0));
    // phase 5: whole array NN, Mem_A merged, weights in the Mem_A2 part
    push(mk(OP_CFG, 16'b100, 0, 0, 0, 3, 0));
    push(mk(OP_NN, 0, M, 0, 56, DA1 + A2_WM, 0));
    // phase 6: drain
    push(mk(OP_SWAP, 16'b1010, 0, 0, 0, 0, 0));
    push(mk(OP_XFER_OUT, 16'(MEM_C), 64, 0, 100, 0, 0));
    push(mk(OP_XFER_OUT, 16'(MEM_A2), 6, 40, 170, 0, 0));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    push(mk(OP_DMA_WR, 0, 76, 100, 0, 0, OUT_BASE));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);

    // ------------------------------------------------------------ checks
    begin : checks_blk
      int ob;
      logic [511:0] row;
      int sc;
      ob = OUT_BASE / 64;
      // NN, phase 2
      for (int t = 0; t < M; t++) begin
        row = dram.mem[ob + t];
        for (int c = 0; c < 4; c++)
          check($signed(row[c*32 +: 32]) == gemm(t, c, 0), $sformatf("NN t=%0d c=%0d", t, c));
      end
      // bind / unbind INT8
      for (int s = 0; s < D; s++) for (int c = 4; c < 6; c++) begin
        row = dram.mem[ob + 8 + s];
        check($signed(row[c*32 +: 32]) == conv(c-4, s, 0), $sformatf("bind s=%0d c=%0d", s, c));
        row = dram.mem[ob + 16 + s];
        check($signed(row[c*32 +: 32]) == conv(c-4, s, 1), $sformatf("unbind s=%0d c=%0d", s, c));
        row = dram.mem[ob + 24 + s];
        check(row[c*32 +: 32] == conv4(c-4, s), $sformatf("bind4 s=%0d c=%0d", s, c));
        row = dram.mem[ob + 48 + s];
        check(row[c*32 +: 32] == {16'(2*conv4(c-4, s)[31:16]), 16'(2*conv4(c-4, s)[15:0])},
              $sformatf("split add s=%0d c=%0d", s, c));
      end
      // ReLU of NN results
      for (int t = 0; t < M; t++) begin
        row = dram.mem[ob + 32 + t];
        for (int c = 0; c < 2; c++)
          check($signed(row[c*32 +: 32]) == ((gemm(t, c, 0) > 0) ? gemm(t, c, 0) : 0),
                $sformatf("relu t=%0d c=%0d", t, c));
      end
      // dot product of bind and unbind results over lanes 4, 5
      sc = 0;
      for (int s = 0; s < D; s++) for (int c = 4; c < 6; c++) sc += conv(c-4, s, 0) * conv(c-4, s, 1);
      row = dram.mem[ob + 40];
      check($signed(row[4*32 +: 32]) == sc, "dot product in Mem_C");
      check($signed(simd_scalar) == sc, "dot product scalar");
      // merged-mode NN over all six columns
      for (int t = 0; t < M; t++) begin
        row = dram.mem[ob + 56 + t];
        for (int c = 0; c < C; c++)
          check($signed(row[c*32 +: 32]) == gemm(t, c, 1), $sformatf("merged NN t=%0d c=%0d", t, c));
      end
      // SIMD shift written into Mem_A2 (low byte of bind >>> 2)
      for (int s = 0; s < D; s++) begin
        row = dram.mem[ob + 70 + s];
        for (int c = 4; c < 6; c++)
          check(row[c*8 +: 8] == 8'(conv(c-4, s, 0) >>> 2), $sformatf("shr to A2 s=%0d c=%0d", s, c));
      end
      // timing and mechanisms
      check(nn_runs == 2 && nn_time_ok == 2, "NN fold cycle count");
      check(vsa_runs == 6 && vsa_time_ok == 6, "VSA chunk cycle count");
      check(overlap_cycles > 0, "NN and VSA overlapped");
      check(stall_cycles > 0, "command queue stalled");
      check(swaps == 2, "buffer swaps");
      check(rd_bursts >= 2, "read split at 4 KB boundary");
      check(wr_bursts >= 2, "write split into bursts");
      check(prot_err == 0, "AXI protocol");
      check(issued_cnt == 29, "all commands issued");
      $display("mechanisms: overlap=%0d stall=%0d swaps=%0d rd_bursts=%0d wr_bursts=%0d nn=%0d vsa=%0d",
               overlap_cycles, stall_cycles, swaps, rd_bursts, wr_bursts, nn_runs, vsa_runs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
