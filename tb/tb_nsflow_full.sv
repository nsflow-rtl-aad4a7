// tb_nsflow_full: the accelerator at its default size (a 32 x 256 AdArray in
// 16 sub-arrays of 16 columns, the NVSA configuration of the paper's
// Table III, memories at full capacity) running one complete mixed
// neuro-symbolic step with the default 14:2 partition:
//   - load: one DMA read of 2184 cache words, transfers into Mem_A1, Mem_A2
//     and Mem_B, one swap;
//   - an NN fold on the 14 NN sub-arrays (224 columns, 32-deep reduction,
//     8 input vectors) while the 2 VSA sub-arrays bind 32 pairs of
//     256-element vectors (NVSA's block size), one pair per column, in
//     8 accumulated chunks of 32 elements;
//   - drain: swap Mem_C, transfer 264 rows to the cache, DMA to DRAM.
// Every NN output and every binding element is compared with a reference
// computed here; the fold must take 2H + 224 + M + 2 cycles and each chunk
// 3H + 256 + 3 cycles; NN/VSA overlap and the issued-command count are
// checked.
module tb_nsflow_full;
  import nsf_pkg::*;

  localparam int H = 32, W = 16, N = 16, NN_SA = 14;                   // the top's defaults
  localparam int C = W * N, NNC = NN_SA * W, VC = C - NNC, M = 8, D = 256;
  localparam int CHA = C / 64, CHC = C / 16;          // 512-bit chunks per Mem_A / Mem_C row
  localparam int A1_W = 0, A2_W = CHA * H, B_W = A2_W + CHA * 2 * D, IN_WORDS = B_W + M;
  localparam longint IN_BASE = 64'd0, OUT_BASE = 64'd262144;          // bytes
  localparam int CACHE_OUT = 4096, C_ROWS = M + D;                     // Mem_C rows 0..M-1 NN, M.. VSA

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

  nsflow_top dut (
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

  axi_dram_model #(.DW(512), .WORDS(8448), .SEED(11)) dram (
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
      if (failures < 8 || what.substr(0, 3) != "bin") $display("FAIL: %s", what);
    end
  endtask

  logic signed [7:0] Wt [H][NNC];
  logic signed [7:0] X  [M][H];
  logic signed [7:0] Av [VC][D], Bv [VC][D];

  function automatic int gemm(input int t, input int c);
    int acc = 0;
    for (int r = 0; r < H; r++) acc += int'(X[t][r]) * int'(Wt[r][c]);
    return acc;
  endfunction

  function automatic int bind_ref(input int v, input int s);
    int acc = 0;
    for (int k = 0; k < D; k++) acc += int'(Av[v][k]) * int'(Bv[v][(s - k + D) % D]);
    return acc;
  endfunction

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

  int cyc, nn_t0, vsa_t0, nn_ok, vsa_ok, nn_runs, vsa_runs;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.nn_start)  nn_t0  <= cyc;
    if (dut.vsa_start) vsa_t0 <= cyc;
    if (dut.nn_done) begin
      nn_runs++;
      if (cyc - nn_t0 == 2*H + NNC + M + 2) nn_ok++; else $display("NN fold took %0d cycles", cyc - nn_t0);
    end
    if (dut.vsa_done) begin
      vsa_runs++;
      if (cyc - vsa_t0 == 3*H + D + 3) vsa_ok++; else $display("VSA chunk took %0d cycles", cyc - vsa_t0);
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] w;
    int chunk;
    cyc = 0; nn_t0 = 0; vsa_t0 = 0; nn_ok = 0; vsa_ok = 0; nn_runs = 0; vsa_runs = 0;
    cmd_valid = 0;
    cmd = '0;
    for (int r = 0; r < H; r++) for (int c = 0; c < NNC; c++) Wt[r][c] = 8'($urandom);
    for (int t = 0; t < M; t++) for (int r = 0; r < H; r++) X[t][r] = 8'($urandom);
    for (int v = 0; v < VC; v++) for (int k = 0; k < D; k++) begin
      Av[v][k] = 8'($urandom); Bv[v][k] = 8'($urandom);
    end
    // DRAM image. A Mem_A row is 4 chunks of 64 lanes; a Mem_B row 1 chunk.
    for (int i = 0; i < IN_WORDS; i++) begin
      w = '0;
      if (i < A2_W) begin                       // Mem_A1 rows 0..H-1: weights
        int r, ch;
        r = i / CHA; ch = i % CHA;
        for (int j = 0; j < 64; j++) if (ch*64 + j < NNC) w[j*8 +: 8] = Wt[r][ch*64 + j];
      end else if (i < B_W) begin               // Mem_A2 rows 0..D-1: A, D..2D-1: B
        int r, ch;
        r = (i - A2_W) / CHA; ch = (i - A2_W) % CHA;
        for (int j = 0; j < 64; j++) if (ch*64 + j >= NNC)
          w[j*8 +: 8] = (r < D) ? Av[ch*64 + j - NNC][r] : Bv[ch*64 + j - NNC][r-D];
      end else begin                            // Mem_B rows 0..M-1: input vectors
        for (int r = 0; r < H; r++) w[r*8 +: 8] = X[i - B_W][r];
      end
      dram.mem[IN_BASE/64 + i] = w;
    end
    for (int i = 0; i < C_ROWS * CHC; i++) dram.mem[OUT_BASE/64 + i] = '0;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    push(mk(OP_CFG, 16'b000, 0, 0, 0, NN_SA, 0));
    push(mk(OP_DMA_RD, 0, IN_WORDS, 0, 0, 0, IN_BASE));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    push(mk(OP_XFER_IN, 16'(MEM_A1), CHA * H, A1_W, 0, 0, 0));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    push(mk(OP_XFER_IN, 16'(MEM_A2), CHA * 2 * D, A2_W, 0, 0, 0));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    push(mk(OP_XFER_IN, 16'(MEM_B), M, B_W, 0, 0, 0));
    push(mk(OP_SWAP, 16'b0111, 0, 0, 0, 0, 0));
    push(mk(OP_NN, 0, M, 0, 0, 0, 0));
    chunk = 0;
    repeat (D / H) begin
      push(mk(OP_VSA, {15'd0, chunk != 0}, D, D, M, 0, chunk));
      chunk++;
    end
    push(mk(OP_SWAP, 16'b1000, 0, 0, 0, 0, 0));
    push(mk(OP_XFER_OUT, 16'(MEM_C), C_ROWS * CHC, 0, CACHE_OUT, 0, 0));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    push(mk(OP_DMA_WR, 0, C_ROWS * CHC, CACHE_OUT, 0, 0, OUT_BASE));
    push(mk(OP_SYNC, 0, 0, 0, 0, 0, 0));
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);

    // Mem_C row t, lane c is DRAM word OUT_BASE/64 + t*CHC + c/16, bits (c%16)*32.
    for (int t = 0; t < M; t++) for (int c = 0; c < NNC; c++) begin
      w = dram.mem[OUT_BASE/64 + t*CHC + c/16];
      check($signed(w[(c%16)*32 +: 32]) == gemm(t, c), $sformatf("NN t=%0d c=%0d", t, c));
    end
    for (int s = 0; s < D; s++) for (int v = 0; v < VC; v++) begin
      int c;
      c = NNC + v;
      w = dram.mem[OUT_BASE/64 + (M + s)*CHC + c/16];
      check($signed(w[(c%16)*32 +: 32]) == bind_ref(v, s), $sformatf("bind s=%0d col=%0d", s, c));
    end
    check(nn_runs == 1 && nn_ok == 1, $sformatf("NN fold cycle count (%0d runs)", nn_runs));
    check(vsa_runs == D / H && vsa_ok == D / H, $sformatf("VSA chunk cycle count (%0d runs)", vsa_runs));
    check(overlap_cycles > 0, "NN and VSA overlapped");
    check(prot_err == 0, "AXI protocol");
    check(issued_cnt == 15 + D / H, "all commands issued");
    $display("cycles=%0d overlap=%0d stall=%0d rd_bursts=%0d wr_bursts=%0d",
             cyc, overlap_cycles, stall_cycles, rd_bursts, wr_bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
