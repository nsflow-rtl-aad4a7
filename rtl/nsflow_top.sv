// nsflow_top: the accelerator. An adaptive systolic array (AdArray) of
// H x (W*N) PEs in N sub-arrays, the re-organizable on-chip memories Mem_A
// (A1/A2), Mem_B and Mem_C, the on-chip cache, the SIMD unit, an AXI4 bus
// master to DRAM and the control unit with its five engines.
//
// Data path (paper, Fig. 4(a)): DRAM -AXI-> cache -> fill side of Mem_A/B/C;
// Mem_A feeds the top of every column (weights for NN sub-arrays from A1,
// vectors for VSA sub-arrays from A2); Mem_B feeds the rows of the leftmost
// NN sub-array; partial sums leave the bottom of every column into Mem_C and
// can re-enter at the top for accumulation; the SIMD unit reads Mem_C and
// writes Mem_C or Mem_A2; Mem_C drains through the cache to DRAM.
// Folding: OP_CFG sets n_nn; sub-arrays 0 .. n_nn-1 are NN (chained into one
// wide array), the rest are VSA (every column an independent circular
// convolution engine). NN and VSA kernels run at the same time.
// Host interface: a command stream (cmd_valid/cmd_ready/cmd, nsf_pkg::cmd_t),
// standing in for the XRT kernel calls of the paper, and status outputs.
// Off-chip: AXI4 master, DW = 512 bits.
// Defaults are the NVSA configuration of the paper's Table III: H, W, N =
// 32, 16, 16; SIMD size 64; Mem_A1 2.7 MB, Mem_A2 1.1 MB, Mem_B 2.7 MB,
// Mem_C 1.6 MB, cache 16.2 MB (MB read as 2^20 bytes; each double buffer's
// capacity is split between its two halves).
module nsflow_top
  import nsf_pkg::*;
#(
  parameter int unsigned H          = 32,
  parameter int unsigned W          = 16,
  parameter int unsigned N          = 16,
  parameter int unsigned SIMD_L     = 64,
  parameter int unsigned DA1        = 5530,    // words per half of Mem_A1 (256 B words)
  parameter int unsigned DA2        = 2253,    // words per half of Mem_A2
  parameter int unsigned DB         = 44237,   // words per half of Mem_B (32 B words)
  parameter int unsigned DC         = 819,     // words per half of Mem_C (1 KB words)
  parameter int unsigned CACHE_D    = 265421,  // 64 B words
  parameter int unsigned BUS_W      = 512,
  parameter int unsigned FIFO_DEPTH = 8,
  localparam int unsigned C         = W * N,
  localparam int unsigned ACC_W     = 32,
  localparam int unsigned AWA       = $clog2(DA1 + DA2),
  localparam int unsigned AWA1      = $clog2(DA1),
  localparam int unsigned AWA2      = $clog2(DA2),
  localparam int unsigned AWB       = $clog2(DB),
  localparam int unsigned AWC       = $clog2(DC),
  localparam int unsigned CAW       = $clog2(CACHE_D),
  localparam int unsigned FW_A      = (BUS_W < C * 8) ? BUS_W : C * 8,
  localparam int unsigned FW_B      = (BUS_W < H * 8) ? BUS_W : H * 8,
  localparam int unsigned FW_C      = (BUS_W < C * ACC_W) ? BUS_W : C * ACC_W,
  localparam int unsigned CHK_A     = C * 8 / FW_A,
  localparam int unsigned CHK_B     = H * 8 / FW_B,
  localparam int unsigned CHK_C     = C * ACC_W / FW_C,
  localparam int unsigned FAW1      = AWA1 + ((CHK_A > 1) ? $clog2(CHK_A) : 1),
  localparam int unsigned FAW2      = AWA2 + ((CHK_A > 1) ? $clog2(CHK_A) : 1),
  localparam int unsigned FAWB      = AWB + ((CHK_B > 1) ? $clog2(CHK_B) : 1),
  localparam int unsigned FAWC      = AWC + ((CHK_C > 1) ? $clog2(CHK_C) : 1),
  localparam int unsigned NW        = $clog2(N + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host command stream
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_t               cmd,
  // status
  output logic               busy,
  output logic [31:0]        issued_cnt,
  output logic [31:0]        stall_cycles,
  output logic [31:0]        overlap_cycles,
  output logic [31:0]        simd_scalar,
  output logic [3:0]         bank_sel,
  // AXI4 master to DRAM
  output logic               m_awvalid,
  input  logic               m_awready,
  output logic [63:0]        m_awaddr,
  output logic [7:0]         m_awlen,
  output logic [2:0]         m_awsize,
  output logic [1:0]         m_awburst,
  output logic               m_wvalid,
  input  logic               m_wready,
  output logic [BUS_W-1:0]   m_wdata,
  output logic [BUS_W/8-1:0] m_wstrb,
  output logic               m_wlast,
  input  logic               m_bvalid,
  output logic               m_bready,
  input  logic [1:0]         m_bresp,
  output logic               m_arvalid,
  input  logic               m_arready,
  output logic [63:0]        m_araddr,
  output logic [7:0]         m_arlen,
  output logic [2:0]         m_arsize,
  output logic [1:0]         m_arburst,
  input  logic               m_rvalid,
  output logic               m_rready,
  input  logic [BUS_W-1:0]   m_rdata,
  input  logic [1:0]         m_rresp,
  input  logic               m_rlast
);
  // ---------------------------------------------------------------- control
  logic     nn_busy, vsa_busy, simd_busy, xfer_busy, dma_busy;
  logic     nn_start, vsa_start, simd_start, xfer_start, dma_start;
  logic     nn_done, vsa_done, simd_done, xfer_done, dma_done;
  cmd_t     icmd;
  logic [NW-1:0] n_nn;
  prec_e    prec_nn, prec_vsa;
  logic     merge_a;
  logic [3:0] swap;

  ctrl_unit #(.N(N), .FIFO_DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .nn_busy(nn_busy), .vsa_busy(vsa_busy), .simd_busy(simd_busy),
    .xfer_busy(xfer_busy), .dma_busy(dma_busy),
    .nn_start(nn_start), .vsa_start(vsa_start), .simd_start(simd_start),
    .xfer_start(xfer_start), .dma_start(dma_start), .issued_cmd(icmd),
    .n_nn(n_nn), .prec_nn(prec_nn), .prec_vsa(prec_vsa), .merge_a(merge_a), .swap(swap),
    .busy(busy), .issued_cnt(issued_cnt), .stall_cycles(stall_cycles)
  );

  // Column roles from the folding configuration.
  mode_e sa_mode [N];
  logic  col_vsa [C];
  for (genvar s = 0; s < N; s++) begin : g_sa
    assign sa_mode[s] = (32'(s) >= 32'(n_nn)) ? MODE_VSA : MODE_NN;
  end
  for (genvar c = 0; c < C; c++) begin : g_colrole
    assign col_vsa[c] = (sa_mode[c / W] == MODE_VSA);
  end

  // ---------------------------------------------------------------- engines
  logic [AWA-1:0] nn_a_raddr;
  logic           nn_stat_load;
  logic [AWB-1:0] nn_b_raddr [H];
  logic           nn_left_valid [H];
  logic [AWC-1:0] nn_c_raddr [C];
  logic           nn_top_valid [C];
  logic           nn_c_we [C];
  logic [AWC-1:0] nn_c_waddr [C];

  nn_seq #(.H(H), .C(C), .AWA(AWA), .AWB(AWB), .AWC(AWC)) u_nn (
    .clk(clk), .rst_n(rst_n), .start(nn_start), .cmd(icmd),
    .n_cols(16'(32'(n_nn) * W)), .busy(nn_busy), .done(nn_done),
    .a_raddr(nn_a_raddr), .stat_load(nn_stat_load),
    .b_raddr(nn_b_raddr), .left_valid(nn_left_valid),
    .c_raddr(nn_c_raddr), .top_valid(nn_top_valid), .c_we(nn_c_we), .c_waddr(nn_c_waddr)
  );

  logic [AWA-1:0] vsa_a_raddr;
  logic           vsa_top_zero, vsa_stat_load, vsa_top_valid, vsa_c_we;
  logic [AWC-1:0] vsa_c_raddr, vsa_c_waddr;

  vsa_seq #(.H(H), .AWA(AWA), .AWC(AWC)) u_vsa (
    .clk(clk), .rst_n(rst_n), .start(vsa_start), .cmd(icmd), .busy(vsa_busy), .done(vsa_done),
    .a_raddr(vsa_a_raddr), .top_zero(vsa_top_zero), .stat_load(vsa_stat_load),
    .c_raddr(vsa_c_raddr), .top_valid(vsa_top_valid), .c_we(vsa_c_we), .c_waddr(vsa_c_waddr)
  );

  logic [AWC-1:0]   simd_c_raddr, simd_c_waddr;
  logic [ACC_W-1:0] memc_rdata [C];
  logic             simd_c_we [C], simd_a_we [C];
  logic [ACC_W-1:0] simd_c_wdata [C];
  logic [AWA-1:0]   simd_a_waddr;
  logic [7:0]       simd_a_wdata [C];

  simd_seq #(.C(C), .L(SIMD_L), .DW(ACC_W), .AWA(AWA), .AWC(AWC)) u_simd (
    .clk(clk), .rst_n(rst_n), .start(simd_start), .cmd(icmd), .busy(simd_busy), .done(simd_done),
    .c_raddr(simd_c_raddr), .c_rdata(memc_rdata), .c_we(simd_c_we), .c_waddr(simd_c_waddr),
    .c_wdata(simd_c_wdata), .a_we(simd_a_we), .a_waddr(simd_a_waddr), .a_wdata(simd_a_wdata),
    .scalar(simd_scalar)
  );

  // ---------------------------------------------------------------- cache, bus, transfers
  logic             ca_en, ca_we, cb_en, cb_we;
  logic [CAW-1:0]   ca_addr, cb_addr;
  logic [BUS_W-1:0] ca_wdata, ca_rdata, cb_wdata, cb_rdata;

  axi_dma #(.DW(BUS_W), .CAW(CAW)) u_dma (
    .clk(clk), .rst_n(rst_n), .start(dma_start), .dir_wr(icmd.op == OP_DMA_WR),
    .dram_addr(icmd.ext), .cache_addr(CAW'((icmd.op == OP_DMA_WR) ? icmd.src : icmd.dst)),
    .len(icmd.len), .busy(dma_busy), .done(dma_done),
    .c_en(ca_en), .c_we(ca_we), .c_addr(ca_addr), .c_wdata(ca_wdata), .c_rdata(ca_rdata),
    .m_awvalid(m_awvalid), .m_awready(m_awready), .m_awaddr(m_awaddr), .m_awlen(m_awlen),
    .m_awsize(m_awsize), .m_awburst(m_awburst), .m_wvalid(m_wvalid), .m_wready(m_wready),
    .m_wdata(m_wdata), .m_wstrb(m_wstrb), .m_wlast(m_wlast), .m_bvalid(m_bvalid),
    .m_bready(m_bready), .m_bresp(m_bresp), .m_arvalid(m_arvalid), .m_arready(m_arready),
    .m_araddr(m_araddr), .m_arlen(m_arlen), .m_arsize(m_arsize), .m_arburst(m_arburst),
    .m_rvalid(m_rvalid), .m_rready(m_rready), .m_rdata(m_rdata), .m_rresp(m_rresp),
    .m_rlast(m_rlast)
  );

  onchip_cache #(.WIDTH(BUS_W), .DEPTH(CACHE_D)) u_cache (
    .clk(clk),
    .a_en(ca_en), .a_we(ca_we), .a_addr(ca_addr), .a_wdata(ca_wdata), .a_rdata(ca_rdata),
    .b_en(cb_en), .b_we(cb_we), .b_addr(cb_addr), .b_wdata(cb_wdata), .b_rdata(cb_rdata)
  );

  localparam int unsigned FAWX = (FAWB > FAW1) ? ((FAWB > FAW2) ? FAWB : FAW2)
                                               : ((FAW1 > FAW2) ? FAW1 : FAW2);
  localparam int unsigned FAWM = (FAWX > FAWC) ? FAWX : FAWC;
  mem_sel_e         x_mem;
  logic             x_we;
  logic [FAWM-1:0]  x_waddr, x_raddr;
  logic [BUS_W-1:0] x_wdata, x_rdata;
  logic [FW_A-1:0]  f1_rdata, f2_rdata;
  logic [FW_B-1:0]  fb_rdata;
  logic [FW_C-1:0]  fc_rdata;

  xfer_seq #(.DW(BUS_W), .CAW(CAW), .FAW(FAWM)) u_xfer (
    .clk(clk), .rst_n(rst_n), .start(xfer_start), .cmd(icmd), .busy(xfer_busy), .done(xfer_done),
    .c_en(cb_en), .c_we(cb_we), .c_addr(cb_addr), .c_wdata(cb_wdata), .c_rdata(cb_rdata),
    .mem(x_mem), .f_we(x_we), .f_waddr(x_waddr), .f_wdata(x_wdata), .f_raddr(x_raddr),
    .f_rdata(x_rdata)
  );

  mem_sel_e x_mem_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) x_mem_q <= MEM_A1;
    else        x_mem_q <= x_mem;
  end
  always_comb begin
    case (x_mem_q)
      MEM_A1:  x_rdata = BUS_W'(f1_rdata);
      MEM_A2:  x_rdata = BUS_W'(f2_rdata);
      MEM_B:   x_rdata = BUS_W'(fb_rdata);
      default: x_rdata = BUS_W'(fc_rdata);
    endcase
  end

  // ---------------------------------------------------------------- Mem_A
  logic [AWA-1:0] ma_raddr [C], ma_waddr [C];
  logic [7:0]     ma_rdata [C];
  logic           ma_we [C];

  for (genvar c = 0; c < C; c++) begin : g_ma
    assign ma_raddr[c] = col_vsa[c] ? vsa_a_raddr : nn_a_raddr;
    assign ma_we[c]    = simd_a_we[c];
    assign ma_waddr[c] = simd_a_waddr;
  end

  mem_a #(.LANES(C), .LANE_W(8), .D1(DA1), .D2(DA2), .FILL_W(FW_A)) u_mem_a (
    .clk(clk), .rst_n(rst_n), .merge(merge_a), .col_vsa(col_vsa),
    .swap_a1(swap[0]), .swap_a2(swap[1]), .bank_a1(bank_sel[0]), .bank_a2(bank_sel[1]),
    .c_raddr(ma_raddr), .c_rdata(ma_rdata), .c_we(ma_we), .c_waddr(ma_waddr), .c_wdata(simd_a_wdata),
    .f1_we(x_we && x_mem == MEM_A1), .f1_waddr(FAW1'(x_waddr)), .f1_wdata(FW_A'(x_wdata)),
    .f1_raddr(FAW1'(x_raddr)), .f1_rdata(f1_rdata),
    .f2_we(x_we && x_mem == MEM_A2), .f2_waddr(FAW2'(x_waddr)), .f2_wdata(FW_A'(x_wdata)),
    .f2_raddr(FAW2'(x_raddr)), .f2_rdata(f2_rdata)
  );

  // ---------------------------------------------------------------- Mem_B
  logic [7:0]     mb_rdata [H], mb_wdata [H];
  logic           mb_we [H];
  logic [AWB-1:0] mb_waddr [H];
  for (genvar r = 0; r < H; r++) begin : g_mb
    assign mb_we[r]    = 1'b0;   // Mem_B is written through its fill side only
    assign mb_waddr[r] = '0;
    assign mb_wdata[r] = '0;
  end

  dbuf_mem #(.LANES(H), .LANE_W(8), .DEPTH(DB), .FILL_W(FW_B)) u_mem_b (
    .clk(clk), .rst_n(rst_n), .swap(swap[2]), .bank_sel(bank_sel[2]),
    .c_raddr(nn_b_raddr), .c_rdata(mb_rdata), .c_we(mb_we), .c_waddr(mb_waddr), .c_wdata(mb_wdata),
    .f_we(x_we && x_mem == MEM_B), .f_waddr(FAWB'(x_waddr)), .f_wdata(FW_B'(x_wdata)),
    .f_raddr(FAWB'(x_raddr)), .f_rdata(fb_rdata)
  );

  // ---------------------------------------------------------------- Mem_C
  logic [ACC_W-1:0] psum_bot [C], mc_wdata [C];
  logic [AWC-1:0]   mc_raddr [C], mc_waddr [C];
  logic             mc_we [C];

  for (genvar c = 0; c < C; c++) begin : g_mc
    always_comb begin
      if (simd_busy) begin
        mc_raddr[c] = simd_c_raddr;
        mc_we[c]    = simd_c_we[c];
        mc_waddr[c] = simd_c_waddr;
        mc_wdata[c] = simd_c_wdata[c];
      end else if (col_vsa[c]) begin
        mc_raddr[c] = vsa_c_raddr;
        mc_we[c]    = vsa_c_we;
        mc_waddr[c] = vsa_c_waddr;
        mc_wdata[c] = psum_bot[c];
      end else begin
        mc_raddr[c] = nn_c_raddr[c];
        mc_we[c]    = nn_c_we[c];
        mc_waddr[c] = nn_c_waddr[c];
        mc_wdata[c] = psum_bot[c];
      end
    end
  end

  dbuf_mem #(.LANES(C), .LANE_W(ACC_W), .DEPTH(DC), .FILL_W(FW_C)) u_mem_c (
    .clk(clk), .rst_n(rst_n), .swap(swap[3]), .bank_sel(bank_sel[3]),
    .c_raddr(mc_raddr), .c_rdata(memc_rdata), .c_we(mc_we), .c_waddr(mc_waddr), .c_wdata(mc_wdata),
    .f_we(x_we && x_mem == MEM_C), .f_waddr(FAWC'(x_waddr)), .f_wdata(FW_C'(x_wdata)),
    .f_raddr(FAWC'(x_raddr)), .f_rdata(fc_rdata)
  );

  // ---------------------------------------------------------------- AdArray
  logic             stat_load [C];
  logic [7:0]       top_in [C], left_in [H];
  logic [ACC_W-1:0] psum_top [C];

  for (genvar c = 0; c < C; c++) begin : g_arr_col
    assign stat_load[c] = col_vsa[c] ? vsa_stat_load : nn_stat_load;
    assign top_in[c]    = (col_vsa[c] && vsa_top_zero) ? 8'd0 : ma_rdata[c];
    assign psum_top[c]  = (col_vsa[c] ? vsa_top_valid : nn_top_valid[c]) ? memc_rdata[c] : '0;
  end
  for (genvar r = 0; r < H; r++) begin : g_arr_row
    assign left_in[r] = nn_left_valid[r] ? mb_rdata[r] : 8'd0;
  end

  adarray #(.H(H), .W(W), .N(N), .DATA_W(8), .ACC_W(ACC_W)) u_array (
    .clk(clk), .rst_n(rst_n), .sa_mode(sa_mode), .prec_nn(prec_nn), .prec_vsa(prec_vsa),
    .stat_load(stat_load), .top_in(top_in), .left_in(left_in),
    .psum_top(psum_top), .psum_bot(psum_bot)
  );

  // Cycles in which an NN fold and a VSA chunk run at the same time.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   overlap_cycles <= '0;
    else if (nn_busy && vsa_busy) overlap_cycles <= overlap_cycles + 1;
  end
endmodule
