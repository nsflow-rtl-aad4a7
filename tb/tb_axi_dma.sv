// tb_axi_dma: the DMA engine (64-bit bus, 16-beat bursts) against the
// behavioural DRAM with random ready gaps and a 1024-word cache model.
// A 300-word read starting 40 words below a 4 KB boundary must land in the
// cache unchanged, in ceil-split bursts that never cross 4 KB; a 300-word
// write from the cache back to another DRAM region must reproduce the data.
// Checks burst counts, the DRAM model's protocol counter, busy/done and a
// lower bound of one cycle per beat on the transfer time.
module tb_axi_dma;
  localparam int DW = 64, CAW = 10, MB = 16, BYTES = DW / 8, WORDS = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, dir_wr, busy, done;
  logic [63:0] dram_addr;
  logic [CAW-1:0] cache_addr;
  logic [31:0] len;
  logic c_en, c_we;
  logic [CAW-1:0] c_addr;
  logic [DW-1:0] c_wdata, c_rdata;
  logic m_awvalid, m_awready, m_wvalid, m_wready, m_wlast, m_bvalid, m_bready;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  logic [63:0] m_awaddr, m_araddr;
  logic [7:0] m_awlen, m_arlen;
  logic [2:0] m_awsize, m_arsize;
  logic [1:0] m_awburst, m_arburst, m_bresp, m_rresp;
  logic [DW-1:0] m_wdata, m_rdata;
  logic [BYTES-1:0] m_wstrb;
  int rd_bursts, wr_bursts, protocol_errors;
  int checks = 0, failures = 0;

  axi_dma #(.DW(DW), .CAW(CAW), .MAX_BEATS(MB)) dut (.*);

  axi_dram_model #(.DW(DW), .WORDS(WORDS), .SEED(3)) dram (
    .clk(clk), .rst_n(rst_n), .awvalid(m_awvalid), .awready(m_awready), .awaddr(m_awaddr),
    .awlen(m_awlen), .wvalid(m_wvalid), .wready(m_wready), .wdata(m_wdata), .wlast(m_wlast),
    .bvalid(m_bvalid), .bready(m_bready), .bresp(m_bresp), .arvalid(m_arvalid),
    .arready(m_arready), .araddr(m_araddr), .arlen(m_arlen), .rvalid(m_rvalid),
    .rready(m_rready), .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast),
    .rd_bursts(rd_bursts), .wr_bursts(wr_bursts), .protocol_errors(protocol_errors));

  // cache model with a one-cycle read
  logic [DW-1:0] cache [1 << CAW];
  always_ff @(posedge clk) if (c_en) begin
    if (c_we) cache[c_addr] <= c_wdata;
    c_rdata <= cache[c_addr];
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  task automatic run(input bit wr, input longint addr, input int caddr, input int n, output int cycles);
    @(negedge clk);
    start = 1; dir_wr = wr; dram_addr = addr; cache_addr = CAW'(caddr); len = n;
    @(negedge clk);
    start = 0;
    check(busy == 1, "busy after start");
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
    check(busy == 0, "idle after done");
  endtask

  initial begin
    int cyc, nb;
    longint base_rd, base_wr;
    start = 0; dir_wr = 0; dram_addr = 0; cache_addr = 0; len = 0;
    for (int w = 0; w < (1 << CAW); w++) cache[w] = '0;
    base_rd = 4096 - 40 * BYTES;          // 40 words before the first 4 KB boundary
    base_wr = 3 * 4096 + 17 * BYTES;
    for (int w = 0; w < WORDS; w++) dram.mem[w] = {$urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(busy == 0 && done == 0 && m_arvalid == 0 && m_awvalid == 0, "reset state");
    // read 300 words into cache address 100
    run(0, base_rd, 100, 300, cyc);
    for (int w = 0; w < 300; w++)
      check(cache[100 + w] == dram.mem[base_rd / BYTES + w], $sformatf("read word %0d", w));
    // bursts: 40 words to the boundary (3 bursts of <=16) + 260 words (512 per 4 KB, so 17 bursts)
    nb = (40 + MB - 1) / MB + (260 + MB - 1) / MB;
    check(rd_bursts == nb, $sformatf("read bursts %0d exp %0d", rd_bursts, nb));
    check(cyc >= 300, $sformatf("read cycles %0d", cyc));
    // write them back elsewhere
    run(1, base_wr, 100, 300, cyc);
    for (int w = 0; w < 300; w++)
      check(dram.mem[base_wr / BYTES + w] == cache[100 + w], $sformatf("write word %0d", w));
    nb = (300 + MB - 1) / MB;             // 495 words remain in that 4 KB page
    check(wr_bursts == nb, $sformatf("write bursts %0d exp %0d", wr_bursts, nb));
    check(cyc >= 2 * 300, $sformatf("write cycles %0d", cyc));
    // zero-length command completes
    run(0, 0, 0, 0, cyc);
    check(cyc < 10, $sformatf("zero-length cycles %0d", cyc));
    check(protocol_errors == 0, $sformatf("protocol errors %0d", protocol_errors));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
