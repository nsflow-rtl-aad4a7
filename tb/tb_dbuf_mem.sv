// tb_dbuf_mem: random traffic on a small double buffer (4 lanes of 8 bits,
// 16 words, 16-bit fill chunks) against a two-sided reference model. Every
// cycle may carry per-lane compute reads and writes and one fill-side read
// and write; swap pulses at random exchange the sides. Checks that read data
// arrives one cycle after the address, that the two sides are isolated until
// a swap, and that the chunk address word*CHUNKS+k maps to lanes k*LPC...
module tb_dbuf_mem;
  localparam int L = 4, LW = 8, D = 16, FW = 16, LPC = FW / LW, CH = L / LPC;
  localparam int AW = 4, FAW = AW + 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic swap, bank_sel;
  logic [AW-1:0] c_raddr [L], c_waddr [L];
  logic [LW-1:0] c_rdata [L], c_wdata [L];
  logic c_we [L];
  logic f_we;
  logic [FAW-1:0] f_waddr, f_raddr;
  logic [FW-1:0] f_wdata, f_rdata;
  int checks = 0, failures = 0;

  dbuf_mem #(.LANES(L), .LANE_W(LW), .DEPTH(D), .FILL_W(FW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [LW-1:0] comp [L][D], fill [L][D];
  logic [LW-1:0] exp_c [L];
  logic [FW-1:0] exp_f;
  bit chk_c [L];
  bit chk_f;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  initial begin
    swap = 0; f_we = 0; f_waddr = 0; f_raddr = 0; f_wdata = 0;
    for (int l = 0; l < L; l++) begin c_raddr[l] = 0; c_waddr[l] = 0; c_wdata[l] = 0; c_we[l] = 0; chk_c[l] = 0; end
    chk_f = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise both sides through the fill port and a swap
    for (int s = 0; s < 2; s++) begin
      for (int w = 0; w < D; w++) for (int k = 0; k < CH; k++) begin
        @(negedge clk);
        f_we = 1; f_waddr = FAW'(w * CH + k); f_wdata = FW'($urandom);
        for (int j = 0; j < LPC; j++) fill[k*LPC+j][w] = f_wdata[j*LW +: LW];
      end
      @(negedge clk);
      f_we = 0; swap = 1;
      @(negedge clk);
      swap = 0;
      for (int l = 0; l < L; l++) for (int w = 0; w < D; w++) begin
        logic [LW-1:0] t;
        t = comp[l][w]; comp[l][w] = fill[l][w]; fill[l][w] = t;
      end
    end
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      bit do_swap;
      @(negedge clk);
      // results of the previous cycle's reads
      for (int l = 0; l < L; l++)
        if (chk_c[l]) check(c_rdata[l] == exp_c[l], $sformatf("i=%0d lane %0d got %h exp %h", i, l, c_rdata[l], exp_c[l]));
      if (chk_f) check(f_rdata == exp_f, $sformatf("i=%0d fill got %h exp %h", i, f_rdata, exp_f));
      do_swap = ($urandom_range(0, 29) == 0);
      swap = do_swap;
      f_we = !do_swap && $urandom_range(0, 1);
      f_waddr = FAW'($urandom_range(0, D * CH - 1));
      f_wdata = FW'($urandom);
      f_raddr = FAW'($urandom_range(0, D * CH - 1));
      chk_f = !do_swap && !(f_we && f_waddr == f_raddr);
      for (int j = 0; j < LPC; j++) exp_f[j*LW +: LW] = fill[(f_raddr % CH)*LPC + j][f_raddr / CH];
      for (int l = 0; l < L; l++) begin
        c_we[l]    = !do_swap && $urandom_range(0, 1);
        c_waddr[l] = AW'($urandom_range(0, D - 1));
        c_wdata[l] = LW'($urandom);
        c_raddr[l] = AW'($urandom_range(0, D - 1));
        chk_c[l]   = !do_swap && !(c_we[l] && c_waddr[l] == c_raddr[l]);
        exp_c[l]   = comp[l][c_raddr[l]];
      end
      // model update at the coming edge
      if (f_we) for (int j = 0; j < LPC; j++) fill[(f_waddr % CH)*LPC + j][f_waddr / CH] = f_wdata[j*LW +: LW];
      for (int l = 0; l < L; l++) if (c_we[l]) comp[l][c_waddr[l]] = c_wdata[l];
      if (do_swap)
        for (int l = 0; l < L; l++) for (int w = 0; w < D; w++) begin
          logic [LW-1:0] t;
          t = comp[l][w]; comp[l][w] = fill[l][w]; fill[l][w] = t;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
