// tb_mem_a: random traffic on a small Mem_A (4 lanes, Mem_A1 of 8 words,
// Mem_A2 of 6 words, one 32-bit fill chunk per word) against a reference
// model, in three phases: split with lanes 0-1 on Mem_A1 and 2-3 on Mem_A2,
// split with all lanes on Mem_A2, and merged (addresses 0..13, below 8 in
// Mem_A1). Checks one-cycle reads, per-chunk swaps and the merged map.
module tb_mem_a;
  localparam int L = 4, LW = 8, D1 = 8, D2 = 6, FW = 32;
  localparam int AW = 4, FAW1 = 4, FAW2 = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic merge, swap_a1, swap_a2, bank_a1, bank_a2;
  logic col_vsa [L];
  logic [AW-1:0] c_raddr [L], c_waddr [L];
  logic [LW-1:0] c_rdata [L], c_wdata [L];
  logic c_we [L];
  logic f1_we, f2_we;
  logic [FAW1-1:0] f1_waddr, f1_raddr;
  logic [FAW2-1:0] f2_waddr, f2_raddr;
  logic [FW-1:0] f1_wdata, f1_rdata, f2_wdata, f2_rdata;
  int checks = 0, failures = 0;

  mem_a #(.LANES(L), .LANE_W(LW), .D1(D1), .D2(D2), .FILL_W(FW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: [chunk][side] with side 0 = compute, 1 = fill
  logic [LW-1:0] m1 [2][L][D1], m2 [2][L][D2];
  logic [LW-1:0] exp_c [L];
  logic [FW-1:0] exp_f1, exp_f2;
  bit chk_c [L];
  bit chk_f1, chk_f2;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  task automatic do_swap1();
    for (int l = 0; l < L; l++) for (int w = 0; w < D1; w++) begin
      logic [LW-1:0] t; t = m1[0][l][w]; m1[0][l][w] = m1[1][l][w]; m1[1][l][w] = t;
    end
  endtask
  task automatic do_swap2();
    for (int l = 0; l < L; l++) for (int w = 0; w < D2; w++) begin
      logic [LW-1:0] t; t = m2[0][l][w]; m2[0][l][w] = m2[1][l][w]; m2[1][l][w] = t;
    end
  endtask

  // which chunk and word a compute address reaches for lane l
  function automatic void map(int l, int a, output bit two, output int w);
    if (merge) begin two = (a >= D1); w = two ? a - D1 : a; end
    else begin two = col_vsa[l]; w = a; end
  endfunction

  initial begin
    merge = 0; swap_a1 = 0; swap_a2 = 0; f1_we = 0; f2_we = 0;
    f1_waddr = 0; f1_raddr = 0; f2_waddr = 0; f2_raddr = 0; f1_wdata = 0; f2_wdata = 0;
    for (int l = 0; l < L; l++) begin col_vsa[l] = 0; c_raddr[l] = 0; c_waddr[l] = 0; c_wdata[l] = 0; c_we[l] = 0; chk_c[l] = 0; end
    chk_f1 = 0; chk_f2 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill both sides of both chunks
    for (int s = 0; s < 2; s++) begin
      for (int w = 0; w < D1; w++) begin
        @(negedge clk);
        f1_we = 1; f1_waddr = FAW1'(w); f1_wdata = $urandom;
        f2_we = (w < D2); f2_waddr = FAW2'(w); f2_wdata = $urandom;
        for (int l = 0; l < L; l++) begin
          m1[1][l][w] = f1_wdata[l*LW +: LW];
          if (w < D2) m2[1][l][w] = f2_wdata[l*LW +: LW];
        end
      end
      @(negedge clk);
      f1_we = 0; f2_we = 0; swap_a1 = 1; swap_a2 = 1;
      @(negedge clk);
      swap_a1 = 0; swap_a2 = 0;
      do_swap1(); do_swap2();
    end
    for (int ph = 0; ph < 3; ph++) begin
      @(negedge clk);
      merge = (ph == 2);
      for (int l = 0; l < L; l++) col_vsa[l] = (ph == 1) || (l >= 2);
      for (int l = 0; l < L; l++) begin c_we[l] = 0; chk_c[l] = 0; end
      chk_f1 = 0; chk_f2 = 0;
      for (int i = 0; i < 1500; i++) begin
        bit s1, s2;
        @(negedge clk);
        for (int l = 0; l < L; l++)
          if (chk_c[l]) check(c_rdata[l] == exp_c[l], $sformatf("ph=%0d i=%0d lane %0d got %h exp %h", ph, i, l, c_rdata[l], exp_c[l]));
        if (chk_f1) check(f1_rdata == exp_f1, $sformatf("ph=%0d f1 got %h exp %h", ph, f1_rdata, exp_f1));
        if (chk_f2) check(f2_rdata == exp_f2, $sformatf("ph=%0d f2 got %h exp %h", ph, f2_rdata, exp_f2));
        s1 = ($urandom_range(0, 39) == 0);
        s2 = ($urandom_range(0, 39) == 0);
        swap_a1 = s1; swap_a2 = s2;
        f1_we = !s1 && $urandom_range(0, 1); f1_waddr = FAW1'($urandom_range(0, D1 - 1)); f1_wdata = $urandom;
        f2_we = !s2 && $urandom_range(0, 1); f2_waddr = FAW2'($urandom_range(0, D2 - 1)); f2_wdata = $urandom;
        f1_raddr = FAW1'($urandom_range(0, D1 - 1));
        f2_raddr = FAW2'($urandom_range(0, D2 - 1));
        chk_f1 = !s1 && !(f1_we && f1_waddr == f1_raddr);
        chk_f2 = !s2 && !(f2_we && f2_waddr == f2_raddr);
        for (int l = 0; l < L; l++) begin
          exp_f1[l*LW +: LW] = m1[1][l][f1_raddr];
          exp_f2[l*LW +: LW] = m2[1][l][f2_raddr];
        end
        for (int l = 0; l < L; l++) begin
          int lim, wr, wwd, rwd;
          bit rtwo, wtwo;
          lim = merge ? D1 + D2 : (col_vsa[l] ? D2 : D1);
          c_raddr[l] = AW'($urandom_range(0, lim - 1));
          c_waddr[l] = AW'($urandom_range(0, lim - 1));
          c_wdata[l] = LW'($urandom);
          map(l, int'(c_raddr[l]), rtwo, rwd);
          map(l, int'(c_waddr[l]), wtwo, wwd);
          c_we[l] = !(wtwo ? s2 : s1) && $urandom_range(0, 1);
          chk_c[l] = !(rtwo ? s2 : s1) && !(c_we[l] && c_waddr[l] == c_raddr[l]);
          exp_c[l] = rtwo ? m2[0][l][rwd] : m1[0][l][rwd];
          if (c_we[l]) begin
            if (wtwo) m2[0][l][wwd] = c_wdata[l]; else m1[0][l][wwd] = c_wdata[l];
          end
        end
        if (f1_we) for (int l = 0; l < L; l++) m1[1][l][f1_waddr] = f1_wdata[l*LW +: LW];
        if (f2_we) for (int l = 0; l < L; l++) m2[1][l][f2_waddr] = f2_wdata[l*LW +: LW];
        if (s1) do_swap1();
        if (s2) do_swap2();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
