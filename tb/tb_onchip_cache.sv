// tb_onchip_cache: random reads and writes on both ports of a small
// true-dual-port cache (64 words of 32 bits) against an array model; read
// data must appear one cycle after the address on each port. Same-address
// accesses from the two ports in one cycle are not generated (the ordering
// of such a collision is not defined).
module tb_onchip_cache;
  localparam int WD = 32, D = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [WD-1:0] a_wdata, a_rdata, b_wdata, b_rdata;
  int checks = 0, failures = 0;

  onchip_cache #(.WIDTH(WD), .DEPTH(D)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WD-1:0] m [D];
  logic [WD-1:0] exp_a, exp_b;
  bit chk_a, chk_b;

  initial begin
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    chk_a = 0; chk_b = 0;
    // initialise through port a, then port b
    for (int w = 0; w < D; w++) begin
      @(negedge clk);
      a_en = (w % 2 == 0); a_we = a_en; a_addr = AW'(w); a_wdata = $urandom;
      b_en = (w % 2 == 1); b_we = b_en; b_addr = AW'(w); b_wdata = $urandom;
      m[w] = a_en ? a_wdata : b_wdata;
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (chk_a) begin checks++; if (a_rdata !== exp_a) begin failures++; if (failures < 10) $display("FAIL a i=%0d %h/%h", i, a_rdata, exp_a); end end
      if (chk_b) begin checks++; if (b_rdata !== exp_b) begin failures++; if (failures < 10) $display("FAIL b i=%0d %h/%h", i, b_rdata, exp_b); end end
      a_en = $urandom_range(0, 3) != 0; a_we = $urandom_range(0, 1); a_addr = AW'($urandom); a_wdata = $urandom;
      b_en = $urandom_range(0, 3) != 0; b_we = $urandom_range(0, 1); b_addr = AW'($urandom); b_wdata = $urandom;
      if (b_addr == a_addr) b_addr = b_addr + 1'b1;
      chk_a = a_en && !a_we;
      chk_b = b_en && !b_we;
      exp_a = m[a_addr];
      exp_b = m[b_addr];
      if (a_en && a_we) m[a_addr] = a_wdata;
      if (b_en && b_we) m[b_addr] = b_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
