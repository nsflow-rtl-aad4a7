// tb_mp_mac: checks the mixed-precision MAC against integer arithmetic for
// random operands in INT8 mode (one 8x8 product, 32-bit sum) and in packed
// INT4 mode (two 4x4 products into two independent 16-bit sums).
module tb_mp_mac;
  import nsf_pkg::*;
  prec_e prec;
  logic [7:0] a, b;
  logic [31:0] acc_in, acc_out;
  int checks = 0, failures = 0;

  mp_mac dut (.prec(prec), .a(a), .b(b), .acc_in(acc_in), .acc_out(acc_out));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] exp;
      int p0, p1;
      prec   = prec_e'(i[0]);
      a      = 8'($urandom);
      b      = 8'($urandom);
      acc_in = $urandom;
      if (i < 4) begin a = 8'h80; b = 8'h88; end   // extreme values
      #1;
      if (prec == PREC_INT8) exp = acc_in + 32'(int'($signed(a)) * int'($signed(b)));
      else begin
        p0  = int'($signed(a[3:0])) * int'($signed(b[3:0]));
        p1  = int'($signed(a[7:4])) * int'($signed(b[7:4]));
        exp = {16'(acc_in[31:16] + 16'(p1)), 16'(acc_in[15:0] + 16'(p0))};
      end
      checks++;
      if (acc_out !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL prec=%0d a=%h b=%h acc=%h got %h exp %h", prec, a, b, acc_in, acc_out, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
