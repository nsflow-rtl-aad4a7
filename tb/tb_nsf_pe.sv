// tb_nsf_pe: checks one AdArray PE cycle by cycle against a register-level
// model of the paper's Fig. 4(b): in VSA mode an input spends one cycle in
// the passing and one in the streaming register and the MAC uses the value
// entering the streaming register; in NN mode the passing register is
// bypassed and the left input is used and passed on. Also checks the
// stationary-register load and INT4 operation.
module tb_nsf_pe;
  import nsf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mode_e mode;
  prec_e prec;
  logic stat_load;
  logic [7:0] stat_in, stat_out, in_left, pass_in, stream_out;
  logic [31:0] psum_in, psum_out;
  int checks = 0, failures = 0;

  nsf_pe dut (.clk(clk), .rst_n(rst_n), .mode(mode), .prec(prec), .stat_load(stat_load),
              .stat_in(stat_in), .stat_out(stat_out), .in_left(in_left), .pass_in(pass_in),
              .stream_out(stream_out), .psum_in(psum_in), .psum_out(psum_out));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  logic [7:0] m_stat, m_pass, m_stream;
  logic [31:0] m_psum;
  function automatic logic [31:0] mac(prec_e p, logic [7:0] x, logic [7:0] y, logic [31:0] acc);
    if (p == PREC_INT8) return acc + 32'(int'($signed(x)) * int'($signed(y)));
    return {16'(acc[31:16] + 16'(int'($signed(x[7:4])) * int'($signed(y[7:4])))),
            16'(acc[15:0]  + 16'(int'($signed(x[3:0])) * int'($signed(y[3:0]))))};
  endfunction

  initial begin
    mode = MODE_NN; prec = PREC_INT8; stat_load = 0; stat_in = 0; in_left = 0; pass_in = 0; psum_in = 0;
    m_stat = 0; m_pass = 0; m_stream = 0; m_psum = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      logic [7:0] nxt;
      @(negedge clk);
      mode      = mode_e'((i / 150) % 2);
      prec      = prec_e'((i / 300) % 2);
      stat_load = ($urandom_range(0, 9) == 0);
      stat_in   = 8'($urandom);
      in_left   = 8'($urandom);
      pass_in   = 8'($urandom);
      psum_in   = $urandom;
      nxt = (mode == MODE_VSA) ? m_pass : in_left;
      @(posedge clk);
      m_psum   = mac(prec, m_stat, nxt, psum_in);
      m_stream = nxt;
      m_pass   = pass_in;
      if (stat_load) m_stat = stat_in;
      #1;
      checks++;
      if (psum_out !== m_psum || stream_out !== m_stream || stat_out !== m_stat) begin
        failures++;
        if (failures < 10) $display("FAIL i=%0d mode=%0d psum %h/%h stream %h/%h stat %h/%h", i, mode,
                                    psum_out, m_psum, stream_out, m_stream, stat_out, m_stat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
