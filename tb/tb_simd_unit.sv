// tb_simd_unit: random rows through a 4-lane SIMD unit for every operation,
// in 32-bit and in split (two 16-bit) mode, against integer reference
// arithmetic. Reductions (sum, max, dot) run over runs of 1..4 rows with
// in_first on the first row, so the scalar's accumulation across rows is
// checked; element-wise operations must leave the scalar unchanged.
// Results are checked one cycle after in_valid.
module tb_simd_unit;
  import nsf_pkg::*;
  localparam int L = 4, DW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_first, split, out_valid;
  simd_op_e op;
  logic [DW-1:0] imm_lo, imm_hi, scalar;
  logic [DW-1:0] a [L], b [L], y [L];
  int checks = 0, failures = 0;

  simd_unit #(.LANES(L), .DW(DW)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference on one value of width w (16 or 32), returned sign-extended
  function automatic longint ref_elem(simd_op_e o, longint x, longint z, longint lo, longint hi, int w);
    longint r;
    case (o)
      SIMD_ADD:   r = x + z;
      SIMD_SUB:   r = x - z;
      SIMD_MUL,
      SIMD_DOT:   r = x * z;
      SIMD_MAX:   r = (x > z) ? x : z;
      SIMD_MIN:   r = (x < z) ? x : z;
      SIMD_RELU:  r = (x > 0) ? x : 0;
      SIMD_CLAMP: r = (x < lo) ? lo : ((x > hi) ? hi : x);
      SIMD_SHR:   r = x >>> (lo & 31);
      default:    r = x;
    endcase
    return r;
  endfunction

  function automatic longint sx(logic [31:0] v, int w);
    return (w == 16) ? longint'($signed(v[15:0])) : longint'($signed(v));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  logic [DW-1:0] acc;

  initial begin
    in_valid = 0; in_first = 0; split = 0; op = SIMD_ADD; imm_lo = 0; imm_hi = 0;
    for (int l = 0; l < L; l++) begin a[l] = 0; b[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(scalar == 0 && out_valid == 0, "reset state");
    for (int i = 0; i < 600; i++) begin
      int rows;
      simd_op_e o;
      bit sp;
      o  = simd_op_e'($urandom_range(0, 10));
      sp = $urandom_range(0, 1);
      rows = $urandom_range(1, 4);
      imm_lo = $urandom; imm_hi = $urandom;
      if (o == SIMD_CLAMP) begin   // keep lo <= hi
        imm_lo = sp ? {16'h0, 16'(-($urandom_range(0, 30000)))} : -$urandom_range(0, 1 << 30);
        imm_hi = sp ? {16'h0, 16'($urandom_range(0, 30000))} : $urandom_range(0, 1 << 30);
      end
      for (int r = 0; r < rows; r++) begin
        logic [DW-1:0] scal_before;
        logic [DW-1:0] ey [L];
        logic [DW-1:0] red;
        longint s0, s1, sf;
        scal_before = scalar;
        op = o; split = sp; in_valid = 1; in_first = (r == 0);
        for (int l = 0; l < L; l++) begin
          a[l] = $urandom; b[l] = $urandom;
          if ($urandom_range(0, 3) == 0) a[l] = b[l];   // equal operands for max/min
          if (sp) begin
            ey[l][15:0]  = 16'(ref_elem(o, sx(a[l], 16), sx(b[l], 16), sx(imm_lo, 16), sx(imm_hi, 16), 16));
            ey[l][31:16] = 16'(ref_elem(o, sx(a[l] >> 16, 16), sx(b[l] >> 16, 16), sx(imm_lo, 16), sx(imm_hi, 16), 16));
          end else
            ey[l] = 32'(ref_elem(o, sx(a[l], 32), sx(b[l], 32), sx(imm_lo, 32), sx(imm_hi, 32), 32));
        end
        // row reduction
        if (o == SIMD_RMAX) begin
          s0 = sx(a[0], 16); s1 = sx(a[0] >> 16, 16); sf = sx(a[0], 32);
          for (int l = 1; l < L; l++) begin
            if (sx(a[l], 16) > s0) s0 = sx(a[l], 16);
            if (sx(a[l] >> 16, 16) > s1) s1 = sx(a[l] >> 16, 16);
            if (sx(a[l], 32) > sf) sf = sx(a[l], 32);
          end
        end else begin
          s0 = 0; s1 = 0; sf = 0;
          for (int l = 0; l < L; l++) begin
            logic [31:0] v;
            v = (o == SIMD_DOT) ? ey[l] : a[l];
            s0 += sx(v, 16); s1 += sx(v >> 16, 16); sf += sx(v, 32);
          end
        end
        red = sp ? {16'(s1), 16'(s0)} : 32'(sf);
        if (o == SIMD_RSUM || o == SIMD_DOT || o == SIMD_RMAX) begin
          if (r == 0) acc = red;
          else if (o == SIMD_RMAX) begin
            if (sp) begin
              acc[15:0]  = ($signed(red[15:0])  > $signed(acc[15:0]))  ? red[15:0]  : acc[15:0];
              acc[31:16] = ($signed(red[31:16]) > $signed(acc[31:16])) ? red[31:16] : acc[31:16];
            end else acc = ($signed(red) > $signed(acc)) ? red : acc;
          end else if (sp) begin
            acc[15:0]  = acc[15:0] + red[15:0];
            acc[31:16] = acc[31:16] + red[31:16];
          end else acc = acc + red;
        end else acc = scal_before;
        @(negedge clk);
        check(out_valid == 1, "out_valid");
        for (int l = 0; l < L; l++)
          check(y[l] == ey[l], $sformatf("op=%0d split=%0d lane %0d a=%h b=%h got %h exp %h", o, sp, l, a[l], b[l], y[l], ey[l]));
        check(scalar == acc, $sformatf("op=%0d split=%0d row %0d scalar %h exp %h", o, sp, r, scalar, acc));
      end
      in_valid = 0;
      @(negedge clk);
      check(out_valid == 0, "out_valid low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
