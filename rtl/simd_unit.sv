// simd_unit: the custom SIMD unit, LANES processing elements working on one
// row of array results per operation.
//
// Each PE applies the element-wise operation op (add, sub, mul, max, min,
// relu, clamp, arithmetic shift) to its lane of a and b; a reduction tree
// forms the sum, the maximum or the dot product of all lanes. The reduction
// accumulates across successive rows into the scalar register: in_first
// starts a new accumulation. Element-wise operations leave the scalar alone. With split set every 32-bit lane is treated as
// two independent signed 16-bit lanes (the INT4 results of the array), and
// the scalar holds two 16-bit results likewise.
// Timing: in_valid with operands in cycle t gives out_valid, y and scalar in
// cycle t+1. The paper lists sum, mult/div, exp/log/tanh, norm and softmax
// circuits per PE; this unit builds the integer subset listed above and not
// division or the transcendental functions.
module simd_unit
  import nsf_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned DW    = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_first,
  input  simd_op_e      op,
  input  logic          split,
  input  logic [DW-1:0] imm_lo,
  input  logic [DW-1:0] imm_hi,
  input  logic [DW-1:0] a [LANES],
  input  logic [DW-1:0] b [LANES],
  output logic          out_valid,
  output logic [DW-1:0] y [LANES],
  output logic [DW-1:0] scalar
);
  localparam int unsigned HW = DW / 2;

  // Element-wise operation on one value of width DW (the caller truncates).
  function automatic logic signed [DW-1:0] elem(simd_op_e o, logic signed [DW-1:0] x,
                                                logic signed [DW-1:0] z,
                                                logic signed [DW-1:0] lo,
                                                logic signed [DW-1:0] hi);
    case (o)
      SIMD_ADD:   return x + z;
      SIMD_SUB:   return x - z;
      SIMD_MUL:   return x * z;
      SIMD_MAX:   return (x > z) ? x : z;
      SIMD_MIN:   return (x < z) ? x : z;
      SIMD_RELU:  return (x > 0) ? x : '0;
      SIMD_CLAMP: return (x < lo) ? lo : ((x > hi) ? hi : x);
      SIMD_SHR:   return x >>> lo[4:0];
      SIMD_DOT:   return x * z;
      default:    return x;
    endcase
  endfunction

  function automatic logic is_max(simd_op_e o);
    return o == SIMD_RMAX;
  endfunction

  logic is_red;
  assign is_red = (op == SIMD_RSUM) || (op == SIMD_RMAX) || (op == SIMD_DOT);

  logic [DW-1:0] e [LANES];
  logic [DW-1:0] red, red_acc;

  logic signed [DW-1:0] ext_lo, ext_hi;
  assign ext_lo = $signed({{HW{imm_lo[HW-1]}}, imm_lo[HW-1:0]});
  assign ext_hi = $signed({{HW{imm_hi[HW-1]}}, imm_hi[HW-1:0]});

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [HW-1:0] r0, r1;
    logic [DW-1:0] rf;
    assign r0 = HW'(elem(op, DW'($signed(a[l][HW-1:0])),  DW'($signed(b[l][HW-1:0])),  ext_lo, ext_hi));
    assign r1 = HW'(elem(op, DW'($signed(a[l][DW-1:HW])), DW'($signed(b[l][DW-1:HW])), ext_lo, ext_hi));
    assign rf = elem(op, a[l], b[l], imm_lo, imm_hi);
    // In split mode only the low half of each half-lane result is kept.
    assign e[l] = split ? {r1, r0} : rf;
  end

  // Reduction over the lanes (sum for RSUM/DOT, max for RMAX).
  always_comb begin
    logic signed [HW-1:0] s0, s1;
    logic signed [DW-1:0] s;
    logic [DW-1:0]        src;
    s   = '0;
    s0  = '0;
    s1  = '0;
    src = '0;
    if (is_max(op)) begin
      s  = $signed(a[0]);
      s0 = $signed(a[0][HW-1:0]);
      s1 = $signed(a[0][DW-1:HW]);
      for (int l = 1; l < LANES; l++) begin
        if ($signed(a[l]) > s) s = $signed(a[l]);
        if ($signed(a[l][HW-1:0]) > s0) s0 = $signed(a[l][HW-1:0]);
        if ($signed(a[l][DW-1:HW]) > s1) s1 = $signed(a[l][DW-1:HW]);
      end
    end else begin
      for (int l = 0; l < LANES; l++) begin
        src = (op == SIMD_DOT) ? e[l] : a[l];
        s  = s + $signed(src);
        s0 = s0 + $signed(src[HW-1:0]);
        s1 = s1 + $signed(src[DW-1:HW]);
      end
    end
    red = split ? {s1, s0} : s;
  end

  // Combine the row reduction with the running scalar.
  always_comb begin
    logic signed [HW-1:0] c0, c1;
    logic signed [DW-1:0] cf;
    if (is_max(op)) begin
      cf = ($signed(red) > $signed(scalar)) ? red : scalar;
      c0 = ($signed(red[HW-1:0]) > $signed(scalar[HW-1:0])) ? red[HW-1:0] : scalar[HW-1:0];
      c1 = ($signed(red[DW-1:HW]) > $signed(scalar[DW-1:HW])) ? red[DW-1:HW] : scalar[DW-1:HW];
    end else begin
      cf = scalar + red;
      c0 = scalar[HW-1:0] + red[HW-1:0];
      c1 = scalar[DW-1:HW] + red[DW-1:HW];
    end
    red_acc = split ? {c1, c0} : cf;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      scalar    <= '0;
      for (int l = 0; l < LANES; l++) y[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) y[l] <= e[l];
        if (is_red) scalar <= in_first ? red : red_acc;
      end
    end
  end
endmodule
