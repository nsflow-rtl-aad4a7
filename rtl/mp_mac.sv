// mp_mac: mixed-precision multiply-accumulate used inside every AdArray PE.
//
// acc_out = acc_in + a * b, combinational. With prec = PREC_INT8 the operands
// are one signed 8-bit value each and the accumulator is one signed 32-bit
// value. With prec = PREC_INT4 each 8-bit operand carries two signed 4-bit
// values (low nibble = lane 0, high nibble = lane 1) and the accumulator is
// split into two independent signed 16-bit lanes (acc[15:0] = lane 0,
// acc[31:16] = lane 1), so one multiplier does two INT4 products per cycle.
// The paper states that the array's multipliers support INT8 and INT4 and
// that low-precision additions sit in LUTs; packing two INT4 products into one
// 8-bit datapath is this design's way of using that.
module mp_mac
  import nsf_pkg::*;
#(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  prec_e                    prec,
  input  logic signed [DATA_W-1:0] a,
  input  logic signed [DATA_W-1:0] b,
  input  logic        [ACC_W-1:0]  acc_in,
  output logic        [ACC_W-1:0]  acc_out
);
  localparam int unsigned HD = DATA_W / 2;
  localparam int unsigned HA = ACC_W / 2;

  logic signed [2*DATA_W-1:0] p_full;
  logic signed [DATA_W-1:0]   p_lo, p_hi;
  logic signed [HA-1:0]       s_lo, s_hi;

  always_comb begin
    p_full = a * b;
    p_lo   = $signed(a[HD-1:0]) * $signed(b[HD-1:0]);
    p_hi   = $signed(a[DATA_W-1:HD]) * $signed(b[DATA_W-1:HD]);
    s_lo   = $signed(acc_in[HA-1:0]) + HA'(p_lo);
    s_hi   = $signed(acc_in[ACC_W-1:HA]) + HA'(p_hi);
    if (prec == PREC_INT4) acc_out = {s_hi, s_lo};
    else                   acc_out = acc_in + ACC_W'(p_full);
  end
endmodule
