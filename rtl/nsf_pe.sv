// nsf_pe: one processing element of the adaptive systolic array (AdArray).
//
// Registers (paper, Fig. 4(b)): a stationary register (weight in NN mode, one
// element of vector A in VSA mode), a passing register, a streaming register
// and a partial-sum register. Every cycle
//   next_stream = (mode == MODE_VSA) ? pass : in_left
//   psum       <= psum_in + stat * next_stream      (mp_mac)
//   stream     <= next_stream
//   pass       <= pass_in                           (above PE's stream register)
// In VSA mode a streamed element therefore spends one cycle in the passing
// register and one in the streaming register of each PE before it moves to the
// PE below, which gives the 1-cycle pace mismatch against the partial sums
// that makes a column compute a circular convolution. In NN mode the passing
// register is bypassed by the multiplexer and stream_out feeds the PE to the
// right, as in a weight-stationary systolic array.
// stat_load shifts the stationary register down the column (stat <= stat_in),
// so a column is loaded in H cycles. No reset is needed on the datapath
// registers: every value that reaches a written output is loaded first; they
// are reset anyway so that simulations start from zero.
module nsf_pe
  import nsf_pkg::*;
#(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode,
  input  prec_e             prec,
  input  logic              stat_load,
  input  logic [DATA_W-1:0] stat_in,
  output logic [DATA_W-1:0] stat_out,
  input  logic [DATA_W-1:0] in_left,
  input  logic [DATA_W-1:0] pass_in,
  output logic [DATA_W-1:0] stream_out,
  input  logic [ACC_W-1:0]  psum_in,
  output logic [ACC_W-1:0]  psum_out
);
  logic [DATA_W-1:0] stat_q, pass_q, stream_q, next_stream;
  logic [ACC_W-1:0]  psum_q, mac;

  assign next_stream = (mode == MODE_VSA) ? pass_q : in_left;

  mp_mac #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_mac (
    .prec   (prec),
    .a      (stat_q),
    .b      (next_stream),
    .acc_in (psum_in),
    .acc_out(mac)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_q   <= '0;
      pass_q   <= '0;
      stream_q <= '0;
      psum_q   <= '0;
    end else begin
      if (stat_load) stat_q <= stat_in;
      pass_q   <= pass_in;
      stream_q <= next_stream;
      psum_q   <= mac;
    end
  end

  assign stat_out   = stat_q;
  assign stream_out = stream_q;
  assign psum_out   = psum_q;
endmodule
