// nn_seq: NN engine of the control unit. Runs one weight-stationary GEMM
// fold on the NN sub-arrays of AdArray.
//
// Command (OP_NN): aux = Mem_A row of weight row 0, src = Mem_B row of input
// vector 0, dst = Mem_C row of output 0, len = M input vectors, flags[0] =
// accumulate onto what Mem_C already holds (for folds over a reduction
// dimension larger than H). Data layout: Mem_A lane c, row aux+r = W[r][c];
// Mem_B lane r, row src+t = X[t][r]; result Mem_C lane c, row dst+t =
// sum_r X[t][r] * W[r][c] for the n_cols NN columns.
// Phases, with every memory read returning one cycle after its address:
//   LOAD   j = 0..H   : read weight row H-1-j; shift it into the column one
//                       cycle later (stat_load), so row r ends up in PE row r.
//   STREAM k = 0..M+H+n_cols-1 :
//     Mem_B lane r reads vector t = k - r   (input skew by addressing)
//     Mem_C lane c reads output t = k - c   (partial sum entering the top)
//     Mem_C lane c writes output t = k - H - c - 1 (psum leaving the bottom)
// A fold takes 2H + n_cols + M + 2 cycles from the start pulse to the done
// pulse; the paper's model gives 2H + W + M - 2 per fold, the 4 extra cycles
// being command capture, memory read latency, the load-to-stream handoff and
// the done cycle.
module nn_seq
  import nsf_pkg::*;
#(
  parameter int unsigned H   = 32,
  parameter int unsigned C   = 256,
  parameter int unsigned AWA = 13,
  parameter int unsigned AWB = 16,
  parameter int unsigned AWC = 10
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cmd_t           cmd,
  input  logic [15:0]    n_cols,
  output logic           busy,
  output logic           done,
  // Mem_A (weights) and the array's stationary load
  output logic [AWA-1:0] a_raddr,
  output logic           stat_load,
  // Mem_B (inputs): per row lane
  output logic [AWB-1:0] b_raddr [H],
  output logic           left_valid [H],
  // Mem_C: per column lane
  output logic [AWC-1:0] c_raddr [C],
  output logic           top_valid [C],
  output logic           c_we [C],
  output logic [AWC-1:0] c_waddr [C]
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DONE} state_e;
  state_e state;

  logic [31:0] cnt, m_q, a_base, b_base, c_base, last_k;
  logic        acc_q;
  logic [15:0] ncols_q;

  assign last_k = m_q + 32'(H) + 32'(ncols_q) - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      m_q     <= '0;
      a_base  <= '0;
      b_base  <= '0;
      c_base  <= '0;
      acc_q   <= 1'b0;
      ncols_q <= '0;
      stat_load <= 1'b0;
    end else begin
      stat_load <= (state == S_LOAD) && (cnt < 32'(H));
      case (state)
        S_IDLE: if (start) begin
          m_q     <= cmd.len;
          a_base  <= cmd.aux;
          b_base  <= cmd.src;
          c_base  <= cmd.dst;
          acc_q   <= cmd.flags[0];
          ncols_q <= n_cols;
          cnt     <= '0;
          state   <= S_LOAD;
        end
        S_LOAD: begin
          if (cnt == 32'(H)) begin
            cnt   <= '0;
            state <= S_STREAM;
          end else cnt <= cnt + 1;
        end
        S_STREAM: begin
          if (cnt == last_k) state <= S_DONE;
          cnt <= cnt + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy    = (state != S_IDLE);
  assign done    = (state == S_DONE);
  assign a_raddr = AWA'(a_base + 32'(H) - 1 - cnt);

  logic streaming;
  assign streaming = (state == S_STREAM);

  for (genvar r = 0; r < H; r++) begin : g_row
    logic [31:0] t;
    logic        v;
    assign t = cnt - 32'(r);
    assign v = streaming && (cnt >= 32'(r)) && (t < m_q);
    assign b_raddr[r] = AWB'(b_base + t);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) left_valid[r] <= 1'b0;
      else        left_valid[r] <= v;
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_col
    logic [31:0] tr, tw;
    logic        vr, vw, in_use;
    assign in_use = (32'(c) < 32'(ncols_q));
    assign tr = cnt - 32'(c);
    assign tw = cnt - 32'(H) - 32'(c) - 1;
    assign vr = streaming && in_use && acc_q && (cnt >= 32'(c)) && (tr < m_q);
    assign vw = streaming && in_use && (cnt >= 32'(H + c + 1)) && (tw < m_q);
    assign c_raddr[c] = AWC'(c_base + tr);
    assign c_we[c]    = vw;
    assign c_waddr[c] = AWC'(c_base + tw);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) top_valid[c] <= 1'b0;
      else        top_valid[c] <= vr;
    end
  end
endmodule
