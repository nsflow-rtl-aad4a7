// vsa_seq: VSA engine of the control unit. Runs one chunk of a blockwise
// circular convolution (binding) or circular correlation (unbinding) on every
// column of the VSA sub-arrays at once, each column on its own vector pair.
//
// Command (OP_VSA): aux = Mem_A row of A[0], src = Mem_A row of B[0], dst =
// Mem_C row of result element 0, len = dimension d, ext[15:0] = chunk index
// ch, flags[0] = accumulate onto Mem_C, flags[1] = unbind. Every VSA column
// (lane) holds its own A and B in its Mem_A lane, one element per row.
// A column of H PEs holds the chunk A[ch*H .. ch*H+H-1] in its stationary
// registers (elements at or past d read as 0) and streams d+H-1 elements of B
// through its passing and streaming registers. With j = -(H-1) .. d-1 the
// streamed element is
//   bind   : B[(j - ch*H) mod d]   giving C[s] += sum_i A[ch*H+i] * B[(s-ch*H-i) mod d]
//   unbind : B[(ch*H - j) mod d]   giving C[s] += sum_i A[ch*H+i] * B[(ch*H+i-s) mod d]
// The unbind order is the one of the paper's Fig. 4(b) example, whose
// outputs are (A1B1+A2B2+A3B3, A1B3+A2B1+A3B2, A1B2+A2B3+A3B1). Running
// ch = 0 .. ceil(d/H)-1 with accumulate set from the second chunk on
// completes a d-element operation.
// Phases (memory reads return one cycle after the address):
//   LOAD   j = 0..H      : read A[ch*H + H-1-j], shift it in one cycle later.
//   STREAM k = 0..d+2H   : read streamed element k (k <= d+H-2);
//                          read Mem_C row dst+s at k = s+H (top partial sum);
//                          write Mem_C row dst+s at k = s+2H+1.
// A chunk takes 3H + d + 3 cycles from the start pulse to the done pulse;
// the paper's model has T = 3H + d - 1, the 4 extra cycles being command
// capture, memory read latency, the load-to-stream handoff and the done cycle.
module vsa_seq
  import nsf_pkg::*;
#(
  parameter int unsigned H   = 32,
  parameter int unsigned AWA = 13,
  parameter int unsigned AWC = 10
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cmd_t           cmd,
  output logic           busy,
  output logic           done,
  output logic [AWA-1:0] a_raddr,
  output logic           top_zero,
  output logic           stat_load,
  output logic [AWC-1:0] c_raddr,
  output logic           top_valid,
  output logic           c_we,
  output logic [AWC-1:0] c_waddr
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_STREAM, S_DONE} state_e;
  state_e state;

  logic [31:0] cnt, d_q, a_base, b_base, c_base, choff, idx;
  logic        acc_q, unbind_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cnt       <= '0;
      d_q       <= 32'd1;
      a_base    <= '0;
      b_base    <= '0;
      c_base    <= '0;
      choff     <= '0;
      idx       <= '0;
      acc_q     <= 1'b0;
      unbind_q  <= 1'b0;
      stat_load <= 1'b0;
      top_zero  <= 1'b0;
      top_valid <= 1'b0;
    end else begin
      stat_load <= (state == S_LOAD) && (cnt < 32'(H));
      top_zero  <= (state == S_LOAD) && (choff + 32'(H) - 1 - cnt >= d_q);
      top_valid <= (state == S_STREAM) && acc_q && (cnt >= 32'(H)) && (cnt - 32'(H) < d_q);
      case (state)
        S_IDLE: if (start) begin
          logic [31:0] u, co;
          co        = 32'(cmd.ext[15:0]) * 32'(H);
          u         = (co + 32'(H) - 1) % ((cmd.len == 0) ? 32'd1 : cmd.len);
          d_q       <= (cmd.len == 0) ? 32'd1 : cmd.len;
          a_base    <= cmd.aux;
          b_base    <= cmd.src;
          c_base    <= cmd.dst;
          choff     <= co;
          acc_q     <= cmd.flags[0];
          unbind_q  <= cmd.flags[1];
          // index of the first streamed element, j = -(H-1)
          idx       <= cmd.flags[1] ? u : ((u == 0) ? 32'd0 : cmd.len - u);
          cnt       <= '0;
          state     <= S_LOAD;
        end
        S_LOAD: begin
          if (cnt == 32'(H)) begin
            cnt   <= '0;
            state <= S_STREAM;
          end else cnt <= cnt + 1;
        end
        S_STREAM: begin
          if (unbind_q) idx <= (idx == 0) ? d_q - 1 : idx - 1;
          else          idx <= (idx == d_q - 1) ? '0 : idx + 1;
          if (cnt == d_q + 32'(2*H)) state <= S_DONE;
          cnt <= cnt + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy    = (state != S_IDLE);
  assign done    = (state == S_DONE);
  assign a_raddr = (state == S_LOAD) ? AWA'(a_base + choff + 32'(H) - 1 - cnt)
                                     : AWA'(b_base + idx);
  assign c_raddr = AWC'(c_base + cnt - 32'(H));
  assign c_we    = (state == S_STREAM) && (cnt >= 32'(2*H + 1)) && (cnt - 32'(2*H + 1) < d_q);
  assign c_waddr = AWC'(c_base + cnt - 32'(2*H + 1));
endmodule
