// xfer_seq: transfer engine of the control unit. Moves data between the
// on-chip cache and the fill side of Mem_A1, Mem_A2, Mem_B or Mem_C, one
// cache word per cycle.
//
// Command: OP_XFER_IN copies len cache words starting at src into memory
// chunks starting at dst; OP_XFER_OUT copies len memory chunks starting at
// src into cache words starting at dst; flags[1:0] names the memory
// (nsf_pkg::mem_sel_e). Reads return one cycle after the address, so the
// write of element i happens one cycle after its read and a transfer of len
// words takes len + 2 cycles from start to done. Only the fill (inactive)
// side of a double buffer is reachable, so transfers overlap compute.
module xfer_seq
  import nsf_pkg::*;
#(
  parameter int unsigned DW  = 512,
  parameter int unsigned CAW = 19,
  parameter int unsigned FAW = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cmd_t           cmd,
  output logic           busy,
  output logic           done,
  // cache port
  output logic           c_en,
  output logic           c_we,
  output logic [CAW-1:0] c_addr,
  output logic [DW-1:0]  c_wdata,
  input  logic [DW-1:0]  c_rdata,
  // fill ports (the top routes them by mem)
  output mem_sel_e       mem,
  output logic           f_we,
  output logic [FAW-1:0] f_waddr,
  output logic [DW-1:0]  f_wdata,
  output logic [FAW-1:0] f_raddr,
  input  logic [DW-1:0]  f_rdata
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;
  logic        dir_out, wr_pend;
  logic [31:0] src_q, dst_q, len_q, i, wi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      dir_out <= 1'b0;
      mem     <= MEM_A1;
      src_q   <= '0;
      dst_q   <= '0;
      len_q   <= '0;
      i       <= '0;
      wi      <= '0;
      wr_pend <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          dir_out <= (cmd.op == OP_XFER_OUT);
          mem     <= mem_sel_e'(cmd.flags[1:0]);
          src_q   <= cmd.src;
          dst_q   <= cmd.dst;
          len_q   <= cmd.len;
          i       <= '0;
          wr_pend <= 1'b0;
          state   <= S_RUN;
        end
        S_RUN: begin
          wr_pend <= (i < len_q);
          wi      <= i;
          if (i < len_q) i <= i + 1;
          if (i >= len_q) state <= S_DONE;   // the last write happens now
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic rd;
  assign rd   = (state == S_RUN) && (i < len_q);
  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  // IN: read cache at src+i, write memory at dst+wi one cycle later.
  // OUT: read memory at src+i, write cache at dst+wi one cycle later.
  assign c_en    = dir_out ? wr_pend : rd;
  assign c_we    = dir_out && wr_pend;
  assign c_addr  = dir_out ? CAW'(dst_q + wi) : CAW'(src_q + i);
  assign c_wdata = f_rdata;
  assign f_we    = !dir_out && wr_pend;
  assign f_waddr = FAW'(dst_q + wi);
  assign f_wdata = c_rdata;
  assign f_raddr = FAW'(src_q + i);
endmodule
