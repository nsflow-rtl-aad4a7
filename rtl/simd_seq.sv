// simd_seq: SIMD engine of the control unit. Streams rows of Mem_C through
// the SIMD unit and writes results back to Mem_C, or into Mem_A2 where the
// next vector operation reads them.
//
// Command (OP_SIMD): flags[3:0] = operation, flags[4] = split INT4 lanes,
// flags[5] = write to Mem_A instead of Mem_C, flags[11:8] = lane group g
// (columns g*L .. g*L+L-1, L = SIMD lanes), src / aux = Mem_C rows of the
// first operands a and b, dst = first destination row, len = rows,
// ext[31:0] / ext[63:32] = immediates (shift amount or clamp bounds).
// Per row it takes four cycles: read a, read b, compute (simd_unit), write.
// Element-wise results go to row dst+i. A reduction (RSUM, RMAX, DOT) runs
// over all rows and writes only the final scalar, to lane g*L of row dst in
// Mem_C; the scalar also stays on the scalar output. Writing to Mem_A keeps
// the low 8 bits of each lane, or in split mode the low nibbles of its two
// 16-bit halves packed as one INT4 pair. The row-serial schedule is this
// design's; the paper gives only the unit's role.
module simd_seq
  import nsf_pkg::*;
#(
  parameter int unsigned C   = 256,
  parameter int unsigned L   = 64,
  parameter int unsigned DW  = 32,
  parameter int unsigned AWA = 13,
  parameter int unsigned AWC = 10
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cmd_t           cmd,
  output logic           busy,
  output logic           done,
  // Mem_C compute side (all lanes share the address)
  output logic [AWC-1:0] c_raddr,
  input  logic [DW-1:0]  c_rdata [C],
  output logic           c_we [C],
  output logic [AWC-1:0] c_waddr,
  output logic [DW-1:0]  c_wdata [C],
  // Mem_A compute write
  output logic           a_we [C],
  output logic [AWA-1:0] a_waddr,
  output logic [7:0]     a_wdata [C],
  output logic [DW-1:0]  scalar
);
  localparam int unsigned G = C / L;
  typedef enum logic [2:0] {S_IDLE, S_RA, S_RB, S_EX, S_WR, S_RED, S_DONE} state_e;
  state_e state;

  simd_op_e    op_q;
  logic        split_q, to_a_q;
  logic [3:0]  grp_q;
  logic [31:0] src_q, aux_q, dst_q, len_q, row;
  logic [DW-1:0] imm_lo_q, imm_hi_q;
  logic [DW-1:0] a_lat [L], b_sel [L], y [L];
  logic        u_valid, u_first, u_out_valid;
  logic        is_red;

  assign is_red = (op_q == SIMD_RSUM) || (op_q == SIMD_RMAX) || (op_q == SIMD_DOT);

  always_comb begin
    for (int l = 0; l < L; l++) begin
      b_sel[l] = '0;
      for (int g = 0; g < G; g++)
        if (grp_q == 4'(g)) b_sel[l] = c_rdata[g*L + l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      op_q     <= SIMD_ADD;
      split_q  <= 1'b0;
      to_a_q   <= 1'b0;
      grp_q    <= '0;
      src_q    <= '0;
      aux_q    <= '0;
      dst_q    <= '0;
      len_q    <= '0;
      row      <= '0;
      imm_lo_q <= '0;
      imm_hi_q <= '0;
      for (int l = 0; l < L; l++) a_lat[l] <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          op_q     <= simd_op_e'(cmd.flags[3:0]);
          split_q  <= cmd.flags[4];
          to_a_q   <= cmd.flags[5];
          grp_q    <= cmd.flags[11:8];
          src_q    <= cmd.src;
          aux_q    <= cmd.aux;
          dst_q    <= cmd.dst;
          len_q    <= cmd.len;
          imm_lo_q <= cmd.ext[31:0];
          imm_hi_q <= cmd.ext[63:32];
          row      <= '0;
          state    <= (cmd.len == 0) ? S_DONE : S_RA;
        end
        S_RA: state <= S_RB;
        S_RB: begin
          a_lat <= b_sel;   // operand a arrives in this cycle
          state <= S_EX;
        end
        S_EX: state <= S_WR;
        S_WR: begin
          row <= row + 1;
          if (row + 1 == len_q) state <= is_red ? S_RED : S_DONE;
          else                  state <= S_RA;
        end
        S_RED: state <= S_DONE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign u_valid = (state == S_EX);
  assign u_first = (row == 0);

  simd_unit #(.LANES(L), .DW(DW)) u_simd (
    .clk(clk), .rst_n(rst_n), .in_valid(u_valid), .in_first(u_first), .op(op_q),
    .split(split_q), .imm_lo(imm_lo_q), .imm_hi(imm_hi_q), .a(a_lat), .b(b_sel),
    .out_valid(u_out_valid), .y(y), .scalar(scalar)
  );

  assign busy    = (state != S_IDLE);
  assign done    = (state == S_DONE);
  assign c_raddr = (state == S_RA) ? AWC'(src_q + row) : AWC'(aux_q + row);
  assign c_waddr = (state == S_RED) ? AWC'(dst_q) : AWC'(dst_q + row);
  assign a_waddr = AWA'(dst_q + row);

  for (genvar c = 0; c < C; c++) begin : g_col
    localparam int unsigned GC = c / L;
    localparam int unsigned LC = c % L;
    logic in_grp, wr_row;
    assign in_grp = (grp_q == 4'(GC));
    assign wr_row = (state == S_WR) && u_out_valid && !is_red && in_grp;
    assign c_we[c]    = (wr_row && !to_a_q) || ((state == S_RED) && in_grp && LC == 0);
    assign c_wdata[c] = (state == S_RED) ? scalar : y[LC];
    assign a_we[c]    = wr_row && to_a_q;
    assign a_wdata[c] = split_q ? {y[LC][DW/2+3:DW/2], y[LC][3:0]} : y[LC][7:0];
  end
endmodule
