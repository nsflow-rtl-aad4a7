// ctrl_unit: the control unit. Takes kernel commands from the host, keeps
// the runtime configuration of the array and dispatches work to the engines.
//
// Commands (nsf_pkg::cmd_t) enter a FIFO of FIFO_DEPTH entries through a
// valid/ready port. The command at the head is issued, in order, when the
// engine it needs is free and nothing it conflicts with is running:
//   NN   : NN engine idle, SIMD idle          (shares Mem_C with the SIMD pass)
//   VSA  : VSA engine idle, SIMD idle
//   SIMD : NN, VSA and SIMD engines idle      (it reads and writes Mem_C)
//   DMA  : DMA engine idle;  XFER : transfer engine idle
//   CFG  : NN, VSA, SIMD idle (the folding must not change under a kernel)
//   SWAP : NN, VSA, SIMD and transfer engines idle
//   SYNC : every engine idle
// So an NN fold and a VSA chunk run at the same time on their own sub-arrays,
// and transfers into the fill side of the double buffers overlap both. A
// head command that cannot issue stalls the queue; stall_cycles counts those
// cycles. Issue is a one-cycle start pulse on the engine's line with the
// command on issued_cmd. OP_CFG sets n_nn (NN sub-arrays, the rest run VSA
// work), the two precisions and the Mem_A merge; OP_SWAP pulses swap[3:0]
// ({C, B, A2, A1}). The paper says the control unit schedules kernels and
// memory transactions; the command set, the queue and these issue rules are
// this design's.
module ctrl_unit
  import nsf_pkg::*;
#(
  parameter int unsigned N          = 16,
  parameter int unsigned FIFO_DEPTH = 8,
  localparam int unsigned NW        = $clog2(N + 1),
  localparam int unsigned FW        = $clog2(FIFO_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host command port
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  cmd_t          cmd,
  // engines
  input  logic          nn_busy,
  input  logic          vsa_busy,
  input  logic          simd_busy,
  input  logic          xfer_busy,
  input  logic          dma_busy,
  output logic          nn_start,
  output logic          vsa_start,
  output logic          simd_start,
  output logic          xfer_start,
  output logic          dma_start,
  output cmd_t          issued_cmd,
  // configuration
  output logic [NW-1:0] n_nn,
  output prec_e         prec_nn,
  output prec_e         prec_vsa,
  output logic          merge_a,
  output logic [3:0]    swap,
  // status
  output logic          busy,
  output logic [31:0]   issued_cnt,
  output logic [31:0]   stall_cycles
);
  cmd_t         fifo [FIFO_DEPTH];
  logic [FW-1:0] rd_ptr, wr_ptr;
  logic [FW:0]   count;
  cmd_t          head;
  logic          head_valid, can_issue, push, pop;

  assign head       = fifo[rd_ptr];
  assign head_valid = (count != 0);
  assign cmd_ready  = (count != (FW+1)'(FIFO_DEPTH));
  assign push       = cmd_valid && cmd_ready;
  assign pop        = head_valid && can_issue;

  // An engine counts as busy from the cycle its start pulse is registered.
  logic nn_b, vsa_b, simd_b, xfer_b, dma_b;
  assign nn_b   = nn_busy   || nn_start;
  assign vsa_b  = vsa_busy  || vsa_start;
  assign simd_b = simd_busy || simd_start;
  assign xfer_b = xfer_busy || xfer_start;
  assign dma_b  = dma_busy  || dma_start;

  always_comb begin
    case (head.op)
      OP_CFG:      can_issue = !nn_b && !vsa_b && !simd_b;
      OP_DMA_RD,
      OP_DMA_WR:   can_issue = !dma_b;
      OP_XFER_IN,
      OP_XFER_OUT: can_issue = !xfer_b;
      OP_SWAP:     can_issue = !nn_b && !vsa_b && !simd_b && !xfer_b;
      OP_NN:       can_issue = !nn_b && !simd_b;
      OP_VSA:      can_issue = !vsa_b && !simd_b;
      OP_SIMD:     can_issue = !nn_b && !vsa_b && !simd_b;
      OP_SYNC:     can_issue = !nn_b && !vsa_b && !simd_b && !xfer_b && !dma_b;
      default:     can_issue = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) begin
        fifo[wr_ptr] <= cmd;
        wr_ptr <= (wr_ptr == FW'(FIFO_DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == FW'(FIFO_DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nn_start     <= 1'b0;
      vsa_start    <= 1'b0;
      simd_start   <= 1'b0;
      xfer_start   <= 1'b0;
      dma_start    <= 1'b0;
      issued_cmd   <= '0;
      n_nn         <= NW'(N);
      prec_nn      <= PREC_INT8;
      prec_vsa     <= PREC_INT8;
      merge_a      <= 1'b0;
      swap         <= '0;
      issued_cnt   <= '0;
      stall_cycles <= '0;
    end else begin
      nn_start   <= pop && head.op == OP_NN;
      vsa_start  <= pop && head.op == OP_VSA;
      simd_start <= pop && head.op == OP_SIMD;
      xfer_start <= pop && (head.op == OP_XFER_IN || head.op == OP_XFER_OUT);
      dma_start  <= pop && (head.op == OP_DMA_RD || head.op == OP_DMA_WR);
      swap       <= (pop && head.op == OP_SWAP) ? head.flags[3:0] : 4'b0;
      if (pop) begin
        issued_cmd <= head;
        issued_cnt <= issued_cnt + 1;
        if (head.op == OP_CFG) begin
          n_nn     <= (32'(head.aux[15:0]) > N) ? NW'(N) : NW'(head.aux[15:0]);
          prec_nn  <= prec_e'(head.flags[0]);
          prec_vsa <= prec_e'(head.flags[1]);
          merge_a  <= head.flags[2];
        end
      end
      if (head_valid && !can_issue) stall_cycles <= stall_cycles + 1;
    end
  end

  // An issue pulse may only go to an idle engine.
  a_nn_free:  assert property (@(posedge clk) disable iff (!rst_n) nn_start  |-> !nn_busy);
  a_vsa_free: assert property (@(posedge clk) disable iff (!rst_n) vsa_start |-> !vsa_busy);

  assign busy = head_valid || nn_b || vsa_b || simd_b || xfer_b || dma_b;
endmodule
