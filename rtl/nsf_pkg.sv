// nsf_pkg: types and constants shared by the accelerator.
//
// Holds the precision and sub-array mode encodings, the command word the host
// pushes into the control unit, and the opcode sets of the command stream and
// of the SIMD unit. The encodings are this design's own; the paper names the
// operations (NN layers, VSA binding/unbinding, element-wise and reduction
// work, off-chip transfers) but not a command format.
package nsf_pkg;

  // Operand precision of a compute unit. INT4 packs two signed 4-bit values
  // into one 8-bit operand (low nibble = lane 0, high nibble = lane 1); the
  // matching partial sum then holds two signed 16-bit lanes.
  typedef enum logic {
    PREC_INT8 = 1'b0,
    PREC_INT4 = 1'b1
  } prec_e;

  // Role of a sub-array (or of a column, which inherits its sub-array's role).
  typedef enum logic {
    MODE_NN  = 1'b0,
    MODE_VSA = 1'b1
  } mode_e;

  // On-chip memories reachable through the cache transfer engine.
  typedef enum logic [1:0] {
    MEM_A1 = 2'd0,
    MEM_A2 = 2'd1,
    MEM_B  = 2'd2,
    MEM_C  = 2'd3
  } mem_sel_e;

  // Host command opcodes.
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_CFG     = 4'd1,  // set folding (number of NN sub-arrays), precisions, Mem_A merge
    OP_DMA_RD  = 4'd2,  // DRAM -> cache, AXI read bursts
    OP_DMA_WR  = 4'd3,  // cache -> DRAM, AXI write bursts
    OP_XFER_IN = 4'd4,  // cache -> fill side of Mem_A1/A2/B/C
    OP_XFER_OUT= 4'd5,  // fill side of Mem_A1/A2/B/C -> cache
    OP_SWAP    = 4'd6,  // swap the double buffers named in flags[3:0]
    OP_NN      = 4'd7,  // one weight-stationary GEMM fold on the NN sub-arrays
    OP_VSA     = 4'd8,  // one circular convolution/correlation chunk on every VSA column
    OP_SIMD    = 4'd9,  // SIMD pass over rows of Mem_C
    OP_SYNC    = 4'd10  // wait until every engine is idle
  } opcode_e;

  // SIMD operations.
  typedef enum logic [3:0] {
    SIMD_ADD   = 4'd0,  // a + b
    SIMD_SUB   = 4'd1,  // a - b
    SIMD_MUL   = 4'd2,  // a * b (low bits)
    SIMD_MAX   = 4'd3,  // max(a, b)
    SIMD_MIN   = 4'd4,  // min(a, b)
    SIMD_RELU  = 4'd5,  // max(a, 0)
    SIMD_CLAMP = 4'd6,  // clamp a to [lo, hi]
    SIMD_SHR   = 4'd7,  // arithmetic shift right of a by imm
    SIMD_RSUM  = 4'd8,  // reduction: sum of all lanes of a
    SIMD_RMAX  = 4'd9,  // reduction: max of all lanes of a
    SIMD_DOT   = 4'd10  // reduction: sum of a * b (similarity)
  } simd_op_e;

  // Host command. Field use per opcode:
  //   OP_CFG     : aux[15:0] = number of NN sub-arrays, flags[0] = NN precision,
  //                flags[1] = VSA precision, flags[2] = merge Mem_A1/Mem_A2
  //   OP_DMA_RD  : ext = DRAM byte address, dst = cache word, len = words
  //   OP_DMA_WR  : ext = DRAM byte address, src = cache word, len = words
  //   OP_XFER_IN : flags[1:0] = memory, src = cache word, dst = memory chunk, len = chunks
  //   OP_XFER_OUT: flags[1:0] = memory, src = memory chunk, dst = cache word, len = chunks
  //   OP_SWAP    : flags[3:0] = {C, B, A2, A1} buffers to swap
  //   OP_NN      : src = Mem_B row of the first input, aux = Mem_A1 row of the first
  //                weight row, dst = Mem_C row of the first output, len = input vectors,
  //                flags[0] = accumulate onto Mem_C
  //   OP_VSA     : src = Mem_A2 row of the streamed vector, aux = Mem_A2 row of the
  //                stationary chunk, dst = Mem_C row of the result, len = dimension d,
  //                ext[15:0] = chunk index, flags[0] = accumulate, flags[1] = unbind
  //                (correlation), otherwise bind (convolution)
  //   OP_SIMD    : flags[3:0] = simd_op_e, flags[4] = INT4 split lanes,
  //                flags[5] = write to Mem_A2 instead of Mem_C, flags[11:8] = lane group,
  //                src = Mem_C row of a, aux = Mem_C row of b, dst = destination row,
  //                len = rows, ext[31:0] = immediate (lo/shift), ext[63:32] = hi
  typedef struct packed {
    opcode_e     op;
    logic [15:0] flags;
    logic [31:0] len;
    logic [31:0] src;
    logic [31:0] dst;
    logic [31:0] aux;
    logic [63:0] ext;
  } cmd_t;

endpackage
