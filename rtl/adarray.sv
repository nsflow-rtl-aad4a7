// adarray: the adaptive systolic array, H rows by W*N columns in N sub-arrays
// of W columns each.
//
// Each sub-array is put in NN or VSA mode by sa_mode. A column takes the mode
// of its sub-array. Wiring of PE (r, c):
//   in_left  = c == 0 ? left_in[r]  : stream_out of PE (r, c-1)
//   pass_in  = r == 0 ? top_in[c]   : stream_out of PE (r-1, c)
//   stat_in  = r == 0 ? top_in[c]   : stat_out of PE (r-1, c)
//   psum_in  = r == 0 ? psum_top[c] : psum_out of PE (r-1, c)
// and psum_bot[c] is the partial sum of the bottom PE of column c.
// NN sub-arrays are chained horizontally, so adjacent NN sub-arrays starting
// at sub-array 0 act as one H x (W * number of NN sub-arrays) weight-stationary
// array fed from the left by Mem_B (as in the paper's Fig. 4(a), where A1 and
// A2 combine). Every column of a VSA sub-array works alone on a circular
// convolution, its stationary vector chunk and streamed vector both entering
// at top_in. Sub-array placement of NN work at the left is this design's
// choice; the paper says only that adjacent sub-arrays combine.
// prec_nn and prec_vsa choose the operand precision per mode (INT8 or packed
// INT4). All outputs are registered in the PEs; there is no other state.
module adarray
  import nsf_pkg::*;
#(
  parameter int unsigned H      = 32,
  parameter int unsigned W      = 16,
  parameter int unsigned N      = 16,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32,
  localparam int unsigned C     = W * N
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             sa_mode  [N],
  input  prec_e             prec_nn,
  input  prec_e             prec_vsa,
  input  logic              stat_load[C],
  input  logic [DATA_W-1:0] top_in   [C],
  input  logic [DATA_W-1:0] left_in  [H],
  input  logic [ACC_W-1:0]  psum_top [C],
  output logic [ACC_W-1:0]  psum_bot [C]
);
  // Each PE's outputs are wires local to its generate block; neighbours
  // reach them by generate-block name.
  for (genvar c = 0; c < C; c++) begin : g_col
    mode_e col_mode;
    prec_e col_prec;
    assign col_mode = sa_mode[c / W];
    assign col_prec = (col_mode == MODE_VSA) ? prec_vsa : prec_nn;

    for (genvar r = 0; r < H; r++) begin : g_row
      logic [DATA_W-1:0] in_left, pass_in, stat_in, stat_o, strm_o;
      logic [ACC_W-1:0]  psum_in, psum_o;
      if (c == 0) begin : g_l0
        assign in_left = left_in[r];
      end else begin : g_ln
        assign in_left = g_col[c-1].g_row[r].strm_o;
      end
      if (r == 0) begin : g_t0
        assign pass_in = top_in[c];
        assign stat_in = top_in[c];
        assign psum_in = psum_top[c];
      end else begin : g_tn
        assign pass_in = g_col[c].g_row[r-1].strm_o;
        assign stat_in = g_col[c].g_row[r-1].stat_o;
        assign psum_in = g_col[c].g_row[r-1].psum_o;
      end

      nsf_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .mode      (col_mode),
        .prec      (col_prec),
        .stat_load (stat_load[c]),
        .stat_in   (stat_in),
        .stat_out  (stat_o),
        .in_left   (in_left),
        .pass_in   (pass_in),
        .stream_out(strm_o),
        .psum_in   (psum_in),
        .psum_out  (psum_o)
      );
    end
    assign psum_bot[c] = g_row[H-1].psum_o;
  end
endmodule
