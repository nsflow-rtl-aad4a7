// mem_a: Mem_A, the memory that feeds the top of every AdArray column.
//
// The paper splits Mem_A into Mem_A1 (NN weights for the NN sub-arrays) and
// Mem_A2 (vector data for the VSA sub-arrays) so both kinds of sub-array can be
// fed in the same cycle, and lets the two chunks merge into one at runtime
// when the whole array runs one kind of work. Here Mem_A1 and Mem_A2 are two
// dbuf_mem instances with one 8-bit lane per column, each with its own swap
// and fill port.
//   merge = 0: lane l reads and writes Mem_A2 when col_vsa[l] is set and
//              Mem_A1 otherwise; the address is local to that chunk.
//   merge = 1: one address space of D1 + D2 words; addresses below D1 reach
//              Mem_A1, the rest reach Mem_A2 at addr - D1.
// Compute reads return one cycle after the address; the lane's source chunk
// is remembered for that cycle. The compute write port serves the SIMD unit,
// which writes results back into Mem_A2 for the next vector operation.
module mem_a #(
  parameter int unsigned LANES  = 256,
  parameter int unsigned LANE_W = 8,
  parameter int unsigned D1     = 5530,
  parameter int unsigned D2     = 2253,
  parameter int unsigned FILL_W = 512,
  localparam int unsigned AW1    = (D1 > 1) ? $clog2(D1) : 1,
  localparam int unsigned AW2    = (D2 > 1) ? $clog2(D2) : 1,
  localparam int unsigned AW     = $clog2(D1 + D2),
  localparam int unsigned LPC    = FILL_W / LANE_W,
  localparam int unsigned CHUNKS = LANES / LPC,
  localparam int unsigned CW     = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned FAW1   = AW1 + CW,
  localparam int unsigned FAW2   = AW2 + CW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              merge,
  input  logic              col_vsa [LANES],
  input  logic              swap_a1,
  input  logic              swap_a2,
  output logic              bank_a1,
  output logic              bank_a2,
  // compute side
  input  logic [AW-1:0]     c_raddr [LANES],
  output logic [LANE_W-1:0] c_rdata [LANES],
  input  logic              c_we    [LANES],
  input  logic [AW-1:0]     c_waddr [LANES],
  input  logic [LANE_W-1:0] c_wdata [LANES],
  // fill side of Mem_A1
  input  logic              f1_we,
  input  logic [FAW1-1:0]   f1_waddr,
  input  logic [FILL_W-1:0] f1_wdata,
  input  logic [FAW1-1:0]   f1_raddr,
  output logic [FILL_W-1:0] f1_rdata,
  // fill side of Mem_A2
  input  logic              f2_we,
  input  logic [FAW2-1:0]   f2_waddr,
  input  logic [FILL_W-1:0] f2_wdata,
  input  logic [FAW2-1:0]   f2_raddr,
  output logic [FILL_W-1:0] f2_rdata
);
  logic [AW1-1:0]    r1_addr [LANES], w1_addr [LANES];
  logic [AW2-1:0]    r2_addr [LANES], w2_addr [LANES];
  logic              we1 [LANES], we2 [LANES];
  logic [LANE_W-1:0] rd1 [LANES], rd2 [LANES];
  logic              rd_from2_q [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_route
    logic r_in2, w_in2;
    always_comb begin
      r_in2 = merge ? (32'(c_raddr[l]) >= D1) : col_vsa[l];
      w_in2 = merge ? (32'(c_waddr[l]) >= D1) : col_vsa[l];
      r1_addr[l] = AW1'(c_raddr[l]);
      w1_addr[l] = AW1'(c_waddr[l]);
      r2_addr[l] = (merge && r_in2) ? AW2'(32'(c_raddr[l]) - D1) : AW2'(c_raddr[l]);
      w2_addr[l] = (merge && w_in2) ? AW2'(32'(c_waddr[l]) - D1) : AW2'(c_waddr[l]);
      we1[l] = c_we[l] && !w_in2;
      we2[l] = c_we[l] &&  w_in2;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) rd_from2_q[l] <= 1'b0;
      else        rd_from2_q[l] <= r_in2;
    end
    assign c_rdata[l] = rd_from2_q[l] ? rd2[l] : rd1[l];
  end

  dbuf_mem #(.LANES(LANES), .LANE_W(LANE_W), .DEPTH(D1), .FILL_W(FILL_W)) u_a1 (
    .clk(clk), .rst_n(rst_n), .swap(swap_a1), .bank_sel(bank_a1),
    .c_raddr(r1_addr), .c_rdata(rd1), .c_we(we1), .c_waddr(w1_addr), .c_wdata(c_wdata),
    .f_we(f1_we), .f_waddr(f1_waddr), .f_wdata(f1_wdata), .f_raddr(f1_raddr), .f_rdata(f1_rdata)
  );

  dbuf_mem #(.LANES(LANES), .LANE_W(LANE_W), .DEPTH(D2), .FILL_W(FILL_W)) u_a2 (
    .clk(clk), .rst_n(rst_n), .swap(swap_a2), .bank_sel(bank_a2),
    .c_raddr(r2_addr), .c_rdata(rd2), .c_we(we2), .c_waddr(w2_addr), .c_wdata(c_wdata),
    .f_we(f2_we), .f_waddr(f2_waddr), .f_wdata(f2_wdata), .f_raddr(f2_raddr), .f_rdata(f2_rdata)
  );
endmodule
