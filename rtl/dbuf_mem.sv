// dbuf_mem: double-buffered, lane-banked on-chip memory. Used as Mem_B (the
// input feature map buffer, one lane per array row) and Mem_C (the output
// buffer, one lane per array column), and twice inside Mem_A.
//
// The paper makes Mem_A/B/C double-buffered so that off-chip traffic and the
// array overlap. Here each of the LANES lanes owns two sdp_ram banks of DEPTH
// words. One bank set is the compute side, read and written by the array
// engines; the other is the fill side, reached by the cache transfer engine.
// A one-cycle pulse on swap exchanges the two.
//   Compute side: every lane has its own read address and its own write port,
//   so an engine can skew rows or columns by addressing instead of by delay
//   lines. Reads return one cycle after the address.
//   Fill side: FILL_W-bit chunks; chunk address f_addr = word * CHUNKS + k
//   covers lanes k*LPC .. k*LPC+LPC-1 of the word. f_rdata returns one cycle
//   after f_raddr.
// Per-lane banking and the chunked fill port are this design's choices; the
// paper gives the capacities (Table III) and says the buffers are built of
// 18 Kb BRAMs.
module dbuf_mem #(
  parameter int unsigned LANES  = 256,
  parameter int unsigned LANE_W = 32,
  parameter int unsigned DEPTH  = 819,
  parameter int unsigned FILL_W = 512,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LPC    = FILL_W / LANE_W,
  localparam int unsigned CHUNKS = LANES / LPC,
  localparam int unsigned CW     = (CHUNKS > 1) ? $clog2(CHUNKS) : 1,
  localparam int unsigned FAW    = AW + CW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              swap,
  output logic              bank_sel,
  // compute side
  input  logic [AW-1:0]     c_raddr [LANES],
  output logic [LANE_W-1:0] c_rdata [LANES],
  input  logic              c_we    [LANES],
  input  logic [AW-1:0]     c_waddr [LANES],
  input  logic [LANE_W-1:0] c_wdata [LANES],
  // fill side
  input  logic              f_we,
  input  logic [FAW-1:0]    f_waddr,
  input  logic [FILL_W-1:0] f_wdata,
  input  logic [FAW-1:0]    f_raddr,
  output logic [FILL_W-1:0] f_rdata
);
  logic          sel_q, sel_rd_q;
  logic [CW-1:0] f_rchunk_q;

  logic [AW-1:0] f_wword, f_rword;
  logic [CW-1:0] f_wchunk, f_rchunk;
  if (CHUNKS > 1) begin : g_chunks
    assign f_wword  = AW'(f_waddr / FAW'(CHUNKS));
    assign f_wchunk = CW'(f_waddr % FAW'(CHUNKS));
    assign f_rword  = AW'(f_raddr / FAW'(CHUNKS));
    assign f_rchunk = CW'(f_raddr % FAW'(CHUNKS));
  end else begin : g_one
    assign f_wword  = AW'(f_waddr);
    assign f_wchunk = '0;
    assign f_rword  = AW'(f_raddr);
    assign f_rchunk = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q      <= 1'b0;
      sel_rd_q   <= 1'b0;
      f_rchunk_q <= '0;
    end else begin
      if (swap) sel_q <= ~sel_q;
      sel_rd_q   <= sel_q;
      f_rchunk_q <= f_rchunk;
    end
  end
  assign bank_sel = sel_q;

  logic [LANE_W-1:0] rd [2][LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int unsigned CHK = l / LPC;
    localparam int unsigned OFS = l % LPC;
    for (genvar b = 0; b < 2; b++) begin : g_bank
      logic              is_comp;
      logic              we;
      logic [AW-1:0]     waddr, raddr;
      logic [LANE_W-1:0] wdata;
      assign is_comp = (sel_q == b[0]);
      always_comb begin
        if (is_comp) begin
          we    = c_we[l];
          waddr = c_waddr[l];
          wdata = c_wdata[l];
          raddr = c_raddr[l];
        end else begin
          we    = f_we && (f_wchunk == CW'(CHK));
          waddr = f_wword;
          wdata = f_wdata[OFS*LANE_W +: LANE_W];
          raddr = f_rword;
        end
      end
      sdp_ram #(.WIDTH(LANE_W), .DEPTH(DEPTH)) u_ram (
        .clk  (clk),
        .we   (we),
        .waddr(waddr),
        .wdata(wdata),
        .raddr(raddr),
        .rdata(rd[b][l])
      );
    end
    assign c_rdata[l] = sel_rd_q ? rd[1][l] : rd[0][l];
  end

  // Fill-side read: pick the chunk's lanes out of the non-compute bank.
  always_comb begin
    f_rdata = '0;
    for (int k = 0; k < LPC; k++) begin
      for (int ch = 0; ch < CHUNKS; ch++) begin
        if (f_rchunk_q == CW'(ch))
          f_rdata[k*LANE_W +: LANE_W] = sel_rd_q ? rd[0][ch*LPC+k] : rd[1][ch*LPC+k];
      end
    end
  end
endmodule
