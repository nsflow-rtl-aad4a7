// axi_dma: the memory bus for off-chip transactions. An AXI4 master that
// moves blocks of words between DRAM and the on-chip cache.
//
// A command (start with dir_wr, dram_addr, cache_addr, len in words) is split
// into INCR bursts of full-width beats (DW bits, one cache word per beat).
// No burst crosses a 4 KB boundary and none is longer than MAX_BEATS.
//   Read  (dir_wr = 0): AR, then every R beat is written into the cache at
//         the next cache address (one beat per cycle when rvalid stays high).
//   Write (dir_wr = 1): AW, then for every beat the cache word is read (one
//         cycle) and offered on W until wready; then B is awaited.
// One burst is outstanding at a time. busy is high from start until the
// cycle of done, a one-cycle pulse. The paper says only that off-chip
// transactions go over AXI through a memory bus; burst size, the single
// outstanding burst and the two-cycle write beat are this design's choices.
module axi_dma #(
  parameter int unsigned DW        = 512,
  parameter int unsigned CAW       = 19,
  parameter int unsigned MAX_BEATS = 64,
  localparam int unsigned BYTES    = DW / 8,
  localparam int unsigned BSH      = $clog2(BYTES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // command
  input  logic             start,
  input  logic             dir_wr,
  input  logic [63:0]      dram_addr,
  input  logic [CAW-1:0]   cache_addr,
  input  logic [31:0]      len,
  output logic             busy,
  output logic             done,
  // cache port
  output logic             c_en,
  output logic             c_we,
  output logic [CAW-1:0]   c_addr,
  output logic [DW-1:0]    c_wdata,
  input  logic [DW-1:0]    c_rdata,
  // AXI4 master
  output logic             m_awvalid,
  input  logic             m_awready,
  output logic [63:0]      m_awaddr,
  output logic [7:0]       m_awlen,
  output logic [2:0]       m_awsize,
  output logic [1:0]       m_awburst,
  output logic             m_wvalid,
  input  logic             m_wready,
  output logic [DW-1:0]    m_wdata,
  output logic [BYTES-1:0] m_wstrb,
  output logic             m_wlast,
  input  logic             m_bvalid,
  output logic             m_bready,
  input  logic [1:0]       m_bresp,
  output logic             m_arvalid,
  input  logic             m_arready,
  output logic [63:0]      m_araddr,
  output logic [7:0]       m_arlen,
  output logic [2:0]       m_arsize,
  output logic [1:0]       m_arburst,
  input  logic             m_rvalid,
  output logic             m_rready,
  input  logic [DW-1:0]    m_rdata,
  input  logic [1:0]       m_rresp,
  input  logic             m_rlast
);
  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_AW, S_WRD, S_WV, S_B, S_DONE} state_e;
  state_e state;

  logic [63:0]    addr_q;
  logic [CAW-1:0] caddr_q;
  logic [31:0]    rem_q;
  logic [8:0]     beats_q;   // beats left in the current burst
  logic [8:0]     burst_n;   // beats of the next burst
  logic [1:0]     err_q;

  // Beats to the next 4 KB boundary, capped by MAX_BEATS and the remainder.
  always_comb begin
    logic [31:0] to_4k;
    to_4k   = 32'((4096 - 32'(addr_q[11:0])) >> BSH);
    burst_n = 9'(MAX_BEATS);
    if (to_4k < 32'(burst_n)) burst_n = 9'(to_4k);
    if (rem_q < 32'(burst_n)) burst_n = 9'(rem_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      addr_q  <= '0;
      caddr_q <= '0;
      rem_q   <= '0;
      beats_q <= '0;
      err_q   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          addr_q  <= dram_addr;
          caddr_q <= cache_addr;
          rem_q   <= len;
          err_q   <= '0;
          if (len == 0)   state <= S_DONE;
          else if (dir_wr) state <= S_AW;
          else             state <= S_AR;
        end
        S_AR: if (m_arready) begin
          beats_q <= burst_n;
          state   <= S_R;
        end
        S_R: if (m_rvalid) begin
          caddr_q <= caddr_q + 1'b1;
          addr_q  <= addr_q + 64'(BYTES);
          rem_q   <= rem_q - 1;
          beats_q <= beats_q - 1'b1;
          err_q   <= err_q | m_rresp;
          if (beats_q == 9'd1) state <= (rem_q == 32'd1) ? S_DONE : S_AR;
        end
        S_AW: if (m_awready) begin
          beats_q <= burst_n;
          state   <= S_WRD;
        end
        S_WRD: state <= S_WV;
        S_WV: if (m_wready) begin
          caddr_q <= caddr_q + 1'b1;
          addr_q  <= addr_q + 64'(BYTES);
          rem_q   <= rem_q - 1;
          beats_q <= beats_q - 1'b1;
          state   <= (beats_q == 9'd1) ? S_B : S_WRD;
        end
        S_B: if (m_bvalid) begin
          err_q <= err_q | m_bresp;
          state <= (rem_q == 0) ? S_DONE : S_AW;
        end
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  assign m_arvalid = (state == S_AR);
  assign m_araddr  = addr_q;
  assign m_arlen   = 8'(burst_n - 1'b1);
  assign m_arsize  = 3'(BSH);
  assign m_arburst = 2'b01;
  assign m_rready  = (state == S_R);

  assign m_awvalid = (state == S_AW);
  assign m_awaddr  = addr_q;
  assign m_awlen   = 8'(burst_n - 1'b1);
  assign m_awsize  = 3'(BSH);
  assign m_awburst = 2'b01;
  assign m_wvalid  = (state == S_WV);
  assign m_wdata   = c_rdata;
  assign m_wstrb   = '1;
  assign m_wlast   = (state == S_WV) && (beats_q == 9'd1);
  assign m_bready  = (state == S_B);

  assign c_en    = (state == S_WRD) || (state == S_R && m_rvalid);
  assign c_we    = (state == S_R);
  assign c_addr  = caddr_q;
  assign c_wdata = m_rdata;

  // A read burst must end where this master expects it to.
  a_rlast: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_R && m_rvalid) |-> (m_rlast == (beats_q == 9'd1)));
endmodule
