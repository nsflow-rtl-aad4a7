// onchip_cache: the on-chip cache that buffers data between the off-chip bus
// and Mem_A/B/C (URAM on the FPGA, 288 KB blocks).
//
// A true dual-port RAM of DEPTH words of WIDTH bits. Port A serves the AXI
// DMA engine, port B the transfer engine that fills and drains Mem_A/B/C.
// Each port reads synchronously (rdata one cycle after an enabled address)
// and writes when en and we are set. The paper gives the capacity
// (Table III, 16.2 MB for NVSA) and the role; the two-port organisation and
// the 512-bit word (one AXI beat) are this design's choices. Simultaneous
// writes to one address from both ports leave port B's data.
module onchip_cache #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 265421,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      a_rdata <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      b_rdata <= mem[b_addr];
    end
  end
endmodule
