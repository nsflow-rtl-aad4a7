// sdp_ram: simple dual-port RAM, one write port and one read port, the
// building block of every on-chip buffer (an 18 Kb BRAM or LUTRAM column on
// the FPGA). The read is synchronous: rdata holds mem[raddr] one cycle after
// the address is presented, the value before a write in the same cycle. The
// array has no reset; readers must write before they read.
module sdp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
