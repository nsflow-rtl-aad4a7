// axi_dram_model: behavioural AXI4 slave standing in for off-chip DRAM in
// the testbenches (not synthesizable, not part of the design).
//
// WORDS words of DW bits, word index = byte address / (DW/8). Accepts one
// read burst and one write burst at a time, INCR bursts only, with
// pseudo-random ready/valid gaps (seeded by SEED) so the master sees
// back-pressure. Counts the bursts it served and checks the AXI rule that a
// valid, once raised, holds with stable address until ready.
module axi_dram_model #(
  parameter int unsigned DW    = 512,
  parameter int unsigned WORDS = 2048,
  parameter int unsigned SEED  = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               awvalid,
  output logic               awready,
  input  logic [63:0]        awaddr,
  input  logic [7:0]         awlen,
  input  logic               wvalid,
  output logic               wready,
  input  logic [DW-1:0]      wdata,
  input  logic               wlast,
  output logic               bvalid,
  input  logic               bready,
  output logic [1:0]         bresp,
  input  logic               arvalid,
  output logic               arready,
  input  logic [63:0]        araddr,
  input  logic [7:0]         arlen,
  output logic               rvalid,
  input  logic               rready,
  output logic [DW-1:0]      rdata,
  output logic [1:0]         rresp,
  output logic               rlast,
  output int                 rd_bursts,
  output int                 wr_bursts,
  output int                 protocol_errors
);
  localparam int unsigned BSH = $clog2(DW / 8);
  logic [DW-1:0] mem [WORDS];

  int unsigned rng;
  function automatic bit coin();
    rng = rng * 1103515245 + 12345;
    return rng[16] | rng[17];   // ready about 3/4 of the time
  endfunction

  // read channel
  logic        r_act;
  logic [63:0] r_word;
  logic [8:0]  r_left;
  // write channel
  logic        w_act, b_pend;
  logic [63:0] w_word;
  logic [8:0]  w_left;

  logic        arvalid_q, awvalid_q, stall_ar, stall_aw;
  logic [63:0] araddr_q, awaddr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rng <= SEED;
      arready <= 0; awready <= 0; wready <= 0; bvalid <= 0; rvalid <= 0; rlast <= 0;
      r_act <= 0; w_act <= 0; b_pend <= 0; r_left <= 0; w_left <= 0; r_word <= 0; w_word <= 0;
      rd_bursts <= 0; wr_bursts <= 0; protocol_errors <= 0;
      arvalid_q <= 0; awvalid_q <= 0; stall_ar <= 0; stall_aw <= 0; araddr_q <= 0; awaddr_q <= 0;
      rdata <= '0;
    end else begin
      // protocol check: valid held with stable address until ready
      arvalid_q <= arvalid; awvalid_q <= awvalid;
      araddr_q <= araddr;   awaddr_q <= awaddr;
      stall_ar <= arvalid && !arready;
      stall_aw <= awvalid && !awready;
      if (stall_ar && (!arvalid || araddr != araddr_q)) protocol_errors <= protocol_errors + 1;
      if (stall_aw && (!awvalid || awaddr != awaddr_q)) protocol_errors <= protocol_errors + 1;

      // AR
      arready <= 1'b0;
      if (!r_act && arvalid && !arready && coin()) begin
        arready <= 1'b1;
        r_act   <= 1'b1;
        r_word  <= araddr >> BSH;
        r_left  <= 9'(arlen) + 1;
        rd_bursts <= rd_bursts + 1;
        if ((araddr >> 12) != ((araddr + ((64'(arlen) + 1) << BSH) - 1) >> 12))
          protocol_errors <= protocol_errors + 1;   // crosses 4 KB
      end
      // R
      if (rvalid && rready) begin
        rvalid <= 1'b0;
        rlast  <= 1'b0;
        if (rlast) r_act <= 1'b0;
      end
      if (r_act && (!rvalid || rready) && r_left != 0 && coin()) begin
        rvalid <= 1'b1;
        rdata  <= mem[r_word];
        rresp  <= 2'b00;
        rlast  <= (r_left == 1);
        r_word <= r_word + 1;
        r_left <= r_left - 1;
      end
      // AW
      awready <= 1'b0;
      if (!w_act && !b_pend && awvalid && !awready && coin()) begin
        awready <= 1'b1;
        w_act   <= 1'b1;
        w_word  <= awaddr >> BSH;
        w_left  <= 9'(awlen) + 1;
        wr_bursts <= wr_bursts + 1;
      end
      // W
      wready <= w_act && coin();
      if (wvalid && wready && w_act) begin
        mem[w_word] <= wdata;
        w_word <= w_word + 1;
        w_left <= w_left - 1;
        if (wlast != (w_left == 1)) protocol_errors <= protocol_errors + 1;
        if (wlast) begin
          w_act  <= 1'b0;
          wready <= 1'b0;
          b_pend <= 1'b1;
        end
      end
      // B
      if (b_pend && !bvalid) begin
        bvalid <= 1'b1;
        bresp  <= 2'b00;
      end
      if (bvalid && bready) begin
        bvalid <= 1'b0;
        b_pend <= 1'b0;
      end
    end
  end
endmodule
