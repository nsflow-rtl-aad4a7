// tb_ctrl_unit: the control unit driving five modelled engines whose busy
// time after a start pulse is random (1..24 cycles). A directed part checks
// the issue latency (command accepted at edge t, start pulse visible after
// edge t+1), the overlap of an NN and a VSA kernel, a SIMD pass that waits
// for both, CFG values (n_nn clamped to N), SWAP pulses and a full FIFO.
// A random part pushes 400 commands with random gaps and checks after every
// issue that the command is the next one in order and that no engine it
// conflicts with was busy, that the SIMD engine never runs beside the NN or
// VSA engine, and that all commands are issued in the end.
module tb_ctrl_unit;
  import nsf_pkg::*;
  localparam int N = 16, FD = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready;
  cmd_t cmd, issued_cmd;
  logic nn_busy, vsa_busy, simd_busy, xfer_busy, dma_busy;
  logic nn_start, vsa_start, simd_start, xfer_start, dma_start;
  logic [4:0] n_nn;
  prec_e prec_nn, prec_vsa;
  logic merge_a, busy;
  logic [3:0] swap;
  logic [31:0] issued_cnt, stall_cycles;
  int checks = 0, failures = 0;

  ctrl_unit #(.N(N), .FIFO_DEPTH(FD)) dut (.*);

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // engine models: busy for a random time after each start pulse
  int t_nn, t_vsa, t_simd, t_xfer, t_dma;
  bit fixed_len;
  int  fix_cycles;
  function automatic int dur();
    return fixed_len ? fix_cycles : $urandom_range(1, 24);
  endfunction
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin t_nn <= 0; t_vsa <= 0; t_simd <= 0; t_xfer <= 0; t_dma <= 0; end
    else begin
      t_nn   <= nn_start   ? dur() : (t_nn   > 0 ? t_nn   - 1 : 0);
      t_vsa  <= vsa_start  ? dur() : (t_vsa  > 0 ? t_vsa  - 1 : 0);
      t_simd <= simd_start ? dur() : (t_simd > 0 ? t_simd - 1 : 0);
      t_xfer <= xfer_start ? dur() : (t_xfer > 0 ? t_xfer - 1 : 0);
      t_dma  <= dma_start  ? dur() : (t_dma  > 0 ? t_dma  - 1 : 0);
    end
  end
  assign nn_busy = t_nn > 0;
  assign vsa_busy = t_vsa > 0;
  assign simd_busy = t_simd > 0;
  assign xfer_busy = t_xfer > 0;
  assign dma_busy = t_dma > 0;

  // scoreboard
  cmd_t sent [$];
  int unsigned last_cnt;
  int nn_vsa_overlap, xfer_nn_overlap, n_issued;
  bit pb_nn, pb_vsa, pb_simd, pb_xfer, pb_dma;   // engine busy-or-starting, previous cycle

  always @(negedge clk) if (rst_n) begin
    // the SIMD pass never runs beside NN or VSA work
    check(!(simd_busy && (nn_busy || vsa_busy)), "SIMD beside NN/VSA");
    if (nn_busy && vsa_busy) nn_vsa_overlap++;
    if (xfer_busy && nn_busy) xfer_nn_overlap++;
    if (issued_cnt != last_cnt) begin
      cmd_t e;
      bit ok;
      check(issued_cnt == last_cnt + 1, "one issue per cycle");
      e = sent.pop_front();
      check(issued_cmd == e, $sformatf("issue order: got op %0d exp op %0d", issued_cmd.op, e.op));
      case (e.op)
        OP_NN:   ok = nn_start && !pb_nn && !pb_simd;
        OP_VSA:  ok = vsa_start && !pb_vsa && !pb_simd;
        OP_SIMD: ok = simd_start && !pb_nn && !pb_vsa && !pb_simd;
        OP_XFER_IN, OP_XFER_OUT: ok = xfer_start && !pb_xfer;
        OP_DMA_RD, OP_DMA_WR:    ok = dma_start && !pb_dma;
        OP_CFG:  ok = !pb_nn && !pb_vsa && !pb_simd && n_nn == ((e.aux[15:0] > N) ? N : e.aux[4:0])
                      && prec_nn == prec_e'(e.flags[0]) && prec_vsa == prec_e'(e.flags[1]) && merge_a == e.flags[2];
        OP_SWAP: ok = !pb_nn && !pb_vsa && !pb_simd && !pb_xfer && swap == e.flags[3:0];
        OP_SYNC: ok = !pb_nn && !pb_vsa && !pb_simd && !pb_xfer && !pb_dma;
        default: ok = 1;
      endcase
      check(ok, $sformatf("issue rule for op %0d", e.op));
      n_issued++;
    end else
      check(!nn_start && !vsa_start && !simd_start && !xfer_start && !dma_start && swap == 0, "pulse without issue");
    last_cnt = issued_cnt;
    pb_nn = nn_busy || nn_start; pb_vsa = vsa_busy || vsa_start; pb_simd = simd_busy || simd_start;
    pb_xfer = xfer_busy || xfer_start; pb_dma = dma_busy || dma_start;
  end

  function automatic cmd_t mk(opcode_e op);
    cmd_t c;
    c = '0;
    c.op = op;
    c.flags = 16'($urandom);
    c.aux = $urandom_range(0, 20);
    c.src = $urandom; c.dst = $urandom; c.len = $urandom;
    if (op == OP_SWAP && c.flags[3:0] == 0) c.flags[0] = 1'b1;
    return c;
  endfunction

  task automatic push(cmd_t c);
    @(negedge clk);
    cmd_valid = 1; cmd = c;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    sent.push_back(c);
    #1 cmd_valid = 0;
  endtask

  initial begin
    int lat, full_seen;
    cmd_valid = 0; cmd = '0; fixed_len = 1; fix_cycles = 20;
    last_cnt = 0; nn_vsa_overlap = 0; xfer_nn_overlap = 0; n_issued = 0;
    pb_nn = 0; pb_vsa = 0; pb_simd = 0; pb_xfer = 0; pb_dma = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(n_nn == N && busy == 0 && cmd_ready == 1 && issued_cnt == 0, "reset state");
    // latency: push at an edge, start pulse after the next edge
    push(mk(OP_NN));
    lat = 0;
    while (!nn_start) begin @(posedge clk); #1 lat++; end
    check(lat == 1, $sformatf("issue latency %0d", lat));
    // VSA overlaps the running NN kernel; SIMD waits for both
    push(mk(OP_VSA));
    push(mk(OP_SIMD));
    repeat (3) @(posedge clk);
    #1 check(nn_busy && vsa_busy && !simd_busy, "NN and VSA together, SIMD held");
    check(stall_cycles > 0, "stall counted");
    wait (simd_start);
    @(negedge clk);
    // fill the FIFO behind a long SYNC
    full_seen = 0;
    fork
      for (int i = 0; i < FD + 2; i++) push(mk(i == 0 ? OP_SYNC : OP_NOP));
      repeat (FD + 6) begin @(negedge clk); if (!cmd_ready) full_seen = 1; end
    join
    check(full_seen == 1, "FIFO full back-pressure");
    wait (sent.size() == 0);
    // random stream
    fixed_len = 0;
    for (int i = 0; i < 400; i++) begin
      opcode_e o;
      o = opcode_e'($urandom_range(0, 10));
      push(mk(o));
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    wait (sent.size() == 0 && !busy);
    @(negedge clk);
    check(n_issued == 400 + FD + 2 + 3, $sformatf("issued %0d", n_issued));
    check(issued_cnt == 32'(n_issued), "issued_cnt");
    check(nn_vsa_overlap > 0, "NN/VSA overlap seen");
    check(xfer_nn_overlap > 0, "transfer/NN overlap seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
