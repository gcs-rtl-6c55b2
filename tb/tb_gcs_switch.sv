// tb_gcs_switch -- checks the switch data plane around the directory.
// Four blades send Acquires in the same cycle: all must reach the memory port, one per
// cycle, in round-robin order.  A memory answer must reach only its requestor.  A
// queue-transfer grant must be multicast to the old holder, the reader and the memory
// in the same cycle, and must wait, delivered to nobody, while one destination is not
// ready.  A message offered to an idle port is taken by the memory port at the third clock edge.
`timescale 1ns/1ps
module tb_gcs_switch;
  import gcs_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  initial begin rst_n = 1'b1; #1 rst_n = 1'b0; end   // a real edge for the asynchronous reset
  logic     rx_valid [PORTS], rx_ready [PORTS], tx_valid [PORTS], tx_ready [PORTS];
  gcs_msg_t rx_msg [PORTS], tx_msg;
  perm_e  dir_perm [NUM_LINES];
  nmask_t dir_sharers [NUM_LINES];
  logic   dir_qh_v [NUM_LINES];
  node_t  dir_qh [NUM_LINES];
  ver_t   dir_ver [NUM_LINES];
  gcs_switch dut (.*);

  int checks = 0, failures = 0;
  gcs_msg_t got [PORTS][$];
  longint   got_t [PORTS][$];
  longint   cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int p = 0; p < PORTS; p++)
      if (tx_valid[p] && tx_ready[p]) begin got[p].push_back(tx_msg); got_t[p].push_back(cyc); end
  end

  function automatic gcs_msg_t mk(msg_e t, int src, int line, perm_e p = PERM_I, int req = 0);
    gcs_msg_t m;
    m = '0; m.mtype = t; m.src = node_t'(src); m.line = line_t'(line); m.perm = p; m.req = node_t'(req);
    return m;
  endfunction

  task automatic inject(int p, gcs_msg_t m);
    rx_valid[p] = 1; rx_msg[p] = m;
  endtask
  task automatic clear_all();
    for (int p = 0; p < PORTS; p++) rx_valid[p] = 0;
  endtask

  initial begin
    gcs_msg_t m;
    longint t0;
    for (int p = 0; p < PORTS; p++) begin rx_valid[p] = 0; rx_msg[p] = '0; tx_ready[p] = 1; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // latency: one Acquire from blade 5
    inject(5, mk(MSG_ACQ, 5, 0, PERM_S));
    t0 = cyc;
    @(negedge clk); clear_all();
    repeat (4) @(negedge clk);
    checks++;
    if (got[MEM_PORT].size() != 1 || got_t[MEM_PORT][0] - t0 != 3 || got[MEM_PORT][0].req != 5) begin
      failures++; $display("latency: %0d msgs, %0d cycles", got[MEM_PORT].size(), got_t[MEM_PORT][0] - t0);
    end
    got[MEM_PORT].delete(); got_t[MEM_PORT].delete();
    // four blades at once
    for (int b = 0; b < 4; b++) inject(b, mk(MSG_ACQ, b, 1, PERM_S));
    @(negedge clk); clear_all();
    repeat (8) @(negedge clk);
    checks++;
    if (got[MEM_PORT].size() != 4) begin failures++; $display("arb: %0d", got[MEM_PORT].size()); end
    else for (int i = 0; i < 4; i++) begin
      checks++;
      if (got[MEM_PORT][i].req != node_t'(i) || (i > 0 && got_t[MEM_PORT][i] != got_t[MEM_PORT][i-1] + 1)) begin
        failures++; $display("arb order %0d: req %0d", i, got[MEM_PORT][i].req);
      end
    end
    // memory answer goes to its requestor only
    m = mk(MSG_ACK_DATA, MEM_PORT, 1, PERM_S, 2); m.data = 64'h1234;
    inject(MEM_PORT, m);
    @(negedge clk); clear_all();
    repeat (3) @(negedge clk);
    for (int p = 0; p < NODES; p++) begin
      checks++;
      if (got[p].size() != (p == 2 ? 1 : 0)) begin failures++; $display("route port %0d: %0d", p, got[p].size()); end
    end
    checks++; if (got[2].size() != 1 || got[2][0].data != 64'h1234) failures++;
    got[2].delete(); got_t[2].delete();
    // line 3: blade 6 writes, blade 7 queues a read, blade 6 hands over to readers
    inject(6, mk(MSG_ACQ, 6, 3, PERM_M));
    @(negedge clk); clear_all(); inject(7, mk(MSG_ACQ, 7, 3, PERM_S));
    @(negedge clk); clear_all();
    repeat (3) @(negedge clk);
    checks++; if (got[6].size() != 1 || got[6][0].mtype != MSG_FWD || got[6][0].req != 7) begin failures++; $display("fwd"); end
    tx_ready[7] = 0;
    m = mk(MSG_QXFER_REQ, 6, 3); m.ver = 1; m.plan = PLAN_READERS; m.readers = 8'b1000_0000;
    inject(6, m);
    @(negedge clk); clear_all();
    repeat (4) @(negedge clk);
    checks++;
    if (got[6].size() != 1 || got[7].size() != 0) begin failures++; $display("multicast leaked while blocked"); end
    tx_ready[7] = 1;
    repeat (2) @(negedge clk);
    checks++;
    if (got[6].size() != 2 || got[7].size() != 1 || got[6][1].mtype != MSG_GRANT ||
        got_t[6][1] != got_t[7][0] || got[MEM_PORT].size() != 6 || got_t[MEM_PORT][5] != got_t[7][0]) begin
      failures++; $display("multicast: %0d %0d %0d", got[6].size(), got[7].size(), got[MEM_PORT].size());
    end
    checks++; if (dir_perm[3] != PERM_S || dir_sharers[3] != 8'b1000_0000 || dir_qh_v[3]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
