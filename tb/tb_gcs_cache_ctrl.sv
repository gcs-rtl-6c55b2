// tb_gcs_cache_ctrl -- directed test of one compute blade's cache controller (blade 3).
// The testbench plays the switch: it injects the messages the directory would send and
// checks every message the blade emits.  Covered: Acquire and Acquire-Ack, a local hit
// after release (locality), Inv-Ack on a next-writer notice, requests forwarded before
// the data arrives (the blade becomes queue holder), Algorithm 1 on release with the
// version in the request, a denial followed by a retry with the late request included,
// grants as old holder, as next writer receiving a queue and as reader told a writer
// waits, an S->M upgrade, a forwarded request to an unlocked M line, and the shared
// memory list following the line state.
`timescale 1ns/1ps
module tb_gcs_cache_ctrl;
  import gcs_pkg::*;
  localparam int ME = 3;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  initial begin rst_n = 1'b1; #1 rst_n = 1'b0; end   // a real edge for the asynchronous reset
  logic rx_valid, rx_ready, tx_valid, tx_ready;
  gcs_msg_t rx_msg, tx_msg;
  logic cpu_valid, cpu_ready, cpu_rsp_valid, cpu_rsp_local;
  op_e cpu_op;
  line_t cpu_line, cpu_rsp_line, shm_line, shm_hit_line;
  data_t cpu_wdata, cpu_rsp_data;
  logic shm_we, shm_valid, shm_hit, shm_present;
  logic [$clog2(SHM_MAX)-1:0] shm_idx;
  logic [ADDR_W-1:0] shm_base, shm_addr;
  logic [SIZE_W-1:0] shm_size;
  perm_e st [NUM_LINES];
  logic locked [NUM_LINES], qh [NUM_LINES];
  logic [QCNT_W-1:0] qcnt [NUM_LINES];
  gcs_cache_ctrl #(.ME(ME)) dut (.*);

  int checks = 0, failures = 0;
  gcs_msg_t txq [$];
  gcs_msg_t rsps [$];
  always @(posedge clk) begin
    if (tx_valid && tx_ready) txq.push_back(tx_msg);
    if (cpu_rsp_valid) begin
      gcs_msg_t r; r = '0; r.line = cpu_rsp_line; r.data = cpu_rsp_data; r.nw_valid = cpu_rsp_local;
      rsps.push_back(r);
    end
  end

  function automatic gcs_msg_t mk(msg_e t, int src, int line, perm_e p = PERM_I, int req = 0);
    gcs_msg_t m;
    m = '0; m.mtype = t; m.src = node_t'(src); m.line = line_t'(line); m.perm = p; m.req = node_t'(req);
    return m;
  endfunction

  task automatic net(gcs_msg_t m);
    @(negedge clk); rx_valid = 1; rx_msg = m;
    @(negedge clk); rx_valid = 0;
    repeat (4) @(negedge clk);
  endtask

  task automatic cpu(op_e op, int line, data_t wd = '0);
    @(negedge clk); cpu_valid = 1; cpu_op = op; cpu_line = line_t'(line); cpu_wdata = wd;
    #1;
    while (!cpu_ready) begin @(negedge clk); #1; end
    @(negedge clk); cpu_valid = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic expect_tx(string tag, msg_e t, int line, perm_e p = PERM_I);
    checks++;
    if (txq.size() == 0) begin failures++; $display("%s: nothing sent", tag); return; end
    if (txq[0].mtype != t || txq[0].line != line_t'(line) || txq[0].src != node_t'(ME) ||
        (t == MSG_ACQ && txq[0].perm != p)) begin
      failures++; $display("%s: sent type %0d line %0d perm %0d", tag, txq[0].mtype, txq[0].line, txq[0].perm);
    end
  endtask

  task automatic expect_none(string tag);
    checks++;
    if (txq.size() != 0) begin failures++; $display("%s: unexpected send type %0d", tag, txq[0].mtype); end
  endtask

  task automatic expect_rsp(string tag, int line, data_t d, logic loc);
    checks++;
    if (rsps.size() != 1 || rsps[0].line != line_t'(line) || rsps[0].data != d || rsps[0].nw_valid != loc) begin
      failures++; $display("%s: %0d responses", tag, rsps.size());
    end
    rsps.delete();
  endtask

  initial begin
    gcs_msg_t m;
    rx_valid = 0; rx_msg = '0; tx_ready = 1; cpu_valid = 0; cpu_op = OP_ACQ_S; cpu_line = '0; cpu_wdata = '0;
    shm_we = 0; shm_line = '0; shm_idx = '0; shm_base = '0; shm_size = '0; shm_valid = 0; shm_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // shared memory list: line 1 protects [0x1000, 0x1040)
    @(negedge clk); shm_we = 1; shm_line = 1; shm_idx = 0; shm_base = 'h1000; shm_size = 'h40; shm_valid = 1;
    @(negedge clk); shm_we = 0; shm_addr = 'h1010;
    #1; checks++; if (!shm_hit || shm_present) failures++;
    // 1. read acquire from the network
    cpu(OP_ACQ_S, 1);
    expect_tx("acq S", MSG_ACQ, 1, PERM_S); txq.delete();
    m = mk(MSG_ACK_DATA, MEM_PORT, 1, PERM_S, ME); m.data = 5; net(m);
    expect_rsp("ack S", 1, 5, 0);
    checks++; if (st[1] != PERM_S || !locked[1] || !shm_present) failures++;
    // 2. release keeps the line; the next acquire is local
    cpu(OP_REL, 1); expect_none("rel S");
    cpu(OP_ACQ_S, 1); expect_none("hit"); expect_rsp("hit", 1, 5, 1);
    cpu(OP_REL, 1);
    // 3. a writer waits: unlocked reader answers at once
    net(mk(MSG_NEXT_WR, MEM_PORT, 1, PERM_I, 6));
    expect_tx("inv-ack", MSG_INV_ACK, 1); txq.delete();
    checks++; if (st[1] != PERM_I || shm_present) failures++;
    // 4. write acquire; a request is forwarded before the data comes back
    cpu(OP_ACQ_M, 2); expect_tx("acq M", MSG_ACQ, 2, PERM_M); txq.delete();
    net(mk(MSG_FWD, MEM_PORT, 2, PERM_S, 4));
    checks++; if (!qh[2] || qcnt[2] != 1) failures++;
    m = mk(MSG_ACK_DATA, MEM_PORT, 2, PERM_M, ME); m.data = 7; net(m);
    expect_rsp("ack M", 2, 7, 0);
    net(mk(MSG_FWD, MEM_PORT, 2, PERM_M, 5));
    checks++; if (qcnt[2] != 2) failures++;
    expect_none("locked holder keeps queue");
    // 5. release: Algorithm 1 -> reader 4 first, queue to writer 5
    cpu(OP_REL, 2, 8);
    expect_tx("xfer", MSG_QXFER_REQ, 2);
    checks++;
    if (txq.size() == 0 || txq[0].plan != PLAN_READERS_WR || txq[0].readers != 8'b0001_0000 || txq[0].req != 5 ||
        txq[0].ver != 2 || txq[0].data != 8 || txq[0].qcnt != 0) begin failures++; $display("xfer fields"); end
    txq.delete();
    // 6. a late request, then the denial: retry with it
    net(mk(MSG_FWD, MEM_PORT, 2, PERM_S, 1));
    expect_none("pending");
    net(mk(MSG_QXFER_DENY, MEM_PORT, 2, PERM_I, ME));
    expect_tx("retry", MSG_QXFER_REQ, 2);
    checks++;
    if (txq.size() == 0 || txq[0].ver != 3 || txq[0].qcnt != 1 || txq[0].qarr[0].node != 1 ||
        txq[0].qarr[0].perm != PERM_S) begin failures++; $display("retry fields"); end
    m = txq[0]; txq.delete();
    // 7. grant: the old holder lets go
    m.mtype = MSG_GRANT; net(m);
    checks++; if (st[2] != PERM_I || qh[2] || qcnt[2] != 0) begin failures++; $display("old holder"); end
    // 8. locality for a writer
    cpu(OP_ACQ_M, 4); txq.delete();
    m = mk(MSG_ACK_DATA, MEM_PORT, 4, PERM_M, ME); m.data = 0; net(m); rsps.delete();
    cpu(OP_REL, 4, 1);
    cpu(OP_ACQ_M, 4); expect_none("M hit"); expect_rsp("M hit", 4, 1, 1);
    cpu(OP_REL, 4, 2); expect_none("empty queue dropped");
    // 9. forwarded request to the unlocked M line: queue moves at once
    net(mk(MSG_FWD, MEM_PORT, 4, PERM_M, 2));
    expect_tx("unlocked xfer", MSG_QXFER_REQ, 4);
    checks++; if (txq.size() == 0 || txq[0].plan != PLAN_TO_WRITER || txq[0].req != 2 || txq[0].data != 2 || txq[0].ver != 1) failures++;
    m = txq[0]; txq.delete(); m.mtype = MSG_GRANT; net(m);
    checks++; if (st[4] != PERM_I) failures++;
    // 10. next writer: receives line and queue
    cpu(OP_ACQ_M, 5); txq.delete();
    m = mk(MSG_GRANT, 0, 5, PERM_I, ME); m.plan = PLAN_TO_WRITER; m.nw_valid = 1; m.data = 33;
    m.qcnt = 1; m.qarr[0] = '{node: 6, perm: PERM_S}; net(m);
    expect_rsp("writer grant", 5, 33, 0);
    checks++; if (st[5] != PERM_M || !qh[5] || qcnt[5] != 1) failures++;
    cpu(OP_REL, 5, 34);
    checks++; if (txq.size() == 0 || txq[0].plan != PLAN_READERS || txq[0].readers != 8'b0100_0000 || txq[0].data != 34) failures++;
    txq.delete();
    // 11. reader granted with a writer behind: Inv-Ack on release
    cpu(OP_ACQ_S, 6); txq.delete();
    m = mk(MSG_GRANT, 0, 6, PERM_I, 7); m.plan = PLAN_READERS_WR; m.readers = 8'b0000_1000; m.data = 44; net(m);
    expect_rsp("reader grant", 6, 44, 0);
    expect_none("reader in CS");
    cpu(OP_REL, 6); expect_tx("reader release", MSG_INV_ACK, 6); txq.delete();
    // 12. S->M upgrade gives up the S copy first
    cpu(OP_ACQ_S, 7); txq.delete();
    m = mk(MSG_ACK_DATA, MEM_PORT, 7, PERM_S, ME); net(m); rsps.delete();
    cpu(OP_REL, 7);
    cpu(OP_ACQ_M, 7);
    checks++;
    if (txq.size() != 2 || txq[0].mtype != MSG_INV_ACK || txq[1].mtype != MSG_ACQ || txq[1].perm != PERM_M) begin
      failures++; $display("upgrade: %0d msgs", txq.size());
    end
    txq.delete();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
