// tb_gcs_directory -- directed test of the switch directory.
// Walks lines through the transitions of the paper's examples: reader then writer with
// a deferred hand-over (wait queue at the next writer, case iii), requests forwarded to
// the queue holder with the version counting them, a stale queue transfer denied and a
// current one granted, readers-only, writer-to-writer and readers-then-writer transfers,
// S->M upgrade, memory data routed to its requestor, and back-pressure.  Each step
// checks the emitted message, its destination mask, the one-cycle latency and the
// directory state, all written out by hand.
`timescale 1ns/1ps
module tb_gcs_directory;
  import gcs_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  initial begin rst_n = 1'b1; #1 rst_n = 1'b0; end   // a real edge for the asynchronous reset
  logic in_valid, in_ready, out_valid, out_ready;
  gcs_msg_t in_msg, out_msg;
  pmask_t out_mask;
  perm_e  dir_perm [NUM_LINES];
  nmask_t dir_sharers [NUM_LINES];
  logic   dir_qh_v [NUM_LINES];
  node_t  dir_qh [NUM_LINES];
  ver_t   dir_ver [NUM_LINES];
  gcs_directory dut (.*);

  int checks = 0, failures = 0;
  localparam pmask_t MEM = pmask_t'(1) << MEM_PORT;

  function automatic pmask_t P(int n); return pmask_t'(1) << n; endfunction
  function automatic nmask_t N(int n); return nmask_t'(1) << n; endfunction

  function automatic gcs_msg_t mk(msg_e t, int src, int line, perm_e p = PERM_I, int req = 0);
    gcs_msg_t m;
    m = '0; m.mtype = t; m.src = node_t'(src); m.line = line_t'(line); m.perm = p; m.req = node_t'(req);
    return m;
  endfunction

  // send one message; expect (or not) one output the next cycle
  task automatic send(string tag, gcs_msg_t m, logic e_out, msg_e e_t = MSG_NONE, pmask_t e_mask = '0,
                      int e_req = -1, perm_e e_perm = PERM_I);
    @(negedge clk);
    in_valid = 1; in_msg = m;
    #1;
    checks++;
    if (!in_ready) begin failures++; $display("%s: not ready", tag); end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (out_valid != e_out) begin failures++; $display("%s: out_valid %0d", tag, out_valid); end
    else if (e_out) begin
      checks++;
      if (out_msg.mtype != e_t || out_mask != e_mask || (e_req >= 0 && out_msg.req != node_t'(e_req)) ||
          ((e_t == MSG_MEM_RD || e_t == MSG_FWD) && out_msg.perm != e_perm)) begin
        failures++;
        $display("%s: got type %0d mask %b req %0d perm %0d", tag, out_msg.mtype, out_mask, out_msg.req, out_msg.perm);
      end
    end
  endtask

  task automatic state(string tag, int l, perm_e p, nmask_t sh, logic qv, int qh = 0, int ver = 0);
    checks++;
    if (dir_perm[l] != p || dir_sharers[l] != sh || dir_qh_v[l] != qv || (qv && (dir_qh[l] != node_t'(qh) || dir_ver[l] != ver_t'(ver)))) begin
      failures++;
      $display("%s: state perm %0d sharers %b qh %0d/%0d ver %0d", tag, dir_perm[l], dir_sharers[l], dir_qh_v[l], dir_qh[l], dir_ver[l]);
    end
  endtask

  initial begin
    gcs_msg_t m;
    in_valid = 0; in_msg = '0; out_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NUM_LINES; l++) state("reset", l, PERM_I, '0, 0);
    // line 10 ("0x0A"): N2 reads, N1 wants to write
    send("I->S", mk(MSG_ACQ, 2, 10, PERM_S), 1, MSG_MEM_RD, MEM, 2, PERM_S);
    state("I->S", 10, PERM_S, N(2), 0);
    send("S+M", mk(MSG_ACQ, 1, 10, PERM_M), 1, MSG_NEXT_WR, P(2), 1);
    state("case iii", 10, PERM_S, N(2), 1, 1, 0);
    send("fwd", mk(MSG_ACQ, 3, 10, PERM_S), 1, MSG_FWD, P(1), 3, PERM_S);
    state("fwd", 10, PERM_S, N(2), 1, 1, 1);
    send("inv-ack", mk(MSG_INV_ACK, 2, 10), 1, MSG_MEM_RD, MEM, 1, PERM_M);
    state("to M", 10, PERM_M, N(1), 1, 1, 1);
    m = mk(MSG_QXFER_REQ, 1, 10); m.ver = 0; m.plan = PLAN_READERS; m.readers = N(3);
    send("stale", m, 1, MSG_QXFER_DENY, P(1));
    state("denied", 10, PERM_M, N(1), 1, 1, 1);
    m.ver = 1;
    send("grant rd", m, 1, MSG_GRANT, P(1) | P(3) | MEM);
    state("readers", 10, PERM_S, N(3), 0);
    send("S->S", mk(MSG_ACQ, 4, 10, PERM_S), 1, MSG_MEM_RD, MEM, 4, PERM_S);
    state("S->S", 10, PERM_S, N(3) | N(4), 0);
    send("upgrade", mk(MSG_ACQ, 4, 10, PERM_M), 1, MSG_NEXT_WR, P(3), 4);
    state("upgrade", 10, PERM_S, N(3), 1, 4, 0);
    send("fwd2", mk(MSG_ACQ, 5, 10, PERM_M), 1, MSG_FWD, P(4), 5, PERM_M);
    send("inv-ack2", mk(MSG_INV_ACK, 3, 10), 1, MSG_MEM_RD, MEM, 4, PERM_M);
    m = mk(MSG_QXFER_REQ, 4, 10, PERM_I, 5); m.ver = 1; m.plan = PLAN_TO_WRITER; m.nw_valid = 1;
    send("grant wr", m, 1, MSG_GRANT, P(4) | P(5));
    state("writer", 10, PERM_M, N(5), 1, 5, 0);
    m = mk(MSG_QXFER_REQ, 4, 10); m.ver = 0; m.plan = PLAN_TO_WRITER;
    send("not holder", m, 1, MSG_QXFER_DENY, P(4));
    // line 2: I->M, then a reader and a writer queue up, then readers-then-writer
    send("I->M", mk(MSG_ACQ, 0, 2, PERM_M), 1, MSG_MEM_RD, MEM, 0, PERM_M);
    state("I->M", 2, PERM_M, N(0), 1, 0, 0);
    send("q1", mk(MSG_ACQ, 1, 2, PERM_S), 1, MSG_FWD, P(0), 1, PERM_S);
    send("q2", mk(MSG_ACQ, 2, 2, PERM_M), 1, MSG_FWD, P(0), 2, PERM_M);
    state("q2", 2, PERM_M, N(0), 1, 0, 2);
    m = mk(MSG_QXFER_REQ, 0, 2, PERM_I, 2); m.ver = 2; m.plan = PLAN_READERS_WR; m.readers = N(1); m.nw_valid = 1;
    send("grant rw", m, 1, MSG_GRANT, P(0) | P(1) | P(2) | MEM);
    state("rw", 2, PERM_S, N(1), 1, 2, 0);
    send("last ack", mk(MSG_INV_ACK, 1, 2), 1, MSG_MEM_RD, MEM, 2, PERM_M);
    state("rw done", 2, PERM_M, N(2), 1, 2, 0);
    // memory answer routed to requestor 6
    m = mk(MSG_ACK_DATA, MEM_PORT, 5, PERM_S, 6); m.data = 64'hDEAD_BEEF;
    send("route", m, 1, MSG_ACK_DATA, P(6), 6);
    checks++; if (out_msg.data != 64'hDEAD_BEEF) failures++;
    // an Inv-Ack that leaves no sharer and no writer returns the line to I
    send("S only", mk(MSG_ACQ, 7, 6, PERM_S), 1, MSG_MEM_RD, MEM, 7, PERM_S);
    send("evict", mk(MSG_INV_ACK, 7, 6), 0);
    state("evict", 6, PERM_I, '0, 0);
    // back-pressure: output held, input refused, then released
    out_ready = 0;
    @(negedge clk); in_valid = 1; in_msg = mk(MSG_ACQ, 3, 7, PERM_S);
    @(negedge clk); in_valid = 1; in_msg = mk(MSG_ACQ, 4, 7, PERM_S);
    #1; checks++; if (in_ready || !out_valid || out_msg.req != 3) begin failures++; $display("backpressure"); end
    repeat (3) @(negedge clk);
    checks++; if (!out_valid || out_msg.req != 3) failures++;
    out_ready = 1;
    @(negedge clk); in_valid = 0;
    checks++; if (!out_valid || out_msg.req != 4) begin failures++; $display("after backpressure"); end
    state("bp", 7, PERM_S, N(3) | N(4), 0);
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
