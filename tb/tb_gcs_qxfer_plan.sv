// tb_gcs_qxfer_plan -- checks Algorithm 1 on random wait queues.
// The reference walks the queue as a list: it pops leading readers, then the first
// writer if any, and keeps what remains; plan, reader mask, next writer and the queue
// left for the writer must all match.  Also the three cases drawn in the paper's
// figures: a lone writer, a reader followed by a writer, readers only.
`timescale 1ns/1ps
module tb_gcs_qxfer_plan;
  import gcs_pkg::*;
  qarr_t q, rest_q;
  logic [QCNT_W-1:0] cnt, rest_cnt;
  plan_e plan;
  nmask_t readers;
  logic nw_valid;
  node_t nw;
  gcs_qxfer_plan dut (.*);

  int checks = 0, failures = 0;

  task automatic check_one(string tag);
    qent_t lst [$];
    nmask_t e_rd;
    plan_e e_plan;
    logic e_nwv;
    node_t e_nw;
    for (int i = 0; i < int'(cnt); i++) lst.push_back(q[i]);
    e_rd = '0; e_nwv = 0; e_nw = '0;
    if (lst.size() == 0) e_plan = PLAN_DROP;
    else if (lst[0].perm == PERM_M) e_plan = PLAN_TO_WRITER;
    else e_plan = PLAN_READERS;
    while (lst.size() > 0 && lst[0].perm == PERM_S) begin
      e_rd[lst[0].node] = 1'b1;
      void'(lst.pop_front());
    end
    if (lst.size() > 0) begin
      e_nwv = 1; e_nw = lst[0].node; void'(lst.pop_front());
      if (e_plan == PLAN_READERS) e_plan = PLAN_READERS_WR;
    end
    #1;
    checks++;
    if (plan != e_plan || readers != e_rd || nw_valid != e_nwv || (e_nwv && nw != e_nw)) begin
      failures++;
      $display("%s: plan %0d/%0d readers %b/%b nw %0d/%0d", tag, plan, e_plan, readers, e_rd, nw, e_nw);
    end
    if (e_nwv) begin
      checks++;
      if (rest_cnt != QCNT_W'(lst.size())) begin failures++; $display("%s: rest count", tag); end
      foreach (lst[i]) begin
        checks++;
        if (rest_q[i] != lst[i]) begin failures++; $display("%s: rest entry %0d", tag, i); end
      end
    end
  endtask

  function automatic qent_t E(int n, perm_e p);
    return '{node: node_t'(n), perm: p};
  endfunction

  initial begin
    // paper cases
    q = '0; cnt = 0; check_one("empty");
    q = '0; q[0] = E(1, PERM_M); cnt = 1; check_one("writer");
    #1; if (plan != PLAN_TO_WRITER || nw != 1) begin failures++; end checks++;
    q = '0; q[0] = E(2, PERM_S); q[1] = E(3, PERM_S); q[2] = E(1, PERM_M); q[3] = E(5, PERM_S); cnt = 4;
    check_one("readers+writer");
    #1; checks++;
    if (plan != PLAN_READERS_WR || readers != 8'b0000_1100 || nw != 1 || rest_cnt != 1 || rest_q[0] != E(5, PERM_S)) failures++;
    q = '0; q[0] = E(2, PERM_S); q[1] = E(6, PERM_S); cnt = 2; check_one("readers");
    #1; checks++; if (plan != PLAN_READERS || readers != 8'b0100_0100) failures++;
    for (int it = 0; it < 5000; it++) begin
      q = '0;
      cnt = QCNT_W'($urandom_range(QDEPTH));
      for (int i = 0; i < QDEPTH; i++) begin
        q[i].node = node_t'($urandom_range(NODES - 1));
        q[i].perm = ($urandom_range(99) < 60) ? PERM_S : PERM_M;
      end
      check_one("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
