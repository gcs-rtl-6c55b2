// tb_gcs_wait_queue -- checks the per-line wait queue against a SystemVerilog queue.
// Random pushes (never into a full queue), loads and clears; after every operation the
// contents and count must match the reference, and full/empty must agree with it.
`timescale 1ns/1ps
module tb_gcs_wait_queue;
  import gcs_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  initial begin rst_n = 1'b1; #1 rst_n = 1'b0; end   // a real edge for the asynchronous reset
  logic push, load, clear, full, empty;
  qent_t push_ent;
  qarr_t load_q, q;
  logic [QCNT_W-1:0] load_cnt, cnt;
  gcs_wait_queue dut (.*);

  int checks = 0, failures = 0;
  qent_t ref_q [$];

  task automatic compare();
    checks++;
    if (cnt != QCNT_W'(ref_q.size()) || full != (ref_q.size() == QDEPTH) || empty != (ref_q.size() == 0)) begin
      failures++; $display("count %0d vs %0d", cnt, ref_q.size());
    end
    foreach (ref_q[i]) begin
      checks++;
      if (q[i] != ref_q[i]) begin failures++; $display("entry %0d differs", i); end
    end
  endtask

  initial begin
    push = 0; load = 0; clear = 0; push_ent = '0; load_q = '0; load_cnt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int it = 0; it < 3000; it++) begin
      int r;
      r = $urandom_range(99);
      push = 0; load = 0; clear = 0;
      if (r < 70 && ref_q.size() < QDEPTH) begin
        push = 1;
        push_ent.node = node_t'($urandom_range(NODES - 1));
        push_ent.perm = $urandom_range(1) ? PERM_M : PERM_S;
        ref_q.push_back(push_ent);
      end else if (r < 85) begin
        int n;
        n = $urandom_range(QDEPTH);
        load = 1; load_q = '0; load_cnt = QCNT_W'(n);
        ref_q.delete();
        for (int i = 0; i < n; i++) begin
          load_q[i].node = node_t'($urandom_range(NODES - 1));
          load_q[i].perm = $urandom_range(1) ? PERM_M : PERM_S;
          ref_q.push_back(load_q[i]);
        end
      end else if (r < 92) begin
        clear = 1; ref_q.delete();
      end
      @(negedge clk);
      push = 0; load = 0; clear = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
