// tb_gcs_mem_blade -- checks the memory blade against a reference array.
// Random write-backs (GRANT) and reads (MEM_RD) with random back-pressure on the answer
// channel; every answer must be an Acquire-Ack to the right requestor with the right
// permission and the data last written (zero after reset), in request order.
`timescale 1ns/1ps
module tb_gcs_mem_blade;
  import gcs_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  initial begin rst_n = 1'b1; #1 rst_n = 1'b0; end   // a real edge for the asynchronous reset
  logic in_valid, in_ready, out_valid, out_ready;
  gcs_msg_t in_msg, out_msg;
  gcs_mem_blade dut (.*);

  int checks = 0, failures = 0;
  data_t    ref_mem [NUM_LINES];
  gcs_msg_t expq [$];

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    gcs_msg_t e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected answer"); end
    else begin
      e = expq.pop_front();
      if (out_msg.mtype != MSG_ACK_DATA || out_msg.req != e.req || out_msg.line != e.line ||
          out_msg.perm != e.perm || out_msg.data != e.data || out_msg.src != node_t'(MEM_PORT)) begin
        failures++;
        $display("answer line %0d data %h expected %h", out_msg.line, out_msg.data, e.data);
      end
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(3) != 0);

  initial begin
    in_valid = 0; in_msg = '0;
    for (int l = 0; l < NUM_LINES; l++) ref_mem[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      gcs_msg_t m, e;
      @(negedge clk);
      m = '0;
      m.line = line_t'($urandom_range(NUM_LINES - 1));
      if ($urandom_range(1)) begin
        m.mtype = MSG_GRANT; m.data = {$urandom, $urandom};
      end else begin
        m.mtype = MSG_MEM_RD; m.req = node_t'($urandom_range(NODES - 1));
        m.perm = $urandom_range(1) ? PERM_M : PERM_S;
      end
      in_valid = 1; in_msg = m;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
      if (m.mtype == MSG_GRANT) ref_mem[m.line] = m.data;
      else begin
        e = m; e.data = ref_mem[m.line]; expq.push_back(e);
      end
      @(negedge clk);
      in_valid = 0;
    end
    repeat (50) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d answers missing", expq.size()); end
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
