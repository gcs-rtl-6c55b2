// tb_gcs_top -- end-to-end test of the GCS rack at its default size (8 blades, 16 lines).
//
// One thread per blade runs lock workloads through the blade's CPU port:
//   phase 0  50% readers over 8 lines          (YCSB-A-like mix)
//   phase 1  95% readers over 8 lines          (YCSB-B-like mix)
//   phase 2  100% readers over 8 lines         (YCSB-C-like mix)
//   phase 3  one global lock, always exclusive (Kyoto Cabinet / TPC-C-like)
//   phase 4  99% readers on one lock           (read-mostly contention)
// A writer reads the line's data in its critical section and releases it with data+1.
// Checks, all against a reference kept by the testbench:
//   * every granted acquire returns the line's latest committed value (golden model),
//   * at no time do two blades hold a line locked unless all of them hold it as readers,
//   * in the critical section the shared memory list maps the protected regions to the
//     line and reports them present,
//   * at the end every blade can read every line and sees the number of writes made.
// It also counts the protocol mechanisms (local hits, forwarded/enqueued requests,
// each queue-transfer plan, version denials, reader Inv-Acks, S->M upgrades, memory
// reads, queues longer than one) and counts a failure for any that never happened.
`timescale 1ns/1ps
module tb_gcs_top;
  import gcs_pkg::*;

  localparam int OPS_PER_PHASE = 60;   // lock operations per blade per phase
  localparam int NPHASE        = 5;

  logic clk = 1'b0, rst_n;
  always #5 clk = ~clk;
  initial begin rst_n = 1'b1; #1 rst_n = 1'b0; end   // a real edge for the asynchronous reset

  logic                       cpu_valid     [NODES];
  logic                       cpu_ready     [NODES];
  op_e                        cpu_op        [NODES];
  line_t                      cpu_line      [NODES];
  data_t                      cpu_wdata     [NODES];
  logic                       cpu_rsp_valid [NODES];
  line_t                      cpu_rsp_line  [NODES];
  data_t                      cpu_rsp_data  [NODES];
  logic                       cpu_rsp_local [NODES];
  logic                       shm_we        [NODES];
  line_t                      shm_line      [NODES];
  logic [$clog2(SHM_MAX)-1:0] shm_idx       [NODES];
  logic [ADDR_W-1:0]          shm_base      [NODES];
  logic [SIZE_W-1:0]          shm_size      [NODES];
  logic                       shm_valid     [NODES];
  logic [ADDR_W-1:0]          shm_addr      [NODES];
  logic                       shm_hit       [NODES];
  line_t                      shm_hit_line  [NODES];
  logic                       shm_present   [NODES];
  perm_e                      st            [NODES][NUM_LINES];
  logic                       locked        [NODES][NUM_LINES];
  logic [QCNT_W-1:0]          qcnt          [NODES][NUM_LINES];
  perm_e                      dir_perm      [NUM_LINES];
  nmask_t                     dir_sharers   [NUM_LINES];
  logic                       dir_qh_v      [NUM_LINES];
  node_t                      dir_qh        [NUM_LINES];
  ver_t                       dir_ver       [NUM_LINES];

  gcs_top dut (.*);

  int checks = 0, failures = 0;
  data_t golden [NUM_LINES];
  int    nwrites [NUM_LINES];
  int    phase_done [NODES];
  int    ops_done = 0;

  // region i of line l: base = 0x10_0000*(i+1) + 0x1000*l, size = 64*(i+1)
  function automatic logic [ADDR_W-1:0] rbase(int l, int i);
    return ADDR_W'(32'h10_0000 * (i + 1) + 32'h1000 * l);
  endfunction

  // ---------------------------------------------------------------- mechanisms seen
  int n_local = 0, n_fwd = 0, n_nextwr = 0, n_invack = 0, n_memrd = 0, n_deny = 0;
  int n_to_wr = 0, n_rd_wr = 0, n_rd = 0, n_upg = 0, n_q2 = 0, n_xreq = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_switch.u_dir.out_valid && dut.u_switch.u_dir.out_ready) begin
      unique case (dut.u_switch.u_dir.out_msg.mtype)
        MSG_FWD:        n_fwd++;
        MSG_NEXT_WR:    n_nextwr++;
        MSG_MEM_RD:     n_memrd++;
        MSG_QXFER_DENY: n_deny++;
        MSG_GRANT: begin
          if (dut.u_switch.u_dir.out_msg.plan == PLAN_TO_WRITER)  n_to_wr++;
          if (dut.u_switch.u_dir.out_msg.plan == PLAN_READERS_WR) n_rd_wr++;
          if (dut.u_switch.u_dir.out_msg.plan == PLAN_READERS)    n_rd++;
        end
        default: ;
      endcase
    end
    for (int n = 0; n < NODES; n++) begin
      if (cpu_rsp_valid[n] && cpu_rsp_local[n]) n_local++;
      if (dut.rx_valid[n] && dut.rx_ready[n] && dut.rx_msg[n].mtype == MSG_INV_ACK) n_invack++;
      if (dut.rx_valid[n] && dut.rx_ready[n] && dut.rx_msg[n].mtype == MSG_QXFER_REQ) n_xreq++;
      for (int l = 0; l < NUM_LINES; l++) if (qcnt[n][l] >= 2) n_q2++;
    end
  end

  // ---------------------------------------------------------------- SWMR monitor
  always @(negedge clk) if (rst_n) begin
    for (int l = 0; l < NUM_LINES; l++) begin
      int nm, ns;
      nm = 0; ns = 0;
      for (int n = 0; n < NODES; n++)
        if (locked[n][l]) begin
          if (st[n][l] == PERM_M) nm++;
          else if (st[n][l] == PERM_S) ns++;
        end
      checks++;
      if (nm > 1 || (nm == 1 && ns > 0)) begin
        failures++;
        $display("SWMR violated on line %0d: %0d writers, %0d readers at %0t", l, nm, ns, $time);
      end
    end
  end

  // ---------------------------------------------------------------- blade threads
  task automatic do_acq(int n, op_e op, line_t l, output data_t d, output logic local_hit);
    @(negedge clk);
    cpu_valid[n] = 1'b1; cpu_op[n] = op; cpu_line[n] = l;
    #1;
    while (!cpu_ready[n]) begin
      @(negedge clk); #1;
    end
    @(posedge clk);
    @(negedge clk);
    cpu_valid[n] = 1'b0;
    while (!(cpu_rsp_valid[n] && cpu_rsp_line[n] == l)) @(negedge clk);
    d = cpu_rsp_data[n];
    local_hit = cpu_rsp_local[n];
  endtask

  task automatic do_rel(int n, line_t l, data_t wd, logic is_wr);
    @(negedge clk);
    cpu_valid[n] = 1'b1; cpu_op[n] = OP_REL; cpu_line[n] = l; cpu_wdata[n] = wd;
    #1;
    while (!cpu_ready[n]) begin
      @(negedge clk); #1;
    end
    @(posedge clk);
    if (is_wr) begin   // commit the write at the moment of release
      golden[l] = wd;
      nwrites[l]++;
    end
    @(negedge clk);
    cpu_valid[n] = 1'b0;
  endtask

  task automatic run_blade(int n);
    data_t d;
    logic  lh;
    line_t l;
    op_e   op;
    int    rd_pct, nlines;
    for (int ph = 0; ph < NPHASE; ph++) begin
      unique case (ph)
        0: begin rd_pct = 50;  nlines = 8; end
        1: begin rd_pct = 95;  nlines = 8; end
        2: begin rd_pct = 100; nlines = 8; end
        3: begin rd_pct = 0;   nlines = 1; end
        default: begin rd_pct = 99; nlines = 1; end
      endcase
      for (int k = 0; k < OPS_PER_PHASE; k++) begin
        l  = (nlines == 1) ? line_t'(8 + ph) : line_t'($urandom_range(nlines - 1));
        op = ($urandom_range(99) < rd_pct) ? OP_ACQ_S : OP_ACQ_M;
        do_acq(n, op, l, d, lh);
        checks++;
        if (d !== golden[l]) begin
          failures++;
          $display("blade %0d line %0d: acquired data %0d, expected %0d", n, l, d, golden[l]);
        end
        // shared memory list: the regions of this line are present while it is held
        shm_addr[n] = rbase(l, 1) + 8;
        #1;
        checks++;
        if (!(shm_hit[n] && shm_hit_line[n] == l && shm_present[n])) begin
          failures++;
          $display("blade %0d line %0d: shared memory list lookup failed", n, l);
        end
        repeat ($urandom_range(6)) @(negedge clk);   // critical section
        do_rel(n, l, (op == OP_ACQ_M) ? d + 1 : d, op == OP_ACQ_M);
        repeat ($urandom_range(4)) @(negedge clk);
        ops_done++;
      end
      phase_done[n] = ph + 1;
      // barrier between phases
      for (int m = 0; m < NODES; m++) while (phase_done[m] < ph + 1) @(negedge clk);
    end
  endtask

  for (genvar g = 0; g < NODES; g++) begin : g_thr
    initial begin
      cpu_valid[g] = 1'b0; cpu_op[g] = OP_ACQ_S; cpu_line[g] = '0; cpu_wdata[g] = '0;
      shm_we[g] = 1'b0; shm_line[g] = '0; shm_idx[g] = '0; shm_base[g] = '0;
      shm_size[g] = '0; shm_valid[g] = 1'b0; shm_addr[g] = '0;
      phase_done[g] = 0;
      @(posedge rst_n);
      // register two regions per line (a lock protecting a fragmented object)
      for (int l = 0; l < NUM_LINES; l++)
        for (int i = 0; i < 2; i++) begin
          @(negedge clk);
          shm_we[g] = 1'b1; shm_line[g] = line_t'(l); shm_idx[g] = i[$clog2(SHM_MAX)-1:0];
          shm_base[g] = rbase(l, i); shm_size[g] = SIZE_W'(64 * (i + 1)); shm_valid[g] = 1'b1;
        end
      @(negedge clk);
      shm_we[g] = 1'b0;
      // a line that is not held is not present
      shm_addr[g] = rbase(3, 0);
      #1;
      checks++;
      if (!shm_hit[g] || shm_present[g]) failures++;
      run_blade(g);
      phase_done[g] = NPHASE + 1;
    end
  end

  // ---------------------------------------------------------------- main
  initial begin
    for (int l = 0; l < NUM_LINES; l++) begin golden[l] = '0; nwrites[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < NODES; m++) wait (phase_done[m] == NPHASE + 1);
    // final read-back: blade 0 reads every used line and must see the write count
    for (int l = 0; l < 13; l++) begin
      data_t d; logic lh;
      do_acq(0, OP_ACQ_S, line_t'(l), d, lh);
      checks++;
      if (d != data_t'(nwrites[l])) begin
        failures++;
        $display("line %0d: final value %0d, writes %0d", l, d, nwrites[l]);
      end
      do_rel(0, line_t'(l), d, 1'b0);
    end
    $display("ops=%0d local_hits=%0d fwd=%0d next_wr=%0d inv_ack=%0d mem_rd=%0d xfer_req=%0d deny=%0d",
             ops_done, n_local, n_fwd, n_nextwr, n_invack, n_memrd, n_xreq, n_deny);
    $display("grant_to_writer=%0d grant_readers_then_writer=%0d grant_readers=%0d upgrades=%0d queue>=2 cycles=%0d",
             n_to_wr, n_rd_wr, n_rd, n_upg, n_q2);
    begin
      int seen [12];
      string nm [12];
      seen = '{n_local, n_fwd, n_nextwr, n_invack, n_memrd, n_xreq, n_deny, n_to_wr, n_rd_wr, n_rd, n_upg, n_q2};
      nm   = '{"local hit", "enqueue", "next-writer notice", "inv-ack", "memory read", "transfer request",
               "version denial", "transfer to writer", "readers then writer", "readers only",
               "S->M upgrade", "queue of two or more"};
      for (int i = 0; i < 12; i++) begin
        checks++;
        if (seen[i] == 0) begin
          failures++;
          $display("mechanism never exercised: %s", nm[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // S->M upgrades seen at the blades
  for (genvar g = 0; g < NODES; g++) begin : g_upg
    always @(posedge clk) if (rst_n && dut.g_blade[g].u_ctrl.do_c && dut.g_blade[g].u_ctrl.c_upg) n_upg++;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: timeout, ops done %0d", ops_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
