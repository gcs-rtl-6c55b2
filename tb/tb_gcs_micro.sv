// tb_gcs_micro -- single-lock contention benchmark on the full-size rack (8 blades).
//
// One thread on each of B active blades repeatedly acquires one lock, reads the data the
// lock protects, writes it back incremented if it acquired as a writer, and releases it.
// It runs for B = 2, 4, 6, 8 and four mixes: writer-only, 50/50, 95/5 and 99/1 reads to
// writes.  This is the same experiment that is used to compare the protocol with software
// locks built on ordinary coherence.  Each configuration uses its own line (16 configurations,
// 16 lines), so the lines are cold when a configuration starts.
//
// What it checks, against values the testbench works out itself:
//   * every acquire returns the latest committed data of the line, so the data arrives
//     with the lock and no separate fetch is needed;
//   * each acquisition that is not a local hit costs exactly one coherence request
//     (MSG_ACQ) from the acquiring blade, however many blades contend.  An S->M upgrade
//     gives up its S copy first with an Inv-Ack and still sends one request;
//   * a local hit sends no request at all;
//   * in every configuration at least one acquisition went over the network, and in the
//     read-mostly ones at least one was served locally;
//   * the final value of each line equals the number of writes made to it.
// It prints, for each configuration, the acquisitions, the local hits, the requests per
// network acquisition (x100), all switch messages per network acquisition (x100) and the
// mean acquisition latency in cycles.  The latencies are for information only: the
// published figures are in microseconds on real hardware and give no cycle count to compare.
`timescale 1ns/1ps
module tb_gcs_micro;
  import gcs_pkg::*;

  localparam int OPS = 40;   // lock operations per thread per configuration

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
  data_t golden  [NUM_LINES];
  int    nwrites [NUM_LINES];

  // ---------------------------------------------------------------- per-blade counters
  int acq_msgs [NODES];     // MSG_ACQ sent by the blade
  int sw_msgs = 0;          // every message the directory emits (one per multicast)

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NODES; n++)
      if (dut.rx_valid[n] && dut.rx_ready[n] && dut.rx_msg[n].mtype == MSG_ACQ) acq_msgs[n]++;
    if (dut.u_switch.u_dir.out_valid && dut.u_switch.u_dir.out_ready) sw_msgs++;
  end

  // ---------------------------------------------------------------- CPU port tasks
  task automatic do_acq(int n, op_e op, line_t l, output data_t d, output logic local_hit,
                        output int lat);
    int t0;
    @(negedge clk);
    cpu_valid[n] = 1'b1; cpu_op[n] = op; cpu_line[n] = l;
    t0 = 0;
    #1;
    while (!cpu_ready[n]) begin
      @(negedge clk); #1; t0++;
    end
    @(posedge clk);
    @(negedge clk);
    t0++;
    cpu_valid[n] = 1'b0;
    while (!(cpu_rsp_valid[n] && cpu_rsp_line[n] == l)) begin
      @(negedge clk); t0++;
    end
    d = cpu_rsp_data[n];
    local_hit = cpu_rsp_local[n];
    lat = t0;
  endtask

  task automatic do_rel(int n, line_t l, data_t wd, logic is_wr);
    @(negedge clk);
    cpu_valid[n] = 1'b1; cpu_op[n] = OP_REL; cpu_line[n] = l; cpu_wdata[n] = wd;
    #1;
    while (!cpu_ready[n]) begin
      @(negedge clk); #1;
    end
    @(posedge clk);
    if (is_wr) begin   // the write commits at the release
      golden[l] = wd;
      nwrites[l]++;
    end
    @(negedge clk);
    cpu_valid[n] = 1'b0;
  endtask

  // ---------------------------------------------------------------- one thread
  // Per-configuration results of each thread.
  int r_acq [NODES], r_local [NODES], r_lat [NODES];
  bit r_done [NODES];

  task automatic run_thread(int n, line_t l, int rd_pct);
    data_t d;
    logic  lh;
    int    lat, n_prev;
    op_e   op;
    r_acq[n] = 0; r_local[n] = 0; r_lat[n] = 0;
    for (int k = 0; k < OPS; k++) begin
      op = ($urandom_range(99) < rd_pct) ? OP_ACQ_S : OP_ACQ_M;
      n_prev = acq_msgs[n];
      do_acq(n, op, l, d, lh, lat);
      r_acq[n]++;
      checks++;
      if (d !== golden[l]) begin
        failures++;
        $display("blade %0d line %0d: acquired data %0d, expected %0d", n, l, d, golden[l]);
      end
      checks++;
      if (lh) begin
        r_local[n]++;
        if (acq_msgs[n] != n_prev) begin
          failures++;
          $display("blade %0d line %0d: local hit sent a request", n, l);
        end
      end else begin
        r_lat[n] += lat;
        if (acq_msgs[n] != n_prev + 1) begin
          failures++;
          $display("blade %0d line %0d: %0d requests for one acquisition", n, l, acq_msgs[n] - n_prev);
        end
      end
      repeat ($urandom_range(3)) @(negedge clk);   // access the protected data
      do_rel(n, l, (op == OP_ACQ_M) ? d + 1 : d, op == OP_ACQ_M);
      repeat ($urandom_range(2)) @(negedge clk);
    end
    r_done[n] = 1'b1;
  endtask

  // ---------------------------------------------------------------- main
  initial begin
    int blades [4];
    int rdpct  [4];
    string mix [4];
    blades = '{2, 4, 6, 8};
    rdpct  = '{0, 50, 95, 99};
    mix    = '{"writer-only", "50% reader", "95% reader", "99% reader"};
    for (int n = 0; n < NODES; n++) begin
      cpu_valid[n] = 1'b0; cpu_op[n] = OP_ACQ_S; cpu_line[n] = '0; cpu_wdata[n] = '0;
      shm_we[n] = 1'b0; shm_line[n] = '0; shm_idx[n] = '0; shm_base[n] = '0;
      shm_size[n] = '0; shm_valid[n] = 1'b0; shm_addr[n] = '0;
      acq_msgs[n] = 0; r_done[n] = 1'b0;
    end
    for (int l = 0; l < NUM_LINES; l++) begin golden[l] = '0; nwrites[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    for (int m = 0; m < 4; m++) begin
      for (int b = 0; b < 4; b++) begin
        line_t l;
        int    acq, loc, lat, req0, sw0, nreq, nsw;
        l    = line_t'(4 * m + b);
        req0 = 0;
        for (int n = 0; n < NODES; n++) begin req0 += acq_msgs[n]; r_done[n] = 1'b0; end
        sw0  = sw_msgs;
        for (int n = 0; n < blades[b]; n++) begin
          automatic int nn = n;
          automatic line_t ll = l;
          automatic int pp = rdpct[m];
          fork run_thread(nn, ll, pp); join_none
        end
        for (int n = 0; n < blades[b]; n++) wait (r_done[n]);
        acq = 0; loc = 0; lat = 0; nreq = 0;
        for (int n = 0; n < blades[b]; n++) begin
          acq += r_acq[n]; loc += r_local[n]; lat += r_lat[n];
        end
        for (int n = 0; n < NODES; n++) nreq += acq_msgs[n];
        nreq -= req0;
        nsw = sw_msgs - sw0;
        $display("%-12s blades=%0d acquisitions=%0d local=%0d requests/net-acq(x100)=%0d switch-msgs/net-acq(x100)=%0d mean-net-latency=%0d cycles",
                 mix[m], blades[b], acq, loc,
                 (acq > loc) ? (100 * nreq) / (acq - loc) : 0,
                 (acq > loc) ? (100 * nsw) / (acq - loc) : 0,
                 (acq > loc) ? lat / (acq - loc) : 0);
        checks++;
        if (nreq != acq - loc) begin
          failures++;
          $display("  %0d requests for %0d network acquisitions", nreq, acq - loc);
        end
        checks++;
        if (acq - loc == 0) begin
          failures++;
          $display("  no acquisition went over the network");
        end
        if (rdpct[m] >= 95) begin
          checks++;
          if (loc == 0) begin
            failures++;
            $display("  no local hit in a read-mostly mix");
          end
        end
      end
    end

    // every line holds the number of writes made to it
    for (int l = 0; l < NUM_LINES; l++) begin
      data_t d; logic lh; int lat;
      do_acq(0, OP_ACQ_S, line_t'(l), d, lh, lat);
      checks++;
      if (d != data_t'(nwrites[l])) begin
        failures++;
        $display("line %0d: final value %0d, writes %0d", l, d, nwrites[l]);
      end
      do_rel(0, line_t'(l), d, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
