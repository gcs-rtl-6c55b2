// gcs_top -- a rack with generalized cache coherence for locks.
//
// NODES compute blades (gcs_cache_ctrl each), one programmable switch holding the cache
// directory (gcs_switch), and one memory blade (gcs_mem_blade), wired as a star: every
// blade and the memory blade sit on a switch port, and all coherence messages cross the
// switch.  Threads on the blades (their CPUs are outside this design) issue lock
// operations on lock lines through the per-blade cpu_* ports and register the memory
// regions each lock protects through the shm_* ports.  A lock acquisition is one
// coherence transaction: the grant brings the lock (permission) and the protected data
// together, queued requests wait at the current writer and move with the queue, and a
// line stays cached at a blade after release until another blade needs it.
//
// Interface: arrays indexed by blade number 0..NODES-1, same meaning as on
// gcs_cache_ctrl; st/locked/qcnt give every blade's view of every line and dir_* the
// directory's, for monitoring.  Single clock, active-low asynchronous reset.
module gcs_top
  import gcs_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cpu_valid     [NODES],
  output logic                       cpu_ready     [NODES],
  input  op_e                        cpu_op        [NODES],
  input  line_t                      cpu_line      [NODES],
  input  data_t                      cpu_wdata     [NODES],
  output logic                       cpu_rsp_valid [NODES],
  output line_t                      cpu_rsp_line  [NODES],
  output data_t                      cpu_rsp_data  [NODES],
  output logic                       cpu_rsp_local [NODES],
  input  logic                       shm_we        [NODES],
  input  line_t                      shm_line      [NODES],
  input  logic [$clog2(SHM_MAX)-1:0] shm_idx       [NODES],
  input  logic [ADDR_W-1:0]          shm_base      [NODES],
  input  logic [SIZE_W-1:0]          shm_size      [NODES],
  input  logic                       shm_valid     [NODES],
  input  logic [ADDR_W-1:0]          shm_addr      [NODES],
  output logic                       shm_hit       [NODES],
  output line_t                      shm_hit_line  [NODES],
  output logic                       shm_present   [NODES],
  output perm_e                      st            [NODES][NUM_LINES],
  output logic                       locked        [NODES][NUM_LINES],
  output logic [QCNT_W-1:0]          qcnt          [NODES][NUM_LINES],
  output perm_e                      dir_perm      [NUM_LINES],
  output nmask_t                     dir_sharers   [NUM_LINES],
  output logic                       dir_qh_v      [NUM_LINES],
  output node_t                      dir_qh        [NUM_LINES],
  output ver_t                       dir_ver       [NUM_LINES]
);
  logic     rx_valid [PORTS];
  logic     rx_ready [PORTS];
  gcs_msg_t rx_msg   [PORTS];
  logic     tx_valid [PORTS];
  logic     tx_ready [PORTS];
  gcs_msg_t tx_msg;

  gcs_switch u_switch (
    .clk, .rst_n,
    .rx_valid, .rx_ready, .rx_msg,
    .tx_valid, .tx_ready, .tx_msg,
    .dir_perm, .dir_sharers, .dir_qh_v, .dir_qh, .dir_ver);

  for (genvar n = 0; n < NODES; n++) begin : g_blade
    logic qh_unused [NUM_LINES];
    gcs_cache_ctrl #(.ME(n)) u_ctrl (
      .clk, .rst_n,
      .rx_valid(tx_valid[n]), .rx_ready(tx_ready[n]), .rx_msg(tx_msg),
      .tx_valid(rx_valid[n]), .tx_ready(rx_ready[n]), .tx_msg(rx_msg[n]),
      .cpu_valid(cpu_valid[n]), .cpu_ready(cpu_ready[n]), .cpu_op(cpu_op[n]),
      .cpu_line(cpu_line[n]), .cpu_wdata(cpu_wdata[n]),
      .cpu_rsp_valid(cpu_rsp_valid[n]), .cpu_rsp_line(cpu_rsp_line[n]),
      .cpu_rsp_data(cpu_rsp_data[n]), .cpu_rsp_local(cpu_rsp_local[n]),
      .shm_we(shm_we[n]), .shm_line(shm_line[n]), .shm_idx(shm_idx[n]),
      .shm_base(shm_base[n]), .shm_size(shm_size[n]), .shm_valid(shm_valid[n]),
      .shm_addr(shm_addr[n]), .shm_hit(shm_hit[n]), .shm_hit_line(shm_hit_line[n]),
      .shm_present(shm_present[n]),
      .st(st[n]), .locked(locked[n]), .qh(qh_unused), .qcnt(qcnt[n]));
  end

  gcs_mem_blade u_mem (
    .clk, .rst_n,
    .in_valid (tx_valid[MEM_PORT]), .in_ready(tx_ready[MEM_PORT]), .in_msg(tx_msg),
    .out_valid(rx_valid[MEM_PORT]), .out_ready(rx_ready[MEM_PORT]), .out_msg(rx_msg[MEM_PORT]));
endmodule
