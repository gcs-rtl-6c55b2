// gcs_cache_ctrl -- cache controller of one compute blade, extended for GCS.
//
// The controller turns a thread's lock operations into generalized coherence: a read
// lock is an Acquire of the lock line with S permission, a write lock an Acquire with M,
// an unlock a Release.  A line stays cached after release (the locality optimization):
// a later lock of the same line by this blade is served locally, without any message,
// as long as the cached permission suffices and nobody is waiting for the line.
//
// The blade that holds a line in M (or waits for it behind readers) is the line's queue
// holder.  Requests the directory forwards to it (MSG_FWD) go into that line's wait
// queue (gcs_wait_queue) and bump the holder's version.  When the holder releases the
// line, or is sent a request while the line sits unlocked in its cache, it evaluates
// Algorithm 1 (gcs_qxfer_plan) on the queue and sends the directory a transfer request
// carrying the plan, its version, the rest of the queue and the line data.  The switch
// approves it (MSG_GRANT) only if no request has been forwarded since; otherwise
// (MSG_QXFER_DENY) the holder waits for the late requests, which arrive before the
// denial, and tries again with the longer queue.  A reader told that a writer waits
// (MSG_NEXT_WR) answers with an Inv-Ack at once if it is not in its critical section,
// otherwise when it releases.  A reader asking for M first gives up its S copy with an
// Inv-Ack.  The shared memory list of the blade (gcs_shm_list) is kept here too; a line
// that is invalidated loses all its regions at once.
//
// Follows the paper: Acquire/Release, the three wait-queue cases, Algorithm 1, the
// version check, Inv-Acks from readers to the waiting writer, locality and the combined
// data+lock grant.  This design's choices: message encodings, one event per cycle (queue
// transfer first, then a network message, then a CPU operation), FIFO queue order, data
// of a line as one DATA_W word, and the old holder giving up its copy on a transfer.
//
// Interface: rx_*/tx_* to the switch port; cpu_valid/cpu_ready/cpu_op/cpu_line/cpu_wdata
// take lock operations (cpu_wdata is the line's new value on the release of an M lock);
// cpu_rsp_valid pulses when an acquire is granted, with the line data and whether it was
// a local hit.  Acquires complete later, releases at once.  shm_* configure and look up
// the shared memory list.  st/locked/qh/qcnt show the per-line state.
module gcs_cache_ctrl
  import gcs_pkg::*;
#(
  parameter int unsigned ME       = 0,   // this blade's port number
  parameter int unsigned IN_DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  // network
  input  logic     rx_valid,
  output logic     rx_ready,
  input  gcs_msg_t rx_msg,
  output logic     tx_valid,
  input  logic     tx_ready,
  output gcs_msg_t tx_msg,
  // lock operations
  input  logic     cpu_valid,
  output logic     cpu_ready,
  input  op_e      cpu_op,
  input  line_t    cpu_line,
  input  data_t    cpu_wdata,
  output logic     cpu_rsp_valid,
  output line_t    cpu_rsp_line,
  output data_t    cpu_rsp_data,
  output logic     cpu_rsp_local,
  // shared memory list
  input  logic                       shm_we,
  input  line_t                      shm_line,
  input  logic [$clog2(SHM_MAX)-1:0] shm_idx,
  input  logic [ADDR_W-1:0]          shm_base,
  input  logic [SIZE_W-1:0]          shm_size,
  input  logic                       shm_valid,
  input  logic [ADDR_W-1:0]          shm_addr,
  output logic                       shm_hit,
  output line_t                      shm_hit_line,
  output logic                       shm_present,
  // per-line state, for observation
  output perm_e                      st     [NUM_LINES],
  output logic                       locked [NUM_LINES],
  output logic                       qh     [NUM_LINES],
  output logic [QCNT_W-1:0]          qcnt   [NUM_LINES]
);
  localparam node_t MY = node_t'(ME);

  // ------------------------------------------------------------ line state
  perm_e st_r      [NUM_LINES];
  logic  lock_r    [NUM_LINES];
  logic  wait_r    [NUM_LINES];   // Acquire outstanding
  logic  qh_r      [NUM_LINES];   // this blade holds the line's wait queue
  ver_t  ver_r     [NUM_LINES];
  logic  xpend_r   [NUM_LINES];   // transfer request outstanding
  logic  wantx_r   [NUM_LINES];   // queue must be handed on
  logic  invp_r    [NUM_LINES];   // a writer waits: Inv-Ack on release
  data_t data_r    [NUM_LINES];

  // wait queues, one per line
  logic              q_push  [NUM_LINES];
  logic              q_load  [NUM_LINES];
  logic              q_clear [NUM_LINES];
  qarr_t             q_arr   [NUM_LINES];
  logic [QCNT_W-1:0] q_cnt   [NUM_LINES];
  logic              q_full  [NUM_LINES];
  logic              q_empty [NUM_LINES];
  qent_t             push_ent;
  qarr_t             load_q;
  logic [QCNT_W-1:0] load_cnt;

  for (genvar l = 0; l < NUM_LINES; l++) begin : g_q
    gcs_wait_queue u_q (
      .clk, .rst_n,
      .push(q_push[l]), .push_ent(push_ent),
      .load(q_load[l]), .load_q(load_q), .load_cnt(load_cnt),
      .clear(q_clear[l]),
      .q(q_arr[l]), .cnt(q_cnt[l]), .full(q_full[l]), .empty(q_empty[l]));
  end

  // ------------------------------------------------------------ input buffer
  logic     m_valid, m_ready;
  gcs_msg_t m;
  gcs_fifo #(.T(gcs_msg_t), .DEPTH(IN_DEPTH)) u_in (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_msg),
    .out_valid(m_valid), .out_ready(m_ready), .out_data(m));

  // ------------------------------------------------------------ event selection
  logic  out_free;
  assign out_free = !tx_valid || tx_ready;

  // a line whose queue must move and can move now
  logic  x_any;
  line_t x_line;
  always_comb begin
    x_any  = 1'b0;
    x_line = '0;
    for (int l = NUM_LINES - 1; l >= 0; l--)
      if (wantx_r[l] && !xpend_r[l] && st_r[l] == PERM_M && !lock_r[l] && !q_empty[l]) begin
        x_any  = 1'b1;
        x_line = line_t'(l);
      end
  end

  // Algorithm 1 on the selected line's queue
  plan_e             p_plan;
  nmask_t            p_readers;
  logic              p_nw_valid;
  node_t             p_nw;
  qarr_t             p_rest;
  logic [QCNT_W-1:0] p_rest_cnt;
  gcs_qxfer_plan u_plan (
    .q(q_arr[x_line]), .cnt(q_cnt[x_line]),
    .plan(p_plan), .readers(p_readers), .nw_valid(p_nw_valid), .nw(p_nw),
    .rest_q(p_rest), .rest_cnt(p_rest_cnt));

  line_t ml, cl;
  assign ml = m.line;
  assign cl = cpu_line;

  // does the waiting network message have to send something?
  logic m_needs_out;
  assign m_needs_out = (m.mtype == MSG_NEXT_WR) && st_r[ml] == PERM_S && !lock_r[ml];

  logic do_x, do_m, do_c;
  assign do_x = x_any && out_free;
  assign do_m = !do_x && m_valid && (out_free || !m_needs_out);

  // CPU operation: can it complete this cycle, and what does it do?
  logic c_hit, c_acq, c_upg, c_rel, c_ok;
  always_comb begin
    c_hit = 1'b0;  // served from the local cache
    c_acq = 1'b0;  // Acquire sent to the directory
    c_upg = 1'b0;  // S copy given up first (op stays pending)
    c_rel = 1'b0;
    unique case (cpu_op)
      OP_ACQ_S: begin
        c_hit = st_r[cl] != PERM_I && !lock_r[cl] && !xpend_r[cl] && !wantx_r[cl] && !invp_r[cl];
        c_acq = st_r[cl] == PERM_I && !wait_r[cl];
      end
      OP_ACQ_M: begin
        c_hit = st_r[cl] == PERM_M && !lock_r[cl] && !xpend_r[cl] && !wantx_r[cl];
        c_upg = st_r[cl] == PERM_S && !lock_r[cl];
        c_acq = st_r[cl] == PERM_I && !wait_r[cl];
      end
      default: c_rel = lock_r[cl];
    endcase
    c_ok = c_hit || c_acq || c_rel;
  end
  assign do_c      = !do_x && !do_m && cpu_valid && out_free && (c_ok || c_upg);
  assign cpu_ready = do_c && c_ok;
  assign m_ready   = do_m;

  // ------------------------------------------------------------ state update
  always_comb begin
    push_ent = '{node: m.req, perm: m.perm};
    load_q   = m.qarr;
    load_cnt = m.qcnt;
    for (int l = 0; l < NUM_LINES; l++) begin
      q_push[l]  = do_m && m.mtype == MSG_FWD && ml == line_t'(l);
      q_load[l]  = do_m && m.mtype == MSG_GRANT && ml == line_t'(l) && m.req == MY &&
                   m.src != MY && (m.plan == PLAN_TO_WRITER || m.plan == PLAN_READERS_WR);
      q_clear[l] = do_m && m.mtype == MSG_GRANT && ml == line_t'(l) && m.src == MY;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NUM_LINES; l++) begin
        st_r[l]    <= PERM_I;
        lock_r[l]  <= 1'b0;
        wait_r[l]  <= 1'b0;
        qh_r[l]    <= 1'b0;
        ver_r[l]   <= '0;
        xpend_r[l] <= 1'b0;
        wantx_r[l] <= 1'b0;
        invp_r[l]  <= 1'b0;
        data_r[l]  <= '0;
      end
      tx_valid      <= 1'b0;
      tx_msg        <= '0;
      cpu_rsp_valid <= 1'b0;
      cpu_rsp_line  <= '0;
      cpu_rsp_data  <= '0;
      cpu_rsp_local <= 1'b0;
    end else begin
      cpu_rsp_valid <= 1'b0;
      cpu_rsp_local <= 1'b0;
      if (tx_valid && tx_ready) tx_valid <= 1'b0;

      if (do_x) begin
        // Algorithm 1: ask the switch to approve the transfer of the queue
        xpend_r[x_line]  <= 1'b1;
        tx_valid         <= 1'b1;
        tx_msg           <= '0;
        tx_msg.mtype     <= MSG_QXFER_REQ;
        tx_msg.src       <= MY;
        tx_msg.line      <= x_line;
        tx_msg.ver       <= ver_r[x_line];
        tx_msg.data      <= data_r[x_line];
        tx_msg.plan      <= p_plan;
        tx_msg.readers   <= p_readers;
        tx_msg.nw_valid  <= p_nw_valid;
        tx_msg.req       <= p_nw;
        tx_msg.qarr      <= p_rest;
        tx_msg.qcnt      <= p_rest_cnt;
      end else if (do_m) begin
        unique case (m.mtype)
          MSG_FWD: begin
            // enqueue; become holder if this is the first request forwarded here
            qh_r[ml]  <= 1'b1;
            ver_r[ml] <= qh_r[ml] ? ver_r[ml] + 1'b1 : ver_t'(1);
            if (st_r[ml] == PERM_M && !lock_r[ml]) wantx_r[ml] <= 1'b1;
          end
          MSG_NEXT_WR: begin
            if (wait_r[ml]) begin
              // our S grant is still on its way from memory: hand over after it
              invp_r[ml] <= 1'b1;
            end else if (st_r[ml] == PERM_S) begin
              if (lock_r[ml]) invp_r[ml] <= 1'b1;
              else begin
                st_r[ml]     <= PERM_I;
                tx_valid     <= 1'b1;
                tx_msg       <= '0;
                tx_msg.mtype <= MSG_INV_ACK;
                tx_msg.src   <= MY;
                tx_msg.line  <= ml;
              end
            end
          end
          MSG_ACK_DATA: begin
            st_r[ml]      <= m.perm;
            data_r[ml]    <= m.data;
            lock_r[ml]    <= 1'b1;
            wait_r[ml]    <= 1'b0;
            if (m.perm == PERM_M) invp_r[ml] <= 1'b0;
            if (m.perm == PERM_M && !qh_r[ml]) begin
              qh_r[ml]  <= 1'b1;
              ver_r[ml] <= '0;
            end
            cpu_rsp_valid <= 1'b1;
            cpu_rsp_line  <= ml;
            cpu_rsp_data  <= m.data;
          end
          MSG_QXFER_DENY: begin
            xpend_r[ml] <= 1'b0;   // wantx stays set: retry with the longer queue
          end
          MSG_GRANT: begin
            if (m.src == MY) begin
              // old holder: the queue and the line have moved on
              st_r[ml]    <= PERM_I;
              qh_r[ml]    <= 1'b0;
              ver_r[ml]   <= '0;
              xpend_r[ml] <= 1'b0;
              wantx_r[ml] <= 1'b0;
            end else if (m.readers[ME[$clog2(NODES)-1:0]]) begin
              st_r[ml]      <= PERM_S;
              data_r[ml]    <= m.data;
              lock_r[ml]    <= 1'b1;
              wait_r[ml]    <= 1'b0;
              invp_r[ml]    <= (m.plan == PLAN_READERS_WR);
              cpu_rsp_valid <= 1'b1;
              cpu_rsp_line  <= ml;
              cpu_rsp_data  <= m.data;
            end else if (m.req == MY && m.plan == PLAN_TO_WRITER) begin
              st_r[ml]      <= PERM_M;
              data_r[ml]    <= m.data;
              lock_r[ml]    <= 1'b1;
              wait_r[ml]    <= 1'b0;
              invp_r[ml]    <= 1'b0;
              qh_r[ml]      <= 1'b1;
              ver_r[ml]     <= '0;
              cpu_rsp_valid <= 1'b1;
              cpu_rsp_line  <= ml;
              cpu_rsp_data  <= m.data;
            end else if (m.req == MY && m.plan == PLAN_READERS_WR) begin
              // queue arrives ahead of the line (case iii): wait for the readers
              qh_r[ml]  <= 1'b1;
              ver_r[ml] <= '0;
            end
          end
          default: ;
        endcase
      end else if (do_c) begin
        if (c_hit) begin
          lock_r[cl]    <= 1'b1;
          cpu_rsp_valid <= 1'b1;
          cpu_rsp_local <= 1'b1;
          cpu_rsp_line  <= cl;
          cpu_rsp_data  <= data_r[cl];
        end else if (c_acq) begin
          wait_r[cl]     <= 1'b1;
          tx_valid       <= 1'b1;
          tx_msg         <= '0;
          tx_msg.mtype   <= MSG_ACQ;
          tx_msg.src     <= MY;
          tx_msg.line    <= cl;
          tx_msg.perm    <= (cpu_op == OP_ACQ_M) ? PERM_M : PERM_S;
        end else if (c_upg || (c_rel && st_r[cl] == PERM_S && invp_r[cl])) begin
          // give up the S copy: upgrade to M, or a writer is waiting
          lock_r[cl]   <= 1'b0;
          st_r[cl]     <= PERM_I;
          invp_r[cl]   <= 1'b0;
          tx_valid     <= 1'b1;
          tx_msg       <= '0;
          tx_msg.mtype <= MSG_INV_ACK;
          tx_msg.src   <= MY;
          tx_msg.line  <= cl;
        end else if (c_rel) begin
          lock_r[cl] <= 1'b0;
          if (st_r[cl] == PERM_M) begin
            data_r[cl] <= cpu_wdata;
            // Algorithm 1: an empty queue is dropped and the line stays cached
            if (!q_empty[cl]) wantx_r[cl] <= 1'b1;
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ shared memory list
  logic [NUM_LINES-1:0] held;
  always_comb
    for (int l = 0; l < NUM_LINES; l++) held[l] = (st_r[l] != PERM_I);

  gcs_shm_list u_shm (
    .clk, .rst_n,
    .cfg_we(shm_we), .cfg_line(shm_line), .cfg_idx(shm_idx), .cfg_base(shm_base),
    .cfg_size(shm_size), .cfg_valid(shm_valid), .line_held(held),
    .lk_addr(shm_addr), .lk_hit(shm_hit), .lk_line(shm_hit_line), .lk_present(shm_present));

  always_comb
    for (int l = 0; l < NUM_LINES; l++) begin
      st[l]     = st_r[l];
      locked[l] = lock_r[l];
      qh[l]     = qh_r[l];
      qcnt[l]   = q_cnt[l];
    end

  // a transfer is only ever requested by the queue holder of an unlocked M line
  a_x_ok: assert property (@(posedge clk) disable iff (!rst_n)
                           do_x |-> qh_r[x_line] && st_r[x_line] == PERM_M && !lock_r[x_line]);
  // a forwarded request can always be queued
  a_fwd_room: assert property (@(posedge clk) disable iff (!rst_n)
                               do_m && m.mtype == MSG_FWD |-> !q_full[ml]);
endmodule
