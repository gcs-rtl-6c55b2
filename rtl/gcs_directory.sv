// gcs_directory -- cache directory of the programmable switch, extended for GCS.
//
// For every lock line the directory keeps the MSI permission, the sharer list (one bit
// per blade; for M it holds the single owner), the queue holder (the blade that keeps
// the line's wait queue, if any) and a version: the number of requests forwarded to the
// queue holder since the queue last moved.  That is all the switch stores; wait queues
// and shared memory lists live at the blades, as in the paper.
//
// Message handling (one message per cycle, result registered):
//   ACQ S/M, queue holder exists (line M, or S with a writer waiting)
//        -> FWD to the queue holder, version+1 (the request is enqueued there)
//   ACQ S, line I or S        -> add to sharers, MEM_RD (Acquire-Ack with data from memory)
//   ACQ M, line I             -> M, owner and queue holder = requestor, MEM_RD
//   ACQ M, line S, no holder  -> requestor becomes queue holder (case iii); the other
//        sharers get NEXT_WR and answer with INV_ACK when they release; with no other
//        sharer the line goes straight to M and MEM_RD
//   INV_ACK                   -> drop the sender from the sharers; when the last reader
//        is gone and a writer waits, the line becomes M at that writer and MEM_RD
//   QXFER_REQ (transfer plan from the queue holder, Algorithm 1)
//        -> version equal to the directory's: apply the plan, reset the version and
//           multicast GRANT to the old holder, the blades granted and (if the data must
//           reach memory for a later read) the memory blade
//        -> version differs: QXFER_DENY to the holder, which retries
//   ACK_DATA from memory      -> routed to its requestor
// The version check and the three queue cases follow the paper; the message set,
// carrying data in the GRANT and writing it back through the memory blade are this
// design's choices.  The directory is directly indexed by line number, so no entry
// allocation is needed.
//
// Interface: in_valid/in_ready/in_msg take one message; out_valid/out_ready/out_msg/
// out_mask give one multicast message (out_mask bit p = switch port p, bit MEM_PORT =
// memory blade).  Latency one cycle; a message that produces no output still takes one
// cycle.  Reset sets every line to I with no holder.
module gcs_directory
  import gcs_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  gcs_msg_t in_msg,
  output logic     out_valid,
  input  logic     out_ready,
  output gcs_msg_t out_msg,
  output pmask_t   out_mask,
  // directory state, for observation
  output perm_e    dir_perm    [NUM_LINES],
  output nmask_t   dir_sharers [NUM_LINES],
  output logic     dir_qh_v    [NUM_LINES],
  output node_t    dir_qh      [NUM_LINES],
  output ver_t     dir_ver     [NUM_LINES]
);
  perm_e  perm_r    [NUM_LINES];
  nmask_t sharers_r [NUM_LINES];
  logic   qh_v_r    [NUM_LINES];
  node_t  qh_r      [NUM_LINES];
  ver_t   ver_r     [NUM_LINES];

  // next-state of the addressed line and the produced message
  perm_e    n_perm;
  nmask_t   n_sharers;
  logic     n_qh_v;
  node_t    n_qh;
  ver_t     n_ver;
  logic     emit;
  gcs_msg_t emsg;
  pmask_t   emask;

  line_t    L;
  nmask_t   src_bit, others, left;
  logic     take;

  function automatic nmask_t nbit(node_t n);
    nbit = nmask_t'(1) << n;
  endfunction
  function automatic pmask_t pbit(node_t n);
    pbit = pmask_t'(1) << n;
  endfunction

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;
  assign L        = in_msg.line;
  assign src_bit  = nbit(in_msg.src);

  always_comb begin
    n_perm    = perm_r[L];
    n_sharers = sharers_r[L];
    n_qh_v    = qh_v_r[L];
    n_qh      = qh_r[L];
    n_ver     = ver_r[L];
    emit      = 1'b0;
    emsg      = '0;
    emsg.line = L;
    emsg.src  = node_t'(MEM_PORT);
    emask     = '0;
    others    = sharers_r[L] & ~src_bit;
    left      = '0;

    unique case (in_msg.mtype)
      MSG_ACQ: begin
        if (qh_v_r[L]) begin
          // a queue exists: the request waits in it
          n_ver       = ver_r[L] + 1'b1;
          emit        = 1'b1;
          emsg.mtype  = MSG_FWD;
          emsg.req    = in_msg.src;
          emsg.perm   = in_msg.perm;
          emask       = pbit(qh_r[L]);
        end else if (in_msg.perm == PERM_S) begin
          // I->S or S->S: no invalidation, data from memory
          n_perm      = PERM_S;
          n_sharers   = (perm_r[L] == PERM_I) ? src_bit : (sharers_r[L] | src_bit);
          emit        = 1'b1;
          emsg.mtype  = MSG_MEM_RD;
          emsg.req    = in_msg.src;
          emsg.perm   = PERM_S;
          emask       = pbit(node_t'(MEM_PORT));
        end else if (perm_r[L] == PERM_I || others == '0) begin
          // I->M, or S->M with the requestor the only sharer
          n_perm      = PERM_M;
          n_sharers   = src_bit;
          n_qh_v      = 1'b1;
          n_qh        = in_msg.src;
          n_ver       = '0;
          emit        = 1'b1;
          emsg.mtype  = MSG_MEM_RD;
          emsg.req    = in_msg.src;
          emsg.perm   = PERM_M;
          emask       = pbit(node_t'(MEM_PORT));
        end else begin
          // S->M with readers: the writer becomes queue holder (case iii) and the
          // readers are told to hand the line to it when they release
          n_sharers   = others;
          n_qh_v      = 1'b1;
          n_qh        = in_msg.src;
          n_ver       = '0;
          emit        = 1'b1;
          emsg.mtype  = MSG_NEXT_WR;
          emsg.req    = in_msg.src;
          emask       = pmask_t'(others);
        end
      end

      MSG_INV_ACK: begin
        left      = sharers_r[L] & ~src_bit;
        n_sharers = left;
        if (perm_r[L] == PERM_S && qh_v_r[L] && left == '0) begin
          // last reader gone: the waiting writer owns the line
          n_perm     = PERM_M;
          n_sharers  = nbit(qh_r[L]);
          emit       = 1'b1;
          emsg.mtype = MSG_MEM_RD;
          emsg.req   = qh_r[L];
          emsg.perm  = PERM_M;
          emask      = pbit(node_t'(MEM_PORT));
        end else if (left == '0 && !qh_v_r[L]) begin
          n_perm     = PERM_I;
        end
      end

      MSG_QXFER_REQ: begin
        emit = 1'b1;
        if (!qh_v_r[L] || qh_r[L] != in_msg.src || ver_r[L] != in_msg.ver) begin
          emsg.mtype = MSG_QXFER_DENY;
          emsg.req   = in_msg.src;
          emask      = pbit(in_msg.src);
        end else begin
          emsg       = in_msg;
          emsg.mtype = MSG_GRANT;
          n_ver      = '0;
          unique case (in_msg.plan)
            PLAN_TO_WRITER: begin
              n_perm    = PERM_M;
              n_sharers = nbit(in_msg.req);
              n_qh_v    = 1'b1;
              n_qh      = in_msg.req;
              emask     = pbit(in_msg.src) | pbit(in_msg.req);
            end
            PLAN_READERS_WR: begin
              n_perm    = PERM_S;
              n_sharers = in_msg.readers;
              n_qh_v    = 1'b1;
              n_qh      = in_msg.req;
              emask     = pbit(in_msg.src) | pmask_t'(in_msg.readers) |
                          pbit(in_msg.req) | pbit(node_t'(MEM_PORT));
            end
            default: begin  // PLAN_READERS (PLAN_DROP is never sent)
              n_perm    = PERM_S;
              n_sharers = in_msg.readers;
              n_qh_v    = 1'b0;
              n_qh      = '0;
              emask     = pbit(in_msg.src) | pmask_t'(in_msg.readers) |
                          pbit(node_t'(MEM_PORT));
            end
          endcase
        end
      end

      MSG_ACK_DATA: begin
        emit  = 1'b1;
        emsg  = in_msg;
        emask = pbit(in_msg.req);
      end

      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_LINES; i++) begin
        perm_r[i]    <= PERM_I;
        sharers_r[i] <= '0;
        qh_v_r[i]    <= 1'b0;
        qh_r[i]      <= '0;
        ver_r[i]     <= '0;
      end
      out_valid <= 1'b0;
      out_msg   <= '0;
      out_mask  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        perm_r[L]    <= n_perm;
        sharers_r[L] <= n_sharers;
        qh_v_r[L]    <= n_qh_v;
        qh_r[L]      <= n_qh;
        ver_r[L]     <= n_ver;
        if (emit) begin
          out_valid <= 1'b1;
          out_msg   <= emsg;
          out_mask  <= emask;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NUM_LINES; i++) begin
      dir_perm[i]    = perm_r[i];
      dir_sharers[i] = sharers_r[i];
      dir_qh_v[i]    = qh_v_r[i];
      dir_qh[i]      = qh_r[i];
      dir_ver[i]     = ver_r[i];
    end
  end

  // An M line always has its owner as queue holder.
  for (genvar i = 0; i < NUM_LINES; i++) begin : g_chk
    a_m_has_qh: assert property (@(posedge clk) disable iff (!rst_n)
                                 perm_r[i] == PERM_M |-> qh_v_r[i] && $onehot(sharers_r[i]));
  end
endmodule
