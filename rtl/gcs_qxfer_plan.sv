// gcs_qxfer_plan -- Algorithm 1 of the queue transfer protocol, evaluated on Release.
//
// When the writer that holds a line's wait queue releases the line, this block looks at
// the queue (head at index 0) and decides, as the paper's Algorithm 1 does:
//   * queue empty                        -> PLAN_DROP       (case i)
//   * head asks for M                    -> PLAN_TO_WRITER  queue moves to it (case ii)
//   * head asks for S, a writer behind   -> PLAN_READERS_WR the leading readers are
//                                           granted S, the queue moves to that writer
//                                           (case iii)
//   * head asks for S, no writer behind  -> PLAN_READERS    all readers granted, queue dropped
// "The next requestor is a reader (or multiple readers)" is taken as the run of S entries
// at the head of the queue; readers queued behind the writer stay in the queue that moves
// to the writer.  Outputs: the plan, the mask of blades granted S, the next writer, and
// the queue left for the next writer (rest_q/rest_cnt, head at index 0).  Purely
// combinational.
module gcs_qxfer_plan
  import gcs_pkg::*;
(
  input  qarr_t             q,
  input  logic [QCNT_W-1:0] cnt,
  output plan_e             plan,
  output nmask_t            readers,
  output logic              nw_valid,
  output node_t             nw,
  output qarr_t             rest_q,
  output logic [QCNT_W-1:0] rest_cnt
);
  logic [QCNT_W-1:0] nlead;   // leading S entries
  logic              stop;

  always_comb begin
    nlead   = '0;
    stop    = 1'b0;
    readers = '0;
    for (int i = 0; i < QDEPTH; i++) begin
      if (!stop && QCNT_W'(i) < cnt) begin
        if (q[i].perm == PERM_S) begin
          nlead = nlead + 1'b1;
          readers[q[i].node[$clog2(NODES)-1:0]] = 1'b1;
        end else begin
          stop = 1'b1;
        end
      end
    end

    nw_valid = (nlead < cnt);
    nw       = '0;
    rest_q   = '0;
    rest_cnt = '0;
    if (nw_valid) begin
      nw       = q[nlead[$clog2(QDEPTH)-1:0]].node;
      rest_cnt = cnt - nlead - 1'b1;
      for (int i = 0; i < QDEPTH; i++)
        if (QCNT_W'(i) < rest_cnt)
          rest_q[i] = q[(i + int'(nlead) + 1) % QDEPTH];
    end

    if (cnt == '0)          plan = PLAN_DROP;
    else if (nlead == '0)   plan = PLAN_TO_WRITER;
    else if (nw_valid)      plan = PLAN_READERS_WR;
    else                    plan = PLAN_READERS;
  end
endmodule
