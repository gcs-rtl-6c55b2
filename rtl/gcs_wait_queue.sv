// gcs_wait_queue -- wait queue of one lock line, kept at the queue-holder blade.
//
// A FIFO of (blade, permission) entries, head at index 0.  While a writer holds a line
// with M permission (or waits behind readers for it), every Acquire that the directory
// forwards to it is appended here (push).  On release the holder ships the whole queue to
// the next writer (the new holder loads it with load) or drops it (clear).  The depth is
// the number of blades: each blade has at most one request waiting per line, as the
// paper's bound on queue length says.  FIFO order is this design's policy choice.
//
// Interface: push/push_ent append, load/load_q/load_cnt replace the contents, clear
// empties; at most one of the three per cycle.  q/cnt show the contents, registered: a
// change is visible the cycle after the operation.  Reset empties the queue.
module gcs_wait_queue
  import gcs_pkg::*;
#(
  parameter int unsigned DEPTH = QDEPTH
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  qent_t        push_ent,
  input  logic         load,
  input  qarr_t        load_q,
  input  logic [QCNT_W-1:0] load_cnt,
  input  logic         clear,
  output qarr_t        q,
  output logic [QCNT_W-1:0] cnt,
  output logic         full,
  output logic         empty
);
  qarr_t             q_r;
  logic [QCNT_W-1:0] cnt_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_r   <= '0;
      cnt_r <= '0;
    end else if (clear) begin
      q_r   <= '0;
      cnt_r <= '0;
    end else if (load) begin
      q_r   <= load_q;
      cnt_r <= load_cnt;
    end else if (push && cnt_r < QCNT_W'(DEPTH)) begin
      q_r[cnt_r[$clog2(QDEPTH)-1:0]] <= push_ent;
      cnt_r <= cnt_r + 1'b1;
    end
  end

  assign q     = q_r;
  assign cnt   = cnt_r;
  assign full  = (cnt_r == QCNT_W'(DEPTH));
  assign empty = (cnt_r == '0);

  // One operation per cycle; never push into a full queue; a loaded queue fits.
  a_one_op:  assert property (@(posedge clk) disable iff (!rst_n) $onehot0({push, load, clear}));
  a_no_ovf:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_load_ok: assert property (@(posedge clk) disable iff (!rst_n) load |-> load_cnt <= QCNT_W'(DEPTH));
endmodule
