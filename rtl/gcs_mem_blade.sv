// gcs_mem_blade -- disaggregated memory blade holding the data of every lock line.
//
// It serves the two kinds of traffic the directory sends to memory.  MSG_MEM_RD asks for
// a line's data on behalf of a requestor: the blade answers with MSG_ACK_DATA (the
// Acquire-Ack with data from memory) addressed to that requestor with the permission
// the directory granted.  MSG_GRANT, multicast to memory when a released line moves to
// readers, carries the line's latest data, which is written back here so that a later
// MEM_RD returns it.  Messages are handled in arrival order, one per cycle, so a write-
// back is always visible to a read that the directory issued after it.  In the paper the
// memory blade is a server reached by RDMA; here it is an array of NUM_LINES words of
// DATA_W bits, cleared by reset, with a one-cycle access.
//
// Interface: in_valid/in_ready/in_msg from the switch, out_valid/out_ready/out_msg to
// the switch's memory port.  The blade only ever sends MSG_ACK_DATA, so the fields of
// out_msg that belong to queue transfers (version, plan, readers, queue) are constant
// zero, and the parts of in_msg that such a reply does not need are left unread.
module gcs_mem_blade
  import gcs_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  gcs_msg_t in_msg,
  output logic     out_valid,
  input  logic     out_ready,
  output gcs_msg_t out_msg
);
  data_t mem [NUM_LINES];

  logic     f_valid, f_ready;
  gcs_msg_t f_msg;

  gcs_fifo #(.T(gcs_msg_t), .DEPTH(4)) u_in (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_msg),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_msg));

  // a read needs the output register free; a write-back never waits
  assign f_ready = f_valid && ((f_msg.mtype != MSG_MEM_RD) || !out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_LINES; i++) mem[i] <= '0;
      out_valid <= 1'b0;
      out_msg   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (f_ready) begin
        if (f_msg.mtype == MSG_MEM_RD) begin
          out_valid      <= 1'b1;
          out_msg        <= '0;
          out_msg.mtype  <= MSG_ACK_DATA;
          out_msg.src    <= node_t'(MEM_PORT);
          out_msg.req    <= f_msg.req;
          out_msg.line   <= f_msg.line;
          out_msg.perm   <= f_msg.perm;
          out_msg.data   <= mem[f_msg.line];
        end else if (f_msg.mtype == MSG_GRANT) begin
          mem[f_msg.line] <= f_msg.data;
        end
      end
    end
  end
endmodule
