// gcs_switch -- data plane of the programmable switch that connects the rack.
//
// Every port (NODES compute blades, then the memory blade at MEM_PORT) has an ingress
// FIFO.  A round-robin arbiter hands one message per cycle to the cache directory
// (gcs_directory), which updates the line and produces at most one message with a
// destination mask.  The egress stage delivers that message to every port in the mask
// in the same cycle, and holds it until all of them can take it.  All coherence traffic,
// including blade-to-blade Acquire-Acks and queue transfers, passes through the directory
// so that it sees every transfer and can check versions.  The switch's parse/match
// pipeline, port count and link rates are not modelled; buffers and arbitration are this
// design's choice.
//
// Interface: rx_* from the ports (valid/ready per port), tx_valid/tx_ready per port with
// one shared tx_msg.  A message offered on rx at clock edge k (taken into the ingress
// FIFO) leaves the directory register at edge k+1 and is taken by its destinations at
// edge k+2 when they are ready: two register stages.
module gcs_switch
  import gcs_pkg::*;
#(
  parameter int unsigned IN_DEPTH = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     rx_valid [PORTS],
  output logic     rx_ready [PORTS],
  input  gcs_msg_t rx_msg   [PORTS],
  output logic     tx_valid [PORTS],
  input  logic     tx_ready [PORTS],
  output gcs_msg_t tx_msg,
  output perm_e    dir_perm    [NUM_LINES],
  output nmask_t   dir_sharers [NUM_LINES],
  output logic     dir_qh_v    [NUM_LINES],
  output node_t    dir_qh      [NUM_LINES],
  output ver_t     dir_ver     [NUM_LINES]
);
  logic     q_valid [PORTS];
  logic     q_ready [PORTS];
  gcs_msg_t q_msg   [PORTS];

  for (genvar p = 0; p < PORTS; p++) begin : g_in
    gcs_fifo #(.T(gcs_msg_t), .DEPTH(IN_DEPTH)) u_in (
      .clk, .rst_n,
      .in_valid (rx_valid[p]), .in_ready (rx_ready[p]), .in_data (rx_msg[p]),
      .out_valid(q_valid[p]),  .out_ready(q_ready[p]),  .out_data(q_msg[p]));
  end

  // round-robin arbitration, starting after the last winner
  logic [NODE_W-1:0] last, pick;
  logic              any;
  logic              d_in_ready, d_out_valid, d_out_ready;
  gcs_msg_t          d_out_msg;
  pmask_t            d_out_mask;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = 1; k <= PORTS; k++) begin
      int p;
      p = (int'(last) + k) % PORTS;
      if (!any && q_valid[p]) begin
        any  = 1'b1;
        pick = NODE_W'(p);
      end
    end
    for (int p = 0; p < PORTS; p++)
      q_ready[p] = any && d_in_ready && (pick == NODE_W'(p));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  last <= NODE_W'(PORTS - 1);
    else if (any && d_in_ready)  last <= pick;
  end

  gcs_directory u_dir (
    .clk, .rst_n,
    .in_valid (any), .in_ready(d_in_ready), .in_msg(q_msg[pick]),
    .out_valid(d_out_valid), .out_ready(d_out_ready),
    .out_msg  (d_out_msg), .out_mask(d_out_mask),
    .dir_perm, .dir_sharers, .dir_qh_v, .dir_qh, .dir_ver);

  // multicast egress: wait until every destination can accept
  always_comb begin
    d_out_ready = 1'b1;
    for (int p = 0; p < PORTS; p++)
      if (d_out_mask[p] && !tx_ready[p]) d_out_ready = 1'b0;
    for (int p = 0; p < PORTS; p++)
      tx_valid[p] = d_out_valid && d_out_ready && d_out_mask[p];
  end
  assign tx_msg = d_out_msg;
endmodule
