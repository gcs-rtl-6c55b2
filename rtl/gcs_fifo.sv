// gcs_fifo -- small synchronous FIFO used as a message buffer at every network port.
//
// DEPTH entries of type T, valid/ready on both sides, first-word fall-through: out_data
// is the oldest entry whenever out_valid is high.  A push and a pop may happen in the
// same cycle.  Reset empties it.  Generic helper, not a block of the paper.
module gcs_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T                mem [DEPTH];
  logic [AW-1:0]   rd, wr;
  logic [AW:0]     cnt;
  logic            push, pop;

  assign in_ready  = (cnt < (AW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_data  = mem[rd];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    inc = (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd  <= '0;
      wr  <= '0;
      cnt <= '0;
    end else begin
      if (push) wr <= inc(wr);
      if (pop)  rd <= inc(rd);
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wr] <= in_data;
endmodule
