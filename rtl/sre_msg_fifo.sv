// sre_msg_fifo -- small first-in first-out queue of control messages, used as
// the outbox of the director and of the packet processor. push is ignored when
// full (callers check full first); out_valid/out_ready pop the oldest entry.
// Data appears at the output one cycle after it is pushed.
//
// The paper does not describe these queues; depth and interface are this
// design's own choices.
module sre_msg_fifo
  import sre_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      push,
  input  ctrl_msg_t push_msg,
  output logic      full,
  output logic      out_valid,
  input  logic      out_ready,
  output ctrl_msg_t out_msg
);
  localparam int unsigned PW = $clog2(DEPTH);
  ctrl_msg_t q [DEPTH];
  logic [PW-1:0] rd, wr;
  logic [PW:0]   cnt;
  assign full      = (cnt == (PW+1)'(DEPTH));
  assign out_valid = (cnt != '0);
  assign out_msg   = q[rd];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      logic do_push, do_pop;
      do_push = push && !full;
      do_pop  = out_valid && out_ready;
      if (do_push) begin
        q[wr] <= push_msg;
        wr <= (wr == PW'(DEPTH - 1)) ? '0 : wr + 1'b1;
      end
      if (do_pop) rd <= (rd == PW'(DEPTH - 1)) ? '0 : rd + 1'b1;
      cnt <= cnt + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end
  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("msg_fifo: push while full");
endmodule
