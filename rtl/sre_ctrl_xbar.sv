// sre_ctrl_xbar -- internal control and management crossbar of the SRE.
//
// Carries short control messages (ctrl_msg_t) among the packet processor, the
// director and the stage managers. Every node has one sending and one receiving
// port. Each receiving port owns a small FIFO; a round-robin arbiter per
// destination picks one of the senders whose message is addressed to it and
// moves that message into the FIFO in the same cycle. A sender sees in_ready
// (its acknowledge) only in the cycle its message is taken, so no message is
// ever dropped: this is the "acknowledgment from the recipient" the paper asks
// of this crossbar. A message reaches out_valid one cycle after it is taken.
//
// The paper names the crossbar, its purpose and that it should be based on
// TileLink TL-UH. The valid/ready handshake, the per-destination FIFO (depth
// FIFO_DEPTH) and the round-robin arbitration are this design's own choices;
// TileLink's channel structure is not reproduced.
module sre_ctrl_xbar
  import sre_pkg::*;
#(
  parameter int unsigned NUM_NODES  = 5,  // packet processor + director + 3 stages
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic      [NUM_NODES-1:0] in_valid,
  output logic      [NUM_NODES-1:0] in_ready,
  input  ctrl_msg_t [NUM_NODES-1:0] in_msg,
  output logic      [NUM_NODES-1:0] out_valid,
  input  logic      [NUM_NODES-1:0] out_ready,
  output ctrl_msg_t [NUM_NODES-1:0] out_msg
);
  localparam int unsigned SEL_W = (NUM_NODES > 1) ? $clog2(NUM_NODES) : 1;
  localparam int unsigned PTR_W = $clog2(FIFO_DEPTH);

  ctrl_msg_t             fifo_q  [NUM_NODES][FIFO_DEPTH];
  logic [PTR_W-1:0]      rd_ptr  [NUM_NODES];
  logic [PTR_W-1:0]      wr_ptr  [NUM_NODES];
  logic [PTR_W:0]        count   [NUM_NODES];
  logic [SEL_W-1:0]      rr_last [NUM_NODES];

  logic [NUM_NODES-1:0]  push;
  logic [SEL_W-1:0]      push_src [NUM_NODES];

  // round-robin choice per destination
  always_comb begin
    int s;
    s = 0;
    in_ready = '0;
    for (int d = 0; d < NUM_NODES; d++) begin
      push[d]     = 1'b0;
      push_src[d] = '0;
      if (count[d] < (PTR_W+1)'(FIFO_DEPTH)) begin
        for (int k = 1; k <= NUM_NODES; k++) begin
          s = (int'(rr_last[d]) + k) % NUM_NODES;
          if (!push[d] && in_valid[s] && (int'(in_msg[s].dst) == d)) begin
            push[d]     = 1'b1;
            push_src[d] = SEL_W'(s);
          end
        end
      end
      if (push[d]) in_ready[push_src[d]] = 1'b1;
    end
  end

  always_comb begin
    for (int d = 0; d < NUM_NODES; d++) begin
      out_valid[d] = (count[d] != '0);
      out_msg[d]   = fifo_q[d][rd_ptr[d]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < NUM_NODES; d++) begin
        rd_ptr[d]  <= '0;
        wr_ptr[d]  <= '0;
        count[d]   <= '0;
        rr_last[d] <= SEL_W'(NUM_NODES - 1);
      end
    end else begin
      for (int d = 0; d < NUM_NODES; d++) begin
        logic pop;
        pop = out_valid[d] && out_ready[d];
        if (push[d]) begin
          fifo_q[d][wr_ptr[d]] <= in_msg[push_src[d]];
          wr_ptr[d]  <= (wr_ptr[d] == PTR_W'(FIFO_DEPTH-1)) ? '0 : wr_ptr[d] + 1'b1;
          rr_last[d] <= push_src[d];
        end
        if (pop) rd_ptr[d] <= (rd_ptr[d] == PTR_W'(FIFO_DEPTH-1)) ? '0 : rd_ptr[d] + 1'b1;
        count[d] <= count[d] + (PTR_W+1)'(push[d]) - (PTR_W+1)'(pop);
      end
    end
  end

  // a message must name an existing node
  for (genvar n = 0; n < NUM_NODES; n++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     in_valid[n] |-> (int'(in_msg[n].dst) < NUM_NODES))
      else $error("ctrl_xbar: message to unknown node");
    // a sender holds its message until it is acknowledged
    assert property (@(posedge clk) disable iff (!rst_n)
                     in_valid[n] && !in_ready[n] |=> in_valid[n] && $stable(in_msg[n]))
      else $error("ctrl_xbar: sender dropped a message before acknowledge");
  end
endmodule
