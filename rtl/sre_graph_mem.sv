// sre_graph_mem -- graph memory of the SRE: the microflow descriptors of every
// container type. The director never loads a graph as nodes and edges; it
// reads the container's microflow descriptors from here, one per read, and
// forwards them. The memory is written through a configuration port (by the
// host or the long-term configuration path) and read synchronously: rdata
// shows the descriptor addressed in the previous cycle with re high and then
// holds it until the next read.
//
// The paper calls this "external memory" and gives only its content; size,
// single write port and read timing are this design's own choices.
module sre_graph_mem
  import sre_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned AW    = 8
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  mflow_desc_t   wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output mflow_desc_t   rdata
);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  mflow_desc_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we && int'(waddr) < DEPTH) mem[IW'(waddr)] <= wdata;
    if (re) rdata <= (int'(raddr) < DEPTH) ? mem[IW'(raddr)] : '0;
  end
endmodule
