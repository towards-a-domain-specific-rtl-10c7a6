// sre_ie_buffer -- ingress/egress data buffer of the SRE.
//
// One memory of 2**ADDR_W words of DATA_W bits shared by the packet processor
// (ingress writes of arriving data packets), the SHOC compute engines (reads of
// DFF inputs, writes of DFF outputs) and the DMA (reads of DFF outputs going
// back to the host). Two write ports and two read ports; every read returns its
// word one clock after the address (registered output, held while not read).
// When both write ports name the same address in one cycle the SHOC port wins;
// an assertion flags it because the address map never lets it happen.
//
// From the paper: the buffer between the network and the SHOCs that the DFF
// input and output data pass through ("Data Buffer" of the SRE block diagram).
// Own choices: size, port count, latency. The memory has no reset; readers
// only read words that were written first.
module sre_ie_buffer #(
  parameter int unsigned ADDR_W = 14,
  parameter int unsigned DATA_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // write port A: packet processor ingress
  input  logic              a_we,
  input  logic [ADDR_W-1:0] a_waddr,
  input  logic [DATA_W-1:0] a_wdata,
  // write port B: SHOC results
  input  logic              b_we,
  input  logic [ADDR_W-1:0] b_waddr,
  input  logic [DATA_W-1:0] b_wdata,
  // read port C: DMA
  input  logic              c_re,
  input  logic [ADDR_W-1:0] c_raddr,
  output logic [DATA_W-1:0] c_rdata,
  // read port D: SHOC operands
  input  logic              d_re,
  input  logic [ADDR_W-1:0] d_raddr,
  output logic [DATA_W-1:0] d_rdata
);
  logic [DATA_W-1:0] mem [2**ADDR_W];

  always_ff @(posedge clk) begin
    if (a_we && !(b_we && b_waddr == a_waddr)) mem[a_waddr] <= a_wdata;
    if (b_we) mem[b_waddr] <= b_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_rdata <= '0;
      d_rdata <= '0;
    end else begin
      if (c_re) c_rdata <= mem[c_raddr];
      if (d_re) d_rdata <= mem[d_raddr];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(a_we && b_we && a_waddr == b_waddr))
    else $error("ie_buffer: two writes to one address");
endmodule
