// sre_dma -- DMA engine that streams DFF results from the ingress/egress buffer
// back to the host.
//
// NUM_CH channels. A channel is programmed with a source address, a length in
// words and the DFF's global tag (cfg_valid/cfg_ready, accepted only while the
// channel is idle). Busy channels share one buffer read port round-robin, one
// word per cycle. A word read is returned by the buffer one cycle later and is
// placed in a one-word output register per channel; the stream output offers
// the words (valid/ready) with the tag and a last flag on the final word. A
// channel only reads its next word when its output register is free or being
// emptied, so backpressure never loses data. done[ch] pulses for one cycle
// when the last word of the channel has been accepted. A zero-length job
// completes without reading.
//
// From the paper: a DMA moving data in and out of the SRE buffer, with the
// maximum number of DMA channels 4 in the performance model. Own choices:
// round-robin sharing, one word per cycle, the stream format.
module sre_dma #(
  parameter int unsigned NUM_CH = 4,
  parameter int unsigned ADDR_W = 14,
  parameter int unsigned DATA_W = 32,
  parameter int unsigned TAG_W  = 16,
  localparam int unsigned CH_W  = (NUM_CH > 1) ? $clog2(NUM_CH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  output logic              cfg_ready,
  input  logic [CH_W-1:0]   cfg_ch,
  input  logic [ADDR_W-1:0] cfg_src,
  input  logic [ADDR_W-1:0] cfg_len,
  input  logic [TAG_W-1:0]  cfg_tag,
  // buffer read port (data one cycle after re)
  output logic              mem_re,
  output logic [ADDR_W-1:0] mem_raddr,
  input  logic [DATA_W-1:0] mem_rdata,
  // output stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output logic [TAG_W-1:0]  out_tag,
  output logic              out_last,
  output logic [NUM_CH-1:0] done,
  output logic [NUM_CH-1:0] busy
);
  logic [ADDR_W-1:0] ch_addr [NUM_CH];
  logic [ADDR_W-1:0] ch_left [NUM_CH];   // words still to read
  logic [TAG_W-1:0]  ch_tag  [NUM_CH];
  logic              ch_ob_v [NUM_CH];   // output register full
  logic [DATA_W-1:0] ch_ob_d [NUM_CH];
  logic              ch_ob_l [NUM_CH];
  logic              ch_pend [NUM_CH];   // read in flight
  logic              rd_last;            // in-flight read is the channel's last
  logic [CH_W-1:0]   rd_ch, rr_rd, rr_out;

  assign cfg_ready = !busy[cfg_ch];

  // output selection (round-robin among full output registers)
  logic            o_any;
  logic [CH_W-1:0] o_ch;
  always_comb begin
    o_any = 1'b0; o_ch = '0;
    for (int k = 1; k <= NUM_CH; k++) begin
      automatic int c = (int'(rr_out) + k) % NUM_CH;
      if (!o_any && ch_ob_v[c]) begin o_any = 1'b1; o_ch = CH_W'(c); end
    end
  end
  assign out_valid = o_any;
  assign out_data  = ch_ob_d[o_ch];
  assign out_tag   = ch_tag[o_ch];
  assign out_last  = ch_ob_l[o_ch];
  logic o_pop;
  assign o_pop = o_any && out_ready;

  // read selection: channel with words left, no read in flight, and a free
  // (or emptying) output register
  logic            r_any;
  logic [CH_W-1:0] r_ch;
  always_comb begin
    r_any = 1'b0; r_ch = '0;
    for (int k = 1; k <= NUM_CH; k++) begin
      automatic int c = (int'(rr_rd) + k) % NUM_CH;
      if (!r_any && ch_left[c] != '0 && !ch_pend[c]
          && (!ch_ob_v[c] || (o_pop && o_ch == CH_W'(c)))) begin
        r_any = 1'b1; r_ch = CH_W'(c);
      end
    end
  end
  assign mem_re    = r_any;
  assign mem_raddr = ch_addr[r_ch];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0; done <= '0; rd_ch <= '0; rd_last <= 1'b0; rr_rd <= '0; rr_out <= '0;
      for (int c = 0; c < NUM_CH; c++) begin
        ch_addr[c] <= '0; ch_left[c] <= '0; ch_tag[c] <= '0; ch_ob_v[c] <= 1'b0;
        ch_ob_d[c] <= '0; ch_ob_l[c] <= 1'b0; ch_pend[c] <= 1'b0;
      end
    end else begin
      done <= '0;
      // returning read data
      for (int c = 0; c < NUM_CH; c++) ch_pend[c] <= 1'b0;
      if (o_pop) begin
        ch_ob_v[o_ch] <= 1'b0;
        rr_out <= o_ch;
        if (ch_ob_l[o_ch]) begin busy[o_ch] <= 1'b0; done[o_ch] <= 1'b1; end
      end
      for (int c = 0; c < NUM_CH; c++)
        if (ch_pend[c] && rd_ch == CH_W'(c)) begin
          ch_ob_v[c] <= 1'b1; ch_ob_d[c] <= mem_rdata; ch_ob_l[c] <= rd_last;
        end
      // new read
      if (r_any) begin
        ch_pend[r_ch] <= 1'b1;
        rd_ch   <= r_ch;
        rd_last <= (ch_left[r_ch] == ADDR_W'(1));
        ch_addr[r_ch] <= ch_addr[r_ch] + 1'b1;
        ch_left[r_ch] <= ch_left[r_ch] - 1'b1;
        rr_rd <= r_ch;
      end
      // programming
      if (cfg_valid && cfg_ready) begin
        ch_addr[cfg_ch] <= cfg_src;
        ch_left[cfg_ch] <= cfg_len;
        ch_tag[cfg_ch]  <= cfg_tag;
        if (cfg_len == '0) done[cfg_ch] <= 1'b1;
        else busy[cfg_ch] <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid)
    else $error("dma: stream word withdrawn");
endmodule
