// tb_sre_packet_proc -- self-checking test of the packet processor, connected
// to a real ingress/egress buffer and DMA; the director and the stages are
// played by the testbench on the control-message port.
// Checks the three message sequences of one DFF: control packet -> DCT
// request; data before the descriptor -> error 2 to the host and discarded;
// descriptor then data -> words written to the context's input region;
// mapping ready -> pointer descriptors to all stages; microflow ready with
// all input in -> DFF Input Ready to all stages; all DFF outputs ready ->
// output packets streamed from the output region with last on the final word
// -> DFF Release to the director and all stages. Also: a stage error is
// forwarded to the host and the DFF released; a fifth DFF finds no context
// (error 6). Ends with TB_RESULT.
//
// The message sequences and error codes 2 and 4 follow the paper; the buffer
// regions, context count and error 6 are this design's own. Inputs change on
// the falling edge; the watchdog stops the run after a fixed cycle count.
module tb_sre_packet_proc;
  import sre_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #5_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [63:0] now = 0;
  always @(posedge clk) now <= now + 1;

  logic        noc_in_valid = 0, noc_in_ready, noc_out_valid, noc_out_ready = 1;
  noc_pkt_t    noc_in = '0, noc_out;
  logic        in_valid = 0, in_ready, out_valid, out_ready = 1;
  ctrl_msg_t   in_msg = '0, out_msg;
  logic        buf_we;
  logic [ADDR_W-1:0] buf_waddr;
  logic [31:0] buf_wdata;
  logic        dma_cfg_valid, dma_cfg_ready;
  logic [1:0]  dma_cfg_ch;
  logic [ADDR_W-1:0] dma_cfg_src, dma_cfg_len;
  logic [15:0] dma_cfg_tag, dma_tag;
  logic [3:0]  dma_done, dma_busy;
  logic        dma_valid, dma_ready, dma_last;
  logic [31:0] dma_data;
  logic        ev_discard, ev_drop, ev_dff_done;
  logic        b_we = 0, m_re;
  logic [ADDR_W-1:0] b_waddr = 0, m_raddr;
  logic [31:0] b_wdata = 0, m_rdata, d_rdata;

  sre_packet_proc dut (.*);
  sre_ie_buffer u_buf (.clk, .rst_n, .a_we(buf_we), .a_waddr(buf_waddr), .a_wdata(buf_wdata),
    .b_we, .b_waddr, .b_wdata, .c_re(m_re), .c_raddr(m_raddr), .c_rdata(m_rdata),
    .d_re(1'b0), .d_raddr(14'd0), .d_rdata);
  sre_dma u_dma (.clk, .rst_n, .cfg_valid(dma_cfg_valid), .cfg_ready(dma_cfg_ready),
    .cfg_ch(dma_cfg_ch), .cfg_src(dma_cfg_src), .cfg_len(dma_cfg_len), .cfg_tag(dma_cfg_tag),
    .mem_re(m_re), .mem_raddr(m_raddr), .mem_rdata(m_rdata), .out_valid(dma_valid), .out_ready(dma_ready),
    .out_data(dma_data), .out_tag(dma_tag), .out_last(dma_last), .done(dma_done), .busy(dma_busy));

  // logs
  ctrl_msg_t ml [256];  int nm = 0;
  noc_pkt_t  nl [256];  int nn = 0;
  logic [ADDR_W-1:0] wa [64]; logic [31:0] wd [64]; int nw = 0;
  int n_disc, n_drop, n_done;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin ml[nm] = out_msg; nm++; end
    if (noc_out_valid && noc_out_ready) begin nl[nn] = noc_out; nn++; end
    if (buf_we) begin wa[nw] = buf_waddr; wd[nw] = buf_wdata; nw++; end
    if (ev_discard) n_disc++;
    if (ev_drop) n_drop++;
    if (ev_dff_done) n_done++;
  end

  task automatic noc(noc_kind_e k, int g, int ty, logic [31:0] d);
    @(negedge clk);
    noc_in_valid = 1; noc_in = '0; noc_in.kind = k; noc_in.gtag = 16'(g);
    noc_in.dff_type = 16'(ty); noc_in.data = d;
    #1 while (!noc_in_ready) begin @(negedge clk); #1; end
    @(negedge clk); noc_in_valid = 0;
  endtask
  task automatic msg(logic [2:0] src, mtype_e t, int g, int a, int a2, int port);
    @(negedge clk);
    in_valid = 1; in_msg = msg_init(src, NODE_PP, t, 16'(g));
    in_msg.arg = 16'(a); in_msg.arg2 = 16'(a2); in_msg.port = 8'(port);
    #1 while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk); in_valid = 0;
  endtask
  // count logged messages of a type to every stage since position p
  function automatic bit to_all_stages(int p, mtype_e t, int g);
    int seen = 0;
    for (int i = p; i < nm; i++)
      if (ml[i].mtype == t && ml[i].gtag == 16'(g) && ml[i].dst >= NODE_ST0) seen++;
    return seen == 3;
  endfunction

  initial begin
    int p;
    logic [31:0] din [4];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // request
    noc(NK_CTRL, 16'h11, 5, 0);
    repeat (3) @(negedge clk);
    chk(nm == 1 && ml[0].mtype == MT_DCT_REQ && ml[0].dst == NODE_DIR && ml[0].arg == 16'd5
        && ml[0].gtag == 16'h11, "DCT request to the director");
    // data before the descriptor
    noc(NK_DATA, 16'h11, 0, 32'hBAD);
    repeat (3) @(negedge clk);
    chk(nn == 1 && nl[0].kind == NK_ERROR && nl[0].data == 32'(ERR_DESC_NOT_READY), "error 2 to host");
    chk(n_disc == 1 && nw == 0, "early data discarded");
    // descriptor and data
    msg(NODE_DIR, MT_DFF_DESC, 16'h11, 4, 3, 2);
    for (int i = 0; i < 4; i++) begin din[i] = $urandom; noc(NK_DATA, 16'h11, 0, din[i]); end
    repeat (2) @(negedge clk);
    chk(nw == 4, "four words stored");
    for (int i = 0; i < 4; i++) chk(wa[i] == 14'(i) && wd[i] == din[i], "input word address and data");
    // mapping ready -> pointer descriptors
    p = nm;
    msg(NODE_DIR, MT_MAPPING_RDY, 16'h11, 0, 0, 0);
    repeat (8) @(negedge clk);
    chk(to_all_stages(p, MT_PTR_DESC, 16'h11), "pointer descriptor to every stage");
    chk(ml[p].arg == 16'd0 && ml[p].arg2 == 16'd2048, "pointer values");
    chk(!to_all_stages(p, MT_DFF_IN_RDY, 16'h11), "no input ready before microflow ready");
    p = nm;
    msg(NODE_DIR, MT_MFLOW_RDY, 16'h11, 0, 0, 0);
    repeat (8) @(negedge clk);
    chk(to_all_stages(p, MT_DFF_IN_RDY, 16'h11), "DFF input ready to every stage");
    // outputs: three words written by a compute engine
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); b_we = 1; b_waddr = 14'(2048 + i); b_wdata = 32'hC0DE0000 + 32'(i);
    end
    @(negedge clk); b_we = 0;
    p = nm;
    msg(NODE_ST0, MT_DFF_OUT_RDY, 16'h11, 0, 0, 0);
    repeat (10) @(negedge clk);
    chk(nn == 1, "no output before all DFF outputs are ready");
    msg(NODE_ST0 + 1, MT_DFF_OUT_RDY, 16'h11, 0, 0, 1);
    repeat (20) @(negedge clk);
    chk(nn == 4, "three output packets");
    for (int i = 0; i < 3; i++)
      chk(nl[1+i].kind == NK_OUT && nl[1+i].gtag == 16'h11 && nl[1+i].data == 32'hC0DE0000 + 32'(i)
          && nl[1+i].last == (i == 2), "output packet");
    chk(to_all_stages(p, MT_DFF_RELEASE, 16'h11), "release to every stage");
    begin
      bit dir = 0;
      for (int i = p; i < nm; i++) if (ml[i].mtype == MT_DFF_RELEASE && ml[i].dst == NODE_DIR) dir = 1;
      chk(dir, "release to the director");
    end
    chk(n_done == 1, "DFF done");
    // stage error: forwarded, DFF released
    noc(NK_CTRL, 16'h22, 5, 0);
    msg(NODE_DIR, MT_DFF_DESC, 16'h22, 1, 1, 1);
    p = nm;
    msg(NODE_ST0 + 2, MT_ERROR, 16'h22, int'(ERR_MFLOW_TIMEOUT), 0, 0);
    repeat (10) @(negedge clk);
    chk(nl[nn-1].kind == NK_ERROR && nl[nn-1].data == 32'(ERR_MFLOW_TIMEOUT)
        && nl[nn-1].gtag == 16'h22, "stage error forwarded to host");
    chk(to_all_stages(p, MT_DFF_RELEASE, 16'h22) && n_drop == 1, "errored DFF dropped");
    // context exhaustion: four contexts, the fifth request is refused
    for (int i = 0; i < 5; i++) noc(NK_CTRL, 16'h30 + i, 5, 0);
    repeat (5) @(negedge clk);
    chk(nl[nn-1].kind == NK_ERROR && nl[nn-1].data == 32'(ERR_OVERFLOW)
        && nl[nn-1].gtag == 16'h34, "no free context -> error 6");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
