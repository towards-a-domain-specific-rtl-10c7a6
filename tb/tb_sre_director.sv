// tb_sre_director -- self-checking test of the director with a graph memory.
// Container type 5 has three microflows (logical stages 0, 1, 2), 20 input and
// 16 output words, one DFF output, and two feature vectors that each need 7
// memory units on one stage (logical stage 0), the second rotated by one stage.
// Checks: request -> DFF descriptor -> MAPPING_RDY -> three microflow
// descriptors to stages 0,1,2 -> MFLOW_RDY, in that order; MAPPING_RDY leaves
// DIR_CC + 1 = 101 cycles after the DFF descriptor (100 processing cycles and
// the Tetris cycle); a second DFF takes the rotated vector (descriptors go to
// stages 1,2,0 with rewritten arc stages); a third finds no room (error 5);
// an unknown type gives error 1 "DCT not found"; a release frees the room; a
// burst of requests overflows the queue (error 6) without losing a report. Ends with TB_RESULT.
//
// The 100-cycle director time and the message order follow the paper; the
// container, its feature vectors and error codes 5 and 6 are this design's own.
module tb_sre_director;
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

  logic        in_valid = 0, in_ready, out_valid, out_ready = 1;
  ctrl_msg_t   in_msg = '0, out_msg;
  logic        cfg_we = 0;
  logic [1:0]  cfg_idx = 0;
  container_t  cfg_data = '0;
  logic        gm_re, gm_we = 0;
  logic [7:0]  gm_addr, gm_waddr = 0;
  mflow_desc_t gm_rdata, gm_wdata = '0;
  logic        ev_accept, ev_reject, ev_dct_miss, ev_queue_overflow;
  logic [2:0]  inflight;

  sre_graph_mem u_gm (.clk, .we(gm_we), .waddr(gm_waddr), .wdata(gm_wdata), .re(gm_re),
                      .raddr(gm_addr), .rdata(gm_rdata));
  sre_director dut (.*);

  // message log
  ctrl_msg_t log_m [256];
  longint    log_t [256];
  int        nlog = 0;
  int        n_acc, n_rej, n_miss, n_ovf;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin log_m[nlog] = out_msg; log_t[nlog] = now; nlog++; end
    if (ev_accept) n_acc++;
    if (ev_reject) n_rej++;
    if (ev_dct_miss) n_miss++;
    if (ev_queue_overflow) n_ovf++;
  end

  task automatic send(mtype_e t, int g, int arg);
    @(negedge clk);
    in_valid = 1; in_msg = msg_init(NODE_PP, NODE_DIR, t, 16'(g)); in_msg.arg = 16'(arg);
    @(negedge clk); in_valid = 0;
  endtask

  // check the log from position p for one DFF that is mapped
  task automatic expect_mapped(inout int p, input int g, input int shift);
    chk(log_m[p].mtype == MT_DFF_DESC && log_m[p].gtag == 16'(g) && log_m[p].arg == 16'd20
        && log_m[p].arg2 == 16'd16 && log_m[p].port == 8'd1 && log_m[p].dst == NODE_PP,
        $sformatf("DFF descriptor for %0d", g));
    chk(log_m[p+1].mtype == MT_MAPPING_RDY && log_m[p+1].gtag == 16'(g), "mapping ready");
    chk(log_t[p+1] - log_t[p] == 101, $sformatf("director time %0d cycles, expected 101",
        log_t[p+1] - log_t[p]));
    for (int m = 0; m < 3; m++) begin
      automatic ctrl_msg_t x = log_m[p+2+m];
      automatic int ps = (m + shift) % 3;
      chk(x.mtype == MT_MFLOW_DESC && x.gtag == 16'(g) && int'(x.dst) == int'(NODE_ST0) + ps
          && int'(x.desc.stage) == ps && x.desc.ltag == 8'(m + 1), $sformatf("descriptor %0d", m));
      chk(int'(x.desc.outs[0].out_stage) == (ps + 1) % 3, "arc stage rewritten");
    end
    chk(log_m[p+5].mtype == MT_MFLOW_RDY && log_m[p+5].dst == NODE_PP, "microflow ready");
    p += 6;
  endtask

  initial begin
    int p = 0;
    container_t c;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // container table
    c = '0;
    c.valid = 1; c.dff_type = 16'd5; c.num_mflows = 8'd3; c.desc_base = 8'd10;
    c.in_words = 11'd20; c.out_words = 11'd16; c.num_outputs = 8'd1;
    c.fv[0].shift = 2'd0; c.fv[0].mem_units[0] = 6'd7;
    c.fv[1].shift = 2'd1; c.fv[1].mem_units[0] = 6'd7;
    @(negedge clk); cfg_we = 1; cfg_idx = 2'd0; cfg_data = c;
    @(negedge clk); cfg_we = 0;
    for (int m = 0; m < 3; m++) begin
      @(negedge clk);
      gm_we = 1; gm_waddr = 8'(10 + m); gm_wdata = '0;
      gm_wdata.ltag = 8'(m + 1); gm_wdata.kernel_id = 16'(m); gm_wdata.stage = 2'(m);
      gm_wdata.num_ins = 3'd1; gm_wdata.num_outs = 3'd1;
      gm_wdata.outs[0].out_stage = 2'((m + 1) % 3);
    end
    @(negedge clk); gm_we = 0;
    // DFF 1: first vector
    send(MT_DCT_REQ, 1, 5);
    repeat (150) @(negedge clk);
    chk(nlog == 6, "six messages for a mapped DFF");
    expect_mapped(p, 1, 0);
    chk(inflight == 3'd1, "one DFF in flight");
    // DFF 2: rotated vector
    send(MT_DCT_REQ, 2, 5);
    repeat (150) @(negedge clk);
    expect_mapped(p, 2, 1);
    // DFF 3: no room
    send(MT_DCT_REQ, 3, 5);
    repeat (150) @(negedge clk);
    chk(log_m[p].mtype == MT_DFF_DESC && log_m[p+1].mtype == MT_ERROR
        && log_m[p+1].arg == 16'(ERR_NO_MAPPING) && log_m[p+1].gtag == 16'd3, "no mapping error");
    p += 2;
    // unknown type
    send(MT_DCT_REQ, 4, 9);
    repeat (10) @(negedge clk);
    chk(log_m[p].mtype == MT_ERROR && log_m[p].arg == 16'(ERR_DCT_NOT_FOUND)
        && log_m[p].gtag == 16'd4, "DCT not found error");
    p += 1;
    // release DFF 1, then DFF 5 takes the first vector again
    send(MT_DFF_RELEASE, 1, 0);
    @(negedge clk);
    chk(inflight == 3'd1, "release returns the reservation");
    send(MT_DCT_REQ, 5, 5);
    repeat (150) @(negedge clk);
    expect_mapped(p, 5, 0);
    // queue overflow: a burst of seven requests that find no room
    for (int i = 0; i < 7; i++) begin
      @(negedge clk); in_valid = 1; in_msg = msg_init(NODE_PP, NODE_DIR, MT_DCT_REQ, 16'(100 + i));
      in_msg.arg = 16'd5;
      #1 while (!in_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); in_valid = 0;
    repeat (800) @(negedge clk);
    begin
      int novf = 0, nmiss = 0;
      for (int i = p; i < nlog; i++) begin
        if (log_m[i].mtype == MT_ERROR && log_m[i].arg == 16'(ERR_OVERFLOW)) novf++;
        if (log_m[i].mtype == MT_ERROR && log_m[i].arg == 16'(ERR_NO_MAPPING)) nmiss++;
      end
      chk(novf >= 1 && novf + nmiss == 7, "every burst request answered, some by overflow");
    end
    chk(n_acc == 3 && n_rej >= 2 && n_miss == 1 && n_ovf >= 1, "event counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
