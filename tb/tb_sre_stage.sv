// tb_sre_stage -- self-checking test of one stage (stage 0, node 2) with a
// behavioural SHOC pool; the packet processor, director and other stages are
// played by the testbench on the control-message port.
// One DFF with four microflows on this stage:
//   A (ltag 1): DFF input -> B (local token, same stage)
//   B (ltag 2): A -> microflow 5 on stage 1 (TOKEN_RDY to node 3)
//   C (ltag 3): DFF input -> DFF output port 1 (DFF_OUT_RDY)
//   D (ltag 4): DFF input -> DFF output port 2, kernel 16'hDEAD never ends
//               and times out after 300 cycles (ERROR 4)
// Checks: nothing starts before DFF Input Ready; the first SHOC start comes no
// sooner than 123 scheduling cycles after it; the SHOC sees the DFF's buffer
// pointers; the local token, the remote token, the DFF output ready and the
// timeout error all happen with the right fields; a token for an unknown
// microflow gives ERROR 3; after release, eight descriptors fit and a ninth
// gives ERROR 6; a DFF released while its microflow runs keeps that slot until
// the run ends, and its late completion sends no message. Ends with TB_RESULT.
//
// The token flow, the 123-cycle scheduler and error codes 3 and 4 follow the
// paper; the microflows, the timeout value and error 6 are this testbench's own.
module tb_sre_stage;
  import sre_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #10_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [63:0] now = 0;
  always @(posedge clk) now <= now + 1;

  logic        in_valid = 0, in_ready, out_valid, out_ready = 1;
  ctrl_msg_t   in_msg = '0, out_msg;
  logic [3:0]  shoc_start, shoc_abort, shoc_done = 0;
  logic [15:0] shoc_kernel [4];
  logic [15:0] shoc_gtag [4];
  logic [7:0]  shoc_ltag [4];
  logic [15:0] shoc_in_ptr [4], shoc_out_ptr [4];
  logic        ev_alloc_wait, ev_reconfig, ev_sched_overflow, ev_local_token, ev_remote_token;

  sre_stage #(.STAGE_ID(0)) dut (.*);

  // behavioural SHOC
  int remain [4] = '{default: 0};
  int n_start = 0, n_abort = 0, n_local = 0, n_remote = 0, n_reconf = 0;
  longint first_start = 0;
  bit ptr_ok = 1;
  always @(posedge clk) begin
    shoc_done <= '0;
    for (int c = 0; c < 4; c++) begin
      if (!rst_n) remain[c] = 0;
      else if (shoc_start[c]) begin
        remain[c] = (shoc_kernel[c] == 16'hDEAD) ? -1 : $urandom_range(200, 300);
        n_start++;
        if (first_start == 0) first_start = now;
        if (shoc_in_ptr[c] != 16'd64 || shoc_out_ptr[c] != 16'd576 || shoc_gtag[c] != 16'h41) ptr_ok = 0;
      end else if (remain[c] > 0) begin
        remain[c]--;
        if (remain[c] == 0) shoc_done[c] <= 1'b1;
      end
      if (rst_n && shoc_abort[c]) begin remain[c] = 0; n_abort++; end
    end
    if (rst_n && ev_local_token) n_local++;
    if (rst_n && ev_remote_token) n_remote++;
    if (rst_n && ev_reconfig) n_reconf++;
  end

  ctrl_msg_t ml [256]; int nm = 0;
  int n_ovf = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    ml[nm] = out_msg; nm++;
    if (out_msg.mtype == MT_ERROR && out_msg.arg == 16'(ERR_OVERFLOW)) n_ovf++;
  end

  task automatic send(ctrl_msg_t m);
    @(negedge clk); in_valid = 1; in_msg = m;
    #1 while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk); in_valid = 0;
  endtask
  function automatic ctrl_msg_t mf(int g, int ltag, int kid, int tmo, int src,
                                   int dltag, int dport, int dstage);
    ctrl_msg_t m = msg_init(NODE_DIR, NODE_ST0, MT_MFLOW_DESC, 16'(g));
    m.desc.ltag = 8'(ltag); m.desc.kernel_id = 16'(kid); m.desc.stage = 2'd0;
    m.desc.timeout = 16'(tmo); m.desc.deadline = 16'd1000;
    m.desc.num_ins = 3'd1; m.desc.num_outs = 3'd1;
    m.desc.ins[0].src_ltag = 8'(src); m.desc.ins[0].token_size = 4'd3;
    m.desc.outs[0].dest_ltag = 8'(dltag); m.desc.outs[0].dff_port = 8'(dport);
    m.desc.outs[0].remote_in_port = 2'd0; m.desc.outs[0].out_stage = 2'(dstage);
    m.desc.outs[0].token_size = 4'd3;
    return m;
  endfunction
  function automatic int find(mtype_e t, int arg, int arg2);
    for (int i = 0; i < nm; i++)
      if (ml[i].mtype == t && int'(ml[i].arg) == arg && int'(ml[i].arg2) == arg2) return i;
    return -1;
  endfunction

  initial begin
    ctrl_msg_t m;
    longint t_in;
    int i;
    repeat (3) @(negedge clk);
    rst_n = 1;
    m = msg_init(NODE_PP, NODE_ST0, MT_PTR_DESC, 16'h41); m.arg = 16'd64; m.arg2 = 16'd576;
    send(m);
    send(mf('h41, 1, 'hA, 0, 0, 2, 0, 0));
    send(mf('h41, 2, 'hB, 0, 1, 5, 0, 1));
    send(mf('h41, 3, 'hC, 0, 0, 0, 1, 0));
    send(mf('h41, 4, 'hDEAD, 300, 0, 0, 2, 0));
    repeat (200) @(negedge clk);
    chk(n_start == 0, "nothing starts before DFF input ready");
    m = msg_init(NODE_PP, NODE_ST0, MT_DFF_IN_RDY, 16'h41); m.time_v = now;
    t_in = now;
    send(m);
    repeat (3000) @(negedge clk);
    chk(first_start - t_in >= 123, $sformatf("first start %0d cycles after input ready",
        first_start - t_in));
    chk(n_start == 4 && ptr_ok, "four SHOC runs with the DFF's pointers");
    chk(n_local == 1, "one local token A -> B");
    chk(n_remote == 1, "one remote token");
    i = find(MT_TOKEN_RDY, 5, 2);
    chk(i >= 0 && ml[i].dst == NODE_ST0 + 1 && ml[i].gtag == 16'h41 && ml[i].port == 8'd0,
        "TOKEN_RDY to stage 1 for microflow 5 from 2");
    i = -1;
    for (int k = 0; k < nm; k++) if (ml[k].mtype == MT_DFF_OUT_RDY) i = k;
    chk(i >= 0 && ml[i].port == 8'd1 && ml[i].dst == NODE_PP, "DFF output ready on port 1");
    i = find(MT_ERROR, int'(ERR_MFLOW_TIMEOUT), 4);
    chk(i >= 0 && ml[i].dst == NODE_PP && n_abort == 1, "microflow 4 timed out");
    chk(n_reconf == 4, "four kernels, four first-use reconfigurations");
    // token for an unknown microflow
    m = msg_init(NODE_ST0 + 1, NODE_ST0, MT_TOKEN_RDY, 16'h41); m.arg = 16'd9; m.arg2 = 16'd7;
    send(m);
    repeat (5) @(negedge clk);
    chk(find(MT_ERROR, int'(ERR_MFLOW_NOT_FOUND), 9) >= 0, "microflow not found error");
    // release and refill
    m = msg_init(NODE_PP, NODE_ST0, MT_DFF_RELEASE, 16'h41);
    send(m);
    for (int k = 0; k < 9; k++) send(mf('h50, k + 1, 'hA, 0, 3, 0, 0, 0));
    repeat (5) @(negedge clk);
    chk(find(MT_ERROR, int'(ERR_OVERFLOW), 0) >= 0 && ml[nm-1].gtag == 16'h50,
        "ninth descriptor overflows the actor list");
    // a DFF released while its microflow runs: the slot stays taken until the
    // run ends, and the late completion sends nothing
    m = msg_init(NODE_PP, NODE_ST0, MT_DFF_RELEASE, 16'h50);
    send(m);
    send(mf('h60, 1, 'hA, 0, 0, 0, 3, 0));
    i = n_start;
    m = msg_init(NODE_PP, NODE_ST0, MT_DFF_IN_RDY, 16'h60); m.time_v = now;
    send(m);
    while (n_start == i) @(negedge clk);
    m = msg_init(NODE_PP, NODE_ST0, MT_DFF_RELEASE, 16'h60);
    send(m);
    n_ovf = 0;
    for (int k = 0; k < 8; k++) send(mf('h70, k + 1, 'hA, 0, 3, 0, 0, 0));
    repeat (5) @(negedge clk);
    chk(n_ovf == 1, "released but running microflow keeps its slot: eighth descriptor overflows");
    repeat (400) @(negedge clk);
    i = -1;
    for (int k = 0; k < nm; k++) if (ml[k].gtag == 16'h60 && ml[k].mtype != MT_ERROR) i = k;
    chk(i < 0, "no token or output ready for the released DFF");
    n_ovf = 0;
    send(mf('h70, 9, 'hA, 0, 3, 0, 0, 0));
    repeat (5) @(negedge clk);
    chk(n_ovf == 0, "slot free again after the late completion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
