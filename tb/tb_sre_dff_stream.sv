// tb_sre_dff_stream -- a stream of small DFFs through one SRE at its default
// (full) size, the workload of the formal timing model: three sources, each
// sending a two-kernel DFF every 200 cycles with 10 % jitter (180..220), kernel
// run times 200..300 cycles, each kernel needing one compute element and
// three memory units.
//
// How: the testbench plays the host and the SHOC engines. Container type 1
// holds kernel K1 (stage 0, fed by the DFF input) whose token goes to K2
// (stage 1), whose token is DFF output port 0; 4 input and 4 output words.
// Each DFF's four input words are sent as soon as its DFF descriptor has
// reached the packet processor (watched on the crossbar), so the host never
// gets "descriptor not ready". Latency is taken from the cycle the control
// packet is accepted to the last output word.
//
// Checks: every DFF ends, either with its four output words or with an error
// packet (no context, no mapping); none is lost or duplicated; no data packet
// is refused; at least four DFFs complete; no DFF completes faster than
// DIR_CC + 2 * SCHED_CC + 2 * 200 = 746 cycles (director, two scheduling
// passes, two shortest runs). The latencies found are printed.
//
// The arrival pattern, kernel times and pool sizes follow the paper's formal
// model; the graph encoding, the data sizes and the latency floor as a check
// are this testbench's own. Host and SHOC act on the falling clock edge; the
// watchdog ends the run after 2 ms of simulated time.
module tb_sre_dff_stream;
  import sre_pkg::*;
  localparam int S = 3, C = 4;
  localparam int NSRC = 3, NPER = 6, NDFF = NSRC * NPER;
  localparam int IN_W = 4, OUT_W = 4;
  localparam int FLOOR = 100 + 2 * 123 + 2 * 200;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #2_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic        noc_in_valid = 0, noc_in_ready, noc_out_valid, noc_out_ready = 1;
  noc_pkt_t    noc_in = '0, noc_out;
  logic        cfg_we = 0, gm_we = 0;
  logic [1:0]  cfg_idx = 0;
  container_t  cfg_data = '0;
  logic [7:0]  gm_waddr = 0;
  mflow_desc_t gm_wdata = '0;
  logic [S-1:0][C-1:0]        shoc_start, shoc_abort, shoc_done;
  logic [S-1:0][C-1:0][15:0]  shoc_kernel, shoc_gtag, shoc_in_ptr, shoc_out_ptr;
  logic [S-1:0][C-1:0][7:0]   shoc_ltag;
  logic        shoc_buf_we = 0, shoc_buf_re = 0;
  logic [ADDR_W-1:0] shoc_buf_waddr = 0, shoc_buf_raddr = 0;
  logic [31:0] shoc_buf_wdata = 0, shoc_buf_rdata;
  logic        ev_accept, ev_reject, ev_dct_miss, ev_dir_overflow, ev_discard, ev_drop, ev_dff_done;
  logic [S-1:0] ev_alloc_wait, ev_reconfig, ev_sched_overflow, ev_local_token, ev_remote_token;

  sre_top dut (.*);

  // ---------------------------------------------------------------- SHOC model
  int remain [S][C] = '{default: '{default: 0}};
  always @(posedge clk) begin
    shoc_done <= '0;
    if (rst_n)
      for (int s = 0; s < S; s++) for (int c = 0; c < C; c++) begin
        if (shoc_start[s][c]) remain[s][c] = $urandom_range(200, 300);
        else if (remain[s][c] > 0) begin
          remain[s][c]--;
          if (remain[s][c] == 0) shoc_done[s][c] <= 1'b1;
        end
        if (shoc_abort[s][c]) remain[s][c] = 0;
      end
  end

  // ---------------------------------------------------------------- observation
  longint t_req [int];
  bit     have_desc [int];
  int     out_cnt [int];
  longint t_fin [int];
  int     err [int];
  int     n_err [16] = '{default: 0};
  int     n_dup = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.x_out_valid[NODE_PP] && dut.x_out_ready[NODE_PP] &&
        dut.x_out_msg[NODE_PP].mtype == MT_DFF_DESC)
      have_desc[int'(dut.x_out_msg[NODE_PP].gtag)] = 1;
    if (noc_out_valid && noc_out_ready) begin
      automatic int g = int'(noc_out.gtag);
      if (noc_out.kind == NK_OUT) begin
        if (!out_cnt.exists(g)) out_cnt[g] = 0;
        out_cnt[g]++;
        if (noc_out.last) begin
          if (t_fin.exists(g)) n_dup++;
          t_fin[g] = cyc;
        end
      end else if (noc_out.kind == NK_ERROR) begin
        n_err[noc_out.data[3:0]]++;
        if (err.exists(g)) n_dup++;
        err[g] = int'(noc_out.data);
      end
    end
  end

  // ---------------------------------------------------------------- host
  task automatic put(noc_kind_e k, int g, int ty, logic [31:0] d);
    @(negedge clk);
    noc_in_valid = 1; noc_in = '0; noc_in.kind = k; noc_in.gtag = 16'(g);
    noc_in.dff_type = 16'(ty); noc_in.data = d;
    #1 while (!noc_in_ready) begin @(negedge clk); #1; end
    @(negedge clk); noc_in_valid = 0;
  endtask
  task automatic gm_put(int a, int ltag, int kid, int st, int src, int dst_ltag, int dst_st);
    mflow_desc_t d = '0;
    d.ltag = 8'(ltag); d.kernel_id = 16'(kid); d.stage = 2'(st);
    d.deadline = 16'(600 * ltag);
    d.num_ins = 3'd1; d.ins[0].src_ltag = 8'(src); d.ins[0].token_size = 4'd3;
    d.num_outs = 3'd1;
    d.outs[0].dest_ltag = 8'(dst_ltag); d.outs[0].out_stage = 2'(dst_st);
    d.outs[0].token_size = 4'd3;
    @(negedge clk); gm_we = 1; gm_waddr = 8'(a); gm_wdata = d;
    @(negedge clk); gm_we = 0;
  endtask

  int     gt  [NDFF];   // global tag of the i-th DFF in arrival order
  longint due [NDFF];   // its arrival cycle
  bit     sent [NDFF];

  initial begin
    container_t ct;
    longint t;
    int next, n_done, n_rej, lo, hi;
    repeat (3) @(negedge clk);
    rst_n = 1;
    gm_put(0, 1, 'h201, 0, 0, 2, 1);
    gm_put(1, 2, 'h202, 1, 1, 0, 0);
    ct = '0;
    ct.valid = 1; ct.dff_type = 16'd1; ct.num_mflows = 8'd2; ct.desc_base = 8'd0;
    ct.in_words = (ADDR_W-1)'(IN_W); ct.out_words = (ADDR_W-1)'(OUT_W); ct.num_outputs = 8'd1;
    ct.fv[0].shift = 2'd0; ct.fv[0].mem_units[0] = 6'd3; ct.fv[0].mem_units[1] = 6'd3;
    ct.fv[1] = ct.fv[0]; ct.fv[1].shift = 2'd1;
    @(negedge clk); cfg_we = 1; cfg_idx = 2'd0; cfg_data = ct;
    @(negedge clk); cfg_we = 0;

    // arrival times: source s sends its k-th DFF at 200 * k + jitter, offset by s
    for (int s = 0; s < NSRC; s++) begin
      t = cyc + 10 + 7 * s;
      for (int k = 0; k < NPER; k++) begin
        gt[s * NPER + k]  = 'h100 + 16 * s + k;
        due[s * NPER + k] = t;
        t += longint'($urandom_range(180, 220));
      end
    end
    // sort by arrival
    for (int i = 0; i < NDFF; i++)
      for (int j = i + 1; j < NDFF; j++)
        if (due[j] < due[i]) begin
          automatic longint td = due[i]; automatic int tg = gt[i];
          due[i] = due[j]; gt[i] = gt[j]; due[j] = td; gt[j] = tg;
        end

    // one host port: control packets when due, otherwise input data of DFFs
    // whose descriptor is known
    next = 0;
    while (1) begin
      automatic bit busy = 0;
      if (next < NDFF && cyc >= due[next]) begin
        put(NK_CTRL, gt[next], 1, 0);
        t_req[gt[next]] = cyc;
        next++;
        busy = 1;
      end else
        for (int i = 0; i < next; i++)
          if (!busy && !sent[i] && have_desc.exists(gt[i])) begin
            for (int j = 0; j < IN_W; j++) put(NK_DATA, gt[i], 0, 32'(gt[i] * 16 + j));
            sent[i] = 1;
            busy = 1;
          end
      if (!busy) @(negedge clk);
      if (next == NDFF) begin
        automatic bit left = 0;
        for (int i = 0; i < NDFF; i++)
          if (!sent[i] && !err.exists(gt[i])) left = 1;
        if (!left) break;
      end
    end
    // wait for every DFF to end
    for (int w = 0; w < 20000; w++) begin
      automatic int open_n = 0;
      for (int i = 0; i < NDFF; i++) if (!t_fin.exists(gt[i]) && !err.exists(gt[i])) open_n++;
      if (open_n == 0) break;
      @(negedge clk);
    end
    repeat (50) @(negedge clk);

    n_done = 0; n_rej = 0; lo = 1 << 30; hi = 0;
    for (int i = 0; i < NDFF; i++) begin
      automatic int g = gt[i];
      if (t_fin.exists(g) && !err.exists(g)) begin
        automatic int l = int'(t_fin[g] - t_req[g]);
        n_done++;
        if (l < lo) lo = l;
        if (l > hi) hi = l;
        chk(out_cnt[g] == OUT_W, $sformatf("DFF %h: %0d output words", g, out_cnt[g]));
      end else if (err.exists(g) && !t_fin.exists(g)) n_rej++;
      else chk(0, $sformatf("DFF %h neither finished nor reported an error", g));
    end
    $display("stream: %0d DFFs, %0d completed, %0d refused (no context %0d, no mapping %0d), latency %0d..%0d cycles",
             NDFF, n_done, n_rej, n_err[int'(ERR_OVERFLOW)], n_err[int'(ERR_NO_MAPPING)], lo, hi);
    chk(n_done + n_rej == NDFF, "every DFF ended once");
    chk(n_dup == 0, "no DFF ended twice");
    chk(n_err[int'(ERR_DESC_NOT_READY)] == 0, "no data packet refused");
    chk(n_done >= 4, "at least four DFFs completed");
    chk(lo >= FLOOR, $sformatf("no DFF faster than %0d cycles (fastest %0d)", FLOOR, lo));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
