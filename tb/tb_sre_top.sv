// tb_sre_top -- end-to-end test of one SRE at its default (full) size.
//
// The testbench plays the host on the SoC network and the SHOC compute
// engines. Workload: a channel-estimation-like DFF (container type 5) of six
// microflows CHEST1..CHEST6 with 409 input words (960 B DMRS + 4 B L1 + 670 B
// L2 metadata) and 480 output words (1920 B):
//   stage 0: CHEST1 (DFF input) -> CHEST2, CHEST3 (local tokens);
//            CHEST2, CHEST3 -> CHEST4 on stage 1 (remote tokens, ports 0, 1);
//            CHEST2 and CHEST3 each need 7 memory units, so the second of
//            them waits for the first (13-unit pool);
//   stage 1: CHEST4 -> CHEST5 (local); CHEST5 -> CHEST6 on stage 2 (remote);
//   stage 2: CHEST6 -> DFF output port 0; it reads the input region and
//            writes out[i] = in[i mod 409] + i, i < 480.
// Feature vectors {9,2,2} memory units per logical stage, unrotated and
// rotated by one stage: two such DFFs fit at a time, a third is rejected.
// Container type 6: one microflow whose kernel never ends; its 1750-cycle
// timeout fires. Type 9 is not in the container table.
// Phases:
//   1. DFFs 1-4 (type 5), plus a data word for DFF 1 before its descriptor:
//      1, 2 finish with correct output, 3, 4 are rejected (error 5); the early
//      word is refused (error 2).
//   2. DFF 5 (type 5) finishes; DFF 6 (type 6) times out (error 4); DFF 7
//      (type 9) is not found (error 1).
//   3. DFFs 10-14 (type 5) at once: 14 finds no context (error 6), 10 and 11
//      finish, 12 and 13 are rejected.
//   4. One DFF of each channel-estimation scenario size (types 20-23, same
//      graph): 409/480, 649/960, 1177/2016 and 937/1536 input/output words;
//      every output word is checked.
// Every mechanism is counted and must have happened at least once: allocation
// wait, SHOC reconfiguration, overflow, rejection, DCT miss, descriptor not
// ready, timeout, dropped DFF, local and remote tokens, EDF and FCFS stages,
// completed DFFs. Ends with a TB_RESULT line.
//
// Sizes follow the paper's first channel-estimation scenario (960 B input,
// 1920 B output, 670 B of parameters, 4 B of L1 metadata) and its 1750-cycle
// timeout; the graph of six microflows, its memory needs and the arithmetic
// of CHEST6 are this testbench's own. Host and SHOC act on the falling edge.
module tb_sre_top;
  import sre_pkg::*;
  localparam int S = 3, C = 4;
  localparam int IN_W = 409, OUT_W = 480;
  // channel-estimation scenarios 1..4: input = DMRS bytes + 674 bytes of
  // metadata, output bytes, both rounded up to 32-bit words
  localparam int SC_IN  [4] = '{409, 649, 1177, 937};
  localparam int SC_OUT [4] = '{480, 960, 2016, 1536};
  int in_w [int], out_w [int];   // sizes of a DFF by global tag (default IN_W/OUT_W)
  function automatic int iw(int g); return in_w.exists(g) ? in_w[g] : IN_W; endfunction
  function automatic int ow(int g); return out_w.exists(g) ? out_w[g] : OUT_W; endfunction
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #50_000_000;
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

  function automatic logic [31:0] din(int g, int j);
    return {16'(g), 16'(j * 7 + 1)};
  endfunction

  // ---------------------------------------------------------------- SHOC model
  int remain [S][C];
  bit agent_ce [S][C];          // element waits for the output writer
  int ag_st = 0, ag_i = 0, ag_s = 0, ag_c = 0;
  logic [15:0] ag_in, ag_out;
  int ag_g = 0;
  int q_s [$], q_c [$];
  int n_start [S];
  always @(posedge clk) begin
    shoc_done <= '0;
    shoc_buf_re <= 1'b0;
    shoc_buf_we <= 1'b0;
    for (int s = 0; s < S; s++) for (int c = 0; c < C; c++) begin
      if (shoc_start[s][c]) begin
        n_start[s]++;
        if (shoc_kernel[s][c] == 16'hDEAD) remain[s][c] = -1;
        else if (shoc_kernel[s][c] == 16'h106) begin
          remain[s][c] = -1; q_s.push_back(s); q_c.push_back(c);
        end else remain[s][c] = $urandom_range(200, 300);
      end else if (remain[s][c] > 0) begin
        remain[s][c]--;
        if (remain[s][c] == 0) shoc_done[s][c] <= 1'b1;
      end
      if (shoc_abort[s][c]) remain[s][c] = 0;
    end
    // output writer for CHEST6: read a word, wait, write it
    case (ag_st)
      0: if (q_s.size() != 0) begin
           ag_s = q_s.pop_front(); ag_c = q_c.pop_front();
           ag_in = shoc_in_ptr[ag_s][ag_c]; ag_out = shoc_out_ptr[ag_s][ag_c];
           ag_g = int'(shoc_gtag[ag_s][ag_c]);
           ag_i = 0; ag_st = 1;
         end
      1: begin
           shoc_buf_re <= 1'b1; shoc_buf_raddr <= ADDR_W'(ag_in + 16'(ag_i % iw(ag_g))); ag_st = 2;
         end
      2: ag_st = 3;
      3: begin
           shoc_buf_we <= 1'b1; shoc_buf_waddr <= ADDR_W'(ag_out + 16'(ag_i));
           shoc_buf_wdata <= shoc_buf_rdata + 32'(ag_i);
           ag_i++;
           ag_st = (ag_i == ow(ag_g)) ? 4 : 1;
         end
      4: begin shoc_done[ag_s][ag_c] <= 1'b1; ag_st = 0; end
      default: ag_st = 0;
    endcase
  end

  // ---------------------------------------------------------------- host receive side
  int  out_cnt [int];
  bit  out_bad [int];
  bit  fin [int];
  int  err [int];
  int  n_err [16];
  always @(posedge clk) if (rst_n && noc_out_valid && noc_out_ready) begin
    automatic int g = int'(noc_out.gtag);
    if (noc_out.kind == NK_OUT) begin
      if (!out_cnt.exists(g)) out_cnt[g] = 0;
      if (noc_out.data !== din(g, out_cnt[g] % iw(g)) + 32'(out_cnt[g])) out_bad[g] = 1;
      out_cnt[g]++;
      if (noc_out.last) fin[g] = 1;
    end else if (noc_out.kind == NK_ERROR) begin
      n_err[noc_out.data[3:0]]++;
      if (noc_out.data != 32'(ERR_DESC_NOT_READY)) err[g] = int'(noc_out.data);
    end
  end

  // ---------------------------------------------------------------- event counters
  int c_alloc, c_reconf, c_local, c_remote, c_acc, c_rej, c_miss, c_disc, c_drop, c_done,
      c_dovf, c_sovf;
  always @(posedge clk) if (rst_n) begin
    c_alloc  += $countones(ev_alloc_wait);
    c_reconf += $countones(ev_reconfig);
    c_local  += $countones(ev_local_token);
    c_remote += $countones(ev_remote_token);
    c_sovf   += $countones(ev_sched_overflow);
    c_acc += int'(ev_accept); c_rej += int'(ev_reject); c_miss += int'(ev_dct_miss);
    c_disc += int'(ev_discard); c_drop += int'(ev_drop); c_done += int'(ev_dff_done);
    c_dovf += int'(ev_dir_overflow);
  end

  // ---------------------------------------------------------------- host send side
  task automatic put(noc_kind_e k, int g, int ty, logic [31:0] d);
    @(negedge clk);
    noc_in_valid = 1; noc_in = '0; noc_in.kind = k; noc_in.gtag = 16'(g);
    noc_in.dff_type = 16'(ty); noc_in.data = d;
    #1 while (!noc_in_ready) begin @(negedge clk); #1; end
    @(negedge clk); noc_in_valid = 0;
  endtask
  task automatic send_data(int g, int n);
    if (!err.exists(g)) for (int j = 0; j < n; j++) put(NK_DATA, g, 0, din(g, j));
  endtask
  task automatic wait_all(int gs [$]);
    int left;
    for (int t = 0; t < 100000; t++) begin
      left = 0;
      foreach (gs[i]) if (!fin.exists(gs[i]) && !err.exists(gs[i])) left++;
      if (left == 0) break;
      @(negedge clk);
    end
  endtask
  function automatic bit good(int g);
    return fin.exists(g) && !out_bad.exists(g) && out_cnt[g] == ow(g) && !err.exists(g);
  endfunction

  // ---------------------------------------------------------------- configuration
  task automatic gm_put(int a, int ltag, int kid, int st, int tmo, int nin, int s0, int s1,
                        int nout, int d0, int p0, int st0, int sz0, int d1, int p1, int st1, int sz1);
    mflow_desc_t d = '0;
    d.ltag = 8'(ltag); d.kernel_id = 16'(kid); d.stage = 2'(st); d.timeout = 16'(tmo);
    d.deadline = 16'(600 * ltag);
    d.num_ins = 3'(nin); d.ins[0].src_ltag = 8'(s0); d.ins[1].src_ltag = 8'(s1);
    d.num_outs = 3'(nout);
    d.outs[0].dest_ltag = 8'(d0); d.outs[0].remote_in_port = 2'(p0);
    d.outs[0].out_stage = 2'(st0); d.outs[0].token_size = 4'(sz0);
    d.outs[1].dest_ltag = 8'(d1); d.outs[1].remote_in_port = 2'(p1);
    d.outs[1].out_stage = 2'(st1); d.outs[1].token_size = 4'(sz1);
    @(negedge clk); gm_we = 1; gm_waddr = 8'(a); gm_wdata = d;
    @(negedge clk); gm_we = 0;
  endtask

  initial begin
    container_t ct;
    repeat (3) @(negedge clk);
    rst_n = 1;
    //      addr ltag kernel  st tmo  nin s0 s1 nout d0 p0 st0 sz0  d1 p1 st1 sz1
    gm_put(0,   1, 'h101, 0, 0,    1, 0, 0, 2,   2, 0, 0, 2,    3, 0, 0, 2);
    gm_put(1,   2, 'h102, 0, 0,    1, 1, 0, 1,   4, 0, 1, 7,    0, 0, 0, 0);
    gm_put(2,   3, 'h103, 0, 0,    1, 1, 0, 1,   4, 1, 1, 7,    0, 0, 0, 0);
    gm_put(3,   4, 'h104, 1, 0,    2, 2, 3, 1,   5, 0, 1, 3,    0, 0, 0, 0);
    gm_put(4,   5, 'h105, 1, 0,    1, 4, 0, 1,   6, 0, 2, 3,    0, 0, 0, 0);
    gm_put(5,   6, 'h106, 2, 0,    1, 5, 0, 1,   0, 0, 0, 8,    0, 0, 0, 0);
    gm_put(8,   1, 'hDEAD, 0, 1750, 1, 0, 0, 1,  0, 0, 0, 1,    0, 0, 0, 0);
    ct = '0;
    ct.valid = 1; ct.dff_type = 16'd5; ct.num_mflows = 8'd6; ct.desc_base = 8'd0;
    ct.in_words = (ADDR_W-1)'(IN_W); ct.out_words = (ADDR_W-1)'(OUT_W); ct.num_outputs = 8'd1;
    ct.fv[0].shift = 2'd0; ct.fv[0].mem_units[0] = 6'd9; ct.fv[0].mem_units[1] = 6'd2;
    ct.fv[0].mem_units[2] = 6'd2;
    ct.fv[1] = ct.fv[0]; ct.fv[1].shift = 2'd1;
    @(negedge clk); cfg_we = 1; cfg_idx = 2'd0; cfg_data = ct;
    ct = '0;
    ct.valid = 1; ct.dff_type = 16'd6; ct.num_mflows = 8'd1; ct.desc_base = 8'd8;
    ct.in_words = (ADDR_W-1)'(4); ct.out_words = (ADDR_W-1)'(4); ct.num_outputs = 8'd1;
    ct.fv[0].mem_units[0] = 6'd1; ct.fv[1] = ct.fv[0];
    @(negedge clk); cfg_we = 1; cfg_idx = 2'd1; cfg_data = ct;
    @(negedge clk); cfg_we = 0;

    // phase 1
    put(NK_CTRL, 1, 5, 0);
    put(NK_DATA, 1, 0, din(1, 0));          // before the descriptor: refused
    for (int g = 2; g <= 4; g++) put(NK_CTRL, g, 5, 0);
    repeat (700) @(negedge clk);
    for (int g = 1; g <= 4; g++) send_data(g, IN_W);
    wait_all('{1, 2, 3, 4});
    chk(good(1) && good(2), "DFFs 1 and 2 produce the expected 480 words");
    chk(err.exists(3) && err[3] == int'(ERR_NO_MAPPING) && err.exists(4) && err[4] == int'(ERR_NO_MAPPING),
        "DFFs 3 and 4 rejected");
    chk(n_err[ERR_DESC_NOT_READY] >= 1, "early data refused");
    // phase 2
    put(NK_CTRL, 5, 5, 0);
    put(NK_CTRL, 6, 6, 0);
    put(NK_CTRL, 7, 9, 0);
    repeat (500) @(negedge clk);
    send_data(5, IN_W);
    send_data(6, 4);
    wait_all('{5, 6, 7});
    chk(good(5), "DFF 5 correct");
    chk(err.exists(6) && err[6] == int'(ERR_MFLOW_TIMEOUT), "DFF 6 timed out");
    chk(err.exists(7) && err[7] == int'(ERR_DCT_NOT_FOUND), "DFF 7 not found");
    // phase 3
    for (int g = 10; g <= 14; g++) put(NK_CTRL, g, 5, 0);
    repeat (700) @(negedge clk);
    for (int g = 10; g <= 13; g++) send_data(g, IN_W);
    wait_all('{10, 11, 12, 13, 14});
    chk(good(10) && good(11), "DFFs 10 and 11 correct");
    chk(err.exists(14) && err[14] == int'(ERR_OVERFLOW), "DFF 14 found no context");
    chk(err.exists(12) && err.exists(13), "DFFs 12 and 13 rejected");
    repeat (200) @(negedge clk);
    // phase 4: one DFF of each channel-estimation scenario size, through
    // container-table row 2 (type 20 + k), the same graph and feature vectors
    for (int k = 0; k < 4; k++) begin
      automatic int g = 20 + k;
      ct = '0;
      ct.valid = 1; ct.dff_type = 16'(g); ct.num_mflows = 8'd6; ct.desc_base = 8'd0;
      ct.in_words = (ADDR_W-1)'(SC_IN[k]); ct.out_words = (ADDR_W-1)'(SC_OUT[k]);
      ct.num_outputs = 8'd1;
      ct.fv[0].shift = 2'd0; ct.fv[0].mem_units[0] = 6'd9; ct.fv[0].mem_units[1] = 6'd2;
      ct.fv[0].mem_units[2] = 6'd2;
      ct.fv[1] = ct.fv[0]; ct.fv[1].shift = 2'd1;
      @(negedge clk); cfg_we = 1; cfg_idx = 2'd2; cfg_data = ct;
      @(negedge clk); cfg_we = 0;
      in_w[g] = SC_IN[k]; out_w[g] = SC_OUT[k];
      put(NK_CTRL, g, g, 0);
      repeat (500) @(negedge clk);
      send_data(g, SC_IN[k]);
      wait_all('{g});
      chk(good(g), $sformatf("scenario %0d: %0d input words in, %0d output words back",
          k + 1, SC_IN[k], SC_OUT[k]));
    end

    $display("mechanisms: alloc_wait=%0d reconfig=%0d overflow=%0d reject=%0d dct_miss=%0d",
             c_alloc, c_reconf, n_err[ERR_OVERFLOW], c_rej, c_miss);
    $display("  desc_not_ready=%0d timeout=%0d drop=%0d local=%0d remote=%0d", n_err[ERR_DESC_NOT_READY],
             n_err[ERR_MFLOW_TIMEOUT], c_drop, c_local, c_remote);
    $display("  fcfs_starts=%0d edf_starts=%0d accepted=%0d done=%0d dir_q_ovf=%0d sched_ovf=%0d",
             n_start[0] + n_start[2], n_start[1], c_acc, c_done, c_dovf, c_sovf);
    chk(c_alloc > 0, "allocation wait happened");
    chk(c_reconf > 0, "SHOC reconfiguration happened");
    chk(n_err[ERR_OVERFLOW] > 0, "overflow happened");
    chk(c_rej > 0, "rejection happened");
    chk(c_miss > 0 && n_err[ERR_DCT_NOT_FOUND] > 0, "DCT miss happened");
    chk(c_disc > 0, "descriptor-not-ready discard happened");
    chk(n_err[ERR_MFLOW_TIMEOUT] > 0, "timeout happened");
    chk(c_drop > 0, "DFF drop happened");
    chk(c_local >= 15 && c_remote >= 15, "local and remote tokens (3 each per finished DFF)");
    chk(n_start[1] > 0 && n_start[0] + n_start[2] > 0, "EDF stage and FCFS stages ran");
    chk(c_acc == 10, "ten DFFs admitted (1, 2, 5, 6, 10, 11, 20-23)");
    chk(c_done >= 5, "DFFs completed and released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
