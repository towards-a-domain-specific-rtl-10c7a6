// tb_sre_pool_mgr -- self-checking test of the resource pool manager.
// Pool of 4 compute elements and 13 memory units; each microflow asks for 1
// element and 3 memory units, runs 200..300 cycles (the sizes of the formal
// pool model). A behavioural SHOC raises done after the run time; kernel
// 16'hDEAD never finishes and must be aborted by its timeout.
// Checks: the first four requests start, the fifth waits (alloc_wait) until a
// completion; a first use of a kernel on an element reconfigures it and starts
// RECONF_CC+1 cycles after acceptance, a reuse starts 1 cycle after; a request
// larger than the free memory waits; a timeout aborts the element and is
// reported; memory and elements all return to the pool. Ends with TB_RESULT.
//
// Pool sizes and run times follow the paper's pool model; the reconfiguration
// time (RECONF_CC) and the start timing checked here are this design's own.
module tb_sre_pool_mgr;
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

  logic        req_valid = 0, req_ready, alloc_wait, reconfig;
  logic [2:0]  req_idx = 0;
  logic [15:0] req_kernel = 0, req_timeout = 0;
  logic [3:0]  req_mem = 0;
  logic [3:0]  shoc_start, shoc_abort, shoc_done = 0;
  logic [15:0] shoc_kernel [4];
  logic [2:0]  shoc_idx [4];
  logic        run_valid, done_valid, done_timeout, done_ready = 1;
  logic [2:0]  run_idx, done_idx;
  logic [3:0]  mem_free;
  logic [2:0]  ce_free;

  sre_pool_mgr dut (.*);

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // behavioural SHOC
  int remain [4];
  always @(posedge clk) begin
    shoc_done <= '0;
    for (int c = 0; c < 4; c++) begin
      if (shoc_start[c]) remain[c] = (shoc_kernel[c] == 16'hDEAD) ? -1 : $urandom_range(200, 300);
      else if (remain[c] > 0) begin
        remain[c]--;
        if (remain[c] == 0) shoc_done[c] <= 1'b1;
      end
      if (shoc_abort[c]) remain[c] = 0;
    end
  end

  int n_reconf, n_start, n_done, n_tmo, n_wait;
  longint acc_t [8], start_t [8];
  always @(posedge clk) if (rst_n) begin
    if (reconfig) n_reconf++;
    if (alloc_wait) n_wait++;
    if (req_valid && req_ready) acc_t[req_idx] = cyc;
    if (run_valid) begin start_t[run_idx] = cyc; n_start++; end
    if (done_valid && done_ready) begin n_done++; if (done_timeout) n_tmo++; end
  end

  task automatic request(int idx, int kid, int mem, int tmo);
    @(negedge clk);
    req_valid = 1; req_idx = 3'(idx); req_kernel = 16'(kid); req_mem = 4'(mem);
    req_timeout = 16'(tmo);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
  endtask

  initial begin
    int w0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // four kernels fill the compute pool
    for (int i = 0; i < 4; i++) request(i, 16'h0A, 3, 0);
    repeat (2) @(negedge clk);
    chk(mem_free == 4'd1, "12 of 13 memory units reserved");
    chk(n_reconf == 4, "four first-use reconfigurations");
    repeat (20) @(negedge clk);
    chk(start_t[0] - acc_t[0] - 1 == 17, "reconfigured start RECONF_CC+1 cycles after acceptance");
    // fifth waits for an element
    w0 = n_wait;
    request(4, 16'h0A, 1, 0);
    chk(n_wait - w0 > 150, "fifth request waited for a compute element");
    chk(n_reconf == 4, "reuse of a configured element needs no reconfiguration");
    repeat (3) @(negedge clk);
    chk(start_t[4] - acc_t[4] - 1 == 1, "reuse starts one cycle after acceptance");
    // memory-bound wait: 10 units while four kernels still hold 10
    // (start_t is the first edge that sees run_valid, one after it rose)
    w0 = n_wait;
    request(5, 16'h0B, 10, 0);
    chk(n_wait - w0 > 0, "large request waited for memory");
    repeat (2) @(negedge clk);
    chk(n_reconf == 5, "new kernel reconfigures");
    // timeout
    wait (n_done >= 6);
    request(6, 16'hDEAD, 2, 40);
    wait (n_done >= 7);
    chk(n_tmo == 1, "hung kernel timed out");
    repeat (5) @(negedge clk);
    chk(mem_free == 4'd13 && ce_free == 3'd4, "all resources returned");
    chk(n_start == 7, "seven RUN events");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && shoc_abort != 0) chk(shoc_kernel[0] == 16'hDEAD || shoc_kernel[1] == 16'hDEAD
      || shoc_kernel[2] == 16'hDEAD || shoc_kernel[3] == 16'hDEAD, "only the hung kernel is aborted");
endmodule
