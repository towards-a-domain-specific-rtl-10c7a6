// tb_sre_sched -- self-checking test of the stage scheduler.
// Two instances, FCFS and EDF, receive the same pushes. Checks: out_valid rises
// exactly SCHED_CC = 123 cycles after a push into an idle scheduler; with the
// pool manager always ready, successive microflows leave 124 cycles apart
// (123 scheduling cycles + 1 hand-off); FCFS gives arrival order and EDF gives
// deadline order; a push into a full queue is dropped and flagged.
// Ends with a TB_RESULT line.
//
// The 123 scheduling cycles, FCFS and EDF follow the paper; the one-cycle
// hand-off and the queue depth are this design's own.
module tb_sre_sched;
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

  logic        push = 0, out_ready = 0;
  logic [2:0]  push_idx = 0;
  logic [15:0] push_deadline = 0;
  logic        ovf_f, ovf_e, v_f, v_e;
  logic [2:0]  idx_f, idx_e;
  logic [3:0]  lvl_f, lvl_e;

  sre_sched #(.POLICY(1'b0)) u_fcfs (.clk, .rst_n, .push, .push_idx, .push_deadline,
    .overflow(ovf_f), .out_valid(v_f), .out_idx(idx_f), .out_ready, .level(lvl_f));
  sre_sched #(.POLICY(1'b1)) u_edf (.clk, .rst_n, .push, .push_idx, .push_deadline,
    .overflow(ovf_e), .out_valid(v_e), .out_idx(idx_e), .out_ready, .level(lvl_e));

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int     nf, ne;
  logic [2:0] ord_f [8], ord_e [8];
  longint t_f [8];
  longint t_first = 0;
  always @(posedge clk) if (v_f && t_first == 0) t_first = cyc;
  always @(posedge clk) if (rst_n && out_ready) begin
    if (v_f) begin ord_f[nf] = idx_f; t_f[nf] = cyc; nf++; end
    if (v_e) begin ord_e[ne] = idx_e; ne++; end
  end

  task automatic do_push(int idx, int dl);
    @(negedge clk); push = 1; push_idx = 3'(idx); push_deadline = 16'(dl);
    @(negedge clk); push = 0;
  endtask

  initial begin
    longint t0;
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency from push into the idle scheduler
    @(negedge clk); push = 1; push_idx = 3'd1; push_deadline = 16'd400;
    @(posedge clk); t0 = cyc;
    @(negedge clk); push = 0;
    // four more while the first is being scheduled
    do_push(2, 100); do_push(3, 300); do_push(4, 200); do_push(5, 250);
    while (!v_f) @(posedge clk);
    @(negedge clk);
    // t_first is the first edge that sees out_valid; it went high one edge earlier
    lat = int'(t_first - t0) - 1;
    chk(lat == 123, $sformatf("push to out_valid %0d cycles, expected 123", lat));
    chk(v_e === 1'b1, "EDF instance ready at the same time");
    @(negedge clk); out_ready = 1;
    repeat (700) @(negedge clk);
    out_ready = 0;
    chk(nf == 5 && ne == 5, "five microflows out of each");
    for (int i = 0; i < 5; i++) chk(ord_f[i] == 3'(i + 1), $sformatf("FCFS position %0d", i));
    chk(ord_e[0] == 3'd1 && ord_e[1] == 3'd2 && ord_e[2] == 3'd4 && ord_e[3] == 3'd5
        && ord_e[4] == 3'd3, "EDF deadline order 1,2,4,5,3");
    for (int i = 1; i < 5; i++) chk(t_f[i] - t_f[i-1] == 124, "124 cycles between microflows");
    chk(lvl_f == 0 && lvl_e == 0, "queues empty");
    // overflow: one in work, eight queued, the tenth push is dropped
    for (int i = 0; i < 9; i++) do_push(i % 8, 10 * i);
    chk(lvl_f == 8, "queue full");
    @(negedge clk); push = 1; push_idx = 3'd7;
    #1 chk(ovf_f === 1'b1 && ovf_e === 1'b1, "overflow flagged");
    @(negedge clk); push = 0;
    chk(lvl_f == 8, "overflowing push dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
