// tb_sre_ctrl_xbar -- self-checking test of the control crossbar.
// Five nodes send numbered messages to random destinations while receivers
// apply random backpressure. Checks: every message arrives exactly once at the
// right node, in order per sender/receiver pair, unchanged; a lone message
// reaches out_valid exactly one cycle after it is taken. Ends with TB_RESULT.
//
// The paper asks only that every message be acknowledged and delivered; the
// traffic pattern, depth and one-cycle transit checked here are this design's
// own. Inputs change on the falling edge.
module tb_sre_ctrl_xbar;
  import sre_pkg::*;
  localparam int N = 5;
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

  logic      [N-1:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  ctrl_msg_t [N-1:0] in_msg = '0, out_msg;
  sre_ctrl_xbar dut (.*);

  int sent [N][N], rcvd [N][N];
  int total_sent, total_rcvd;
  bit run = 0;
  bit [N-1:0] acc;   // message taken at the last edge

  // senders: each holds its message until acknowledged
  for (genvar s = 0; s < N; s++) begin : g_src
    always @(negedge clk) begin
      if (!in_valid[s] || acc[s]) begin
        if (run && $urandom_range(0, 2) != 0) begin
          automatic int d = $urandom_range(0, N - 1);
          in_valid[s] = 1'b1;
          in_msg[s] = msg_init(NODE_W'(s), NODE_W'(d), MT_TOKEN_RDY, 16'(sent[s][d]));
          in_msg[s].arg    = 16'($urandom);
          in_msg[s].time_v = {32'(s), 32'(d)};
        end else in_valid[s] = 1'b0;
      end
    end
  end
  // acceptance bookkeeping on the clock edge
  always @(posedge clk) acc <= in_valid & in_ready;
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < N; s++) if (in_valid[s] && in_ready[s]) begin
      sent[s][int'(in_msg[s].dst)]++; total_sent++;
    end
    for (int d = 0; d < N; d++) if (out_valid[d] && out_ready[d]) begin
      automatic int s = int'(out_msg[d].src);
      chk(int'(out_msg[d].dst) == d, "delivered to its destination");
      chk(out_msg[d].time_v == {32'(s), 32'(d)}, "payload intact");
      chk(int'(out_msg[d].gtag) == rcvd[s][d] % 65536, "in order per pair");
      rcvd[s][d]++; total_rcvd++;
    end
  end
  always @(negedge clk) out_ready = N'($urandom);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // single-message latency
    @(negedge clk);
    out_ready = '0;
    in_valid[0] = 1; in_msg[0] = msg_init(3'd0, 3'd3, MT_DCT_REQ, 16'd0);
    in_msg[0].time_v = {32'd0, 32'd3};
    #1 chk(in_ready[0] === 1'b1, "taken at once");
    @(negedge clk); in_valid[0] = 0;
    chk(out_valid[3] === 1'b1 && out_msg[3].mtype == MT_DCT_REQ, "out_valid one cycle after take");
    force out_ready = 5'b01000;
    @(negedge clk); release out_ready;
    chk(out_valid[3] === 1'b0, "fifo empty after pop");
    // random traffic
    run = 1;
    repeat (3000) @(negedge clk);
    run = 0;
    repeat (50) @(negedge clk);
    chk(total_sent > 3000, "traffic flowed");
    chk(total_sent == total_rcvd, "no message lost or duplicated");
    for (int s = 0; s < N; s++) for (int d = 0; d < N; d++)
      chk(sent[s][d] == rcvd[s][d], "pair count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
