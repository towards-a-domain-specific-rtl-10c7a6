// tb_sre_ie_buffer -- self-checking test of the ingress/egress buffer.
// Random writes on both write ports (never to one address in one cycle),
// random reads on both read ports; every read is compared one cycle later
// with a model memory. Ends with a TB_RESULT line.
//
// The paper gives the buffer's purpose; its ports, size and one-cycle read
// latency checked here are this design's own.
module tb_sre_ie_buffer;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #1_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic        a_we = 0, b_we = 0, c_re = 0, d_re = 0;
  logic [13:0] a_waddr = 0, b_waddr = 0, c_raddr = 0, d_raddr = 0;
  logic [31:0] a_wdata = 0, b_wdata = 0, c_rdata, d_rdata;
  logic [31:0] model [16384];

  sre_ie_buffer dut (.*);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // initialise a window of 64 words through both ports
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      a_we = 1; a_waddr = 14'(i);      a_wdata = $urandom; model[a_waddr] = a_wdata;
      b_we = 1; b_waddr = 14'(i + 32); b_wdata = $urandom; model[b_waddr] = b_wdata;
    end
    for (int n = 0; n < 400; n++) begin
      automatic logic [31:0] ec, ed;
      automatic bit rc, rd;
      @(negedge clk);
      a_we = $urandom_range(0, 1); a_waddr = 14'($urandom_range(0, 63)); a_wdata = $urandom;
      b_we = $urandom_range(0, 1); b_waddr = 14'($urandom_range(0, 63)); b_wdata = $urandom;
      if (a_we && b_we && a_waddr == b_waddr) b_waddr = b_waddr ^ 14'd1;
      rc = $urandom_range(0, 1); rd = $urandom_range(0, 1);
      c_re = rc; c_raddr = 14'($urandom_range(0, 63));
      d_re = rd; d_raddr = 14'($urandom_range(0, 63));
      ec = model[c_raddr]; ed = model[d_raddr];   // read sees the old word
      if (a_we) model[a_waddr] = a_wdata;
      if (b_we) model[b_waddr] = b_wdata;
      @(negedge clk);
      a_we = 0; b_we = 0; c_re = 0; d_re = 0;
      if (rc) chk(c_rdata === ec, "read port C data");
      if (rd) chk(d_rdata === ed, "read port D data");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
