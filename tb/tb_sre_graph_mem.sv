// tb_sre_graph_mem -- self-checking test of the graph memory.
// Writes random microflow descriptors to random addresses, reads them back
// (one-cycle read latency), checks that the output holds while re is low and
// that an address beyond DEPTH reads as zero. Ends with a TB_RESULT line.
//
// The paper gives only the memory's content; its size and read timing, and
// so what is checked here, are this design's own.
module tb_sre_graph_mem;
  import sre_pkg::*;
  logic clk = 1'b0;
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

  logic        we = 0, re = 0;
  logic [7:0]  waddr = 0, raddr = 0;
  mflow_desc_t wdata = '0, rdata;
  mflow_desc_t model [64];

  sre_graph_mem dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  function automatic mflow_desc_t rnd_desc();
    mflow_desc_t d;
    d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    return d;
  endfunction

  initial begin
    // fill every word once so every read has a known value
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wdata = rnd_desc(); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      if ($urandom_range(0, 1) == 1) begin
        we = 1; waddr = 8'($urandom_range(0, 63)); wdata = rnd_desc();
        model[waddr] = wdata; re = 0;
      end else begin
        automatic logic [7:0] a = 8'($urandom_range(0, 63));
        we = 0; re = 1; raddr = a;
        @(negedge clk); re = 0;
        chk(rdata === model[a], $sformatf("read back address %0d", a));
        @(negedge clk);
        chk(rdata === model[a], "output held while re low");
      end
    end
    @(negedge clk); we = 0; re = 1; raddr = 8'd200;
    @(negedge clk); re = 0;
    chk(rdata === '0, "out-of-range address reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
