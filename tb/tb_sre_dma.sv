// tb_sre_dma -- self-checking test of the DMA.
// A model memory answers reads one cycle late. Each round programs all four
// channels with random sources and lengths (one of them zero), applies random
// backpressure, and checks every streamed word, its tag, the last flag, the
// word count per channel and the done pulses. Ends with a TB_RESULT line.
//
// Four channels follow the paper; the streaming interface and the random
// traffic are this design's own.
module tb_sre_dma;
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

  logic        cfg_valid = 0, cfg_ready;
  logic [1:0]  cfg_ch = 0;
  logic [13:0] cfg_src = 0, cfg_len = 0;
  logic [15:0] cfg_tag = 0;
  logic        mem_re;
  logic [13:0] mem_raddr;
  logic [31:0] mem_rdata = 0;
  logic        out_valid, out_ready = 0, out_last;
  logic [31:0] out_data;
  logic [15:0] out_tag;
  logic [3:0]  done, busy;

  sre_dma dut (.*);

  logic [31:0] mem [16384];
  initial for (int i = 0; i < 16384; i++) mem[i] = $urandom;
  always_ff @(posedge clk) if (mem_re) mem_rdata <= mem[mem_raddr];

  logic [13:0] src [4], len [4];
  int          got [4], dones [4];
  bit          lastseen [4];

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) if (done[c]) dones[c]++;
    if (out_valid && out_ready) begin
      automatic int c = int'(out_tag[1:0]);
      chk(out_tag[15:2] == 14'h1a5, "tag carried");
      chk(out_data === mem[src[c] + 14'(got[c])], $sformatf("ch %0d word %0d", c, got[c]));
      chk(out_last === (got[c] + 1 == int'(len[c])), "last flag");
      got[c]++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      automatic int zero_ch = round % 4;
      for (int c = 0; c < 4; c++) begin
        got[c] = 0; dones[c] = 0;
        src[c] = 14'($urandom_range(0, 16000));
        len[c] = (c == zero_ch) ? 14'd0 : 14'($urandom_range(1, 60));
      end
      for (int c = 0; c < 4; c++) begin
        @(negedge clk);
        cfg_valid = 1; cfg_ch = 2'(c); cfg_src = src[c]; cfg_len = len[c];
        cfg_tag = {14'h1a5, 2'(c)};
        #1 chk(cfg_ready === 1'b1, "idle channel accepts");
      end
      @(negedge clk); cfg_valid = 0;
      for (int t = 0; t < 1000; t++) begin
        @(negedge clk); out_ready = ($urandom_range(0, 3) != 0);
      end
      out_ready = 0;
      for (int c = 0; c < 4; c++) begin
        chk(got[c] == int'(len[c]), $sformatf("round %0d ch %0d word count", round, c));
        chk(dones[c] == 1, "one done pulse per job");
      end
      chk(busy === 4'b0, "all channels idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
