// tb_sre_actor_table -- self-checking test of the actor list / token table /
// dependency resolver. A three-microflow graph A -> B -> C, where B also reads
// a DFF input, is loaded for one DFF. Checks: nothing is ready before the DFF
// input arrives; DFF Input Ready makes A ready and B half ready; B and C become
// ready only on their tokens; a token for an unknown microflow is missed; the
// Scheduled/RUN bits follow set_sched/set_run; complete clears them; release
// removes the DFF but a released entry still in flight keeps its slot until it
// completes; a full list rejects a new descriptor. Ends with TB_RESULT.
//
// The table fields and the readiness rule (all inputs present) follow the paper;
// the graph, tags and sizes are this testbench's own. Timing: inputs change on
// the falling edge, results are sampled after the next rising edge.
module tb_sre_actor_table;
  import sre_pkg::*;
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

  logic              add_valid = 0, add_full;
  logic [15:0]       add_gtag = 0;
  mflow_desc_t       add_desc = '0;
  logic [2:0]        add_idx;
  logic              dff_in_valid = 0, token_valid = 0, token_miss, release_valid = 0;
  logic [15:0]       dff_in_gtag = 0, token_gtag = 0, release_gtag = 0;
  logic [7:0]        token_ltag = 0;
  logic [1:0]        token_port = 0;
  logic              rq_valid, rq_ready = 0;
  logic [2:0]        rq_idx;
  logic              set_sched = 0, set_run = 0, complete = 0;
  logic [2:0]        set_sched_idx = 0, set_run_idx = 0, complete_idx = 0;
  logic [2:0]        rd_idx [3] = '{default: '0};
  logic [15:0]       rd_gtag [3];
  mflow_desc_t       rd_desc [3];
  logic [7:0]        st_valid, st_rdy, st_sched, st_run;

  sre_actor_table dut (.*);

  function automatic mflow_desc_t mk(int ltag, int kid, int nin, int src0, int src1);
    mflow_desc_t d = '0;
    d.ltag = 8'(ltag); d.kernel_id = 16'(kid); d.num_ins = 3'(nin); d.num_outs = 3'd1;
    d.ins[0].src_ltag = 8'(src0); d.ins[1].src_ltag = 8'(src1);
    d.timeout = 16'(1000 + ltag);
    return d;
  endfunction

  task automatic add(int g, mflow_desc_t d, int exp_idx);
    @(negedge clk); add_valid = 1; add_gtag = 16'(g); add_desc = d;
    #1 chk(add_idx == 3'(exp_idx) && !add_full, $sformatf("descriptor to slot %0d", exp_idx));
    @(negedge clk); add_valid = 0;
  endtask
  task automatic token(int g, int l, int p);
    @(negedge clk); token_valid = 1; token_gtag = 16'(g); token_ltag = 8'(l); token_port = 2'(p);
    @(negedge clk); token_valid = 0;
  endtask
  task automatic take(int exp_idx, string what);
    repeat (2) @(negedge clk);
    chk(rq_valid === 1'b1 && rq_idx == 3'(exp_idx), what);
    rq_ready = 1; @(negedge clk); rq_ready = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    add(16'h77, mk(1, 16'hA, 1, 0, 0), 0);          // A: reads DFF input
    add(16'h77, mk(2, 16'hB, 2, 1, 0), 1);          // B: reads A and a DFF input
    add(16'h77, mk(3, 16'hC, 1, 2, 0), 2);          // C: reads B
    repeat (3) @(negedge clk);
    chk(rq_valid === 1'b0 && st_rdy == 8'h00, "nothing ready before input");
    rd_idx[0] = 3'd1;
    #1 chk(rd_gtag[0] == 16'h77 && rd_desc[0].kernel_id == 16'hB, "read port returns entry");
    // DFF input ready
    @(negedge clk); dff_in_valid = 1; dff_in_gtag = 16'h77;
    @(negedge clk); dff_in_valid = 0;
    take(0, "A ready after DFF input");
    repeat (3) @(negedge clk);
    chk(rq_valid === 1'b0, "B not ready with one of two arcs");
    // state bits
    @(negedge clk); set_sched = 1; set_sched_idx = 3'd0;
    @(negedge clk); set_sched = 0; set_run = 1; set_run_idx = 3'd0;
    @(negedge clk); set_run = 0;
    chk(st_sched[0] && st_run[0] && st_rdy[0], "Rdy, Scheduled, RUN set");
    // A completes: its token goes to B port 0
    @(negedge clk); complete = 1; complete_idx = 3'd0;
    @(negedge clk); complete = 0;
    chk(!st_rdy[0] && !st_sched[0] && !st_run[0], "complete clears the bits");
    token(16'h77, 2, 0);
    take(1, "B ready after its token");
    // unknown microflow
    @(negedge clk); token_valid = 1; token_gtag = 16'h77; token_ltag = 8'd9; token_port = 0;
    #1 chk(token_miss === 1'b1, "token to unknown microflow missed");
    @(negedge clk); token_valid = 0;
    #1 chk(token_miss === 1'b0, "miss only with a token");
    token(16'h77, 3, 0);
    take(2, "C ready after its token");
    repeat (3) @(negedge clk);
    chk(rq_valid === 1'b0, "A not re-offered without new input");
    // B completes; C (slot 2) is still queued when the DFF is released
    @(negedge clk); complete = 1; complete_idx = 3'd1;
    @(negedge clk); complete = 0;
    @(negedge clk); release_valid = 1; release_gtag = 16'h77;
    @(negedge clk); release_valid = 0;
    chk(st_valid == 8'h00, "release frees all entries");
    // fill the list: slot 2 stays taken until C completes
    for (int i = 0; i < 7; i++) add(16'h100 + i, mk(1, 1, 1, 0, 0), (i < 2) ? i : i + 1);
    @(negedge clk); add_valid = 1; add_gtag = 16'h200; add_desc = mk(1, 1, 1, 0, 0);
    #1 chk(add_full === 1'b1, "full list rejects a descriptor");
    @(negedge clk); add_valid = 0;
    chk(st_valid == 8'hFB, "seven entries valid while released C is in flight");
    @(negedge clk); complete = 1; complete_idx = 3'd2;
    @(negedge clk); complete = 0;
    add(16'h107, mk(1, 1, 1, 0, 0), 2);
    @(negedge clk);
    chk(st_valid == 8'hFF, "eight entries valid after C completes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
