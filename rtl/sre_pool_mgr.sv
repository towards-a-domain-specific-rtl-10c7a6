// sre_pool_mgr -- resource pool manager of one SRE stage.
//
// Receives scheduled microflows from the stage scheduler and reserves what each
// needs: one compute element (one SHOC slot) and the memory units of its output
// tokens. The pools are "pure": NUM_CE interchangeable compute elements and
// MEM_UNITS interchangeable memory units. A request that does not fit is held
// (req_ready low, alloc_wait high) until a running kernel frees enough; no
// other request can be taken meanwhile.
//
// A compute element remembers the kernel its SHOC image was configured for.
// The pool manager prefers a free element that already holds the requested
// kernel; otherwise it reconfigures a free one, which takes RECONF_CC cycles
// (reconfig pulses when that starts). Then shoc_start pulses for the element
// and run_valid reports the RUN event. The element runs until shoc_done, or
// until its cycle count reaches the microflow's timeout (0 = none): then
// shoc_abort pulses and the completion is flagged as timed out. Completions
// are offered one at a time on done_*; the element and the memory units are
// released when the stage acknowledges (done_ready).
//
// From the paper: compute and memory pools, reservation after scheduling,
// waiting for a completion when resources are short, kernel timers, SHOC
// reconfiguration before the run, "microflow timed out", and the example sizes
// 4 compute / 13 memory units. Own choices: the reconfiguration time, the
// element choice rule, releasing memory when the kernel completes (as the
// formal pool model does) and the abort pulse.
module sre_pool_mgr #(
  parameter int unsigned NUM_CE    = 4,
  parameter int unsigned MEM_UNITS = 13,
  parameter int unsigned IDX_W     = 3,
  parameter int unsigned KID_W     = 16,
  parameter int unsigned RECONF_CC = 16,
  localparam int unsigned MEM_W    = $clog2(MEM_UNITS + 1),
  localparam int unsigned CE_W     = (NUM_CE > 1) ? $clog2(NUM_CE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // request from the scheduler
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [IDX_W-1:0]  req_idx,
  input  logic [KID_W-1:0]  req_kernel,
  input  logic [MEM_W-1:0]  req_mem,
  input  logic [15:0]       req_timeout,
  output logic              alloc_wait,
  output logic              reconfig,
  // SHOC side, one set per compute element
  output logic [NUM_CE-1:0] shoc_start,
  output logic [NUM_CE-1:0] shoc_abort,
  output logic [KID_W-1:0]  shoc_kernel [NUM_CE],
  output logic [IDX_W-1:0]  shoc_idx    [NUM_CE],
  input  logic [NUM_CE-1:0] shoc_done,
  // RUN bit and completion to the stage manager
  output logic              run_valid,
  output logic [IDX_W-1:0]  run_idx,
  output logic              done_valid,
  output logic [IDX_W-1:0]  done_idx,
  output logic              done_timeout,
  input  logic              done_ready,
  output logic [MEM_W-1:0]  mem_free,
  output logic [CE_W:0]     ce_free
);
  typedef enum logic [1:0] {CE_FREE, CE_RECONF, CE_RUN, CE_DONE} ce_st_e;
  localparam int unsigned RC_W = $clog2(RECONF_CC + 2);

  ce_st_e             ce_st    [NUM_CE];
  logic               cfg_ok   [NUM_CE];
  logic [KID_W-1:0]   cfg_kid  [NUM_CE];
  logic [IDX_W-1:0]   ce_idx   [NUM_CE];
  logic [MEM_W-1:0]   ce_mem   [NUM_CE];
  logic [15:0]        ce_tmo   [NUM_CE];
  logic [15:0]        ce_time  [NUM_CE];
  logic [RC_W-1:0]    ce_rc    [NUM_CE];
  logic               ce_tflag [NUM_CE];
  logic [MEM_W-1:0]   mem_q;

  // element choice
  logic            any_free, hit_free;
  logic [CE_W-1:0] free_ce, hit_ce, pick_ce;
  always_comb begin
    any_free = 1'b0; hit_free = 1'b0; free_ce = '0; hit_ce = '0;
    for (int c = NUM_CE - 1; c >= 0; c--)
      if (ce_st[c] == CE_FREE) begin
        any_free = 1'b1; free_ce = CE_W'(c);
        if (cfg_ok[c] && cfg_kid[c] == req_kernel) begin hit_free = 1'b1; hit_ce = CE_W'(c); end
      end
    pick_ce = hit_free ? hit_ce : free_ce;
  end

  logic fits;
  assign fits       = any_free && (req_mem <= mem_q);
  assign req_ready  = fits;
  assign alloc_wait = req_valid && !fits;

  // completion offered
  logic            dn_any;
  logic [CE_W-1:0] dn_ce;
  always_comb begin
    dn_any = 1'b0; dn_ce = '0;
    for (int c = NUM_CE - 1; c >= 0; c--)
      if (ce_st[c] == CE_DONE) begin dn_any = 1'b1; dn_ce = CE_W'(c); end
  end
  assign done_valid   = dn_any;
  assign done_idx     = ce_idx[dn_ce];
  assign done_timeout = ce_tflag[dn_ce];

  always_comb begin
    ce_free = '0;
    for (int c = 0; c < NUM_CE; c++) if (ce_st[c] == CE_FREE) ce_free = ce_free + 1'b1;
  end
  assign mem_free = mem_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_q      <= MEM_W'(MEM_UNITS);
      shoc_start <= '0;
      shoc_abort <= '0;
      run_valid  <= 1'b0;
      run_idx    <= '0;
      reconfig   <= 1'b0;
      for (int c = 0; c < NUM_CE; c++) begin
        ce_st[c] <= CE_FREE; cfg_ok[c] <= 1'b0; cfg_kid[c] <= '0; ce_idx[c] <= '0;
        ce_mem[c] <= '0; ce_tmo[c] <= '0; ce_time[c] <= '0; ce_rc[c] <= '0; ce_tflag[c] <= 1'b0;
        shoc_kernel[c] <= '0; shoc_idx[c] <= '0;
      end
    end else begin
      automatic logic [MEM_W-1:0] m = mem_q;
      automatic logic started = 1'b0;   // one RUN event per cycle
      shoc_start <= '0;
      shoc_abort <= '0;
      run_valid  <= 1'b0;
      reconfig   <= 1'b0;
      for (int c = 0; c < NUM_CE; c++) begin
        case (ce_st[c])
          CE_RECONF: if (ce_rc[c] == '0) begin
              if (!started) begin
                started = 1'b1;
                ce_st[c] <= CE_RUN; ce_time[c] <= '0;
                shoc_start[c] <= 1'b1; run_valid <= 1'b1; run_idx <= ce_idx[c];
              end
            end else ce_rc[c] <= ce_rc[c] - 1'b1;
          CE_RUN: begin
            ce_time[c] <= ce_time[c] + 1'b1;
            if (shoc_done[c]) begin
              ce_st[c] <= CE_DONE; ce_tflag[c] <= 1'b0;
            end else if (ce_tmo[c] != '0 && ce_time[c] + 1'b1 >= ce_tmo[c]) begin
              ce_st[c] <= CE_DONE; ce_tflag[c] <= 1'b1; shoc_abort[c] <= 1'b1;
            end
          end
          default: ;
        endcase
      end
      if (dn_any && done_ready) begin
        ce_st[dn_ce] <= CE_FREE;
        m = m + ce_mem[dn_ce];
      end
      if (req_valid && fits) begin
        ce_idx[pick_ce] <= req_idx;
        ce_mem[pick_ce] <= req_mem;
        ce_tmo[pick_ce] <= req_timeout;
        shoc_kernel[pick_ce] <= req_kernel;
        shoc_idx[pick_ce]    <= req_idx;
        ce_st[pick_ce] <= CE_RECONF;
        if (hit_free) ce_rc[pick_ce] <= '0;             // already configured: start next cycle
        else begin
          ce_rc[pick_ce]   <= RC_W'(RECONF_CC);
          cfg_ok[pick_ce]  <= 1'b1;
          cfg_kid[pick_ce] <= req_kernel;
          reconfig <= 1'b1;
        end
        m = m - req_mem;
      end
      mem_q <= m;
    end
  end

  // resource accounting must stay within the pool
  assert property (@(posedge clk) disable iff (!rst_n) mem_q <= MEM_W'(MEM_UNITS))
    else $error("pool_mgr: memory units above pool size");
endmodule
