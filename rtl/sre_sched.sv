// sre_sched -- ready queue and run-time scheduler of one SRE stage.
//
// Microflows whose inputs are all ready are pushed into a queue of DEPTH
// entries together with an absolute deadline. The scheduler picks one entry,
// spends SCHED_CC cycles on it and then offers it to the pool manager
// (out_valid/out_ready); while the pool manager has not taken it, nothing else
// is scheduled (out_valid rises SCHED_CC cycles after the cycle the entry
// is picked; SCHED_CC must be at least 2). With POLICY = 0 the oldest entry is picked (first come first
// served), with POLICY = 1 the entry with the earliest deadline (earliest
// deadline first; ties go to the older entry). The stage is never back-pressured:
// a push into a full queue is dropped and flagged on overflow for one cycle,
// so the stage can report it.
//
// From the paper: the queue, its overflow check, FCFS as the current policy,
// EDF as the named alternative, and 123 cycles per scheduled kernel. Own choices:
// the queue depth, spending the scheduling time only when an entry is taken out
// (the formal model also charges it when a kernel is pushed), and the 16-bit
// wrap-free deadline compare, which assumes deadlines less than 2^15 cycles apart.
module sre_sched #(
  parameter int unsigned DEPTH    = 8,
  parameter int unsigned IDX_W    = 3,
  parameter int unsigned SCHED_CC = 123,
  parameter bit          POLICY   = 1'b0   // 0 = FCFS, 1 = EDF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [IDX_W-1:0] push_idx,
  input  logic [15:0]      push_deadline,
  output logic             overflow,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  input  logic             out_ready,
  output logic [$clog2(DEPTH):0] level
);
  localparam int unsigned CNT_W = $clog2(SCHED_CC + 1);

  // queue kept in arrival order: entry 0 is the oldest
  logic [IDX_W-1:0] q_idx [DEPTH];
  logic [15:0]      q_dl  [DEPTH];
  logic [$clog2(DEPTH):0] cnt;

  typedef enum logic [1:0] {S_IDLE, S_WORK, S_OFFER} st_e;
  st_e st;
  logic [CNT_W-1:0] timer;
  logic [IDX_W-1:0] cur;

  // choice of entry
  logic [$clog2(DEPTH)-1:0] pick;
  always_comb begin
    pick = '0;
    if (POLICY)
      for (int i = 1; i < DEPTH; i++)
        if (i < int'(cnt) && $signed(q_dl[i] - q_dl[pick]) < 0)
          pick = ($clog2(DEPTH))'(i);
  end

  logic take;
  assign take = (st == S_IDLE) && (cnt != '0);
  assign overflow = push && (cnt == ($clog2(DEPTH)+1)'(DEPTH)) && !take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      st    <= S_IDLE;
      timer <= '0;
      cur   <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        q_idx[i] <= '0;
        q_dl[i]  <= '0;
      end
    end else begin
      automatic logic [$clog2(DEPTH):0] n = cnt;
      // remove the picked entry and close the gap
      if (take) begin
        cur <= q_idx[pick];
        for (int i = 0; i < DEPTH - 1; i++)
          if (i >= int'(pick)) begin
            q_idx[i] <= q_idx[i+1];
            q_dl[i]  <= q_dl[i+1];
          end
        n = n - 1'b1;
      end
      if (push && !overflow) begin
        q_idx[($clog2(DEPTH))'(n)] <= push_idx;
        q_dl[($clog2(DEPTH))'(n)]  <= push_deadline;
        n = n + 1'b1;
      end
      cnt <= n;
      case (st)
        S_IDLE:  if (take) begin st <= S_WORK; timer <= CNT_W'(SCHED_CC - 2); end
        S_WORK:  if (timer == '0) st <= S_OFFER; else timer <= timer - 1'b1;
        S_OFFER: if (out_ready) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign out_valid = (st == S_OFFER);
  assign out_idx   = cur;
  assign level     = cnt;

  assert property (@(posedge clk) disable iff (!rst_n) cnt <= ($clog2(DEPTH)+1)'(DEPTH))
    else $error("sched: queue count out of range");
endmodule
