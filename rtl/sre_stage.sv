// sre_stage -- one stage of the SRE: stage manager around the actor list and
// token table (sre_actor_table), the ready queue and scheduler (sre_sched) and
// the resource pool manager (sre_pool_mgr). The compute engines (SHOC) are
// outside; this module drives them through one start/abort/done set per
// compute element.
//
// Control messages taken from the crossbar (one per cycle):
//   MFLOW_DESC  -- store the microflow in the actor list (full: ERROR overflow)
//   PTR_DESC    -- remember where a DFF's input (arg) and output (arg2) data
//                  sit in the ingress/egress buffer
//   DFF_IN_RDY  -- all DFF inputs arrived: arcs fed by the DFF become ready
//   TOKEN_RDY   -- a microflow in another stage produced a token for
//                  <gtag, local tag arg, in-arc port>; no match: ERROR 3
//   DFF_RELEASE -- forget every entry and pointer of the DFF
// A ready microflow goes to the scheduler with deadline = now + its relative
// deadline; the scheduled one goes to the pool manager (Scheduled bit), then to
// a SHOC (RUN bit). When it completes, the stage manager walks its output arcs
// one per cycle: an arc to local tag 0 sends DFF_OUT_RDY (DFF output port) to
// the packet processor, an arc to a microflow of this stage is an internal
// event straight into the actor table, an arc to another stage sends TOKEN_RDY
// to that stage. Then it clears Rdy/Scheduled/RUN and frees the pool. A timed
// out microflow sends ERROR 4 instead of tokens. A microflow whose DFF was
// released (dropped) while it was queued or running still runs to its end,
// but its completion sends nothing. Outgoing messages wait in a
// small outbox; incoming messages stall only while it is full.
//
// From the paper: the message set, the readiness rule, the scheduler/pool
// manager/SHOC sequence, the bit life cycle, internal events within a stage and
// control messages across stages, and the two stage error codes. Own choices:
// sizes (actors, outbox, pointer table), the memory need of a microflow taken
// as the sum of its output token sizes, and one arc per cycle.
module sre_stage
  import sre_pkg::*;
#(
  parameter int unsigned STAGE_ID   = 0,
  parameter int unsigned NUM_ACTORS = 8,
  parameter int unsigned NUM_CE     = 4,
  parameter int unsigned MEM_UNITS  = 13,
  parameter int unsigned SCHED_CC   = 123,
  parameter bit          POLICY     = 1'b0,
  parameter int unsigned RECONF_CC  = 16,
  parameter int unsigned NUM_PTR    = 4,
  localparam int unsigned IDX_W     = $clog2(NUM_ACTORS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TIME_W-1:0]  now,
  // control crossbar
  input  logic               in_valid,
  output logic               in_ready,
  input  ctrl_msg_t          in_msg,
  output logic               out_valid,
  input  logic               out_ready,
  output ctrl_msg_t          out_msg,
  // SHOC compute elements
  output logic [NUM_CE-1:0]  shoc_start,
  output logic [NUM_CE-1:0]  shoc_abort,
  output logic [KID_W-1:0]   shoc_kernel [NUM_CE],
  output logic [GTAG_W-1:0]  shoc_gtag   [NUM_CE],
  output logic [LTAG_W-1:0]  shoc_ltag   [NUM_CE],
  output logic [15:0]        shoc_in_ptr [NUM_CE],
  output logic [15:0]        shoc_out_ptr[NUM_CE],
  input  logic [NUM_CE-1:0]  shoc_done,
  // events, for observation
  output logic               ev_alloc_wait,
  output logic               ev_reconfig,
  output logic               ev_sched_overflow,
  output logic               ev_local_token,
  output logic               ev_remote_token
);
  localparam int unsigned MEM_W = $clog2(MEM_UNITS + 1);
  localparam logic [NODE_W-1:0] MY_NODE = NODE_W'(NODE_ST0 + STAGE_ID);

  // ------------------------------------------------------------ outbox
  localparam int unsigned OB_DEPTH = 4;
  ctrl_msg_t  ob_q [OB_DEPTH];
  logic [1:0] ob_rd, ob_wr;
  logic [2:0] ob_cnt;
  logic       ob_push;
  ctrl_msg_t  ob_msg;
  logic       ob_full;
  assign ob_full   = (ob_cnt == 3'(OB_DEPTH));
  assign out_valid = (ob_cnt != '0);
  assign out_msg   = ob_q[ob_rd];

  // ------------------------------------------------------------ actor table
  logic              at_add, at_full, at_dffin, at_tok, at_miss, at_rel;
  logic [IDX_W-1:0]  at_add_idx;
  logic [GTAG_W-1:0] at_tok_gtag;
  logic [LTAG_W-1:0] at_tok_ltag;
  logic [ARC_W-1:0]  at_tok_port;
  logic              rq_valid;
  logic [IDX_W-1:0]  rq_idx;
  logic              set_sched, set_run, complete;
  logic [IDX_W-1:0]  set_sched_idx, set_run_idx, complete_idx;
  logic [IDX_W-1:0]  rd_idx  [3];
  logic [GTAG_W-1:0] rd_gtag [3];
  mflow_desc_t       rd_desc [3];
  logic [NUM_ACTORS-1:0] st_valid, st_rdy, st_sched, st_run;

  sre_actor_table #(.NUM_ACTORS(NUM_ACTORS), .NUM_RD(3)) u_at (
    .clk, .rst_n,
    .add_valid(at_add), .add_gtag(in_msg.gtag), .add_desc(in_msg.desc), .add_full(at_full),
    .add_idx(at_add_idx),
    .dff_in_valid(at_dffin), .dff_in_gtag(in_msg.gtag),
    .token_valid(at_tok), .token_gtag(at_tok_gtag), .token_ltag(at_tok_ltag),
    .token_port(at_tok_port), .token_miss(at_miss),
    .release_valid(at_rel), .release_gtag(in_msg.gtag),
    .rq_valid, .rq_idx, .rq_ready(1'b1),
    .set_sched, .set_sched_idx, .set_run, .set_run_idx, .complete, .complete_idx,
    .rd_idx, .rd_gtag, .rd_desc,
    .st_valid, .st_rdy, .st_sched, .st_run
  );

  // ------------------------------------------------------------ scheduler
  logic             sc_valid, sc_ready;
  logic [IDX_W-1:0] sc_idx;
  logic [$clog2(8):0] sc_level;
  assign rd_idx[0] = rq_idx;
  sre_sched #(.DEPTH(8), .IDX_W(IDX_W), .SCHED_CC(SCHED_CC), .POLICY(POLICY)) u_sched (
    .clk, .rst_n,
    .push(rq_valid), .push_idx(rq_idx), .push_deadline(now[15:0] + rd_desc[0].deadline),
    .overflow(ev_sched_overflow),
    .out_valid(sc_valid), .out_idx(sc_idx), .out_ready(sc_ready), .level(sc_level)
  );

  // ------------------------------------------------------------ pool manager
  assign rd_idx[1] = sc_idx;
  logic [MEM_W-1:0] req_mem;
  always_comb begin
    automatic int unsigned sum = 0;
    for (int a = 0; a < MAX_ARCS; a++)
      if (a < int'(rd_desc[1].num_outs)) sum += int'(rd_desc[1].outs[a].token_size);
    req_mem = (sum > MEM_UNITS) ? MEM_W'(MEM_UNITS) : MEM_W'(sum);
  end

  logic             pm_run;
  logic [IDX_W-1:0] pm_run_idx;
  logic             dn_valid, dn_tmo, dn_ready;
  logic [IDX_W-1:0] dn_idx;
  logic [IDX_W-1:0] ce_idx [NUM_CE];
  logic [MEM_W-1:0] mem_free;
  logic [$clog2(NUM_CE > 1 ? NUM_CE : 2):0] ce_free;

  sre_pool_mgr #(.NUM_CE(NUM_CE), .MEM_UNITS(MEM_UNITS), .IDX_W(IDX_W), .KID_W(KID_W),
                 .RECONF_CC(RECONF_CC)) u_pool (
    .clk, .rst_n,
    .req_valid(sc_valid), .req_ready(sc_ready), .req_idx(sc_idx),
    .req_kernel(rd_desc[1].kernel_id), .req_mem(req_mem), .req_timeout(rd_desc[1].timeout),
    .alloc_wait(ev_alloc_wait), .reconfig(ev_reconfig),
    .shoc_start, .shoc_abort, .shoc_kernel, .shoc_idx(ce_idx), .shoc_done,
    .run_valid(pm_run), .run_idx(pm_run_idx),
    .done_valid(dn_valid), .done_idx(dn_idx), .done_timeout(dn_tmo), .done_ready(dn_ready),
    .mem_free, .ce_free
  );
  assign set_sched     = sc_valid && sc_ready;
  assign set_sched_idx = sc_idx;
  assign set_run       = pm_run;
  assign set_run_idx   = pm_run_idx;

  // ------------------------------------------------------------ pointer table
  logic              p_valid [NUM_PTR];
  logic [GTAG_W-1:0] p_gtag  [NUM_PTR];
  logic [15:0]       p_in    [NUM_PTR];
  logic [15:0]       p_out   [NUM_PTR];
  logic [GTAG_W-1:0] slot_gtag [NUM_ACTORS];
  logic [LTAG_W-1:0] slot_ltag [NUM_ACTORS];

  for (genvar c = 0; c < NUM_CE; c++) begin : g_ce
    always_comb begin
      shoc_gtag[c]    = slot_gtag[ce_idx[c]];
      shoc_ltag[c]    = slot_ltag[ce_idx[c]];
      shoc_in_ptr[c]  = '0;
      shoc_out_ptr[c] = '0;
      for (int p = 0; p < NUM_PTR; p++)
        if (p_valid[p] && p_gtag[p] == shoc_gtag[c]) begin
          shoc_in_ptr[c]  = p_in[p];
          shoc_out_ptr[c] = p_out[p];
        end
    end
  end

  logic            p_have_free;
  int unsigned     p_free;
  always_comb begin
    p_have_free = 1'b0; p_free = 0;
    for (int p = NUM_PTR - 1; p >= 0; p--)
      if (!p_valid[p]) begin p_have_free = 1'b1; p_free = p; end
  end

  // ------------------------------------------------------------ completion walker
  typedef enum logic [1:0] {W_IDLE, W_ARCS, W_DONE} walk_e;
  walk_e          w_st;
  logic [ARC_W:0] w_arc;
  assign rd_idx[2] = dn_idx;
  mflow_desc_t w_desc;
  logic [GTAG_W-1:0] w_gtag;
  assign w_desc = rd_desc[2];
  assign w_gtag = rd_gtag[2];
  out_arc_t w_out;
  assign w_out = w_desc.outs[w_arc[ARC_W-1:0]];

  logic w_local;   // this cycle the walker drives the actor table's token port
  logic w_emit;    // this cycle the walker pushes a message
  ctrl_msg_t w_msg;
  always_comb begin
    w_local = 1'b0;
    w_emit  = 1'b0;
    w_msg   = '0;
    if (w_st == W_ARCS && dn_valid && st_valid[dn_idx]) begin
      if (dn_tmo) begin
        w_msg = msg_init(MY_NODE, NODE_PP, MT_ERROR, w_gtag);
        w_msg.arg    = ERR_MFLOW_TIMEOUT;
        w_msg.arg2   = 16'(w_desc.ltag);
        w_msg.time_v = now;
        w_emit = 1'b1;
      end else if (w_arc < w_desc.num_outs) begin
        if (w_out.dest_ltag == '0) begin
          w_msg = msg_init(MY_NODE, NODE_PP, MT_DFF_OUT_RDY, w_gtag);
          w_msg.port = w_out.dff_port;
          w_emit = 1'b1;
        end else if (int'(w_out.out_stage) == STAGE_ID) begin
          w_local = 1'b1;
        end else begin
          w_msg = msg_init(MY_NODE, NODE_W'(NODE_ST0 + w_out.out_stage), MT_TOKEN_RDY, w_gtag);
          w_msg.arg  = 16'(w_out.dest_ltag);
          w_msg.arg2 = 16'(w_desc.ltag);
          w_msg.port = PORT_W'(w_out.remote_in_port);
          w_emit = 1'b1;
        end
      end
    end
  end
  logic w_step;   // the current arc has been handled
  assign w_step = (w_st == W_ARCS) && dn_valid &&
                  ((w_emit && !ob_full) || w_local || !st_valid[dn_idx] ||
                   (!dn_tmo && w_arc >= w_desc.num_outs));
  assign dn_ready     = (w_st == W_DONE);
  assign complete     = (w_st == W_DONE);
  assign complete_idx = dn_idx;
  assign ev_local_token  = w_local;
  assign ev_remote_token = w_emit && !ob_full && (w_msg.mtype == MT_TOKEN_RDY);

  // ------------------------------------------------------------ incoming messages
  logic      err_push;
  ctrl_msg_t err_msg;
  // the actor table's token port is shared: the walker has priority
  assign in_ready = !ob_full && !w_local && !(w_emit && w_st == W_ARCS);
  logic take;
  assign take = in_valid && in_ready;

  always_comb begin
    at_add = 1'b0; at_dffin = 1'b0; at_tok = 1'b0; at_rel = 1'b0;
    at_tok_gtag = in_msg.gtag;
    at_tok_ltag = LTAG_W'(in_msg.arg);
    at_tok_port = ARC_W'(in_msg.port);
    if (w_local) begin
      at_tok      = 1'b1;
      at_tok_gtag = w_gtag;
      at_tok_ltag = w_out.dest_ltag;
      at_tok_port = w_out.remote_in_port;
    end else if (take) begin
      case (in_msg.mtype)
        MT_MFLOW_DESC:  at_add   = 1'b1;
        MT_DFF_IN_RDY:  at_dffin = 1'b1;
        MT_TOKEN_RDY:   at_tok   = 1'b1;
        MT_DFF_RELEASE: at_rel   = 1'b1;
        default: ;
      endcase
    end
    err_push = 1'b0;
    err_msg  = msg_init(MY_NODE, NODE_PP, MT_ERROR, in_msg.gtag);
    err_msg.time_v = now;
    if (take && in_msg.mtype == MT_MFLOW_DESC && at_full) begin
      err_push = 1'b1; err_msg.arg = ERR_OVERFLOW;
    end else if (take && in_msg.mtype == MT_TOKEN_RDY && at_miss) begin
      err_push = 1'b1; err_msg.arg = ERR_MFLOW_NOT_FOUND; err_msg.arg2 = in_msg.arg;
    end else if (ev_sched_overflow && !take && !ob_full) begin
      err_push = 1'b1; err_msg.arg = ERR_OVERFLOW;
    end
  end

  // walker messages use the outbox in cycles the message side is stalled
  always_comb begin
    ob_push = 1'b0;
    ob_msg  = w_msg;
    if (w_emit && !ob_full) begin ob_push = 1'b1; ob_msg = w_msg; end
    else if (err_push)      begin ob_push = 1'b1; ob_msg = err_msg; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_rd <= '0; ob_wr <= '0; ob_cnt <= '0;
      w_st <= W_IDLE; w_arc <= '0;
      for (int i = 0; i < OB_DEPTH; i++) ob_q[i] <= '0;
      for (int p = 0; p < NUM_PTR; p++) begin
        p_valid[p] <= 1'b0; p_gtag[p] <= '0; p_in[p] <= '0; p_out[p] <= '0;
      end
      for (int i = 0; i < NUM_ACTORS; i++) begin slot_gtag[i] <= '0; slot_ltag[i] <= '0; end
    end else begin
      // outbox
      if (ob_push) begin ob_q[ob_wr] <= ob_msg; ob_wr <= ob_wr + 1'b1; end
      if (out_valid && out_ready) ob_rd <= ob_rd + 1'b1;
      ob_cnt <= ob_cnt + 3'(ob_push) - 3'(out_valid && out_ready);
      // walker
      case (w_st)
        W_IDLE: if (dn_valid) begin w_st <= W_ARCS; w_arc <= '0; end
        W_ARCS: if (w_step) begin
                  if (dn_tmo || !st_valid[dn_idx] || w_arc + 1'b1 >= w_desc.num_outs) w_st <= W_DONE;
                  else w_arc <= w_arc + 1'b1;
                end
        W_DONE: w_st <= W_IDLE;
        default: w_st <= W_IDLE;
      endcase
      // tables
      if (at_add && !at_full) begin
        slot_gtag[at_add_idx] <= in_msg.gtag;
        slot_ltag[at_add_idx] <= in_msg.desc.ltag;
      end
      if (take && in_msg.mtype == MT_PTR_DESC && p_have_free) begin
        p_valid[p_free] <= 1'b1;
        p_gtag[p_free]  <= in_msg.gtag;
        p_in[p_free]    <= in_msg.arg;
        p_out[p_free]   <= in_msg.arg2;
      end
      if (at_rel)
        for (int p = 0; p < NUM_PTR; p++)
          if (p_valid[p] && p_gtag[p] == in_msg.gtag) p_valid[p] <= 1'b0;
    end
  end

  // a scheduler overflow and an error from the message side never meet an
  // unhandled cycle: overflow is reported when no message is taken
  assert property (@(posedge clk) disable iff (!rst_n) ob_push |-> !ob_full)
    else $error("stage: outbox overflow");
endmodule
