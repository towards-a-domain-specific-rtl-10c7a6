// sre_director -- top-level controller of the SRE: admission policy and
// microflow dispatch.
//
// For every DFF request (DCT_REQ from the packet processor: global tag and
// container type) the director
//   1. queues it (DQ_DEPTH entries; a full queue drops the request and reports
//      ERROR overflow; only while that report waits for the outbox is the
//      crossbar back-pressured, so no report is lost);
//   2. looks the container type up in its container table; unknown type:
//      ERROR 1 "DCT not found";
//   3. returns a DFF descriptor (input words, output words, number of DFF
//      outputs) so the packet processor can start storing input data;
//   4. spends DIR_CC cycles of processing on the DFF, then plays "Tetris": it
//      tries the container's feature vectors in order. A feature vector gives
//      the peak memory each logical stage of the container needs and a rotation
//      that maps logical stages onto physical ones. The first vector whose needs
//      fit next to the memory already reserved on every physical stage
//      (STAGE_MEM units per stage), while fewer than DFF_MAX_PAR DFFs are in
//      flight, is taken; none fits: ERROR 5 "no mapping" and the DFF is dropped;
//   5. reserves the memory, sends MAPPING_RDY, reads the container's microflow
//      descriptors one by one from graph memory (1-cycle read latency), appends
//      the global tag, rewrites logical stage numbers into physical ones and
//      sends each to its stage, then sends MFLOW_RDY.
// DFF_RELEASE returns the reservation of that DFF. The container table is
// written through the cfg_* port (the long-term configuration path).
//
// From the paper: the step order of the request sequence chart (DCT request,
// DFF descriptor, Tetris, mapping ready, microflow descriptors, microflow
// ready), the feature-vector admission check against the current load, the
// 100-cycle director processing time, the in-flight limit and the queue with
// its overflow check. Own choices: the feature vector format, first-fit
// selection, a memory-only load measure, queue and table sizes, error codes 5
// and 6.
module sre_director
  import sre_pkg::*;
#(
  parameter int unsigned NUM_STAGES  = 3,
  parameter int unsigned NUM_CONT    = 4,
  parameter int unsigned DFF_MAX_PAR = 4,
  parameter int unsigned DQ_DEPTH    = 4,
  parameter int unsigned DIR_CC      = 100,
  parameter int unsigned STAGE_MEM   = 13,
  parameter int unsigned GM_AW       = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TIME_W-1:0] now,
  // control crossbar
  input  logic              in_valid,
  output logic              in_ready,
  input  ctrl_msg_t         in_msg,
  output logic              out_valid,
  input  logic              out_ready,
  output ctrl_msg_t         out_msg,
  // container table configuration
  input  logic              cfg_we,
  input  logic [$clog2(NUM_CONT)-1:0] cfg_idx,
  input  container_t        cfg_data,
  // graph memory read port
  output logic              gm_re,
  output logic [GM_AW-1:0]  gm_addr,
  input  mflow_desc_t       gm_rdata,
  // events and status
  output logic              ev_accept,
  output logic              ev_reject,
  output logic              ev_dct_miss,
  output logic              ev_queue_overflow,
  output logic [$clog2(DFF_MAX_PAR):0] inflight
);
  localparam int unsigned LOAD_W = $clog2(STAGE_MEM + 1) + 2;
  localparam int unsigned CNT_W  = $clog2(DIR_CC + 1);
  localparam int unsigned QW     = $clog2(DQ_DEPTH);

  // ---------------------------------------------------------------- tables
  container_t ct [NUM_CONT];
  logic                 f_valid [DFF_MAX_PAR];
  logic [GTAG_W-1:0]    f_gtag  [DFF_MAX_PAR];
  logic [LOAD_W-1:0]    f_res   [DFF_MAX_PAR][NUM_STAGES];
  logic [LOAD_W-1:0]    load    [NUM_STAGES];

  // ---------------------------------------------------------------- queue
  logic [GTAG_W-1:0]  dq_gtag [DQ_DEPTH];
  logic [DTYPE_W-1:0] dq_type [DQ_DEPTH];
  logic [QW-1:0]      dq_rd, dq_wr;
  logic [QW:0]        dq_cnt;

  // ---------------------------------------------------------------- outbox
  logic      ob_push, ob_full;
  ctrl_msg_t ob_msg;
  sre_msg_fifo #(.DEPTH(4)) u_ob (
    .clk, .rst_n, .push(ob_push), .push_msg(ob_msg), .full(ob_full),
    .out_valid, .out_ready, .out_msg
  );

  // ---------------------------------------------------------------- FSM
  typedef enum logic [2:0] {D_IDLE, D_LOOKUP, D_DESC, D_WORK, D_TETRIS, D_LOAD, D_SEND, D_MFRDY} dst_e;
  dst_e                 st;
  logic [GTAG_W-1:0]    cur_gtag;
  logic [DTYPE_W-1:0]   cur_type;
  container_t           cur_ct;
  logic [CNT_W-1:0]     timer;
  logic [7:0]           mf_i;
  logic [STAGE_W-1:0]   cur_shift;
  mflow_desc_t          send_desc;   // graph memory output with physical stages

  // container lookup
  logic ct_hit;
  int unsigned ct_idx;
  always_comb begin
    ct_hit = 1'b0; ct_idx = 0;
    for (int c = NUM_CONT - 1; c >= 0; c--)
      if (ct[c].valid && ct[c].dff_type == cur_type) begin ct_hit = 1'b1; ct_idx = c; end
  end

  // Tetris: physical need of every feature vector, first fit
  logic                 fv_fit;
  int unsigned          fv_sel;
  logic [LOAD_W-1:0]    fv_need [NUM_FV][NUM_STAGES];
  always_comb begin
    fv_fit = 1'b0; fv_sel = 0;
    for (int f = 0; f < NUM_FV; f++) begin
      for (int p = 0; p < NUM_STAGES; p++) fv_need[f][p] = '0;
      for (int l = 0; l < NUM_STAGES; l++) begin
        int p;
        p = (l + int'(cur_ct.fv[f].shift)) % NUM_STAGES;
        fv_need[f][p] = fv_need[f][p] + LOAD_W'(cur_ct.fv[f].mem_units[l]);
      end
    end
    for (int f = NUM_FV - 1; f >= 0; f--) begin
      logic ok;
      ok = 1'b1;
      for (int p = 0; p < NUM_STAGES; p++)
        if (int'(load[p]) + int'(fv_need[f][p]) > STAGE_MEM) ok = 1'b0;
      if (ok) begin fv_fit = 1'b1; fv_sel = f; end
    end
  end

  logic have_slot;
  int unsigned slot;
  always_comb begin
    have_slot = 1'b0; slot = 0;
    for (int i = DFF_MAX_PAR - 1; i >= 0; i--)
      if (!f_valid[i]) begin have_slot = 1'b1; slot = i; end
  end

  function automatic logic [STAGE_W-1:0] remap(logic [STAGE_W-1:0] s, logic [STAGE_W-1:0] sh);
    return STAGE_W'((int'(s) + int'(sh)) % NUM_STAGES);
  endfunction

  always_comb begin
    send_desc = gm_rdata;
    send_desc.stage = remap(gm_rdata.stage, cur_shift);
    for (int a = 0; a < MAX_ARCS; a++) begin
      send_desc.ins[a].in_stage   = remap(gm_rdata.ins[a].in_stage, cur_shift);
      send_desc.outs[a].out_stage = remap(gm_rdata.outs[a].out_stage, cur_shift);
    end
  end

  // ---------------------------------------------------------------- input side
  // pending queue-overflow error waits for the outbox
  logic              ovf_pend;
  logic [GTAG_W-1:0] ovf_gtag;
  logic in_dct, in_rel;
  // the director only back-pressures while an overflow report is still waiting
  assign in_ready = !ovf_pend;
  assign in_dct = in_valid && in_ready && in_msg.mtype == MT_DCT_REQ;
  assign in_rel = in_valid && in_ready && in_msg.mtype == MT_DFF_RELEASE;
  logic q_full;
  assign q_full = (dq_cnt == (QW+1)'(DQ_DEPTH));
  assign ev_queue_overflow = in_dct && q_full;


  // ---------------------------------------------------------------- outbox mux
  logic fsm_push;
  ctrl_msg_t fsm_msg;
  always_comb begin
    fsm_push = 1'b0;
    fsm_msg  = msg_init(NODE_DIR, NODE_PP, MT_NONE, cur_gtag);
    fsm_msg.time_v = now;
    case (st)
      D_LOOKUP: begin
        fsm_push = 1'b1;
        if (!ct_hit) begin
          fsm_msg.mtype = MT_ERROR; fsm_msg.arg = ERR_DCT_NOT_FOUND;
        end else begin
          fsm_msg.mtype = MT_DFF_DESC;
          fsm_msg.arg   = 16'(ct[ct_idx].in_words);
          fsm_msg.arg2  = 16'(ct[ct_idx].out_words);
          fsm_msg.port  = ct[ct_idx].num_outputs;
        end
      end
      D_TETRIS: begin
        fsm_push = 1'b1;
        if (fv_fit && have_slot) fsm_msg.mtype = MT_MAPPING_RDY;
        else begin fsm_msg.mtype = MT_ERROR; fsm_msg.arg = ERR_NO_MAPPING; end
      end
      D_SEND: begin
        fsm_push = 1'b1;
        fsm_msg.mtype = MT_MFLOW_DESC;
        fsm_msg.dst   = NODE_W'(NODE_ST0 + send_desc.stage);
        fsm_msg.desc  = send_desc;
      end
      D_MFRDY: begin
        fsm_push = 1'b1;
        fsm_msg.mtype = MT_MFLOW_RDY;
      end
      default: ;
    endcase
  end
  logic fsm_go;   // the FSM's message goes out this cycle
  assign fsm_go  = fsm_push && !ob_full && !ovf_pend;
  always_comb begin
    ob_push = 1'b0;
    ob_msg  = fsm_msg;
    if (ovf_pend && !ob_full) begin
      ob_push = 1'b1;
      ob_msg  = msg_init(NODE_DIR, NODE_PP, MT_ERROR, ovf_gtag);
      ob_msg.arg = ERR_OVERFLOW;
      ob_msg.time_v = now;
    end else if (fsm_go) ob_push = 1'b1;
  end

  assign ev_accept   = fsm_go && st == D_TETRIS && fv_fit && have_slot;
  assign ev_reject   = fsm_go && st == D_TETRIS && !(fv_fit && have_slot);
  assign ev_dct_miss = fsm_go && st == D_LOOKUP && !ct_hit;
  assign gm_re   = (st == D_LOAD);
  assign gm_addr = GM_AW'(cur_ct.desc_base + mf_i);

  always_comb begin
    inflight = '0;
    for (int i = 0; i < DFF_MAX_PAR; i++) if (f_valid[i]) inflight = inflight + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= D_IDLE; cur_gtag <= '0; cur_type <= '0; cur_ct <= '0; timer <= '0; mf_i <= '0;
      cur_shift <= '0;
      dq_rd <= '0; dq_wr <= '0; dq_cnt <= '0;
      ovf_pend <= 1'b0; ovf_gtag <= '0;
      for (int c = 0; c < NUM_CONT; c++) ct[c] <= '0;
      for (int i = 0; i < DQ_DEPTH; i++) begin dq_gtag[i] <= '0; dq_type[i] <= '0; end
      for (int i = 0; i < DFF_MAX_PAR; i++) begin
        f_valid[i] <= 1'b0; f_gtag[i] <= '0;
        for (int p = 0; p < NUM_STAGES; p++) f_res[i][p] <= '0;
      end
      for (int p = 0; p < NUM_STAGES; p++) load[p] <= '0;
    end else begin
      automatic logic pop = 1'b0;
      automatic logic [LOAD_W-1:0] ld [NUM_STAGES];
      for (int p = 0; p < NUM_STAGES; p++) ld[p] = load[p];
      if (cfg_we) ct[cfg_idx] <= cfg_data;
      // queue-overflow error reporting
      if (ovf_pend && !ob_full) ovf_pend <= 1'b0;
      if (ev_queue_overflow) begin ovf_pend <= 1'b1; ovf_gtag <= in_msg.gtag; end
      // release of a DFF: return its reservation
      if (in_rel)
        for (int i = 0; i < DFF_MAX_PAR; i++)
          if (f_valid[i] && f_gtag[i] == in_msg.gtag) begin
            f_valid[i] <= 1'b0;
            for (int p = 0; p < NUM_STAGES; p++) ld[p] = ld[p] - f_res[i][p];
          end
      case (st)
        D_IDLE: if (dq_cnt != '0) begin
          cur_gtag <= dq_gtag[dq_rd];
          cur_type <= dq_type[dq_rd];
          pop = 1'b1;
          st <= D_LOOKUP;
        end
        D_LOOKUP: if (fsm_go) begin
          if (ct_hit) begin
            cur_ct <= ct[ct_idx];
            st <= D_WORK;
            timer <= CNT_W'(DIR_CC > 0 ? DIR_CC - 1 : 0);
          end else st <= D_IDLE;
        end
        D_WORK: if (timer == '0) st <= D_TETRIS; else timer <= timer - 1'b1;
        D_TETRIS: if (fsm_go) begin
          if (fv_fit && have_slot) begin
            f_valid[slot] <= 1'b1;
            f_gtag[slot]  <= cur_gtag;
            for (int p = 0; p < NUM_STAGES; p++) begin
              f_res[slot][p] <= fv_need[fv_sel][p];
              ld[p] = ld[p] + fv_need[fv_sel][p];
            end
            cur_shift <= cur_ct.fv[fv_sel].shift;
            mf_i <= '0;
            st <= (cur_ct.num_mflows == '0) ? D_MFRDY : D_LOAD;
          end else st <= D_IDLE;
        end
        D_LOAD: st <= D_SEND;   // graph memory answers next cycle
        D_SEND: if (fsm_go) begin
          mf_i <= mf_i + 1'b1;
          st <= (mf_i + 1'b1 == cur_ct.num_mflows) ? D_MFRDY : D_LOAD;
        end
        D_MFRDY: if (fsm_go) st <= D_IDLE;
        default: st <= D_IDLE;
      endcase
      for (int p = 0; p < NUM_STAGES; p++) load[p] <= ld[p];
      // queue update
      if (pop) dq_rd <= (dq_rd == QW'(DQ_DEPTH - 1)) ? '0 : dq_rd + 1'b1;
      if (in_dct && !q_full) begin
        dq_gtag[dq_wr] <= in_msg.gtag;
        dq_type[dq_wr] <= in_msg.arg;
        dq_wr <= (dq_wr == QW'(DQ_DEPTH - 1)) ? '0 : dq_wr + 1'b1;
      end
      dq_cnt <= dq_cnt + (QW+1)'(in_dct && !q_full) - (QW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ob_push |-> !ob_full)
    else $error("director: outbox overflow");
endmodule
