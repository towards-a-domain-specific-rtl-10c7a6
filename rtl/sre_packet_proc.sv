// sre_packet_proc -- packet processor of the SRE: the interface between the
// SoC network and the SRE's control and data paths.
//
// It keeps one context per DFF in flight (NUM_CTX). Each context owns a fixed
// region of the ingress/egress buffer: input words at ctx*REGION, output words
// at ctx*REGION + REGION/2.
//   * Control packet from the host (global tag, container type): allocate a
//     context and send a DCT request to the director. No free context: error
//     packet (overflow) back to the host.
//   * DFF descriptor from the director: input size, output size and number of
//     DFF output ports are known; data packets of the DFF are now stored.
//   * Data packet: one word, written to the next input word of its context
//     in the cycle the packet is accepted (buf_wdata is the packet's data
//     word, wired straight through).
//     A data packet whose DFF has no descriptor yet, or no context at all, is
//     discarded and reported as error 2 "DFF descriptor not ready".
//   * Mapping ready: send a pointer descriptor (input and output buffer
//     addresses) to every stage.
//   * When all input words are in and the director has sent microflow ready:
//     send DFF input ready (with the current time) to every stage.
//   * DFF output ready (port) from a stage: mark the port; when every DFF output
//     port has been produced, program DMA channel ctx % NUM_CH to stream the
//     output region back to the host as output packets. When the DMA is done,
//     send DFF release to the director and every stage and free the context.
//   * Error message (from the director or a stage): forwarded to the host as an
//     error packet; the DFF is dropped ("pause, run, drop"): release is sent
//     and the context is freed.
// Messages to several stages are sent one after another by a small send
// engine; the paper calls them multicasts.
//
// From the paper: the message sequence of the three sequence charts (request,
// receive input, execute), the descriptor-not-ready error, the ingress/egress
// buffer, release to director and stages, DMA for moving results out. Own
// choices: fixed buffer regions per context, word-per-packet data packets,
// DMA channel choice, error handling by dropping the DFF, at most 8 DFF output
// ports.
module sre_packet_proc
  import sre_pkg::*;
#(
  parameter int unsigned NUM_STAGES = 3,
  parameter int unsigned NUM_CTX    = 4,
  parameter int unsigned NUM_CH     = 4,
  parameter int unsigned BUF_AW     = ADDR_W,
  localparam int unsigned CH_W      = $clog2(NUM_CH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TIME_W-1:0]  now,
  // NoC side
  input  logic               noc_in_valid,
  output logic               noc_in_ready,
  input  noc_pkt_t           noc_in,
  output logic               noc_out_valid,
  input  logic               noc_out_ready,
  output noc_pkt_t           noc_out,
  // control crossbar
  input  logic               in_valid,
  output logic               in_ready,
  input  ctrl_msg_t          in_msg,
  output logic               out_valid,
  input  logic               out_ready,
  output ctrl_msg_t          out_msg,
  // ingress write port of the ingress/egress buffer
  output logic               buf_we,
  output logic [BUF_AW-1:0]  buf_waddr,
  output logic [DATA_W-1:0]  buf_wdata,
  // DMA
  output logic               dma_cfg_valid,
  input  logic               dma_cfg_ready,
  output logic [CH_W-1:0]    dma_cfg_ch,
  output logic [BUF_AW-1:0]  dma_cfg_src,
  output logic [BUF_AW-1:0]  dma_cfg_len,
  output logic [GTAG_W-1:0]  dma_cfg_tag,
  input  logic [NUM_CH-1:0]  dma_done,
  input  logic               dma_valid,
  output logic               dma_ready,
  input  logic [DATA_W-1:0]  dma_data,
  input  logic [GTAG_W-1:0]  dma_tag,
  input  logic               dma_last,
  // events
  output logic               ev_discard,
  output logic               ev_drop,
  output logic               ev_dff_done
);
  localparam int unsigned REGION = (1 << BUF_AW) / NUM_CTX;
  localparam int unsigned HALF   = REGION / 2;
  localparam int unsigned CW     = (NUM_CTX > 1) ? $clog2(NUM_CTX) : 1;
  localparam int unsigned MAXP   = 8;

  typedef enum logic [2:0] {C_FREE, C_WAIT_DESC, C_ACTIVE, C_OUT_DMA, C_RELEASE} ctx_st_e;

  ctx_st_e           c_st     [NUM_CTX];
  logic [GTAG_W-1:0] c_gtag   [NUM_CTX];
  logic [15:0]       c_in_w   [NUM_CTX];
  logic [15:0]       c_in_cnt [NUM_CTX];
  logic [15:0]       c_out_w  [NUM_CTX];
  logic [PORT_W-1:0] c_nout   [NUM_CTX];
  logic [MAXP-1:0]   c_omask  [NUM_CTX];
  logic              c_mf_rdy [NUM_CTX];
  logic              c_ptr_p  [NUM_CTX];
  logic              c_in_snt [NUM_CTX];
  logic              c_dma_p  [NUM_CTX];

  function automatic logic [BUF_AW-1:0] in_base(int c);
    return BUF_AW'(c * REGION);
  endfunction
  function automatic logic [BUF_AW-1:0] out_base(int c);
    return BUF_AW'(c * REGION + HALF);
  endfunction

  // ---------------------------------------------------------------- outbox
  logic      ob_push, ob_full;
  ctrl_msg_t ob_msg;
  sre_msg_fifo #(.DEPTH(4)) u_ob (
    .clk, .rst_n, .push(ob_push), .push_msg(ob_msg), .full(ob_full),
    .out_valid, .out_ready, .out_msg
  );

  // ---------------------------------------------------------------- host error queue
  localparam int unsigned HQ = 4;
  noc_pkt_t   hq [HQ];
  logic [1:0] hq_rd, hq_wr;
  logic [2:0] hq_cnt;
  logic       hq_push;
  noc_pkt_t   hq_pkt;
  logic       hq_full;
  assign hq_full = (hq_cnt == 3'(HQ));

  // ---------------------------------------------------------------- lookups
  function automatic logic ctx_find(logic [GTAG_W-1:0] g, output int unsigned idx);
    ctx_find = 1'b0; idx = 0;
    for (int c = NUM_CTX - 1; c >= 0; c--)
      if (c_st[c] != C_FREE && c_gtag[c] == g) begin ctx_find = 1'b1; idx = c; end
  endfunction

  logic        m_hit, n_hit, f_have;
  int unsigned m_ctx, n_ctx, f_ctx;
  always_comb begin
    m_hit = ctx_find(in_msg.gtag, m_ctx);
    n_hit = ctx_find(noc_in.gtag, n_ctx);
    f_have = 1'b0; f_ctx = 0;
    for (int c = NUM_CTX - 1; c >= 0; c--)
      if (c_st[c] == C_FREE) begin f_have = 1'b1; f_ctx = c; end
  end

  // ---------------------------------------------------------------- send engine
  typedef enum logic [1:0] {J_NONE, J_PTR, J_INRDY, J_REL} job_e;
  job_e          j_kind;
  logic [CW-1:0] j_ctx;
  logic [NODE_W-1:0] j_dst;     // current destination node
  logic          e_push;
  ctrl_msg_t     e_msg;

  // job selection
  job_e          n_kind;
  int unsigned   n_jctx;
  always_comb begin
    n_kind = J_NONE; n_jctx = 0;
    for (int c = NUM_CTX - 1; c >= 0; c--) begin
      if (c_st[c] == C_RELEASE) begin n_kind = J_REL; n_jctx = c; end
      else if (c_st[c] == C_ACTIVE && c_ptr_p[c]) begin n_kind = J_PTR; n_jctx = c; end
      else if (c_st[c] == C_ACTIVE && !c_ptr_p[c] && c_mf_rdy[c] && !c_in_snt[c]
               && c_in_cnt[c] == c_in_w[c]) begin n_kind = J_INRDY; n_jctx = c; end
    end
  end

  always_comb begin
    e_push = (j_kind != J_NONE);
    e_msg  = msg_init(NODE_PP, j_dst, MT_NONE, c_gtag[j_ctx]);
    e_msg.time_v = now;
    case (j_kind)
      J_PTR:   begin e_msg.mtype = MT_PTR_DESC;
                     e_msg.arg  = 16'(in_base(int'(j_ctx)));
                     e_msg.arg2 = 16'(out_base(int'(j_ctx))); end
      J_INRDY: e_msg.mtype = MT_DFF_IN_RDY;
      J_REL:   e_msg.mtype = MT_DFF_RELEASE;
      default: ;
    endcase
  end
  logic e_go;
  assign e_go = e_push && !ob_full;
  logic e_last;   // last destination of the job
  assign e_last = (int'(j_dst) == int'(NODE_ST0) + NUM_STAGES - 1);

  // ---------------------------------------------------------------- NoC input
  logic n_ctrl, n_data, n_take;
  assign n_ctrl = noc_in_valid && noc_in.kind == NK_CTRL;
  assign n_data = noc_in_valid && noc_in.kind == NK_DATA;
  // the control-message side has priority on the host error queue
  logic m_hq;   // message side pushes a host error this cycle
  assign noc_in_ready = !hq_full && !m_hq && (noc_in.kind != NK_CTRL || (!e_push && !ob_full));
  assign n_take = noc_in_valid && noc_in_ready;
  logic n_store, n_discard;
  assign n_store   = n_take && n_data && n_hit && c_st[n_ctx] == C_ACTIVE
                     && c_in_cnt[n_ctx] < c_in_w[n_ctx];
  assign n_discard = n_take && n_data && !(n_hit && (c_st[n_ctx] == C_ACTIVE ||
                                                    c_st[n_ctx] == C_OUT_DMA ||
                                                    c_st[n_ctx] == C_RELEASE));
  assign buf_we    = n_store;
  assign buf_waddr = in_base(int'(n_ctx)) + BUF_AW'(c_in_cnt[n_ctx]);
  assign buf_wdata = noc_in.data;
  assign ev_discard = n_discard;

  always_comb begin
    ob_push = 1'b0;
    ob_msg  = e_msg;
    if (e_go) ob_push = 1'b1;
    else if (n_take && n_ctrl && f_have) begin
      ob_push = 1'b1;
      ob_msg  = msg_init(NODE_PP, NODE_DIR, MT_DCT_REQ, noc_in.gtag);
      ob_msg.arg = noc_in.dff_type;
    end
  end

  // ---------------------------------------------------------------- messages in
  assign in_ready = !hq_full;
  logic m_take;
  assign m_take = in_valid && in_ready;
  assign m_hq   = m_take && in_msg.mtype == MT_ERROR;
  always_comb begin
    hq_push = 1'b0;
    hq_pkt  = '0;
    if (m_hq) begin
      hq_push = 1'b1;
      hq_pkt.kind = NK_ERROR; hq_pkt.gtag = in_msg.gtag;
      hq_pkt.data = DATA_W'(in_msg.arg);
      hq_pkt.last = 1'b1;
    end else if (n_take && (n_discard || (n_ctrl && !f_have))) begin
      hq_push = 1'b1;
      hq_pkt.kind = NK_ERROR; hq_pkt.gtag = noc_in.gtag;
      hq_pkt.data = n_discard ? DATA_W'(ERR_DESC_NOT_READY) : DATA_W'(ERR_OVERFLOW);
      hq_pkt.last = 1'b1;
    end
  end
  assign ev_drop = m_hq && m_hit;

  // ---------------------------------------------------------------- DMA
  logic        d_have;
  int unsigned d_ctx;
  always_comb begin
    d_have = 1'b0; d_ctx = 0;
    for (int c = NUM_CTX - 1; c >= 0; c--)
      if (c_st[c] == C_ACTIVE && c_dma_p[c]) begin d_have = 1'b1; d_ctx = c; end
  end
  assign dma_cfg_valid = d_have;
  assign dma_cfg_ch    = CH_W'(d_ctx % NUM_CH);
  assign dma_cfg_src   = out_base(int'(d_ctx));
  assign dma_cfg_len   = BUF_AW'(c_out_w[d_ctx]);
  assign dma_cfg_tag   = c_gtag[d_ctx];

  // ---------------------------------------------------------------- NoC output
  assign noc_out_valid = (hq_cnt != '0) || dma_valid;
  assign dma_ready     = (hq_cnt == '0) && noc_out_ready;
  always_comb begin
    if (hq_cnt != '0) noc_out = hq[hq_rd];
    else begin
      noc_out = '0;
      noc_out.kind = NK_OUT; noc_out.gtag = dma_tag; noc_out.data = dma_data;
      noc_out.last = dma_last;
    end
  end

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j_kind <= J_NONE; j_ctx <= '0; j_dst <= '0;
      hq_rd <= '0; hq_wr <= '0; hq_cnt <= '0;
      ev_dff_done <= 1'b0;
      for (int i = 0; i < HQ; i++) hq[i] <= '0;
      for (int c = 0; c < NUM_CTX; c++) begin
        c_st[c] <= C_FREE; c_gtag[c] <= '0; c_in_w[c] <= '0; c_in_cnt[c] <= '0;
        c_out_w[c] <= '0; c_nout[c] <= '0; c_omask[c] <= '0; c_mf_rdy[c] <= 1'b0;
        c_ptr_p[c] <= 1'b0; c_in_snt[c] <= 1'b0; c_dma_p[c] <= 1'b0;
      end
    end else begin
      ev_dff_done <= 1'b0;
      // host error queue
      if (hq_push) begin hq[hq_wr] <= hq_pkt; hq_wr <= hq_wr + 1'b1; end
      if (hq_cnt != '0 && noc_out_ready) hq_rd <= hq_rd + 1'b1;
      hq_cnt <= hq_cnt + 3'(hq_push) - 3'(hq_cnt != '0 && noc_out_ready);

      // NoC input
      if (n_take && n_ctrl && f_have && !e_push) begin
        c_st[f_ctx] <= C_WAIT_DESC; c_gtag[f_ctx] <= noc_in.gtag;
        c_in_cnt[f_ctx] <= '0; c_omask[f_ctx] <= '0; c_mf_rdy[f_ctx] <= 1'b0;
        c_ptr_p[f_ctx] <= 1'b0; c_in_snt[f_ctx] <= 1'b0; c_dma_p[f_ctx] <= 1'b0;
      end
      if (n_store) c_in_cnt[n_ctx] <= c_in_cnt[n_ctx] + 1'b1;

      // messages
      if (m_take && m_hit) begin
        case (in_msg.mtype)
          MT_DFF_DESC: if (c_st[m_ctx] == C_WAIT_DESC) begin
            c_st[m_ctx]    <= C_ACTIVE;
            c_in_w[m_ctx]  <= in_msg.arg;
            c_out_w[m_ctx] <= in_msg.arg2;
            c_nout[m_ctx]  <= in_msg.port;
          end
          MT_MAPPING_RDY: c_ptr_p[m_ctx]  <= 1'b1;
          MT_MFLOW_RDY:   c_mf_rdy[m_ctx] <= 1'b1;
          MT_DFF_OUT_RDY: if (c_st[m_ctx] == C_ACTIVE) begin
            automatic logic [MAXP-1:0] om = c_omask[m_ctx] | (MAXP'(1) << in_msg.port[2:0]);
            c_omask[m_ctx] <= om;
            if ($countones(om) == int'(c_nout[m_ctx])) c_dma_p[m_ctx] <= 1'b1;
          end
          MT_ERROR: begin
            c_st[m_ctx] <= C_RELEASE;
            c_dma_p[m_ctx] <= 1'b0;
          end
          default: ;
        endcase
      end

      // DMA start and completion
      if (d_have && dma_cfg_ready) begin
        c_dma_p[d_ctx] <= 1'b0;
        c_st[d_ctx]    <= C_OUT_DMA;
      end
      for (int c = 0; c < NUM_CTX; c++)
        if (c_st[c] == C_OUT_DMA && dma_done[c % NUM_CH]) c_st[c] <= C_RELEASE;

      // send engine
      if (j_kind == J_NONE) begin
        if (n_kind != J_NONE) begin
          j_kind <= n_kind;
          j_ctx  <= CW'(n_jctx);
          j_dst  <= (n_kind == J_REL) ? NODE_DIR : NODE_ST0;
          if (n_kind == J_PTR)   c_ptr_p[n_jctx]  <= 1'b0;
          if (n_kind == J_INRDY) c_in_snt[n_jctx] <= 1'b1;
        end
      end else if (e_go) begin
        if (e_last) begin
          if (j_kind == J_REL) begin
            c_st[j_ctx] <= C_FREE;
            ev_dff_done <= 1'b1;
          end
          j_kind <= J_NONE;
        end else j_dst <= (j_dst == NODE_DIR) ? NODE_ST0 : j_dst + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) hq_push |-> !hq_full)
    else $error("packet_proc: host error queue overflow");
endmodule
