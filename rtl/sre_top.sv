// sre_top -- one Service Resource Element (SRE): the hardware runtime that
// receives dataflow fragments (DFFs) from the SoC network, maps them onto its
// stages and runs their microflows on the SHOC compute engines.
//
// Contents: the packet processor, the director with its graph memory (the
// microflow descriptors of every container), the ingress/egress buffer, a
// 4-channel DMA, NUM_STAGES stage managers and the control crossbar that joins
// packet processor (node 0), director (node 1) and the stages (nodes 2..).
// The SHOC compute engines, the RISC-V cores and the SoC network are outside
// this design: their signals are ports of this module.
//   * noc_in / noc_out: packets from and to the host over the SoC network
//     (control packet, data packet in; output data and error packets out).
//   * cfg_* and gm_*: load the container table (DCT) and the graph memory.
//   * shoc_*: per stage and compute element, start/abort/kernel/tags/buffer
//     pointers out, done in; shoc_buf_*: one read and one write port into the
//     ingress/egress buffer for the compute engines.
//   * ev_*: one-cycle event pulses of the internal mechanisms, for observation.
// now is a free-running cycle counter used for the DFF Input Ready time stamp
// and for deadlines.
//
// From the paper: the block structure (packet processor, director, data
// buffer, stages, control crossbar, DMA), three stages, 4 compute and 13 memory
// units per stage, director 100 cycles per DFF, scheduler 123 cycles per
// microflow. Own choices: every width, table size and the per-stage scheduling
// policy (STAGE_EDF bit per stage, 1 = earliest deadline first).
module sre_top
  import sre_pkg::*;
#(
  parameter int unsigned NUM_STAGES = 3,
  parameter int unsigned NUM_CE     = 4,
  parameter int unsigned MEM_UNITS  = 13,
  parameter int unsigned NUM_ACTORS = 8,
  parameter int unsigned DIR_CC     = 100,
  parameter int unsigned SCHED_CC   = 123,
  parameter int unsigned RECONF_CC  = 16,
  parameter int unsigned NUM_CONT   = 4,
  parameter int unsigned NUM_CTX    = 4,
  parameter int unsigned NUM_DMA_CH = 4,
  parameter int unsigned GM_DEPTH   = 64,
  parameter int unsigned GM_AW      = 8,
  parameter logic [NUM_STAGES-1:0] STAGE_EDF = NUM_STAGES'(2)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // SoC network
  input  logic                     noc_in_valid,
  output logic                     noc_in_ready,
  input  noc_pkt_t                 noc_in,
  output logic                     noc_out_valid,
  input  logic                     noc_out_ready,
  output noc_pkt_t                 noc_out,
  // configuration
  input  logic                     cfg_we,
  input  logic [$clog2(NUM_CONT)-1:0] cfg_idx,
  input  container_t               cfg_data,
  input  logic                     gm_we,
  input  logic [GM_AW-1:0]         gm_waddr,
  input  mflow_desc_t              gm_wdata,
  // SHOC compute engines
  output logic [NUM_STAGES-1:0][NUM_CE-1:0]             shoc_start,
  output logic [NUM_STAGES-1:0][NUM_CE-1:0]             shoc_abort,
  output logic [NUM_STAGES-1:0][NUM_CE-1:0][KID_W-1:0]  shoc_kernel,
  output logic [NUM_STAGES-1:0][NUM_CE-1:0][GTAG_W-1:0] shoc_gtag,
  output logic [NUM_STAGES-1:0][NUM_CE-1:0][LTAG_W-1:0] shoc_ltag,
  output logic [NUM_STAGES-1:0][NUM_CE-1:0][15:0]       shoc_in_ptr,
  output logic [NUM_STAGES-1:0][NUM_CE-1:0][15:0]       shoc_out_ptr,
  input  logic [NUM_STAGES-1:0][NUM_CE-1:0]             shoc_done,
  input  logic                     shoc_buf_we,
  input  logic [ADDR_W-1:0]        shoc_buf_waddr,
  input  logic [DATA_W-1:0]        shoc_buf_wdata,
  input  logic                     shoc_buf_re,
  input  logic [ADDR_W-1:0]        shoc_buf_raddr,
  output logic [DATA_W-1:0]        shoc_buf_rdata,
  // events
  output logic                     ev_accept,
  output logic                     ev_reject,
  output logic                     ev_dct_miss,
  output logic                     ev_dir_overflow,
  output logic                     ev_discard,
  output logic                     ev_drop,
  output logic                     ev_dff_done,
  output logic [NUM_STAGES-1:0]    ev_alloc_wait,
  output logic [NUM_STAGES-1:0]    ev_reconfig,
  output logic [NUM_STAGES-1:0]    ev_sched_overflow,
  output logic [NUM_STAGES-1:0]    ev_local_token,
  output logic [NUM_STAGES-1:0]    ev_remote_token
);
  localparam int unsigned NODES = 2 + NUM_STAGES;
  localparam int unsigned CH_W  = (NUM_DMA_CH > 1) ? $clog2(NUM_DMA_CH) : 1;

  logic [TIME_W-1:0] now;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;

  // ---------------------------------------------------------------- crossbar
  logic      [NODES-1:0] x_in_valid, x_in_ready, x_out_valid, x_out_ready;
  ctrl_msg_t [NODES-1:0] x_in_msg, x_out_msg;
  sre_ctrl_xbar #(.NUM_NODES(NODES), .FIFO_DEPTH(4)) u_xbar (
    .clk, .rst_n,
    .in_valid(x_in_valid), .in_ready(x_in_ready), .in_msg(x_in_msg),
    .out_valid(x_out_valid), .out_ready(x_out_ready), .out_msg(x_out_msg)
  );

  // ---------------------------------------------------------------- director
  logic        gm_re;
  logic [GM_AW-1:0] gm_raddr;
  mflow_desc_t gm_rdata;
  logic [$clog2(4):0] dir_inflight;
  sre_graph_mem #(.DEPTH(GM_DEPTH), .AW(GM_AW)) u_gm (
    .clk, .we(gm_we), .waddr(gm_waddr), .wdata(gm_wdata),
    .re(gm_re), .raddr(gm_raddr), .rdata(gm_rdata)
  );
  sre_director #(.NUM_STAGES(NUM_STAGES), .NUM_CONT(NUM_CONT), .DFF_MAX_PAR(4),
                 .DQ_DEPTH(4), .DIR_CC(DIR_CC), .STAGE_MEM(MEM_UNITS), .GM_AW(GM_AW)) u_dir (
    .clk, .rst_n, .now,
    .in_valid(x_out_valid[NODE_DIR]), .in_ready(x_out_ready[NODE_DIR]), .in_msg(x_out_msg[NODE_DIR]),
    .out_valid(x_in_valid[NODE_DIR]), .out_ready(x_in_ready[NODE_DIR]), .out_msg(x_in_msg[NODE_DIR]),
    .cfg_we, .cfg_idx, .cfg_data,
    .gm_re, .gm_addr(gm_raddr), .gm_rdata,
    .ev_accept, .ev_reject, .ev_dct_miss, .ev_queue_overflow(ev_dir_overflow),
    .inflight(dir_inflight)
  );

  // ---------------------------------------------------------------- packet processor, buffer, DMA
  logic              pp_we;
  logic [ADDR_W-1:0] pp_waddr;
  logic [DATA_W-1:0] pp_wdata;
  logic              dcfg_valid, dcfg_ready;
  logic [CH_W-1:0]   dcfg_ch;
  logic [ADDR_W-1:0] dcfg_src, dcfg_len;
  logic [GTAG_W-1:0] dcfg_tag;
  logic [NUM_DMA_CH-1:0] d_done, d_busy;
  logic              d_valid, d_ready, d_last, d_re;
  logic [DATA_W-1:0] d_data, d_rdata;
  logic [GTAG_W-1:0] d_tag;
  logic [ADDR_W-1:0] d_raddr;

  sre_packet_proc #(.NUM_STAGES(NUM_STAGES), .NUM_CTX(NUM_CTX), .NUM_CH(NUM_DMA_CH),
                    .BUF_AW(ADDR_W)) u_pp (
    .clk, .rst_n, .now,
    .noc_in_valid, .noc_in_ready, .noc_in, .noc_out_valid, .noc_out_ready, .noc_out,
    .in_valid(x_out_valid[NODE_PP]), .in_ready(x_out_ready[NODE_PP]), .in_msg(x_out_msg[NODE_PP]),
    .out_valid(x_in_valid[NODE_PP]), .out_ready(x_in_ready[NODE_PP]), .out_msg(x_in_msg[NODE_PP]),
    .buf_we(pp_we), .buf_waddr(pp_waddr), .buf_wdata(pp_wdata),
    .dma_cfg_valid(dcfg_valid), .dma_cfg_ready(dcfg_ready), .dma_cfg_ch(dcfg_ch),
    .dma_cfg_src(dcfg_src), .dma_cfg_len(dcfg_len), .dma_cfg_tag(dcfg_tag),
    .dma_done(d_done), .dma_valid(d_valid), .dma_ready(d_ready), .dma_data(d_data),
    .dma_tag(d_tag), .dma_last(d_last),
    .ev_discard, .ev_drop, .ev_dff_done
  );

  sre_ie_buffer #(.ADDR_W(ADDR_W), .DATA_W(DATA_W)) u_buf (
    .clk, .rst_n,
    .a_we(pp_we), .a_waddr(pp_waddr), .a_wdata(pp_wdata),
    .b_we(shoc_buf_we), .b_waddr(shoc_buf_waddr), .b_wdata(shoc_buf_wdata),
    .c_re(d_re), .c_raddr(d_raddr), .c_rdata(d_rdata),
    .d_re(shoc_buf_re), .d_raddr(shoc_buf_raddr), .d_rdata(shoc_buf_rdata)
  );

  sre_dma #(.NUM_CH(NUM_DMA_CH), .ADDR_W(ADDR_W), .DATA_W(DATA_W), .TAG_W(GTAG_W)) u_dma (
    .clk, .rst_n,
    .cfg_valid(dcfg_valid), .cfg_ready(dcfg_ready), .cfg_ch(dcfg_ch),
    .cfg_src(dcfg_src), .cfg_len(dcfg_len), .cfg_tag(dcfg_tag),
    .mem_re(d_re), .mem_raddr(d_raddr), .mem_rdata(d_rdata),
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_data), .out_tag(d_tag),
    .out_last(d_last), .done(d_done), .busy(d_busy)
  );

  // ---------------------------------------------------------------- stages
  for (genvar s = 0; s < NUM_STAGES; s++) begin : g_st
    localparam int unsigned N = int'(NODE_ST0) + s;
    logic [KID_W-1:0]  k  [NUM_CE];
    logic [GTAG_W-1:0] g  [NUM_CE];
    logic [LTAG_W-1:0] l  [NUM_CE];
    logic [15:0]       ip [NUM_CE];
    logic [15:0]       op [NUM_CE];
    sre_stage #(.STAGE_ID(s), .NUM_ACTORS(NUM_ACTORS), .NUM_CE(NUM_CE), .MEM_UNITS(MEM_UNITS),
                .SCHED_CC(SCHED_CC), .POLICY(STAGE_EDF[s]), .RECONF_CC(RECONF_CC),
                .NUM_PTR(NUM_CTX)) u_stage (
      .clk, .rst_n, .now,
      .in_valid(x_out_valid[N]), .in_ready(x_out_ready[N]), .in_msg(x_out_msg[N]),
      .out_valid(x_in_valid[N]), .out_ready(x_in_ready[N]), .out_msg(x_in_msg[N]),
      .shoc_start(shoc_start[s]), .shoc_abort(shoc_abort[s]),
      .shoc_kernel(k), .shoc_gtag(g), .shoc_ltag(l), .shoc_in_ptr(ip), .shoc_out_ptr(op),
      .shoc_done(shoc_done[s]),
      .ev_alloc_wait(ev_alloc_wait[s]), .ev_reconfig(ev_reconfig[s]),
      .ev_sched_overflow(ev_sched_overflow[s]),
      .ev_local_token(ev_local_token[s]), .ev_remote_token(ev_remote_token[s])
    );
    for (genvar c = 0; c < NUM_CE; c++) begin : g_ce
      assign shoc_kernel[s][c]  = k[c];
      assign shoc_gtag[s][c]    = g[c];
      assign shoc_ltag[s][c]    = l[c];
      assign shoc_in_ptr[s][c]  = ip[c];
      assign shoc_out_ptr[s][c] = op[c];
    end
  end
endmodule
