// sre_pkg -- types and constants shared by every block of the Service Resource
// Element (SRE), a dataflow accelerator that runs dataflow fragments (DFFs) made
// of microflows (kernels) spread over a number of identical stages.
//
// What follows the paper:
//  * field widths of the internal messages (mtype 8, global_tag 16, dff_type 16,
//    time 64, port 8, error_code 16) and the five error codes 0..4;
//  * the field names of an actor-list entry (DataFlow_ID, LocalTag_ID, Kernel_ID,
//    Token_Entry, Meta_Data, Num_Ins, Num_Outs, Rdy, Scheduled, RUN) and of the
//    token-table arcs (src_LocalTag_ID, Token_Size, In_Stage_No, src_port_no,
//    Remote_In_Port_No, Dest_LocalTag_ID, Out_Stage_No);
//  * the timing numbers of the formal model: 100 cycles of director work per
//    DFF, 123 cycles per kernel in the stage scheduler, a pool of 4 compute and
//    13 memory units, four DMA channels.
// This design's own choices: the numeric mtype encodings, the widths of local
// tags, kernel ids and token sizes, the meta-data split into timeout and
// deadline, the number of arcs per microflow (4 in, 4 out), error code 5 for a
// request that no mapping fits, error code 6 for a queue overflow, and the
// layout of the host-side NoC packet.
package sre_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned GTAG_W    = 16;  // global_tag, message formats
  localparam int unsigned DTYPE_W   = 16;  // dff_type, DCT request format
  localparam int unsigned TIME_W    = 64;  // time field, DFF Input Ready format
  localparam int unsigned PORT_W    = 8;   // port field, DFF Output Ready format
  localparam int unsigned ECODE_W   = 16;  // error_code, Error Message format
  localparam int unsigned LTAG_W    = 8;   // local tag (assumed)
  localparam int unsigned KID_W     = 16;  // Kernel_ID (assumed)
  localparam int unsigned TSIZE_W   = 4;   // token size in pool memory units (assumed)
  localparam int unsigned STAGE_W   = 2;   // stage number (up to 4 stages)
  localparam int unsigned NODE_W    = 3;   // control-crossbar node id
  localparam int unsigned MAX_ARCS  = 4;   // in / out arcs per microflow (assumed)
  localparam int unsigned ARC_W     = $clog2(MAX_ARCS);
  localparam int unsigned ADDR_W    = 14;  // I/E buffer word address (assumed): 4 DFFs x 4096 words
  localparam int unsigned DATA_W    = 32;  // data word (assumed)

  // control-crossbar node numbering: packet processor, director, then stages
  localparam logic [NODE_W-1:0] NODE_PP  = 3'd0;
  localparam logic [NODE_W-1:0] NODE_DIR = 3'd1;
  localparam logic [NODE_W-1:0] NODE_ST0 = 3'd2;

  // ---------------------------------------------------------------- messages
  typedef enum logic [7:0] {
    MT_NONE         = 8'd0,
    MT_DCT_REQ      = 8'd1,   // packet processor -> director
    MT_DFF_DESC     = 8'd2,   // director -> packet processor
    MT_MAPPING_RDY  = 8'd3,   // director -> packet processor
    MT_PTR_DESC     = 8'd4,   // packet processor -> stages
    MT_MFLOW_DESC   = 8'd5,   // director -> one stage
    MT_MFLOW_RDY    = 8'd6,   // director -> packet processor
    MT_DFF_IN_RDY   = 8'd7,   // packet processor -> stages
    MT_DFF_OUT_RDY  = 8'd8,   // stage -> packet processor
    MT_TOKEN_RDY    = 8'd9,   // stage -> stage (a produced token)
    MT_DFF_RELEASE  = 8'd10,  // packet processor -> director and stages
    MT_ERROR        = 8'd11   // any -> packet processor
  } mtype_e;

  typedef enum logic [ECODE_W-1:0] {
    ERR_NONE            = 16'd0,  // No Error
    ERR_DCT_NOT_FOUND   = 16'd1,  // Director, fatal
    ERR_DESC_NOT_READY  = 16'd2,  // Packet Processor, fatal
    ERR_MFLOW_NOT_FOUND = 16'd3,  // Stage
    ERR_MFLOW_TIMEOUT   = 16'd4,  // Stage
    ERR_NO_MAPPING      = 16'd5,  // Director: no feature vector fits (own choice)
    ERR_OVERFLOW        = 16'd6   // a queue or table overflowed (own choice)
  } ecode_e;

  // token-table arcs (field names from the token table of the stage model)
  typedef struct packed {
    logic [LTAG_W-1:0]  src_ltag;    // producer local tag, 0 = DFF input port
    logic [PORT_W-1:0]  src_port;    // producer output port / DFF input port
    logic [TSIZE_W-1:0] token_size;
    logic [STAGE_W-1:0] in_stage;    // stage of the producer
  } in_arc_t;

  typedef struct packed {
    logic [LTAG_W-1:0]  dest_ltag;   // consumer local tag, 0 = DFF output port
    logic [ARC_W-1:0]   remote_in_port; // consumer's in-arc index
    logic [PORT_W-1:0]  dff_port;    // DFF output port when dest_ltag == 0
    logic [TSIZE_W-1:0] token_size;
    logic [STAGE_W-1:0] out_stage;   // stage of the consumer (logical in memory)
  } out_arc_t;

  // microflow descriptor: what the director sends to a stage
  typedef struct packed {
    logic [LTAG_W-1:0]    ltag;
    logic [KID_W-1:0]     kernel_id;
    logic [STAGE_W-1:0]   stage;
    logic [15:0]          timeout;    // Meta_Data[31:16]: cycles allowed to run
    logic [15:0]          deadline;   // Meta_Data[15:0]: relative deadline
    logic [ARC_W:0]       num_ins;
    logic [ARC_W:0]       num_outs;
    in_arc_t  [MAX_ARCS-1:0] ins;
    out_arc_t [MAX_ARCS-1:0] outs;
  } mflow_desc_t;

  // one message on the internal control and management crossbar
  typedef struct packed {
    logic [NODE_W-1:0]  src;
    logic [NODE_W-1:0]  dst;
    mtype_e             mtype;
    logic [GTAG_W-1:0]  gtag;
    logic [15:0]        arg;    // dff_type | error_code | in_words | ingress base | dest ltag
    logic [15:0]        arg2;   // out_words | egress base | source ltag
    logic [PORT_W-1:0]  port;   // DFF output port | num_outputs | remote in-arc
    logic [TIME_W-1:0]  time_v;
    mflow_desc_t        desc;
  } ctrl_msg_t;

  // ---------------------------------------------------------------- NoC side
  typedef enum logic [2:0] {
    NK_CTRL   = 3'd0,  // host -> SRE control packet (gtag, dff_type)
    NK_DATA   = 3'd1,  // host -> SRE data packet (gtag, one word)
    NK_OUT    = 3'd2,  // SRE -> host output data (gtag, one word, last)
    NK_ERROR  = 3'd3   // SRE -> host error report (gtag, error code in data)
  } noc_kind_e;

  typedef struct packed {
    noc_kind_e          kind;
    logic [GTAG_W-1:0]  gtag;
    logic [DTYPE_W-1:0] dff_type;
    logic               last;
    logic [DATA_W-1:0]  data;
  } noc_pkt_t;

  // director container table entry (one per DFF container type)
  localparam int unsigned MAX_STAGES = 4;
  localparam int unsigned NUM_FV     = 2;  // feature vectors per container (assumed)
  typedef struct packed {
    logic [STAGE_W-1:0]                   shift;     // logical -> physical stage rotation
    logic [MAX_STAGES-1:0][TSIZE_W+1:0]   mem_units; // peak memory need per logical stage
  } fvec_t;

  typedef struct packed {
    logic                     valid;
    logic [DTYPE_W-1:0]       dff_type;
    logic [7:0]               num_mflows;
    logic [7:0]               desc_base;   // first descriptor in graph memory
    logic [ADDR_W-2:0]        in_words;    // input size, words
    logic [7:0]               num_outputs; // DFF output ports
    logic [ADDR_W-2:0]        out_words;   // output size, words
    fvec_t [NUM_FV-1:0]       fv;
  } container_t;

  function automatic ctrl_msg_t msg_init(logic [NODE_W-1:0] s, logic [NODE_W-1:0] d,
                                         mtype_e t, logic [GTAG_W-1:0] g);
    ctrl_msg_t m;
    m = '0;
    m.src = s; m.dst = d; m.mtype = t; m.gtag = g;
    return m;
  endfunction

endpackage
