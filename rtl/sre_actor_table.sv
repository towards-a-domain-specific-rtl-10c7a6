// sre_actor_table -- actor list, token table and data dependency resolver of
// one SRE stage.
//
// Every microflow (kernel) assigned to the stage owns one actor-list entry:
// DataFlow_ID (the DFF global tag), LocalTag_ID, Kernel_ID, Token_Entry,
// Meta_Data (timeout and deadline), Num_Ins, Num_Outs and the three state bits
// Rdy, Scheduled and RUN. Token_Entry points at the entry's row of the token
// table, which holds the full definition of its input and output arcs and one
// in_arc_ready bit per input arc. In this implementation the token-table row of
// actor i is row i, so Token_Entry equals the slot number.
//
// Events that mark input arcs ready:
//   dff_in   -- the DFF's input data has all arrived: every arc whose producer is
//               local tag 0 (the DFF container) becomes ready;
//   token    -- a producer finished: the arc <gtag, dest ltag, in-port> becomes
//               ready; token_miss pulses in the same cycle if no entry matches
//               (the stage reports it as "microflow not found").
// The resolver checks one actor per cycle, lowest slot first: an entry that is
// valid, not yet Rdy and has all Num_Ins arcs ready gets Rdy set and is offered
// on rq_* to the ready queue (held until rq_ready). set_sched / set_run set the
// Scheduled and RUN bits; complete clears Rdy, Scheduled, RUN and the arc-ready
// bits, so the microflow waits for its next tokens; release removes all entries
// of a DFF; an entry that is still queued or running (Rdy set) keeps its slot
// until it completes, so a late completion never lands on a reused slot.
// Adding a descriptor to a full list pulses add_full and drops it;
// otherwise add_idx names the slot it lands in. NUM_RD read ports return an
// entry's global tag and descriptor combinationally.
//
// From the paper: the two tables, their fields, the pointer between them, the
// readiness rule (all input arcs hold tokens) and the bit life cycle. Own
// choices: table size, continuous evaluation instead of evaluation only after an
// event (same outcome, since readiness only changes on events), one ready
// actor per cycle, and the in-port index carried by a token message.
module sre_actor_table
  import sre_pkg::*;
#(
  parameter int unsigned NUM_ACTORS = 8,
  parameter int unsigned NUM_RD     = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // new microflow descriptor
  input  logic                     add_valid,
  input  logic [GTAG_W-1:0]        add_gtag,
  input  mflow_desc_t              add_desc,
  output logic                     add_full,
  output logic [$clog2(NUM_ACTORS)-1:0] add_idx,   // slot the descriptor goes to
  // readiness events
  input  logic                     dff_in_valid,
  input  logic [GTAG_W-1:0]        dff_in_gtag,
  input  logic                     token_valid,
  input  logic [GTAG_W-1:0]        token_gtag,
  input  logic [LTAG_W-1:0]        token_ltag,
  input  logic [ARC_W-1:0]         token_port,
  output logic                     token_miss,
  input  logic                     release_valid,
  input  logic [GTAG_W-1:0]        release_gtag,
  // ready queue side
  output logic                     rq_valid,
  output logic [$clog2(NUM_ACTORS)-1:0] rq_idx,
  input  logic                     rq_ready,
  // state bit updates from the stage manager
  input  logic                     set_sched,
  input  logic [$clog2(NUM_ACTORS)-1:0] set_sched_idx,
  input  logic                     set_run,
  input  logic [$clog2(NUM_ACTORS)-1:0] set_run_idx,
  input  logic                     complete,
  input  logic [$clog2(NUM_ACTORS)-1:0] complete_idx,
  // read ports (entry contents)
  input  logic [$clog2(NUM_ACTORS)-1:0] rd_idx [NUM_RD],
  output logic [GTAG_W-1:0]        rd_gtag [NUM_RD],
  output mflow_desc_t              rd_desc [NUM_RD],
  // status
  output logic [NUM_ACTORS-1:0]    st_valid,
  output logic [NUM_ACTORS-1:0]    st_rdy,
  output logic [NUM_ACTORS-1:0]    st_sched,
  output logic [NUM_ACTORS-1:0]    st_run
);
  localparam int unsigned IDX_W = $clog2(NUM_ACTORS);

  // actor list
  logic [NUM_ACTORS-1:0]   a_valid, a_rdy, a_sched, a_run;
  logic [GTAG_W-1:0]       a_gtag  [NUM_ACTORS];
  logic [IDX_W-1:0]        a_entry [NUM_ACTORS];   // Token_Entry
  // token table
  mflow_desc_t             t_desc  [NUM_ACTORS];
  logic [MAX_ARCS-1:0]     t_ready [NUM_ACTORS];   // in_arc_ready per arc

  // free slot for a new descriptor
  logic             have_free;
  logic [IDX_W-1:0] free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = NUM_ACTORS - 1; i >= 0; i--)
      if (!a_valid[i] && !a_rdy[i]) begin
        have_free = 1'b1;
        free_idx  = IDX_W'(i);
      end
  end
  assign add_full = add_valid && !have_free;

  // token match
  logic             tok_hit;
  logic [IDX_W-1:0] tok_idx;
  always_comb begin
    tok_hit = 1'b0;
    tok_idx = '0;
    for (int i = NUM_ACTORS - 1; i >= 0; i--)
      if (a_valid[i] && a_gtag[i] == token_gtag && t_desc[a_entry[i]].ltag == token_ltag
          && (ARC_W+1)'(token_port) < t_desc[a_entry[i]].num_ins) begin
        tok_hit = 1'b1;
        tok_idx = IDX_W'(i);
      end
  end
  assign token_miss = token_valid && !tok_hit;

  // resolver: lowest valid, not-yet-ready actor whose arcs are all ready
  logic             res_hit;
  logic [IDX_W-1:0] res_idx;
  always_comb begin
    res_hit = 1'b0;
    res_idx = '0;
    for (int i = NUM_ACTORS - 1; i >= 0; i--) begin
      logic all_in;
      all_in = 1'b1;
      for (int a = 0; a < MAX_ARCS; a++)
        if (a < int'(t_desc[a_entry[i]].num_ins) && !t_ready[a_entry[i]][a]) all_in = 1'b0;
      if (a_valid[i] && !a_rdy[i] && all_in) begin
        res_hit = 1'b1;
        res_idx = IDX_W'(i);
      end
    end
  end

  // the entry offered to the ready queue is held in a register
  logic             rq_v;
  logic [IDX_W-1:0] rq_i;
  assign rq_valid = rq_v;
  assign rq_idx   = rq_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid  <= '0;
      a_rdy    <= '0;
      a_sched  <= '0;
      a_run    <= '0;
      rq_v     <= 1'b0;
      rq_i     <= '0;
      for (int i = 0; i < NUM_ACTORS; i++) begin
        a_gtag[i]  <= '0;
        a_entry[i] <= IDX_W'(i);
        t_desc[i]  <= '0;
        t_ready[i] <= '0;
      end
    end else begin
      if (rq_v && rq_ready) rq_v <= 1'b0;
      if ((!rq_v || rq_ready) && res_hit) begin
        a_rdy[res_idx] <= 1'b1;
        rq_v <= 1'b1;
        rq_i <= res_idx;
      end
      if (add_valid && have_free) begin
        a_valid[free_idx]  <= 1'b1;
        a_gtag[free_idx]   <= add_gtag;
        a_entry[free_idx]  <= free_idx;
        t_desc[free_idx]   <= add_desc;
        t_ready[free_idx]  <= '0;
        a_rdy[free_idx]    <= 1'b0;
        a_sched[free_idx]  <= 1'b0;
        a_run[free_idx]    <= 1'b0;
      end
      if (complete) begin
        a_rdy[complete_idx]   <= 1'b0;
        a_sched[complete_idx] <= 1'b0;
        a_run[complete_idx]   <= 1'b0;
        t_ready[a_entry[complete_idx]] <= '0;
      end
      if (dff_in_valid)
        for (int i = 0; i < NUM_ACTORS; i++)
          if (a_valid[i] && a_gtag[i] == dff_in_gtag)
            for (int a = 0; a < MAX_ARCS; a++)
              if (a < int'(t_desc[a_entry[i]].num_ins) && t_desc[a_entry[i]].ins[a].src_ltag == '0)
                t_ready[a_entry[i]][a] <= 1'b1;
      if (token_valid && tok_hit)
        t_ready[a_entry[tok_idx]][token_port] <= 1'b1;
      if (set_sched) a_sched[set_sched_idx] <= 1'b1;
      if (set_run)   a_run[set_run_idx]     <= 1'b1;
      if (release_valid)
        for (int i = 0; i < NUM_ACTORS; i++)
          if (a_valid[i] && a_gtag[i] == release_gtag) a_valid[i] <= 1'b0;
    end
  end

  for (genvar r = 0; r < NUM_RD; r++) begin : g_rd
    assign rd_gtag[r] = a_gtag[rd_idx[r]];
    assign rd_desc[r] = t_desc[a_entry[rd_idx[r]]];
  end
  assign add_idx  = free_idx;
  assign st_valid = a_valid;
  assign st_rdy   = a_rdy;
  assign st_sched = a_sched;
  assign st_run   = a_run;

  // a microflow that is running must not be made ready again
  for (genvar g = 0; g < NUM_ACTORS; g++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     (set_run && set_run_idx == IDX_W'(g)) |-> a_sched[g])
      else $error("actor_table: RUN set on an entry that is not Scheduled");
  end
endmodule
