// incr_scheduler: 32-entry incremental dataflow instruction scheduler with
// its decoded instructions buffer (INSNS) and ready queues.
//
// Instead of re-evaluating every entry each cycle, the scheduler updates the
// ready state of only the instructions that events target, and keeps the
// frontier of ready instructions in queues:
//   * SCH0 / SCH1: 16-entry banks for even / odd IIDs (sched_bank). Each
//     applies one target ready event per cycle and raises READY when its
//     target has just received its last input.
//   * Event muxes: each bank takes the issuing instruction's IS-stage event
//     (INSN.ev_even for SCH0, INSN.ev_odd for SCH1) if present, otherwise the
//     pending event at the head of its queue (EVT0 / EVT1). Pending events
//     come from the LS stage (results of tests, loads, multiplies, and
//     same-bank second targets) and from draining a broadcast queue.
//   * DCRDYQ: IIDs the decoder found ready (no inputs, no predicate).
//   * ISRDYQ: ready IIDs that could not issue at once (SCH1 when SCH0 is also
//     ready, either bank when issue is held, and entries found complete when
//     they are decoded after their inputs arrived).
//   * LSRDYQ: loads and stores released by the load-store queue.
//   * BR1Q..BR3Q: IIDs of decoded instructions listening on each broadcast
//     channel; once a channel's result is known they are drained, one IID per
//     cycle, into the pending event queues.
//   * IID selection: SCH0 READY, else SCH1 READY, else the queue selector
//     (LSRDYQ, then ISRDYQ, then DCRDYQ: woken successors before new
//     0-input work). The selected IID reads INSNS and
//     the decoded instruction is registered in INSN.
// The recurrence INSN -> event mux -> bank -> READY -> IID select -> INSNS
// -> INSN completes in one cycle, so a chain of dependent one-cycle
// instructions issues back to back.
//
// Block reset clears all ready state and queues; block refresh clears only
// active state and dynamic queues and rewinds DCRDYQ and the BRnQ, so a
// looping block restarts without being decoded again.
//
// Design choices not fixed by the published design: the queue selector
// priority, the pending-event queues (EVQ_DEPTH deep, with issue held while
// one is nearly full), the drain rate of one broadcast listener per cycle,
// and the late-ready path for instructions decoded after their inputs.
//
// Lint note: the ready-queue occupancy counts dcq_cnt, isq_cnt and lsq_cnt are
// left unconnected to logic; they are kept for observation only.
module incr_scheduler
  import edge_pkg::*;
#(
  parameter int unsigned EVQ_DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        blk_reset,     // new block: clear everything
  input  logic        blk_refresh,   // same block again: clear active state
  input  logic        issue_en,      // back end accepts instructions
  // decoder: slot 0 writes an even IID, slot 1 the following odd IID
  input  logic        dc_we   [2],
  input  decoded_t    dc_d    [2],
  input  rdys_t       dc_drdys[2],
  // late target ready events (LS stage), full IIDs
  input  logic        late_v   [2],
  input  iid_t        late_iid [2],
  input  rdys_t       late_rdys[2],
  // broadcast result known on channel bc_chan; listeners get bc_rdys
  input  logic        bc_fire,
  input  logic [1:0]  bc_chan,
  input  rdys_t       bc_rdys,
  // load-store queue release
  input  logic        ls_rel,
  input  iid_t        ls_rel_iid,
  // INSN register
  output decoded_t    insn,
  output logic        insn_valid,
  output logic        insn_from_ls,
  // activity, for observation
  output logic        o_both_ready,
  output logic        o_bc_drain,
  output logic        o_ev_stall
);
  localparam int unsigned EQW = $clog2(EVQ_DEPTH);

  logic flush;
  assign flush = rst | blk_reset | blk_refresh;

  // ---------------- decoded instructions buffer (INSNS) ----------------
  decoded_t insns_e [16];
  decoded_t insns_o [16];
  always_ff @(posedge clk) begin
    if (dc_we[0]) insns_e[dc_d[0].iid[4:1]] <= dc_d[0];
    if (dc_we[1]) insns_o[dc_d[1].iid[4:1]] <= dc_d[1];
  end

  // ---------------- pending event queues EVT0 / EVT1 ----------------
  logic [7:0]  evq_din  [2][3];
  logic [2:0]  evq_push [2];
  logic        evq_pop  [2];
  logic [7:0]  evq_dout [2];
  logic        evq_ne   [2];
  logic [EQW:0] evq_cnt [2];

  // broadcast drain
  logic [3:1] bc_fired;
  rdys_t      bc_rdys_r [4];
  logic [4:0] brq_dout [4];
  logic       brq_ne   [4];
  logic       brq_pop  [4];
  logic [1:0] drain_ch;
  logic       drain;
  logic       room;

  always_comb begin
    room  = (evq_cnt[0] < (EQW+1)'(EVQ_DEPTH - 4)) && (evq_cnt[1] < (EQW+1)'(EVQ_DEPTH - 4));
    drain = 1'b0; drain_ch = 2'd0;
    for (int c = 3; c >= 1; c--)
      if (bc_fired[c] && brq_ne[c]) begin drain = room; drain_ch = 2'(c); end
    for (int c = 0; c < 4; c++) brq_pop[c] = drain && (drain_ch == 2'(c)) && !flush;
    for (int b = 0; b < 2; b++) begin
      evq_push[b][0] = late_v[0] && (late_iid[0][0] == 1'(b)) && !flush;
      evq_din[b][0]  = {late_iid[0][4:1], late_rdys[0]};
      evq_push[b][1] = late_v[1] && (late_iid[1][0] == 1'(b)) && !flush;
      evq_din[b][1]  = {late_iid[1][4:1], late_rdys[1]};
      evq_push[b][2] = drain && (brq_dout[drain_ch][0] == 1'(b)) && !flush;
      evq_din[b][2]  = {brq_dout[drain_ch][4:1], bc_rdys_r[drain_ch]};
    end
  end
  assign o_bc_drain = drain && !flush;

  always_ff @(posedge clk) begin
    if (flush) bc_fired <= '0;
    else if (bc_fire && bc_chan != 2'd0) bc_fired[bc_chan] <= 1'b1;
    if (bc_fire) bc_rdys_r[bc_chan] <= bc_rdys;
  end

  for (genvar b = 0; b < 2; b++) begin : g_evq
    ready_queue #(.W(8), .DEPTH(EVQ_DEPTH), .NPUSH(3)) u_evq (
      .clk, .clr(flush), .rewind(1'b0), .push(evq_push[b]), .din(evq_din[b]),
      .pop(evq_pop[b]), .dout(evq_dout[b]), .nonempty(evq_ne[b]), .count(evq_cnt[b]));
  end

  // ---------------- broadcast listener queues BR1Q..BR3Q ----------------
  for (genvar c = 1; c < 4; c++) begin : g_brq
    logic [1:0] push;
    logic [4:0] din [2];
    logic [5:0] cnt_unused;
    assign push[0] = dc_we[0] && dc_d[0].bid == 2'(c);
    assign push[1] = dc_we[1] && dc_d[1].bid == 2'(c);
    assign din[0]  = dc_d[0].iid;
    assign din[1]  = dc_d[1].iid;
    ready_queue #(.W(5), .DEPTH(32), .NPUSH(2)) u_brq (
      .clk, .clr(rst | blk_reset), .rewind(blk_refresh), .push, .din,
      .pop(brq_pop[c]), .dout(brq_dout[c]), .nonempty(brq_ne[c]), .count(cnt_unused));
  end
  assign brq_dout[0] = '0;
  assign brq_ne[0]   = 1'b0;

  // ---------------- scheduler banks SCH0 / SCH1 ----------------
  logic  sch_ready [2];
  logic  sch_late  [2];
  logic  evt_v     [2];
  biid_t evt_iid   [2];
  rdys_t evt_rdys  [2];
  evt_t  is_ev     [2];

  always_comb begin
    is_ev[0] = insn.ev_even;
    is_ev[1] = insn.ev_odd;
    for (int b = 0; b < 2; b++) begin
      if (insn_valid && is_ev[b].v) begin
        evt_v[b] = 1'b1; evt_iid[b] = is_ev[b].iid; evt_rdys[b] = is_ev[b].rdys;
        evq_pop[b] = 1'b0;
      end else begin
        evt_v[b] = evq_ne[b]; evt_iid[b] = evq_dout[b][7:4]; evt_rdys[b] = evq_dout[b][3:0];
        evq_pop[b] = evq_ne[b] && !flush;
      end
      if (flush) evt_v[b] = 1'b0;
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_sch
    sched_bank #(.ENTRIES(16)) u_sch (
      .clk, .blk_reset(rst | blk_reset), .blk_refresh,
      .dc_we(dc_we[b]), .dc_iid(dc_d[b].iid[4:1]), .dc_drdys(dc_drdys[b]),
      .dc_late_ready(sch_late[b]),
      .evt_valid(evt_v[b]), .evt_iid(evt_iid[b]), .evt_rdys(evt_rdys[b]),
      .ready(sch_ready[b]));
  end

  // ---------------- ready queues ----------------
  logic [1:0] dcq_push;
  logic [4:0] dcq_din [2];
  logic       dcq_pop, dcq_ne;
  logic [4:0] dcq_dout;
  logic [5:0] dcq_cnt;
  logic [3:0] isq_push;
  logic [4:0] isq_din [4];
  logic       isq_pop, isq_ne;
  logic [4:0] isq_dout;
  logic [5:0] isq_cnt;
  logic [0:0] lsq_push;
  logic [4:0] lsq_din [1];
  logic       lsq_pop, lsq_ne;
  logic [4:0] lsq_dout;
  logic [5:0] lsq_cnt;

  assign dcq_push[0] = dc_we[0] && (&dc_drdys[0]);
  assign dcq_push[1] = dc_we[1] && (&dc_drdys[1]);
  assign dcq_din[0]  = dc_d[0].iid;
  assign dcq_din[1]  = dc_d[1].iid;
  assign lsq_push[0] = ls_rel && !flush;
  assign lsq_din[0]  = ls_rel_iid;

  ready_queue #(.W(5), .DEPTH(32), .NPUSH(2)) u_dcrdyq (
    .clk, .clr(rst | blk_reset), .rewind(blk_refresh), .push(dcq_push), .din(dcq_din),
    .pop(dcq_pop), .dout(dcq_dout), .nonempty(dcq_ne), .count(dcq_cnt));
  ready_queue #(.W(5), .DEPTH(32), .NPUSH(4)) u_isrdyq (
    .clk, .clr(flush), .rewind(1'b0), .push(isq_push), .din(isq_din),
    .pop(isq_pop), .dout(isq_dout), .nonempty(isq_ne), .count(isq_cnt));
  ready_queue #(.W(5), .DEPTH(32), .NPUSH(1)) u_lsrdyq (
    .clk, .clr(flush), .rewind(1'b0), .push(lsq_push), .din(lsq_din),
    .pop(lsq_pop), .dout(lsq_dout), .nonempty(lsq_ne), .count(lsq_cnt));

  // ---------------- IID selectors ----------------
  logic     can_issue, sel_v, sel_ls;
  iid_t     sel_iid;
  decoded_t sel_d;

  always_comb begin
    can_issue = issue_en && !flush
             && (evq_cnt[0] < (EQW+1)'(EVQ_DEPTH - 8)) && (evq_cnt[1] < (EQW+1)'(EVQ_DEPTH - 8));
    o_ev_stall = issue_en && !can_issue && !flush;
    sel_v = 1'b0; sel_ls = 1'b0; sel_iid = '0;
    dcq_pop = 1'b0; isq_pop = 1'b0; lsq_pop = 1'b0;
    isq_push = '0;
    isq_din[0] = {evt_iid[0], 1'b0};
    isq_din[1] = {evt_iid[1], 1'b1};
    isq_din[2] = {dc_d[0].iid[4:1], 1'b0};
    isq_din[3] = {dc_d[1].iid[4:1], 1'b1};
    isq_push[2] = sch_late[0] && !flush;
    isq_push[3] = sch_late[1] && !flush;
    if (can_issue && sch_ready[0]) begin
      sel_v = 1'b1; sel_iid = {evt_iid[0], 1'b0};
      isq_push[1] = sch_ready[1];
    end else if (can_issue && sch_ready[1]) begin
      sel_v = 1'b1; sel_iid = {evt_iid[1], 1'b1};
    end else begin
      isq_push[0] = sch_ready[0] && !flush;
      isq_push[1] = sch_ready[1] && !flush;
      if (can_issue) begin
        if (lsq_ne) begin
          sel_v = 1'b1; sel_ls = 1'b1; sel_iid = lsq_dout; lsq_pop = 1'b1;
        end else if (isq_ne) begin
          sel_v = 1'b1; sel_iid = isq_dout; isq_pop = 1'b1;
        end else if (dcq_ne) begin
          sel_v = 1'b1; sel_iid = dcq_dout; dcq_pop = 1'b1;
        end
      end
    end
    sel_d = sel_iid[0] ? insns_o[sel_iid[4:1]] : insns_e[sel_iid[4:1]];
    // an instruction woken in the cycle it is decoded is not yet in INSNS
    if (dc_we[sel_iid[0]] && dc_d[sel_iid[0]].iid == sel_iid) sel_d = dc_d[sel_iid[0]];
  end
  assign o_both_ready = can_issue && sch_ready[0] && sch_ready[1];

  // ---------------- INSN register ----------------
  always_ff @(posedge clk) begin
    if (flush) begin
      insn_valid   <= 1'b0;
      insn_from_ls <= 1'b0;
    end else begin
      insn_valid   <= sel_v;
      insn_from_ls <= sel_ls;
    end
    insn <= sel_d;
  end
endmodule
