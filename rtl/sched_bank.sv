// sched_bank: one 16-entry bank of the incremental dataflow scheduler.
//
// Ready state lives in two 16x4 RAMs: DRDYSS holds each entry's decoded
// ready state {DRT,DRF,DR0,DR1}, written by the decoder; ARDYSS holds the
// active ready state {RT,RF,R0,R1}, updated by target ready events. Each RAM
// is validated by a flash-clearable set-only RAM (DVS, AVS), so block reset
// (clear DVS and AVS) and refresh (clear AVS only) take one cycle.
//
// Each cycle:
//  * the decoder may write entry dc_iid (DRDYSS and its DVS bit);
//  * one event {evt_iid, evt_rdys} is applied by read-modify-write:
//      ARDYS_NXT = (DV ? DRDYS : 0) | (AV ? ARDYS : 0) | EVT_RDYS
//    and READY is raised when ARDYS_NXT is all ones. This is the ready logic
//    of the design this follows.
//
// Choices of this implementation beyond that:
//  * READY is raised only on the transition to all-ones, so a repeated event
//    cannot issue an instruction twice (the bank has no inhibit bit).
//  * An event to an entry being decoded in the same cycle sees the new
//    decoded state (bypass).
//  * An event may reach an entry before it is decoded; it is kept in ARDYSS.
//    When that entry is later decoded, its active state is read through the
//    second RAM read port and dc_late_ready is raised if it is now complete
//    (dc_late_ready is never raised for an entry whose decoded state alone
//    makes it ready: the decoder queues those itself).
//
// Timing: READY and dc_late_ready are combinational in the same cycle as the
// event/decode; RAM and valid-bit updates land at the next edge.
module sched_bank
  import edge_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  localparam int unsigned AW = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          blk_reset,
  input  logic          blk_refresh,
  // decoder write port
  input  logic          dc_we,
  input  logic [AW-1:0] dc_iid,
  input  rdys_t         dc_drdys,
  output logic          dc_late_ready,
  // target ready event
  input  logic          evt_valid,
  input  logic [AW-1:0] evt_iid,
  input  rdys_t         evt_rdys,
  output logic          ready
);
  rdys_t drdyss [ENTRIES];
  rdys_t ardyss [ENTRIES];
  logic  dv, av, av_dc, dv_unused;
  rdys_t drdys, ardys, ardys_prev, ardys_nxt;
  logic  same;

  fcso_ram #(.DEPTH(ENTRIES)) u_dvs (
    .clk, .clr(blk_reset), .we(dc_we), .wa(dc_iid),
    .ra(evt_iid), .rd(dv), .ra2(dc_iid), .rd2(dv_unused));
  fcso_ram #(.DEPTH(ENTRIES)) u_avs (
    .clk, .clr(blk_reset | blk_refresh), .we(evt_valid), .wa(evt_iid),
    .ra(evt_iid), .rd(av), .ra2(dc_iid), .rd2(av_dc));

  // ready logic
  always_comb begin
    same       = dc_we && evt_valid && (dc_iid == evt_iid);
    drdys      = same ? dc_drdys : drdyss[evt_iid];
    ardys      = ardyss[evt_iid];
    ardys_prev = ((dv | same) ? drdys : 4'b0000) | (av ? ardys : 4'b0000);
    ardys_nxt  = ardys_prev | evt_rdys;
    ready      = evt_valid && (&ardys_nxt) && !(&ardys_prev);
    dc_late_ready = dc_we && !same && av_dc && !(&dc_drdys)
                  && (&(dc_drdys | ardyss[dc_iid]));
  end

  always_ff @(posedge clk) begin
    if (dc_we)     drdyss[dc_iid]  <= dc_drdys;
    if (evt_valid) ardyss[evt_iid] <= ardys_nxt;
  end
endmodule
