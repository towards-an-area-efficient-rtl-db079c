// edge_core: a two-decode, single-issue EDGE (Explicit Data Graph Execution)
// soft processor core with an incremental dataflow instruction scheduler.
//
// Programs are blocks of up to 32 instructions. Inside a block, instructions
// name their consumers (target form): a result is written straight into the
// consumer's operand buffer and a ready event marks that input present, so
// instructions issue in dataflow order without register renaming. Blocks
// communicate through the register file and memory, and commit atomically.
//
// Pipeline:
//   IF/DC  front_end: header, then two instructions per clock into the window.
//   IS     incr_scheduler picks the next ready IID; its decoded instruction is
//          in INSN. Operands are read from operand_buffers (or forwarded from
//          EX/LS, or from a broadcast value), READ reads regfile. One-cycle
//          instructions wake their targets here, so dependent chains issue
//          back to back. A ready load/store is instead handed to the lsq and
//          issues again, in program order, from LSRDYQ.
//   EX     alu, address add, data-array access (store write / load read),
//          first multiplier stage.
//   LS     result: load data, product or ALU value. Results are written to
//          target operand buffers, late ready events (tests, loads,
//          multiplies, same-bank second targets, predicates) are sent to the
//          scheduler, register writes are queued, broadcasts fire, a branch
//          records the next block.
// Commit: when the block's branch has executed, its header's register-write
// and store counts are reached and it is fully decoded, the core stops
// issuing, drains the queued register writes into the register file (one
// per cycle) and starts the next block: a branch to the same block is a
// refresh (active ready state cleared, no refetch), anything else a block
// reset and fetch. BRO with XOP[0]=1 halts instead.
//
// Interface: load the program through imem_* and data through dmem_* while
// idle, pulse run with start_addr (word address of the first block header),
// wait for halted. dbg_reg reads a register.
//
// The block structure, pipeline, scheduler organisation and reset/refresh
// follow the published design; the header fields, commit procedure, halt,
// forwarding network and store/load timing are this implementation's.
//
// Lint notes: hdr_ninsn, both_ready, bc_drain, ev_stall and wq_cnt are status
// signals kept for observation by testbenches; the core does not need them.
// decode helpers take the whole decoded_t and use only some fields.
module edge_core
  import edge_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 4096,
  parameter int unsigned DMEM_WORDS = 4096,
  localparam int unsigned IAW = $clog2(IMEM_WORDS),
  localparam int unsigned DAW = $clog2(DMEM_WORDS)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           run,
  input  logic [31:0]    start_addr,
  input  logic           imem_we,
  input  logic [IAW-1:0] imem_wa,
  input  logic [31:0]    imem_wd,
  input  logic           dmem_en,     // external data-array port, used while idle or halted
  input  logic           dmem_we,
  input  logic [DAW-1:0] dmem_addr,
  input  logic [31:0]    dmem_wd,
  output logic [31:0]    dmem_rd,
  input  logic [4:0]     dbg_reg,
  output logic [31:0]    dbg_reg_data,
  output logic           busy,
  output logic           halted,
  output logic [31:0]    blocks_committed
);
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_COMMIT, C_HALT} cstate_e;
  cstate_e st;

  logic [31:0] cur_blk, br_target;
  logic        br_done, br_halt;
  logic [5:0]  wr_cnt, st_cnt;
  logic        blk_reset, blk_refresh, fe_start;
  logic [31:0] fe_addr;
  logic        complete;

  // ---------------- front end ----------------
  logic     dc_we   [2];
  decoded_t dc_d    [2];
  rdys_t    dc_drdys[2];
  logic [5:0] hdr_ninsn, hdr_nwr, hdr_nst;
  logic     fe_done;

  front_end #(.IMEM_WORDS(IMEM_WORDS)) u_fe (
    .clk, .rst, .start(fe_start), .blk_addr(fe_addr),
    .imem_we, .imem_wa, .imem_wd,
    .dc_we, .dc_d, .dc_drdys, .hdr_ninsn, .hdr_nwr, .hdr_nst, .done(fe_done));

  // ---------------- scheduler ----------------
  decoded_t insn;
  logic     insn_valid, insn_from_ls;
  logic     late_v [2];
  iid_t     late_iid [2];
  rdys_t    late_rdys [2];
  logic     bc_fire;
  logic [1:0] bc_chan;
  rdys_t    bc_rdys;
  logic     ls_rel;
  iid_t     ls_rel_iid;
  logic     both_ready, bc_drain, ev_stall;

  incr_scheduler u_sched (
    .clk, .rst, .blk_reset, .blk_refresh, .issue_en(st == C_RUN && !complete),
    .dc_we, .dc_d, .dc_drdys,
    .late_v, .late_iid, .late_rdys,
    .bc_fire, .bc_chan, .bc_rdys,
    .ls_rel, .ls_rel_iid,
    .insn, .insn_valid, .insn_from_ls,
    .o_both_ready(both_ready), .o_bc_drain(bc_drain), .o_ev_stall(ev_stall));

  // ---------------- load-store queue ----------------
  logic is_go, is_defer;
  iid_t dc_iids [2];
  logic dc_mem  [2];
  assign dc_iids[0] = dc_d[0].iid;
  assign dc_iids[1] = dc_d[1].iid;
  assign dc_mem[0]  = dc_d[0].is_mem;
  assign dc_mem[1]  = dc_d[1].is_mem;

  assign is_defer = insn_valid && insn.is_mem && !insn_from_ls && st == C_RUN && !complete;
  assign is_go    = insn_valid && !is_defer && st == C_RUN && !complete;

  lsq u_lsq (
    .clk, .blk_reset(rst | blk_reset), .blk_refresh,
    .dc_we, .dc_iid(dc_iids), .dc_mem,
    .defer(is_defer), .defer_iid(insn.iid), .rel(ls_rel), .rel_iid(ls_rel_iid));

  // ---------------- IS: operand fetch with forwarding ----------------
  logic [31:0] ob_l, ob_r, rf_rd, opl, opr;
  logic        ob_we [2];
  logic [5:0]  ob_wa [2];
  logic [31:0] ob_wd [2];
  logic [31:0] bc_val [4];
  logic [1:0]  bc_slot [4];

  operand_buffers #(.N(32), .W(32)) u_ob (
    .clk, .we(ob_we), .wa(ob_wa), .wd(ob_wd), .ra(insn.iid), .rd_l(ob_l), .rd_r(ob_r));

  logic        rf_we;
  logic [4:0]  rf_wa;
  logic [31:0] rf_wd;
  regfile #(.NREGS(32), .W(32)) u_rf (
    .clk, .we(rf_we), .wa(rf_wa), .wd(rf_wd), .ra(insn.imm[4:0]), .rd(rf_rd),
    .dbg_ra(dbg_reg), .dbg_rd(dbg_reg_data));

  // EX and LS stage registers
  logic        ex_v, ls_v;
  decoded_t    ex_d, ls_d;
  logic [31:0] ex_a, ex_b, ls_alu, ex_y, ls_y, ex_bin;
  logic [31:0] mul_y, dm_rd;
  logic        ex_fwd_ok;

  // does stage instruction d write operand (slot) of IID i?
  function automatic logic writes_opnd(decoded_t d, iid_t i, logic slot);
    tkind_e want;
    want = slot ? TK_OP1 : TK_OP0;
    return (tgt_kind(d.t0) == want && d.t0[4:0] == i)
        || (tgt_kind(d.t1) == want && d.t1[4:0] == i);
  endfunction

  logic fwd_ex_l, fwd_ex_r, fwd_ls_l, fwd_ls_r, bc_l, bc_r;
  always_comb begin
    ex_fwd_ok = ex_v && !ex_d.is_mul && !ex_d.is_ld;
    fwd_ex_l  = ex_fwd_ok && writes_opnd(ex_d, insn.iid, 1'b0);
    fwd_ex_r  = ex_fwd_ok && writes_opnd(ex_d, insn.iid, 1'b1);
    fwd_ls_l  = ls_v && writes_opnd(ls_d, insn.iid, 1'b0);
    fwd_ls_r  = ls_v && writes_opnd(ls_d, insn.iid, 1'b1);
    bc_l      = insn.bid != 2'd0 && bc_slot[insn.bid] == 2'b10;
    bc_r      = insn.bid != 2'd0 && bc_slot[insn.bid] == 2'b11;
    opl = fwd_ex_l ? ex_y : fwd_ls_l ? ls_y : bc_l ? bc_val[insn.bid] : ob_l;
    opr = fwd_ex_r ? ex_y : fwd_ls_r ? ls_y : bc_r ? bc_val[insn.bid] : ob_r;
    if (insn.op == OP_READ)      opl = rf_rd;
    else if (insn.op == OP_MOVI) opl = insn.imm;
  end

  // ---------------- EX ----------------
  logic [DAW-1:0] dm_addr;
  logic           dm_en, dm_we;
  logic [31:0]    dm_wd;

  assign ex_bin = ex_d.use_imm ? ex_d.imm : ex_b;
  alu u_alu (.op(ex_d.op), .a(ex_a), .b(ex_bin), .y(ex_y));
  multiplier u_mul (.clk, .en(ex_v && ex_d.is_mul), .a(ex_a), .b(ex_b), .y(mul_y));

  always_comb begin
    if (st == C_RUN) begin
      dm_en   = ex_v && ex_d.is_mem;
      dm_we   = ex_v && ex_d.is_st;
      dm_addr = DAW'(ex_y[31:2]);
      dm_wd   = ex_b;
    end else begin
      dm_en   = dmem_en;
      dm_we   = dmem_we;
      dm_addr = dmem_addr;
      dm_wd   = dmem_wd;
    end
  end
  dcache_data #(.WORDS(DMEM_WORDS)) u_dcache (
    .clk, .en(dm_en), .we(dm_we), .addr(dm_addr), .wd(dm_wd), .rd(dm_rd));
  assign dmem_rd = dm_rd;

  // ---------------- LS ----------------
  logic        wq_ne, wq_pop;
  logic [1:0]  wq_push;
  logic [36:0] wq_din [2];
  logic [36:0] wq_dout;
  logic [5:0]  wq_cnt;
  logic [1:0]  nwr_ls;
  logic        ls_live;

  assign ls_y    = ls_d.is_ld ? dm_rd : ls_d.is_mul ? mul_y : ls_alu;
  assign ls_live = ls_v && st == C_RUN && !complete;

  always_comb begin
    logic [8:0] t [2];
    logic       tis [2];
    t[0] = ls_d.t0; t[1] = ls_d.t1;
    tis[0] = ls_d.t0_is; tis[1] = ls_d.t1_is;
    bc_fire = 1'b0; bc_chan = 2'd0; bc_rdys = '0;
    wq_push = '0; nwr_ls = '0;
    for (int k = 0; k < 2; k++) begin
      ob_we[k] = 1'b0; ob_wa[k] = {t[k][7], t[k][4:0]}; ob_wd[k] = ls_y;
      late_v[k] = 1'b0; late_iid[k] = t[k][4:0]; late_rdys[k] = '0;
      wq_din[k] = {t[k][4:0], ls_y};
      if (ls_live) begin
        unique case (tgt_kind(t[k]))
          TK_OP0, TK_OP1: begin
            ob_we[k] = 1'b1;
            late_v[k] = !tis[k];
            late_rdys[k] = t[k][7] ? RDY_1 : RDY_0;
          end
          TK_PRED: begin
            late_v[k] = 1'b1;
            late_rdys[k] = ls_y[0] ? RDY_T : RDY_F;
          end
          TK_REG: begin
            wq_push[k] = 1'b1;
            nwr_ls = nwr_ls + 2'd1;
          end
          TK_BCAST: if (!bc_fire) begin
            bc_fire = 1'b1;
            bc_chan = t[k][1:0];
            bc_rdys = slot_rdys(t[k][4:3], ls_y[0]);
          end
          default: ;
        endcase
      end
    end
  end

  ready_queue #(.W(37), .DEPTH(32), .NPUSH(2)) u_wq (
    .clk, .clr(rst | blk_reset | blk_refresh), .rewind(1'b0), .push(wq_push), .din(wq_din),
    .pop(wq_pop), .dout(wq_dout), .nonempty(wq_ne), .count(wq_cnt));

  assign wq_pop = (st == C_COMMIT) && wq_ne;
  assign rf_we  = wq_pop;
  assign rf_wa  = wq_dout[36:32];
  assign rf_wd  = wq_dout[31:0];

  assign complete = (st == C_RUN) && br_done && fe_done
                 && (wr_cnt == hdr_nwr) && (st_cnt == hdr_nst);

  // ---------------- pipeline registers and block control ----------------
  always_ff @(posedge clk) begin
    // broadcast values
    if (bc_fire) begin
      bc_val[bc_chan]  <= ls_y;
      bc_slot[bc_chan] <= t_slot(ls_d);
    end
    ex_d  <= insn;
    ex_a  <= opl;
    ex_b  <= opr;
    ls_d  <= ex_d;
    ls_alu <= ex_y;
    if (rst) begin
      st <= C_IDLE; ex_v <= 1'b0; ls_v <= 1'b0;
      br_done <= 1'b0; br_halt <= 1'b0; br_target <= '0; cur_blk <= '0;
      wr_cnt <= '0; st_cnt <= '0; blocks_committed <= '0;
      for (int c = 0; c < 4; c++) bc_slot[c] <= 2'b00;
    end else begin
      ex_v <= is_go;
      ls_v <= ex_v && st == C_RUN && !complete;
      unique case (st)
        C_IDLE, C_HALT: if (run) begin
          st <= C_RUN; cur_blk <= start_addr;
          br_done <= 1'b0; wr_cnt <= '0; st_cnt <= '0;
        end
        C_RUN: begin
          if (complete) begin
            st <= C_COMMIT; ex_v <= 1'b0; ls_v <= 1'b0;
          end else if (ls_live) begin
            wr_cnt <= wr_cnt + 6'(nwr_ls);
            if (ls_d.is_st) st_cnt <= st_cnt + 6'd1;
            if (ls_d.is_br) begin
              br_done   <= 1'b1;
              br_halt   <= ls_d.xop[0];
              br_target <= cur_blk + ls_d.imm;
            end
          end
        end
        C_COMMIT: if (!wq_ne) begin
          blocks_committed <= blocks_committed + 32'd1;
          br_done <= 1'b0; wr_cnt <= '0; st_cnt <= '0;
          for (int c = 0; c < 4; c++) bc_slot[c] <= 2'b00;
          if (br_halt) st <= C_HALT;
          else begin
            st <= C_RUN; cur_blk <= br_target;
          end
        end
        default: ;
      endcase
    end
  end

  // broadcast slot of the first broadcast target of d
  function automatic logic [1:0] t_slot(decoded_t d);
    return (tgt_kind(d.t0) == TK_BCAST) ? d.t0[4:3] : d.t1[4:3];
  endfunction

  // block start pulses: reset+fetch on a new block, refresh on the same one
  always_comb begin
    blk_reset = 1'b0; blk_refresh = 1'b0; fe_start = 1'b0; fe_addr = br_target;
    if ((st == C_IDLE || st == C_HALT) && run && !rst) begin
      blk_reset = 1'b1; fe_start = 1'b1; fe_addr = start_addr;
    end else if (st == C_COMMIT && !wq_ne && !br_halt && !rst) begin
      if (br_target == cur_blk) blk_refresh = 1'b1;
      else begin blk_reset = 1'b1; fe_start = 1'b1; end
    end
  end

  assign busy   = (st == C_RUN) || (st == C_COMMIT);
  assign halted = (st == C_HALT);
endmodule
