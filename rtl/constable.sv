// constable: load elimination engine for an out-of-order core.
//
// A static load whose dynamic instances keep reading the same value from the
// same address is learned in the Stable Load Detector (SLD). Once its
// confidence reaches the threshold, the next instance executes as
// "likely-stable"; when it completes, its source registers are entered in the
// Register Monitor Table (RMT), its cache line in the Address Monitor Table
// (AMT), and the SLD's can_eliminate flag is set. From then on every instance
// is eliminated at rename: it becomes a move from an xPRF register loaded with
// the last value, and never uses an RS entry, an AGU or a load port. A rename
// of one of the load's source registers (RMT) or a store or snoop to its line
// (AMT) resets the flag.
//
// Interface, all in the rename / writeback / memory views of the core:
//  * Rename: ren_group_valid with up to RENAME_W uops (ren_uop). The group is
//    held by the core until ren_accept. Each cycle up to three loads of the
//    group, oldest first, look up the SLD; their outcome appears on ren_res in
//    that same cycle (valid bit per uop). A group is accepted once all its loads
//    were looked up and every can_eliminate reset caused by its destination
//    registers has been written; otherwise rename stalls (stall_rd: more than
//    three loads, stall_clr: more than two resets in the cycle).
//  * A load that a register written by an older uop of the same group feeds is
//    never eliminated (its RMT reset may not have been written yet).
//  * xPRF: dependents read xrd_idx/xrd_val; the core frees registers with
//    xfree_valid/xfree_idx. ren_res.addr is the last load address, for the
//    load buffer entry of the eliminated load.
//  * Writeback: one completed, non-eliminated load per cycle on wb. A
//    likely-stable one whose address and value match the SLD is inserted in the
//    RMT and AMT; if both accept, can_eliminate is set and pin_valid/pin_line
//    asks the coherence directory to pin this core's CV-bit for the line.
//  * Memory: st_valid/st_addr when a store's physical address is generated,
//    sn_valid/sn_line when a snoop arrives; snoops have priority, each is
//    taken when its ready is high.
//  * flush_all: physical-address mapping changed; all flags, RMT and AMT are
//    cleared.
//  * ren_res.src_seq must travel with a likely-stable load and come back on
//    wb.src_seq. It holds per-register write counters of the load's sources:
//    if one of them was renamed again between the load's rename and its
//    writeback, the RMT reset happened before the load was listed there, so
//    the load must not become eliminable. Such a writeback, and one refused by
//    a full RMT list or AMT entry or by the probe history (below), is reported
//    on track_refused.
//
// Timing: lookups, elimination decisions and xPRF grants are combinational in
// the rename cycle; the xPRF value, table updates and resets are written at the
// next clock edge. A store or snoop hit resets its (up to four) loads over the
// next one or two cycles, ahead of RMT resets; a load renamed in that window
// may still be eliminated and is caught by the core's disambiguation like any
// eliminated load younger than the store. A store or snoop taken after a
// likely-stable load was renamed but before its writeback finds no AMT entry
// for it yet; a history of the last PHIST probed lines, checked against the
// probe count the load carries (ren_res.probe_seq -> wb.probe_seq), keeps such
// a load from becoming eliminable. pin_line is the writeback load's line,
// taken straight from wb.addr.
//
// Follows the source design: the three structures and their sizes, the
// rename-stage lookup and elimination, writeback-stage update, RMT reset on
// destination registers, AMT reset and eviction on store and snoop, three SLD
// reads and two SLD resets per cycle with rename stall beyond that, xPRF
// allocation with fallback to normal execution, CV-bit pinning, global reset on
// mapping changes, no repair of the tables after branch mispredictions. Own
// choices: the handshakes, the in-group dependence check, the per-register
// write counters and the probe history, one writeback
// training per cycle, setting can_eliminate only when the completing load
// matched and both monitor tables accepted it, snoop-over-store priority.
module constable
  import constable_pkg::*;
(
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             flush_all,
  // rename stage
  input  logic                             ren_group_valid,
  input  ren_uop_t [RENAME_W-1:0]          ren_uop,
  output logic                             ren_accept,
  output ren_res_t [RENAME_W-1:0]          ren_res,
  output logic                             stall_rd,
  output logic                             stall_clr,
  // xPRF access by the core
  input  logic [1:0][XPRF_IW-1:0]          xrd_idx,
  output val_t [1:0]                       xrd_val,
  input  logic [2:0]                       xfree_valid,
  input  logic [2:0][XPRF_IW-1:0]          xfree_idx,
  output logic [XPRF_IW:0]                 xfree_cnt,
  // writeback of non-eliminated loads
  input  wb_load_t                         wb,
  output logic                             track_refused,
  // stores and snoops
  input  logic                             st_valid,
  input  paddr_t                           st_addr,
  output logic                             st_ready,
  input  logic                             sn_valid,
  input  line_t                            sn_line,
  output logic                             sn_ready,
  output logic                             probe_hit,
  // coherence directory
  output logic                             pin_valid,
  output line_t                            pin_line
);

  localparam int unsigned RDP  = 3;
  localparam int unsigned CLRP = 2;
  localparam int unsigned RMT_SLOTS = 2 * 16 + (NUM_AREGS - 2) * 8;
  localparam int unsigned AMT_PCS   = 4;

  logic [PSEQ_W-1:0] pseq_q;   // running count of store/snoop probes taken

  // ------------------------------------------------------------------
  // Rename: choose up to RDP not-yet-looked-up loads, oldest first
  // ------------------------------------------------------------------
  logic [RENAME_W-1:0] done_q;
  logic [RENAME_W-1:0] want, sel;
  int unsigned         port_of  [RENAME_W];
  logic [RDP-1:0]      lk_valid;
  sig_t [RDP-1:0]      lk_sig;
  int unsigned         uop_of   [RDP];

  always_comb begin
    int unsigned n;
    n   = 0;
    sel = '0;
    lk_valid = '0;
    lk_sig   = '0;
    for (int p = 0; p < RDP; p++) uop_of[p] = 0;
    for (int i = 0; i < RENAME_W; i++) begin
      port_of[i] = 0;
      want[i] = ren_group_valid && ren_uop[i].valid && ren_uop[i].is_load && !done_q[i];
      if (want[i] && n < RDP) begin
        sel[i]      = 1'b1;
        port_of[i]  = n;
        lk_valid[n] = 1'b1;
        lk_sig[n]   = pc_sig(ren_uop[i].pc);
        uop_of[n]   = i;
        n++;
      end
    end
  end

  assign stall_rd = |(want & ~sel);

  // a source register written by an older uop of the same group
  logic [RENAME_W-1:0] grp_dep;
  always_comb begin
    for (int i = 0; i < RENAME_W; i++) begin
      grp_dep[i] = 1'b0;
      for (int j = 0; j < i; j++)
        for (int s = 0; s < NUM_SRC; s++)
          if (ren_uop[j].valid && ren_uop[j].dst_valid &&
              ren_uop[i].src_valid[s] && ren_uop[i].src[s] == ren_uop[j].dst)
            grp_dep[i] = 1'b1;
    end
  end

  // destination registers of the group look up the RMT
  logic [RENAME_W-1:0]        rn_valid;
  areg_t [RENAME_W-1:0]       rn_dst;
  always_comb begin
    for (int i = 0; i < RENAME_W; i++) begin
      rn_valid[i] = ren_group_valid && ren_uop[i].valid && ren_uop[i].dst_valid;
      rn_dst[i]   = ren_uop[i].dst;
    end
  end

  // Per-register write counters. A likely-stable load carries the counters of
  // its sources (including writes by older uops of its group) to writeback; if
  // one changed, a younger uop renamed that source before the load completed,
  // and the RMT reset came too early to catch it, so the load is not tracked.
  logic [WSEQ_W-1:0]                      wseq_q [NUM_AREGS];
  logic [RENAME_W-1:0][NUM_SRC-1:0][WSEQ_W-1:0] grp_seq;
  always_comb begin
    for (int i = 0; i < RENAME_W; i++)
      for (int s = 0; s < NUM_SRC; s++) begin
        grp_seq[i][s] = wseq_q[ren_uop[i].src[s]];
        for (int j = 0; j < i; j++)
          if (rn_valid[j] && rn_dst[j] == ren_uop[i].src[s]) grp_seq[i][s] = grp_seq[i][s] + 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NUM_AREGS; r++) wseq_q[r] <= '0;
    end else if (ren_accept) begin
      for (int r = 0; r < NUM_AREGS; r++) begin
        logic [WSEQ_W-1:0] c;
        c = wseq_q[r];
        for (int i = 0; i < RENAME_W; i++) if (rn_valid[i] && rn_dst[i] == areg_t'(r)) c = c + 1'b1;
        wseq_q[r] <= c;
      end
    end
  end

  logic [RDP-1:0]                 lk_hit, lk_celim, lk_stable;
  logic [RDP-1:0][SADDR_W-1:0]    lk_addr;
  logic [RDP-1:0][VAL_W-1:0]      lk_val;
  logic [RDP-1:0]                 xa_req, xa_gnt;
  logic [RDP-1:0][XPRF_IW-1:0]    xa_idx;

  always_comb begin
    for (int p = 0; p < RDP; p++)
      xa_req[p] = lk_valid[p] && lk_hit[p] && lk_celim[p] && !grp_dep[uop_of[p]];
  end

  always_comb begin
    for (int i = 0; i < RENAME_W; i++) begin
      ren_res[i] = '0;
      if (sel[i]) begin
        ren_res[i].valid         = 1'b1;
        ren_res[i].eliminate     = xa_gnt[port_of[i]];
        ren_res[i].likely_stable = lk_hit[port_of[i]] && lk_stable[port_of[i]] &&
                                   !xa_gnt[port_of[i]];
        ren_res[i].xprf_idx      = xa_idx[port_of[i]];
        ren_res[i].addr          = lk_addr[port_of[i]];
        ren_res[i].src_seq       = grp_seq[i];
        ren_res[i].probe_seq     = pseq_q;
      end
    end
  end

  logic rmt_busy;
  assign stall_clr  = ren_group_valid && rmt_busy;
  assign ren_accept = ren_group_valid && !stall_rd && !rmt_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          done_q <= '0;
    else if (ren_accept) done_q <= '0;
    else                 done_q <= done_q | sel;
  end

  // ------------------------------------------------------------------
  // Store / snoop probe of the AMT
  // ------------------------------------------------------------------
  logic  pr_ready;
  line_t pr_line;
  assign pr_line  = sn_valid ? sn_line : pa_line(st_addr);
  assign sn_ready = pr_ready;
  assign st_ready = pr_ready && !sn_valid;

  // Probe history. A store or snoop taken after a likely-stable load was
  // renamed but before its writeback finds no AMT entry for the load yet. The
  // last PHIST probed lines are kept with their probe count; a writeback whose
  // line is among the probes taken since its rename (or whose rename is older
  // than the history reaches) is not tracked.
  line_t             ph_line_q [PHIST];
  logic [PHIST-1:0]  ph_valid_q;
  logic              pr_take, probe_ok;
  assign pr_take = (sn_valid || st_valid) && pr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pseq_q     <= '0;
      ph_valid_q <= '0;
      for (int k = 0; k < PHIST; k++) ph_line_q[k] <= '0;
    end else if (pr_take) begin
      // entry k holds the probe that is k+1 probes old
      pseq_q        <= pseq_q + 1'b1;
      ph_valid_q    <= {ph_valid_q[PHIST-2:0], 1'b1};
      ph_line_q[0]  <= pr_line;
      for (int k = 1; k < PHIST; k++) ph_line_q[k] <= ph_line_q[k-1];
    end
  end

  always_comb begin
    logic [PSEQ_W-1:0] since;
    since    = pseq_q - wb.probe_seq;      // probes taken since the load's rename
    probe_ok = (since <= PSEQ_W'(PHIST));
    for (int k = 0; k < PHIST; k++)
      if (PSEQ_W'(k) < since && ph_valid_q[k] && ph_line_q[k] == pa_line(wb.addr)) probe_ok = 1'b0;
  end

  // ------------------------------------------------------------------
  // Writeback training
  // ------------------------------------------------------------------
  sig_t wb_sig;
  logic tr_match, rmt_ok, amt_ok, track, track_ok, fresh;
  assign wb_sig   = pc_sig(wb.pc);
  always_comb begin
    fresh = 1'b1;
    for (int s = 0; s < NUM_SRC; s++)
      if (wb.src_valid[s] && wb.src_seq[s] != wseq_q[wb.src[s]]) fresh = 1'b0;
  end
  assign track    = wb.valid && wb.likely_stable && tr_match && fresh && probe_ok;
  assign track_ok = track && rmt_ok && amt_ok;
  assign track_refused = wb.valid && wb.likely_stable && tr_match && !track_ok;
  assign pin_valid = track_ok;
  assign pin_line  = pa_line(wb.addr);

  // ------------------------------------------------------------------
  // Resets of can_eliminate
  // ------------------------------------------------------------------
  logic [RMT_SLOTS-1:0]           rmt_cand, rmt_gnt;
  sig_t [RMT_SLOTS-1:0]           rmt_cand_sig;
  logic [AMT_PCS-1:0]             amt_cand, amt_gnt;
  sig_t [AMT_PCS-1:0]             amt_cand_sig;
  logic [CLRP-1:0]                clr_valid;
  sig_t [CLRP-1:0]                clr_sig;

  clear_arbiter #(.PORTS(CLRP), .NH(AMT_PCS), .NL(RMT_SLOTS), .SIGW(SIG_W)) u_arb (
    .hi_req(amt_cand), .hi_sig(amt_cand_sig),
    .lo_req(rmt_cand), .lo_sig(rmt_cand_sig),
    .hi_gnt(amt_gnt),  .lo_gnt(rmt_gnt),
    .clr_valid(clr_valid), .clr_sig(clr_sig)
  );

  sld #(.SETS(32), .WAYS(16), .TAG_W(SIG_W), .ADDR_W(SADDR_W), .VAL_W(VAL_W),
        .CONF_W(CONF_W), .CONF_THR(CONF_THR), .RD_PORTS(RDP), .CLR_PORTS(CLRP)) u_sld (
    .clk, .rst_n, .flush_all,
    .lk_valid, .lk_sig, .lk_hit, .lk_can_elim(lk_celim), .lk_stable, .lk_addr, .lk_val,
    .tr_valid(wb.valid), .tr_sig(wb_sig), .tr_addr(wb.addr[SADDR_W-1:0]), .tr_val(wb.value),
    .tr_likely_stable(wb.likely_stable), .tr_match, .tr_track_ok(track_ok),
    .clr_valid, .clr_sig
  );

  rmt #(.NUM_REGS(NUM_AREGS), .STACK_SLOTS(16), .OTHER_SLOTS(8), .RENAME_W(RENAME_W),
        .NSRC(NUM_SRC), .SIGW(SIG_W)) u_rmt (
    .clk, .rst_n, .flush_all,
    .ins_valid(track), .ins_sig(wb_sig), .ins_src_valid(wb.src_valid), .ins_src(wb.src),
    .ins_ok(rmt_ok), .ins_commit(amt_ok),
    .rn_valid, .rn_dst,
    .cand(rmt_cand), .cand_sig(rmt_cand_sig), .grant(rmt_gnt), .busy(rmt_busy)
  );

  amt #(.SETS(32), .WAYS(8), .TAG_W(32), .PCS(AMT_PCS), .LINEW(LINE_W), .SIGW(SIG_W)) u_amt (
    .clk, .rst_n, .flush_all,
    .ins_valid(track), .ins_line(pa_line(wb.addr)), .ins_sig(wb_sig),
    .ins_ok(amt_ok), .ins_commit(rmt_ok),
    .pr_valid(sn_valid || st_valid), .pr_line, .pr_ready, .pr_hit(probe_hit),
    .cand(amt_cand), .cand_sig(amt_cand_sig), .grant(amt_gnt), .busy()
  );

  xprf #(.ENTRIES(XPRF_N), .WIDTH(VAL_W), .ALLOC(RDP), .READ(2), .FREE(3)) u_xprf (
    .clk, .rst_n,
    .alloc_req(xa_req), .alloc_val(lk_val), .alloc_gnt(xa_gnt), .alloc_idx(xa_idx),
    .rd_idx(xrd_idx), .rd_val(xrd_val),
    .free_valid(xfree_valid), .free_idx(xfree_idx), .free_cnt(xfree_cnt)
  );

endmodule
