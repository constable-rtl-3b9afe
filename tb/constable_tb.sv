// constable_tb: end-to-end test of the load elimination engine at its default
// sizes.
//
// A behavioural core drives the engine with a synthetic program: 24 static
// loads (PC-relative, stack-relative on RSP/RBP, register-relative on R8-R12),
// ALU uops that write registers, and stores, packed into 6-uop rename groups.
// Architectural state (16 registers, a 64-word memory in 8 cache lines) is
// updated in program order when a group is formed, which gives the golden
// address and value of every load.
//
// Per group: the group is held until ren_accept; every load result is checked
// (an eliminated load must carry the right address, and its xPRF value is read
// back and compared with the golden value); non-eliminated loads are written
// back one per cycle; store addresses reach the engine 0 to 2 groups after the
// store was renamed, in half of the groups before the group's writebacks;
// a directory model keeps this core's presence bit per line, drops it on
// random clean evictions unless the line is pinned, and lets another core's
// write send a snoop only while the bit is set; snoops to random lines (another core writing the line)
// and address-mapping flushes happen now and then; xPRF registers are freed
// after a hold time that varies by phase so that the xPRF runs full.
//
// A load-buffer model stands in for the core's memory disambiguation: when a
// store address arrives, an eliminated load younger than the store with the
// same address is a violation; it is re-executed (written back with the new
// value, not likely-stable). An eliminated load with a wrong value that no
// violation explains is a failure.
//
// Every mechanism is counted (eliminations, likely-stable marks, CV-bit pins,
// rename stalls for lookups and for resets, RMT and AMT resets, store and
// snoop hits, xPRF exhaustion, in-group dependences, refused tracking,
// writebacks whose source was renamed again in flight, writebacks whose
// line was probed in flight, violations, flushes); one that never happened is a failure.
module constable_tb;
  import constable_pkg::*;

  localparam int NPC = 24;
  localparam int GROUPS = 8000;
  localparam logic [47:0] BASE = 48'h0000_A5C3_1000;

  logic clk = 0, rst_n = 0, flush_all = 0;
  logic ren_group_valid, ren_accept, stall_rd, stall_clr;
  ren_uop_t [5:0] ren_uop;
  ren_res_t [5:0] ren_res;
  logic [1:0][4:0] xrd_idx;
  val_t [1:0] xrd_val;
  logic [2:0] xfree_valid;
  logic [2:0][4:0] xfree_idx;
  logic [5:0] xfree_cnt;
  wb_load_t wb;
  logic track_refused, st_valid, st_ready, sn_valid, sn_ready, probe_hit, pin_valid;
  paddr_t st_addr;
  line_t sn_line, pin_line;

  constable dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0;
  int n_elim = 0, n_ls = 0, n_pin = 0, n_stall_rd = 0, n_stall_clr = 0, n_rmt_rst = 0;
  int n_amt_rst = 0, n_st_hit = 0, n_sn_hit = 0, n_xfull = 0, n_dep = 0, n_refused = 0;
  int n_viol = 0, n_flush = 0, n_loads = 0, n_stale = 0, n_pstale = 0;
  int n_nosnoop = 0, n_evict = 0, n_evict_pinned = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- program and architectural state ----------------
  typedef struct { bit [1:0] nsrc; bit [3:0] s0, s1; int ofs; } ld_t;
  ld_t prog [NPC];
  bit [63:0] regs [16];
  bit [63:0] mem [64];
  // coherence directory model for the 8 lines: this core's presence (CV) bit
  // and its pin. A clean eviction drops an unpinned presence bit silently.
  bit cv [8], pinned [8];

  function automatic int widx(ld_t l);
    longint sum;
    sum = longint'(l.ofs);
    if (l.nsrc > 0) sum += longint'(regs[l.s0][15:0]);
    if (l.nsrc > 1) sum += longint'(regs[l.s1][15:0]);
    return int'(sum % 64);
  endfunction

  // per-uop bookkeeping of the group being renamed
  typedef struct { bit is_load, is_store, is_alu; int pc; int w; bit [63:0] gold; } u_t;
  u_t grp [6];

  // non-eliminated loads waiting for writeback
  typedef struct { int pc; int w; bit [63:0] val; bit ls; bit [19:0] seq; bit [15:0] pseq; } wbq_t;
  wbq_t wbq [$];
  // eliminated loads still in flight (load-buffer model)
  typedef struct { int gid; int slot; int w; bit bad; int pc; } el_t;
  el_t elq [$];
  // renamed stores whose address is not generated yet
  typedef struct { int gid; int slot; int w; int due; } st_t;
  st_t stq [$];
  // xPRF registers held by in-flight eliminated loads
  int xq [$];

  always @(posedge clk) begin
    cycles++;
    if (pin_valid) begin
      line_t rel;
      n_pin++;
      rel = pin_line - pa_line(BASE);
      check(pin_line == pa_line(wb.addr) && rel < 8, "pin names the writeback's line");
      if (rel < 8) pinned[rel[2:0]] = 1;
    end
    if (stall_rd) n_stall_rd++;
    if (stall_clr) n_stall_clr++;
    if (track_refused) n_refused++;
    if (wb.valid && wb.likely_stable && !dut.fresh) n_stale++;
    if (wb.valid && wb.likely_stable && dut.tr_match && !dut.probe_ok) n_pstale++;
    n_rmt_rst += $countones(dut.u_arb.lo_gnt);
    n_amt_rst += $countones(dut.u_arb.hi_gnt);
    for (int p = 0; p < 3; p++) begin
      if (dut.xa_req[p] && !dut.xa_gnt[p]) n_xfull++;
      if (dut.lk_valid[p] && dut.lk_hit[p] && dut.lk_celim[p] && dut.grp_dep[dut.uop_of[p]]) n_dep++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_wb();
    wbq_t e;
    e = wbq.pop_front();
    wb = '0;
    wb.valid = 1;
    wb.pc = 64'h0000_7f00_0040_0000 + 64'(e.pc * 8);
    wb.addr = BASE + 48'(e.w * 8);
    wb.value = e.val;
    wb.likely_stable = e.ls;
    wb.src_seq = e.seq;
    wb.probe_seq = e.pseq;
    cv[e.w / 8] = 1;                     // the load brought the line into the core
    wb.src_valid = '0;
    if (prog[e.pc].nsrc > 0) begin wb.src_valid[0] = 1; wb.src[0] = prog[e.pc].s0; end
    if (prog[e.pc].nsrc > 1) begin wb.src_valid[1] = 1; wb.src[1] = prog[e.pc].s1; end
    @(posedge clk); #1;
    wb = '0;
  endtask

  // a store address reaches the engine: AMT probe plus load-buffer check
  task automatic send_store(st_t s);
    st_valid = 1; st_addr = BASE + 48'(s.w * 8);
    #1;
    while (!st_ready) begin @(posedge clk); #1; end
    if (probe_hit) n_st_hit++;
    @(posedge clk); #1;
    st_valid = 0;
    foreach (elq[i])
      if (elq[i].w == s.w && (elq[i].gid > s.gid || (elq[i].gid == s.gid && elq[i].slot > s.slot))) begin
        n_viol++;
        elq[i].bad = 0;                          // caught: re-executed below
        wbq.push_back('{pc: elq[i].pc, w: elq[i].w, val: mem[elq[i].w], ls: 0, seq: 0, pseq: 0});
        elq[i].w = -1;
      end
  endtask

  int hold_lim;
  bit early;

  // snoop: another core writes some words of a random line
  task automatic do_snoop();
    int l;
    l = $urandom_range(0, 7);
    for (int k = 0; k < 8; k++) if ($urandom_range(0, 1) == 1) mem[l * 8 + k] = {$urandom, $urandom};
    // the directory snoops this core only if its presence bit is set
    if (!cv[l]) begin n_nosnoop++; return; end
    sn_valid = 1; sn_line = pa_line(BASE + 48'(l * 64)); #1;
    while (!sn_ready) begin @(posedge clk); #1; end
    if (probe_hit) n_sn_hit++;
    @(posedge clk); #1;
    sn_valid = 0;
    cv[l] = 0; pinned[l] = 0;             // delivered: presence bit and pin reset
    repeat (3) @(posedge clk); #1;
  endtask

  initial begin
    int gid;
    ren_group_valid = 0; ren_uop = '0; xrd_idx = '0; xfree_valid = '0; xfree_idx = '0;
    wb = '0; st_valid = 0; st_addr = '0; sn_valid = 0; sn_line = '0;
    for (int k = 0; k < NPC; k++) begin
      prog[k].ofs = $urandom_range(0, 63);
      case (k % 3)
        0: begin prog[k].nsrc = 0; prog[k].ofs = 56 + k % 8; end   // all on one line: AMT list overflows
        1: begin prog[k].nsrc = 1; prog[k].s0 = (k % 2 == 1) ? 4'd4 : 4'd5; end
        default: begin
          prog[k].nsrc = (k % 4 == 2) ? 2 : 1;
          prog[k].s0 = 4'(8 + k % 4); prog[k].s1 = 4'd12;
        end
      endcase
    end
    foreach (regs[r]) regs[r] = 64'($urandom);
    foreach (mem[i]) mem[i] = {$urandom, $urandom};
    foreach (cv[l]) begin cv[l] = 0; pinned[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1; #1;

    for (gid = 0; gid < GROUPS; gid++) begin
      bit [5:0] got;
      int nl, phase;
      phase = (gid / 250) % 3;
      hold_lim = (phase == 2) ? 32 : 4;
      // -------- form the group in program order --------
      ren_uop = '0;
      nl = 0;
      for (int i = 0; i < 6; i++) begin
        int kind;
        kind = $urandom_range(0, 99);
        if ((gid % 50) == 7) kind = 0;         // now and then a load-heavy group
        grp[i] = '{is_load: 0, is_store: 0, is_alu: 0, pc: 0, w: 0, gold: 0};
        ren_uop[i].valid = 1;
        // now and then: load 4 (source RBP), then a younger uop that rewrites
        // RBP with the same value while the load is in flight
        if ((gid % 37) == 5 && i < 2) kind = (i == 0) ? 0 : 60;
        if (kind < 55) begin
          int k;
          k = ((gid % 37) == 5 && i == 0) ? 4 : $urandom_range(0, NPC - 1);
          grp[i].is_load = 1; grp[i].pc = k;
          grp[i].w = widx(prog[k]); grp[i].gold = mem[grp[i].w];
          ren_uop[i].is_load = 1;
          ren_uop[i].pc = 64'h0000_7f00_0040_0000 + 64'(k * 8);
          ren_uop[i].dst_valid = 1;
          ren_uop[i].dst = 4'($urandom_range(0, 3));       // loads write RAX..RBX
          if (prog[k].nsrc > 0) begin ren_uop[i].src_valid[0] = 1; ren_uop[i].src[0] = prog[k].s0; end
          if (prog[k].nsrc > 1) begin ren_uop[i].src_valid[1] = 1; ren_uop[i].src[1] = prog[k].s1; end
          regs[ren_uop[i].dst] = grp[i].gold;
          nl++;
        end else if (kind < 62) begin
          // ALU uop writing an address register; RSP/RBP rarely
          bit [3:0] d;
          int pick;
          pick = $urandom_range(0, 99);
          d = (pick < 3) ? 4'(4 + pick % 2) : (pick < 40) ? 4'(8 + pick % 5) : 4'($urandom_range(0, 3));
          if ((gid % 37) == 5 && i == 1) d = 4'd5;
          grp[i].is_alu = 1;
          ren_uop[i].dst_valid = 1; ren_uop[i].dst = d;
          if ($urandom_range(0, 1) == 1 && !((gid % 37) == 5 && i == 1)) regs[d] = 64'($urandom);
        end else if (kind < 66) begin
          int w;
          w = (phase == 1) ? $urandom_range(0, 63) : $urandom_range(0, 15);
          grp[i].is_store = 1; grp[i].w = w;
          if ($urandom_range(0, 3) != 0) mem[w] = {$urandom, $urandom};   // else silent store
          stq.push_back('{gid: gid, slot: i, w: w, due: gid + $urandom_range(0, 2)});
        end else begin
          ren_uop[i].valid = ($urandom_range(0, 1) == 1);  // other uop or bubble
        end
      end
      // -------- rename: hold the group until accepted --------
      got = '0;
      ren_group_valid = 1;
      #1;
      forever begin
        for (int i = 0; i < 6; i++) if (ren_res[i].valid) begin
          check(grp[i].is_load && !got[i], "one result per load");
          got[i] = 1;
          n_loads++;
          if (ren_res[i].eliminate) begin
            n_elim++;
            check(ren_res[i].addr == SADDR_W'(BASE + 48'(grp[i].w * 8)), "eliminated load address");
            elq.push_back('{gid: gid, slot: i, w: grp[i].w, bad: 0, pc: grp[i].pc});
            xq.push_back(int'(ren_res[i].xprf_idx));
            grp[i].is_alu = 1;     // marker: value to be read from xPRF
            grp[i].w = int'(ren_res[i].xprf_idx) + 1000 * (elq.size() - 1) + 1000000;
          end else begin
            if (ren_res[i].likely_stable) n_ls++;
            wbq.push_back('{pc: grp[i].pc, w: grp[i].w, val: grp[i].gold, ls: ren_res[i].likely_stable, seq: ren_res[i].src_seq, pseq: ren_res[i].probe_seq});
          end
        end
        if (ren_accept) break;
        @(posedge clk); #1;
      end
      @(posedge clk); #1;
      ren_group_valid = 0;
      for (int i = 0; i < 6; i++)
        if (grp[i].is_load) check(got[i], "every load looked up");
      // -------- read the values of eliminated loads from the xPRF --------
      for (int i = 0; i < 6; i++) if (grp[i].is_load && grp[i].is_alu) begin
        int xi, ei;
        xi = (grp[i].w - 1000000) % 1000;
        ei = (grp[i].w - 1000000) / 1000;
        xrd_idx[0] = 5'(xi); #1;
        if (xrd_val[0] != grp[i].gold) elq[ei].bad = 1;   // must be explained by a violation
      end
      // -------- in half of the groups stores and snoops come before the
      // writebacks of the group's loads (probe while a load is in flight) --------
      early = ($urandom_range(0, 1) == 1);
      if (early) begin
        for (int j = 0; j < stq.size(); j++)
          if (stq[j].due <= gid) begin
            send_store(stq[j]);
            stq.delete(j); j--;
          end
        if ($urandom_range(0, 19) == 0) do_snoop();
      end
      // -------- writebacks --------
      while (wbq.size() > 0) send_wb();
      // -------- store addresses that are due --------
      for (int j = 0; j < stq.size(); j++) begin
        if (stq[j].due <= gid) begin
          send_store(stq[j]);
          stq.delete(j); j--;
        end
      end
      while (wbq.size() > 0) send_wb();        // re-executed loads
      repeat (3) @(posedge clk); #1;           // AMT resets drain
      // retire eliminated loads that no pending store is older than
      while (elq.size() > 0 && (stq.size() == 0 || elq[0].gid < stq[0].gid ||
             (elq[0].gid == stq[0].gid && elq[0].slot < stq[0].slot))) begin
        el_t e;
        e = elq.pop_front();
        check(!e.bad, "eliminated load value (golden check)");
      end
      if (!early && $urandom_range(0, 19) == 0) do_snoop();
      // -------- clean eviction of a line from the private caches --------
      if ($urandom_range(0, 5) == 0) begin
        int l;
        l = $urandom_range(0, 7);
        n_evict++;
        if (pinned[l]) n_evict_pinned++;
        else cv[l] = 0;
      end
      // -------- address-mapping change --------
      if ((gid % 700) == 699) begin
        flush_all = 1; n_flush++;
        @(posedge clk); #1;
        flush_all = 0;
      end
      // -------- free xPRF registers beyond the hold limit --------
      while (xq.size() >= hold_lim) begin
        xfree_valid = 3'b001; xfree_idx[0] = 5'(xq.pop_front());
        @(posedge clk); #1;
        xfree_valid = '0;
      end
    end
    while (stq.size() > 0) begin send_store(stq.pop_front()); end
    while (wbq.size() > 0) send_wb();
    foreach (elq[i]) check(!elq[i].bad, "eliminated load value at end");

    $display("loads=%0d eliminated=%0d likely_stable=%0d pins=%0d", n_loads, n_elim, n_ls, n_pin);
    $display("evictions=%0d of_pinned=%0d unsnooped_writes=%0d", n_evict, n_evict_pinned, n_nosnoop);
    $display("stall_lookup=%0d stall_reset=%0d rmt_resets=%0d amt_resets=%0d", n_stall_rd, n_stall_clr, n_rmt_rst, n_amt_rst);
    $display("store_hits=%0d snoop_hits=%0d xprf_full=%0d group_dep=%0d refused=%0d stale=%0d probed=%0d violations=%0d flushes=%0d cycles=%0d",
             n_st_hit, n_sn_hit, n_xfull, n_dep, n_refused, n_stale, n_pstale, n_viol, n_flush, cycles);
    check(n_elim > 0, "eliminations happened");
    check(n_ls > 0, "likely-stable marks happened");
    check(n_pin > 0, "CV-bit pins happened");
    check(n_stall_rd > 0, "lookup stalls happened");
    check(n_stall_clr > 0, "reset stalls happened");
    check(n_rmt_rst > 0, "RMT resets happened");
    check(n_amt_rst > 0, "AMT resets happened");
    check(n_st_hit > 0, "store hits happened");
    check(n_sn_hit > 0, "snoop hits happened");
    check(n_xfull > 0, "xPRF exhaustion happened");
    check(n_dep > 0, "in-group dependences happened");
    check(n_refused > 0, "refused tracking happened");
    check(n_stale > 0, "stale-source writebacks happened");
    check(n_pstale > 0, "writebacks of lines probed in flight happened");
    check(n_nosnoop > 0, "writes by another core without snoop happened");
    check(n_evict_pinned > 0, "clean evictions of pinned lines happened");
    check(n_viol > 0, "disambiguation violations happened");
    check(n_flush > 0, "flushes happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
