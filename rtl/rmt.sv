// rmt: Register Monitor Table.
//
// For every architectural register the RMT keeps a small list of signatures of
// loads that are currently eliminable and use that register as a source
// (STACK_SLOTS slots for RSP and RBP, OTHER_SLOTS for every other register;
// all slots sit in one flat array, register r owning a contiguous range).
//
//  * Insert (writeback of a likely-stable load): ins_ok is a combinational
//    answer saying every valid source register either already lists the
//    signature or has a free slot. The slots are written at the clock edge
//    when ins_commit is high (the top raises it only when the AMT also accepted
//    the load, so that a load is eliminable only while both tables watch it).
//  * Rename: each destination register of the rename group turns all of its
//    valid slots into "pending" slots. A pending slot is a signature whose
//    SLD can_eliminate flag still has to be reset.
//  * Drain: cand/cand_sig expose every slot that is pending now, including the
//    ones turned pending by this cycle's rename group, so that resets can be
//    granted in the same cycle. Granted slots are freed at the clock edge;
//    busy says some pending slot survives into the next cycle, which makes the
//    top stall rename.
//  * flush_all empties the table.
//
// From the source design: the per-register slot counts, insertion of the load
// PC for each source register at writeback, lookup with the destination
// register of every renamed uop and the resulting SLD resets. Own choices:
// the register's list is emptied when it is renamed (its loads are no longer
// eliminable, so keeping them serves nothing); an insertion into a full list
// is refused rather than displacing a tracked load; a load inserted in the same
// cycle as a rename of its source register is made pending at once.
module rmt
#(
  parameter int unsigned NUM_REGS    = 16,
  parameter int unsigned STACK_SLOTS = 16,
  parameter int unsigned OTHER_SLOTS = 8,
  parameter int unsigned RENAME_W    = 6,
  parameter int unsigned NSRC        = 2,
  parameter int unsigned SIGW        = 24,
  parameter int unsigned TOTAL       = 2 * STACK_SLOTS + (NUM_REGS - 2) * OTHER_SLOTS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            flush_all,
  // insertion at writeback
  input  logic                            ins_valid,
  input  logic [SIGW-1:0]                 ins_sig,
  input  logic [NSRC-1:0]                 ins_src_valid,
  input  logic [NSRC-1:0][3:0]            ins_src,
  output logic                            ins_ok,
  input  logic                            ins_commit,
  // destination registers of the rename group
  input  logic [RENAME_W-1:0]             rn_valid,
  input  logic [RENAME_W-1:0][3:0]        rn_dst,
  // drain towards SLD resets
  output logic [TOTAL-1:0]                cand,
  output logic [TOTAL-1:0][SIGW-1:0]      cand_sig,
  input  logic [TOTAL-1:0]                grant,
  output logic                            busy
);

  function automatic int unsigned slots_of(input int unsigned r);
    return (r == 4 || r == 5) ? STACK_SLOTS : OTHER_SLOTS;
  endfunction

  // registers 4 and 5 own STACK_SLOTS slots, all others OTHER_SLOTS
  function automatic int unsigned base_of(input int unsigned r);
    return r * OTHER_SLOTS + ((r > 4) ? STACK_SLOTS - OTHER_SLOTS : 0)
                           + ((r > 5) ? STACK_SLOTS - OTHER_SLOTS : 0);
  endfunction

  logic [TOTAL-1:0]           valid_q, pend_q;
  logic [TOTAL-1:0][SIGW-1:0] sig_q;

  // registers written by the rename group this cycle
  logic [NUM_REGS-1:0] written;
  always_comb begin
    written = '0;
    for (int i = 0; i < RENAME_W; i++)
      if (rn_valid[i]) written[rn_dst[i]] = 1'b1;
  end

  // slot -> register mask of written slots
  logic [TOTAL-1:0] wslot;
  always_comb begin
    for (int r = 0; r < NUM_REGS; r++)
      for (int k = 0; k < int'(slots_of(r)); k++)
        wslot[base_of(r) + k] = written[r];
  end

  assign cand     = pend_q | (valid_q & wslot);
  assign cand_sig = sig_q;
  assign busy     = |(cand & ~grant);

  // insertion: per source, find the signature or a free slot
  logic [NSRC-1:0]       src_hit, src_free, src_need;
  int unsigned           src_slot [NSRC];
  always_comb begin
    for (int s = 0; s < NSRC; s++) begin
      src_hit[s]  = 1'b0;
      src_free[s] = 1'b0;
      src_slot[s] = 0;
      // a second source equal to the first needs nothing more
      src_need[s] = ins_src_valid[s];
      for (int t = 0; t < s; t++)
        if (ins_src_valid[t] && ins_src[t] == ins_src[s]) src_need[s] = 1'b0;
      for (int r = 0; r < NUM_REGS; r++)
        for (int k = int'(STACK_SLOTS) - 1; k >= 0; k--)
          if (ins_src[s] == 4'(r) && k < int'(slots_of(r))) begin
            if (valid_q[base_of(r) + k] && sig_q[base_of(r) + k] == ins_sig)
              src_hit[s] = 1'b1;
            if (!valid_q[base_of(r) + k] && !pend_q[base_of(r) + k]) begin
              src_free[s] = 1'b1;
              src_slot[s] = base_of(r) + k;
            end
          end
    end
    ins_ok = ins_valid;
    for (int s = 0; s < NSRC; s++)
      if (src_need[s] && !src_hit[s] && !src_free[s]) ins_ok = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      pend_q  <= '0;
    end else if (flush_all) begin
      valid_q <= '0;
      pend_q  <= '0;
    end else begin
      valid_q <= valid_q & ~wslot;
      pend_q  <= cand & ~grant;
      if (ins_valid && ins_ok && ins_commit) begin
        for (int s = 0; s < NSRC; s++) begin
          if (src_need[s] && !src_hit[s]) begin
            sig_q[src_slot[s]] <= ins_sig;
            if (written[ins_src[s]]) pend_q[src_slot[s]]  <= 1'b1;
            else                     valid_q[src_slot[s]] <= 1'b1;
          end
        end
      end
    end
  end

endmodule
