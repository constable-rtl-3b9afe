// amt: Address Monitor Table.
//
// A set-associative table indexed by the physical cache-line address. Each
// entry lists up to PCS signatures of eliminable loads that read the line.
//
//  * Insert (writeback of a likely-stable load): ins_ok is a combinational
//    answer saying the load can be tracked: the line's entry already lists the
//    signature, has a free PC slot, or the set has an invalid way for a new
//    entry. The table is written at the clock edge when ins_commit is high.
//  * Probe (a store's physical address was generated, or a snoop arrived): a
//    probe is taken when pr_ready is high (the reset buffer is empty). On a hit
//    (pr_hit) the entry's signatures move to the reset buffer and the entry is
//    invalidated at the clock edge. An insertion of the probed line in the same
//    cycle is refused.
//  * Drain: cand/cand_sig show the reset buffer; granted slots are freed at the
//    clock edge; busy says the buffer is not empty.
//  * flush_all empties the table and the buffer.
//
// From the source design: cache-line indexing (snoops carry line addresses),
// 32 sets x 8 ways, a 32-bit tag, four hashed PCs per entry, one lookup and
// one write per cycle, eviction of the entry after a store or snoop hit.
// Own choices: the tag is the 32 line-address bits right above the set index,
// so lines that differ only in higher bits alias; aliasing can only cause
// extra resets, never a missed one. Insertions into a full entry or a full set
// are refused instead of replacing a tracked line.
module amt
#(
  parameter int unsigned SETS   = 32,
  parameter int unsigned WAYS   = 8,
  parameter int unsigned TAG_W  = 32,
  parameter int unsigned PCS    = 4,
  parameter int unsigned LINEW  = 42,
  parameter int unsigned SIGW   = 24
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        flush_all,
  // insertion at writeback
  input  logic                        ins_valid,
  input  logic [LINEW-1:0]            ins_line,
  input  logic [SIGW-1:0]             ins_sig,
  output logic                        ins_ok,
  input  logic                        ins_commit,
  // store / snoop probe
  input  logic                        pr_valid,
  input  logic [LINEW-1:0]            pr_line,
  output logic                        pr_ready,
  output logic                        pr_hit,
  // drain towards SLD resets
  output logic [PCS-1:0]              cand,
  output logic [PCS-1:0][SIGW-1:0]    cand_sig,
  input  logic [PCS-1:0]              grant,
  output logic                        busy
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned PCI_W = (PCS > 1) ? $clog2(PCS) : 1;

  logic                       valid_q [SETS][WAYS];
  logic [TAG_W-1:0]           tag_q   [SETS][WAYS];
  logic [PCS-1:0]             pcv_q   [SETS][WAYS];
  logic [PCS-1:0][SIGW-1:0]   pcs_q   [SETS][WAYS];

  logic [PCS-1:0]             buf_v_q;
  logic [PCS-1:0][SIGW-1:0]   buf_s_q;

  function automatic logic [SET_W-1:0] set_of(input logic [LINEW-1:0] l);
    return l[SET_W-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(input logic [LINEW-1:0] l);
    return l[SET_W +: TAG_W];
  endfunction

  // ---------------- probe ----------------
  logic             pr_take;
  logic [WAY_W-1:0] pr_way;
  assign pr_ready = (buf_v_q == '0);
  assign pr_take  = pr_valid && pr_ready;
  always_comb begin
    pr_hit = 1'b0;
    pr_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (pr_valid && valid_q[set_of(pr_line)][w] && tag_q[set_of(pr_line)][w] == tag_of(pr_line)) begin
        pr_hit = 1'b1;
        pr_way = WAY_W'(w);
      end
  end

  // ---------------- insert ----------------
  logic             in_hit, in_has_sig, in_slot_free, in_way_free, in_clash;
  logic [WAY_W-1:0] in_way, in_free_way;
  logic [PCI_W-1:0] in_slot;
  logic [SET_W-1:0] in_set;
  always_comb begin
    in_set       = set_of(ins_line);
    in_hit       = 1'b0;
    in_way       = '0;
    in_way_free  = 1'b0;
    in_free_way  = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[in_set][w] && tag_q[in_set][w] == tag_of(ins_line)) begin
        in_hit = 1'b1;
        in_way = WAY_W'(w);
      end
      if (!valid_q[in_set][w]) begin
        in_way_free = 1'b1;
        in_free_way = WAY_W'(w);
      end
    end
    in_has_sig   = 1'b0;
    in_slot_free = 1'b0;
    in_slot      = '0;
    for (int k = PCS - 1; k >= 0; k--) begin
      if (pcv_q[in_set][in_way][k] && pcs_q[in_set][in_way][k] == ins_sig) in_has_sig = 1'b1;
      if (!pcv_q[in_set][in_way][k]) begin
        in_slot_free = 1'b1;
        in_slot      = PCI_W'(k);
      end
    end
    // a probe of the same set and tag in this cycle wins
    in_clash = pr_take && set_of(pr_line) == in_set && tag_of(pr_line) == tag_of(ins_line);
    ins_ok   = ins_valid && !in_clash &&
               (in_hit ? (in_has_sig || in_slot_free) : in_way_free);
  end

  assign cand     = buf_v_q;
  assign cand_sig = buf_s_q;
  assign busy     = (buf_v_q & ~grant) != '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_v_q <= '0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          pcv_q[s][w]   <= '0;
        end
    end else if (flush_all) begin
      buf_v_q <= '0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          pcv_q[s][w]   <= '0;
        end
    end else begin
      buf_v_q <= buf_v_q & ~grant;
      if (ins_valid && ins_ok && ins_commit) begin
        if (in_hit) begin
          if (!in_has_sig) begin
            pcv_q[in_set][in_way][in_slot] <= 1'b1;
            pcs_q[in_set][in_way][in_slot] <= ins_sig;
          end
        end else begin
          valid_q[in_set][in_free_way] <= 1'b1;
          tag_q[in_set][in_free_way]   <= tag_of(ins_line);
          pcv_q[in_set][in_free_way]   <= PCS'(1);
          pcs_q[in_set][in_free_way][0] <= ins_sig;
        end
      end
      if (pr_take && pr_hit) begin
        valid_q[set_of(pr_line)][pr_way] <= 1'b0;
        pcv_q[set_of(pr_line)][pr_way]   <= '0;
        buf_v_q <= pcv_q[set_of(pr_line)][pr_way];
        buf_s_q <= pcs_q[set_of(pr_line)][pr_way];
      end
    end
  end

endmodule
