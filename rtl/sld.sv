// sld: Stable Load Detector.
//
// A set-associative table indexed by the hashed load PC (signature). Each
// entry keeps the last computed load address, the last fetched value, a
// saturating stability confidence and the can_eliminate flag.
//
//  * Lookup ports (RD_PORTS, rename stage): combinational read of the current
//    state. lk_can_elim says the load may be eliminated with lk_val; lk_stable
//    says the confidence has reached CONF_THR, so the load is executed as
//    "likely-stable".
//  * Training port (writeback of a non-eliminated load): on a hit with equal
//    address and value the confidence is incremented (saturating), otherwise
//    it is halved and the new address and value are stored, and can_eliminate
//    is dropped. A miss allocates an entry with confidence 0. tr_match is a
//    combinational output so that the top can decide whether to insert the load
//    into the RMT and AMT; can_eliminate is set when the load was marked
//    likely-stable, matched, and tr_track_ok says both monitor tables took it.
//  * Clear ports (CLR_PORTS): reset can_eliminate of the entry holding a
//    signature. A clear wins over a set in the same cycle.
//  * flush_all: reset every can_eliminate flag (address-mapping change).
//  All updates take effect at the next rising clock edge.
//
// From the source design: the table geometry (32 x 16), the entry fields and
// widths, +1 / halve confidence training, threshold 30, three read ports and
// two reset ports. Own choices: only the low ADDR_W bits of the physical
// address are kept and compared; a load counts as likely-stable once the
// confidence is at least CONF_THR (the text speaks of surpassing the threshold,
// its worked example treats a confidence equal to it as enough, and this
// follows the example); can_eliminate is only set on a matching completion
// and is dropped on a mismatch; the victim is the first invalid way, otherwise a
// per-set round-robin pointer.
module sld
#(
  parameter int unsigned SETS      = 32,
  parameter int unsigned WAYS      = 16,
  parameter int unsigned TAG_W     = 24,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned VAL_W     = 64,
  parameter int unsigned CONF_W    = 5,
  parameter int unsigned CONF_THR  = 30,
  parameter int unsigned RD_PORTS  = 3,
  parameter int unsigned CLR_PORTS = 2
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              flush_all,
  // rename-stage lookups
  input  logic [RD_PORTS-1:0]               lk_valid,
  input  logic [RD_PORTS-1:0][TAG_W-1:0]    lk_sig,
  output logic [RD_PORTS-1:0]               lk_hit,
  output logic [RD_PORTS-1:0]               lk_can_elim,
  output logic [RD_PORTS-1:0]               lk_stable,
  output logic [RD_PORTS-1:0][ADDR_W-1:0]   lk_addr,
  output logic [RD_PORTS-1:0][VAL_W-1:0]    lk_val,
  // writeback-stage training
  input  logic                              tr_valid,
  input  logic [TAG_W-1:0]                  tr_sig,
  input  logic [ADDR_W-1:0]                 tr_addr,
  input  logic [VAL_W-1:0]                  tr_val,
  input  logic                              tr_likely_stable,
  output logic                              tr_match,
  input  logic                              tr_track_ok,
  // can_eliminate resets from RMT and AMT
  input  logic [CLR_PORTS-1:0]              clr_valid,
  input  logic [CLR_PORTS-1:0][TAG_W-1:0]   clr_sig
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam logic [CONF_W-1:0] CONF_MAX = '1;

  logic              valid_q [SETS][WAYS];
  logic              celim_q [SETS][WAYS];
  logic [TAG_W-1:0]  tag_q   [SETS][WAYS];
  logic [ADDR_W-1:0] addr_q  [SETS][WAYS];
  logic [VAL_W-1:0]  val_q   [SETS][WAYS];
  logic [CONF_W-1:0] conf_q  [SETS][WAYS];
  logic [WAY_W-1:0]  rr_q    [SETS];

  function automatic logic [SET_W-1:0] set_of(input logic [TAG_W-1:0] s);
    return s[SET_W-1:0];
  endfunction

  // ---------------- lookups ----------------
  always_comb begin
    for (int p = 0; p < RD_PORTS; p++) begin
      lk_hit[p]      = 1'b0;
      lk_can_elim[p] = 1'b0;
      lk_stable[p]   = 1'b0;
      lk_addr[p]     = '0;
      lk_val[p]      = '0;
      for (int w = 0; w < WAYS; w++) begin
        if (lk_valid[p] && valid_q[set_of(lk_sig[p])][w] &&
            tag_q[set_of(lk_sig[p])][w] == lk_sig[p]) begin
          lk_hit[p]      = 1'b1;
          lk_can_elim[p] = celim_q[set_of(lk_sig[p])][w];
          lk_stable[p]   = (conf_q[set_of(lk_sig[p])][w] >= CONF_W'(CONF_THR));
          lk_addr[p]     = addr_q[set_of(lk_sig[p])][w];
          lk_val[p]      = val_q[set_of(lk_sig[p])][w];
        end
      end
    end
  end

  // ---------------- training lookup ----------------
  logic [SET_W-1:0] tr_set;
  logic             tr_hit;
  logic [WAY_W-1:0] tr_way;
  logic             tr_free;
  logic [WAY_W-1:0] tr_free_way;

  always_comb begin
    tr_set      = set_of(tr_sig);
    tr_hit      = 1'b0;
    tr_way      = '0;
    tr_free     = 1'b0;
    tr_free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[tr_set][w] && tag_q[tr_set][w] == tr_sig) begin
        tr_hit = 1'b1;
        tr_way = WAY_W'(w);
      end
      if (!valid_q[tr_set][w]) begin
        tr_free     = 1'b1;
        tr_free_way = WAY_W'(w);
      end
    end
    tr_match = tr_valid && tr_hit &&
               addr_q[tr_set][tr_way] == tr_addr && val_q[tr_set][tr_way] == tr_val;
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          celim_q[s][w] <= 1'b0;
        end
      end
    end else begin
      if (tr_valid) begin
        if (tr_hit) begin
          if (tr_match) begin
            if (conf_q[tr_set][tr_way] != CONF_MAX)
              conf_q[tr_set][tr_way] <= conf_q[tr_set][tr_way] + 1'b1;
            if (tr_likely_stable && tr_track_ok)
              celim_q[tr_set][tr_way] <= 1'b1;
          end else begin
            conf_q[tr_set][tr_way]  <= conf_q[tr_set][tr_way] >> 1;
            addr_q[tr_set][tr_way]  <= tr_addr;
            val_q[tr_set][tr_way]   <= tr_val;
            celim_q[tr_set][tr_way] <= 1'b0;
          end
        end else begin
          logic [WAY_W-1:0] v;
          v = tr_free ? tr_free_way : rr_q[tr_set];
          valid_q[tr_set][v] <= 1'b1;
          tag_q[tr_set][v]   <= tr_sig;
          addr_q[tr_set][v]  <= tr_addr;
          val_q[tr_set][v]   <= tr_val;
          conf_q[tr_set][v]  <= '0;
          celim_q[tr_set][v] <= 1'b0;
          if (!tr_free)
            rr_q[tr_set] <= (rr_q[tr_set] == WAY_W'(WAYS - 1)) ? '0 : rr_q[tr_set] + 1'b1;
        end
      end
      // resets win over the set above
      for (int p = 0; p < CLR_PORTS; p++) begin
        if (clr_valid[p]) begin
          for (int w = 0; w < WAYS; w++) begin
            if (valid_q[set_of(clr_sig[p])][w] && tag_q[set_of(clr_sig[p])][w] == clr_sig[p])
              celim_q[set_of(clr_sig[p])][w] <= 1'b0;
          end
        end
      end
      if (flush_all) begin
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++)
            celim_q[s][w] <= 1'b0;
      end
    end
  end

endmodule
