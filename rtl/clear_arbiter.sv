// clear_arbiter: picks the can_eliminate resets that use the SLD write ports.
//
// The SLD has PORTS reset ports. Resets are requested by two sources, each a
// bit vector of pending signatures: the AMT reset buffer (hi_*, filled by a
// store or snoop hit) and the RMT pending slots (lo_*, filled by renamed
// destination registers). Every cycle the arbiter grants up to PORTS requests,
// the AMT ones first, and inside a source the lowest index first. It is purely
// combinational: grants and the SLD port signals belong to the same cycle.
// Requests that are not granted stay pending in their source, which is what
// makes the top stall rename when a rename group needs more than PORTS resets.
//
// From the source design: two SLD write ports and the rename stall when more
// updates are needed. Own choice: the fixed AMT-over-RMT priority (the AMT
// buffer holds at most four signatures and blocks further probes until empty).
module clear_arbiter #(
  parameter int unsigned PORTS = 2,
  parameter int unsigned NH    = 4,
  parameter int unsigned NL    = 144,
  parameter int unsigned SIGW  = 24
) (
  input  logic [NH-1:0]             hi_req,
  input  logic [NH-1:0][SIGW-1:0]   hi_sig,
  input  logic [NL-1:0]             lo_req,
  input  logic [NL-1:0][SIGW-1:0]   lo_sig,
  output logic [NH-1:0]             hi_gnt,
  output logic [NL-1:0]             lo_gnt,
  output logic [PORTS-1:0]          clr_valid,
  output logic [PORTS-1:0][SIGW-1:0] clr_sig
);

  always_comb begin
    int unsigned n;
    n         = 0;
    hi_gnt    = '0;
    lo_gnt    = '0;
    clr_valid = '0;
    clr_sig   = '0;
    for (int i = 0; i < NH; i++) begin
      if (hi_req[i] && n < PORTS) begin
        hi_gnt[i]    = 1'b1;
        clr_valid[n] = 1'b1;
        clr_sig[n]   = hi_sig[i];
        n++;
      end
    end
    for (int i = 0; i < NL; i++) begin
      if (lo_req[i] && n < PORTS) begin
        lo_gnt[i]    = 1'b1;
        clr_valid[n] = 1'b1;
        clr_sig[n]   = lo_sig[i];
        n++;
      end
    end
  end

endmodule
