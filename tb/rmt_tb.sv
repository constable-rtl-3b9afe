// rmt_tb: self-checking test of the Register Monitor Table.
//
// A directed part fills the 16-slot RSP list and the 8-slot RAX list, checks
// that the next insertion is refused, renames RSP and checks that all sixteen
// signatures come out for reset, two per cycle, with busy high until the last
// pair. A random part drives insertions (one or two sources), rename groups of
// up to six destinations and random grants against a per-register model of
// valid and pending signatures, comparing ins_ok, busy and the multiset of
// candidates of every register each cycle. Slot positions are decoded with the
// documented layout: register r owns a contiguous slot range, 16 slots for
// RSP (4) and RBP (5), 8 for the others.
module rmt_tb;
  localparam int TOTAL = 144;
  logic clk = 0, rst_n = 0, flush_all = 0;
  logic ins_valid, ins_ok, ins_commit;
  logic [23:0] ins_sig;
  logic [1:0] ins_src_valid;
  logic [1:0][3:0] ins_src;
  logic [5:0] rn_valid;
  logic [5:0][3:0] rn_dst;
  logic [TOTAL-1:0] cand, grant;
  logic [TOTAL-1:0][23:0] cand_sig;
  logic busy;
  int checks = 0, failures = 0;

  rmt dut (.*);
  always #5 clk = ~clk;

  function automatic int cap(int r);  return (r == 4 || r == 5) ? 16 : 8; endfunction
  function automatic int base(int r);
    int b = 0;
    for (int k = 0; k < r; k++) b += cap(k);
    return b;
  endfunction
  function automatic int reg_of(int slot);
    for (int r = 0; r < 16; r++) if (slot >= base(r) && slot < base(r) + cap(r)) return r;
    return -1;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  bit [23:0] mval [16][$];
  bit [23:0] mpend [16][$];

  task automatic idle();
    ins_valid = 0; ins_commit = 0; ins_src_valid = '0; rn_valid = '0; grant = '0; flush_all = 0;
  endtask

  function automatic bit has(bit [23:0] q[$], bit [23:0] s);
    foreach (q[i]) if (q[i] == s) return 1;
    return 0;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    idle(); ins_sig = 0; ins_src = '0; rn_dst = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;

    // ---- directed: fill RSP (16) and RAX (8) ----
    for (int i = 0; i < 16; i++) begin
      ins_valid = 1; ins_commit = 1; ins_sig = 24'h100 + 24'(i);
      ins_src_valid = 2'b11; ins_src[0] = 4; ins_src[1] = (i < 8) ? 4'd0 : 4'd4;
      #1; check(ins_ok, "insert accepted while room");
      @(posedge clk); #1; idle();
    end
    ins_valid = 1; ins_sig = 24'h777; ins_src_valid = 2'b01; ins_src[0] = 4; #1;
    check(!ins_ok, "RSP list full refuses");
    ins_src[0] = 0; #1; check(!ins_ok, "RAX list full refuses");
    ins_src[0] = 1; #1; check(ins_ok, "RCX list has room");
    ins_sig = 24'h105; ins_src[0] = 4; #1; check(ins_ok, "already listed is accepted");
    idle();
    // rename RSP: 16 resets, two per cycle
    n = 0;
    for (int c = 0; c < 8; c++) begin
      int g;
      g = 0;
      rn_valid[0] = (c == 0); rn_dst[0] = 4; #1;
      for (int s = 0; s < TOTAL && g < 2; s++) if (cand[s]) begin
        check(reg_of(s) == 4, "only RSP slots pending");
        grant[s] = 1; g++; n++;
      end
      #1; check(busy == (c < 7), "busy until last pair granted");
      @(posedge clk); #1; idle();
    end
    check(n == 16, "sixteen resets drained");
    check(cand == '0, "nothing left pending");

    // ---- random part against the model ----
    rst_n = 0; @(posedge clk); #1; rst_n = 1;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      bit [15:0] w;
      bit mok;
      bit [23:0] cq [16][$];
      bit [1:0] mhit;
      idle();
      ins_valid = ($urandom_range(0, 1) == 1);
      ins_commit = ($urandom_range(0, 3) != 0);
      ins_sig = 24'($urandom_range(1, 60));
      ins_src_valid = 2'($urandom_range(0, 3));
      ins_src[0] = 4'($urandom_range(0, 15)); ins_src[1] = 4'($urandom_range(0, 15));
      w = '0;
      for (int i = 0; i < 6; i++) begin
        rn_valid[i] = ($urandom_range(0, 11) == 0);
        rn_dst[i] = 4'($urandom_range(0, 15));
        if (rn_valid[i]) w[rn_dst[i]] = 1;
      end
      // model candidates and ins_ok
      for (int r = 0; r < 16; r++) begin
        cq[r] = mpend[r];
        if (w[r]) foreach (mval[r][k]) cq[r].push_back(mval[r][k]);
      end
      mok = ins_valid;
      for (int s = 0; s < 2; s++) begin
        int r; r = int'(ins_src[s]);
        mhit[s] = has(mval[r], ins_sig);
        if (ins_src_valid[s] && !(s == 1 && ins_src_valid[0] && ins_src[0] == ins_src[1]))
          if (!has(mval[r], ins_sig) && mval[r].size() + mpend[r].size() >= cap(r)) mok = 0;
      end
      #1;
      check(ins_ok == mok, "random ins_ok");
      for (int r = 0; r < 16; r++) begin
        bit [23:0] dq[$];
        dq = {};
        for (int k = 0; k < cap(r); k++) if (cand[base(r) + k]) dq.push_back(cand_sig[base(r) + k]);
        dq.sort(); cq[r].sort();
        check(dq == cq[r], "random candidates per register");
      end
      for (int s = 0; s < TOTAL; s++) if (cand[s] && $urandom_range(0, 2) == 0) grant[s] = 1;
      #1;
      check(busy == ((cand & ~grant) != '0), "random busy");
      // model next state
      for (int r = 0; r < 16; r++) begin
        mpend[r] = {};
        for (int k = 0; k < cap(r); k++)
          if (cand[base(r) + k] && !grant[base(r) + k]) mpend[r].push_back(cand_sig[base(r) + k]);
        if (w[r]) mval[r] = {};
      end
      if (ins_valid && mok && ins_commit)
        for (int s = 0; s < 2; s++) begin
          int r; r = int'(ins_src[s]);
          if (ins_src_valid[s] && !(s == 1 && ins_src_valid[0] && ins_src[0] == ins_src[1])) begin
            if (mhit[s]) ;
            else if (w[r]) mpend[r].push_back(ins_sig);
            else mval[r].push_back(ins_sig);
          end
        end
      if ($urandom_range(0, 2999) == 0) begin
        flush_all = 1;
        for (int r = 0; r < 16; r++) begin mval[r] = {}; mpend[r] = {}; end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
