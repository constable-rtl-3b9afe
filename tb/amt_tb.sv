// amt_tb: self-checking test of the Address Monitor Table.
//
// Random stimulus against a model keyed by cache-line address. The line pool
// holds 12 lines in each of two sets, more than the 8 ways, so that full sets
// and full PC lists (4 signatures) are exercised. Each cycle the test may
// insert a (line, signature) pair, probe a line as a store or snoop would,
// and grant some of the reset-buffer slots. It compares ins_ok, pr_ready,
// pr_hit, busy and the multiset of signatures in the reset buffer with the
// model, and counts how often each case (new entry, added PC, refused insert,
// probe hit, probe blocked) happened; a case that never happens is a failure.
module amt_tb;
  logic clk = 0, rst_n = 0, flush_all = 0;
  logic ins_valid, ins_ok, ins_commit;
  logic [41:0] ins_line, pr_line;
  logic [23:0] ins_sig;
  logic pr_valid, pr_ready, pr_hit;
  logic [3:0] cand, grant;
  logic [3:0][23:0] cand_sig;
  logic busy;
  int checks = 0, failures = 0;
  int n_new = 0, n_add = 0, n_refuse = 0, n_phit = 0, n_pblock = 0;

  amt dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  bit [23:0] m [bit [41:0]][$];   // line -> signatures
  bit [23:0] mbuf [$];

  function automatic int set_cnt(bit [41:0] l);
    int n = 0;
    foreach (m[k]) if (k[4:0] == l[4:0]) n++;
    return n;
  endfunction
  function automatic bit has(bit [23:0] q[$], bit [23:0] s);
    foreach (q[i]) if (q[i] == s) return 1;
    return 0;
  endfunction
  function automatic bit [41:0] pick_line();
    return {5'd0, 32'($urandom_range(0, 11)), 5'($urandom_range(0, 1))};
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ins_valid = 0; ins_commit = 0; pr_valid = 0; grant = '0; ins_line = '0; pr_line = '0; ins_sig = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      bit mok, clash, exist, take;
      bit [23:0] bq[$];
      bq = {};
      ins_valid  = ($urandom_range(0, 1) == 1);
      ins_commit = ($urandom_range(0, 3) != 0);
      ins_line   = pick_line();
      ins_sig    = 24'($urandom_range(1, 8));
      pr_valid   = ($urandom_range(0, 3) == 0);
      pr_line    = pick_line();
      grant      = '0;
      flush_all  = ($urandom_range(0, 4999) == 0);
      // model
      take  = pr_valid && mbuf.size() == 0;
      clash = take && pr_line == ins_line;
      exist = m.exists(ins_line);
      mok   = ins_valid && !clash &&
              (exist ? (has(m[ins_line], ins_sig) || m[ins_line].size() < 4) : set_cnt(ins_line) < 8);
      #1;
      check(ins_ok == mok, "ins_ok");
      check(pr_ready == (mbuf.size() == 0), "pr_ready");
      if (pr_valid) check(pr_hit == m.exists(pr_line), "pr_hit");
      for (int k = 0; k < 4; k++) if (cand[k]) bq.push_back(cand_sig[k]);
      bq.sort(); mbuf.sort();
      check(bq == mbuf, "reset buffer contents");
      for (int k = 0; k < 4; k++) if (cand[k] && $urandom_range(0, 1) == 1) grant[k] = 1;
      #1;
      check(busy == ((cand & ~grant) != '0), "busy");
      @(posedge clk);
      // model next state
      if (ins_valid && !mok && !clash) n_refuse++;
      if (pr_valid && !take) n_pblock++;
      mbuf = {};
      for (int k = 0; k < 4; k++) if (cand[k] && !grant[k]) mbuf.push_back(cand_sig[k]);
      if (ins_valid && mok && ins_commit) begin
        if (!exist) begin m[ins_line] = {ins_sig}; n_new++; end
        else if (!has(m[ins_line], ins_sig)) begin m[ins_line].push_back(ins_sig); n_add++; end
      end
      if (take && m.exists(pr_line)) begin
        mbuf = m[pr_line];
        m.delete(pr_line);
        n_phit++;
      end
      if (flush_all) begin m.delete(); mbuf = {}; end
      #1;
    end
    check(n_new > 0 && n_add > 0 && n_refuse > 0 && n_phit > 0 && n_pblock > 0, "all cases seen");
    $display("new=%0d add=%0d refuse=%0d probe_hit=%0d probe_blocked=%0d",
             n_new, n_add, n_refuse, n_phit, n_pblock);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
