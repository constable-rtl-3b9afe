// sld_tb: self-checking test of the Stable Load Detector.
//
// A directed part replays the worked example of the design: a load trained to
// confidence 30 is likely-stable but not eliminable; its likely-stable
// completion raises the confidence to 31 and sets can_eliminate; a store reset
// clears the flag; a completion with a different value halves the confidence
// to 15. It also checks clear-over-set priority, flush_all and round-robin
// replacement in a full set. A random part drives all ports against an
// associative-array model of the table (a pool of 40 signatures, so no set
// overflows), comparing every lookup output before each clock edge.
module sld_tb;
  localparam int RD = 3, CL = 2;
  logic clk = 0, rst_n = 0, flush_all = 0;
  logic [RD-1:0] lk_valid;
  logic [RD-1:0][23:0] lk_sig;
  logic [RD-1:0] lk_hit, lk_can_elim, lk_stable;
  logic [RD-1:0][31:0] lk_addr;
  logic [RD-1:0][63:0] lk_val;
  logic tr_valid, tr_likely_stable, tr_match, tr_track_ok;
  logic [23:0] tr_sig;
  logic [31:0] tr_addr;
  logic [63:0] tr_val;
  logic [CL-1:0] clr_valid;
  logic [CL-1:0][23:0] clr_sig;
  int checks = 0, failures = 0;

  sld dut (.*);

  always #5 clk = ~clk;

  // reference model
  typedef struct { bit [31:0] addr; bit [63:0] val; int conf; bit celim; } ent_t;
  ent_t m [bit [23:0]];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic idle();
    lk_valid = '0; tr_valid = 0; tr_likely_stable = 0; tr_track_ok = 0;
    clr_valid = '0; flush_all = 0;
  endtask

  task automatic train(input bit [23:0] s, input bit [31:0] a, input bit [63:0] v,
                       input bit ls, input bit ok);
    tr_valid = 1; tr_sig = s; tr_addr = a; tr_val = v; tr_likely_stable = ls; tr_track_ok = ok;
    @(posedge clk); #1; idle();
  endtask

  task automatic look(input bit [23:0] s, output bit hit, output bit ce, output bit st,
                      output bit [63:0] v);
    lk_valid = 3'b001; lk_sig[0] = s; #1;
    hit = lk_hit[0]; ce = lk_can_elim[0]; st = lk_stable[0]; v = lk_val[0];
    lk_valid = '0;
  endtask

  // model update of one training event
  function automatic void m_train(bit [23:0] s, bit [31:0] a, bit [63:0] v, bit ls, bit ok);
    if (!m.exists(s)) begin
      m[s] = '{addr: a, val: v, conf: 0, celim: 0};
    end else if (m[s].addr == a && m[s].val == v) begin
      if (m[s].conf < 31) m[s].conf++;
      if (ls && ok) m[s].celim = 1;
    end else begin
      m[s].conf = m[s].conf / 2; m[s].addr = a; m[s].val = v; m[s].celim = 0;
    end
  endfunction

  bit h, ce, st;
  bit [63:0] v;
  bit [23:0] pool [40];

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); tr_sig = 0; tr_addr = 0; tr_val = 0; lk_sig = '0; clr_sig = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;

    // ---- worked example ----
    train(24'h00A5A3, 32'h1000, 64'hDEAD, 0, 0);            // allocate, conf 0
    for (int i = 0; i < 30; i++) begin
      look(24'h00A5A3, h, ce, st, v);
      check(h && !st && !ce, "not stable before threshold");
      train(24'h00A5A3, 32'h1000, 64'hDEAD, 0, 0);
    end
    look(24'h00A5A3, h, ce, st, v);
    check(h && st && !ce && v == 64'hDEAD, "conf 30 is likely-stable, not eliminable");
    train(24'h00A5A3, 32'h1000, 64'hDEAD, 1, 1);
    look(24'h00A5A3, h, ce, st, v);
    check(ce && st, "likely-stable completion sets can_eliminate");
    // reset through a clear port
    clr_valid = 2'b10; clr_sig[1] = 24'h00A5A3; @(posedge clk); #1; idle();
    look(24'h00A5A3, h, ce, st, v);
    check(!ce && st, "clear resets can_eliminate only");
    // changed value: 31 -> 15
    train(24'h00A5A3, 32'h1000, 64'hBEEF, 0, 0);
    look(24'h00A5A3, h, ce, st, v);
    check(!st && v == 64'hBEEF && dut.conf_q[5'h03][0] == 5'd15, "mismatch halves 31 to 15");
    // refused tracking leaves flag clear
    for (int i = 0; i < 16; i++) train(24'h00A5A3, 32'h1000, 64'hBEEF, 0, 0);
    train(24'h00A5A3, 32'h1000, 64'hBEEF, 1, 0);
    look(24'h00A5A3, h, ce, st, v);
    check(st && !ce, "track refused: no can_eliminate");
    // set and clear in the same cycle: clear wins
    tr_valid = 1; tr_sig = 24'h00A5A3; tr_addr = 32'h1000; tr_val = 64'hBEEF;
    tr_likely_stable = 1; tr_track_ok = 1; clr_valid = 2'b01; clr_sig[0] = 24'h00A5A3;
    #1; check(tr_match, "tr_match on equal address and value");
    @(posedge clk); #1; idle();
    look(24'h00A5A3, h, ce, st, v);
    check(!ce, "clear wins over set");
    train(24'h00A5A3, 32'h1000, 64'hBEEF, 1, 1);
    look(24'h00A5A3, h, ce, st, v);
    check(ce, "set again");
    flush_all = 1; @(posedge clk); #1; idle();
    look(24'h00A5A3, h, ce, st, v);
    check(h && !ce, "flush_all clears can_eliminate, keeps entry");

    // ---- replacement: 17 signatures in set 7 ----
    for (int i = 0; i < 17; i++) train({19'(i + 1), 5'd7}, 32'(i), 64'(i), 0, 0);
    look({19'd1, 5'd7}, h, ce, st, v);
    check(!h, "first way replaced when set is full");
    look({19'd2, 5'd7}, h, ce, st, v);
    check(h && v == 64'd1, "second entry kept");
    look({19'd17, 5'd7}, h, ce, st, v);
    check(h && v == 64'd16, "new entry present");

    // ---- random part against the model ----
    rst_n = 0; @(posedge clk); #1; rst_n = 1; m.delete();
    foreach (pool[i]) pool[i] = {19'($urandom), 5'(i % 32)};
    for (int cyc = 0; cyc < 20000; cyc++) begin
      bit [23:0] s;
      bit [31:0] a;
      bit [63:0] vv;
      bit ls, ok;
      idle();
      for (int p = 0; p < RD; p++) begin
        lk_valid[p] = 1'($urandom_range(0, 1));
        lk_sig[p]   = pool[$urandom_range(0, 39)];
      end
      s  = pool[$urandom_range(0, 39)];
      if (m.exists(s) && $urandom_range(0, 9) != 0) begin a = m[s].addr; vv = m[s].val; end
      else begin a = 32'($urandom_range(0, 3)); vv = 64'($urandom_range(0, 3)); end
      ls = m.exists(s) && m[s].conf >= 30;
      ok = $urandom_range(0, 3) != 0;
      tr_valid = 1'($urandom_range(0, 1)); tr_sig = s; tr_addr = a; tr_val = vv;
      tr_likely_stable = ls; tr_track_ok = ok;
      for (int p = 0; p < CL; p++) begin
        clr_valid[p] = ($urandom_range(0, 15) == 0);
        clr_sig[p]   = pool[$urandom_range(0, 39)];
      end
      #1;
      for (int p = 0; p < RD; p++) if (lk_valid[p]) begin
        bit e; e = m.exists(lk_sig[p]);
        check(lk_hit[p] == e, "random hit");
        if (e) begin
          check(lk_can_elim[p] == m[lk_sig[p]].celim, "random can_eliminate");
          check(lk_stable[p] == (m[lk_sig[p]].conf >= 30), "random stable");
          check(lk_val[p] == m[lk_sig[p]].val && lk_addr[p] == m[lk_sig[p]].addr, "random data");
        end
      end
      if (tr_valid)
        check(tr_match == (m.exists(s) && m[s].addr == a && m[s].val == vv), "random tr_match");
      @(posedge clk);
      if (tr_valid) m_train(s, a, vv, ls, ok);
      for (int p = 0; p < CL; p++)
        if (clr_valid[p] && m.exists(clr_sig[p])) m[clr_sig[p]].celim = 0;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
