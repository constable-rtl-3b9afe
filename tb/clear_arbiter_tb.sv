// clear_arbiter_tb: self-checking test of the SLD reset arbiter.
//
// Random request vectors from the AMT side (4 bits) and the RMT side (144
// bits), from sparse to dense. For each the test computes the expected grants
// independently (AMT requests first, lowest index first, at most two in all)
// and compares grants, port valids and port signatures. It is combinational,
// so each vector is checked after a 1-time-unit settle delay.
module clear_arbiter_tb;
  logic [3:0] hi_req, hi_gnt;
  logic [3:0][23:0] hi_sig;
  logic [143:0] lo_req, lo_gnt;
  logic [143:0][23:0] lo_sig;
  logic [1:0] clr_valid;
  logic [1:0][23:0] clr_sig;
  int checks = 0, failures = 0;

  clear_arbiter dut (.*);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      bit [23:0] exp_sig [$];
      int dens_h, dens_l;
      bit [3:0] eh;
      bit [143:0] el;
      dens_h = $urandom_range(0, 4); dens_l = $urandom_range(0, 200);
      for (int i = 0; i < 4; i++) begin
        hi_req[i] = ($urandom_range(0, 3) < dens_h); hi_sig[i] = 24'($urandom);
      end
      for (int i = 0; i < 144; i++) begin
        lo_req[i] = ($urandom_range(0, 9999) < dens_l); lo_sig[i] = 24'($urandom);
      end
      eh = '0; el = '0; exp_sig = {};
      for (int i = 0; i < 4; i++)   if (hi_req[i] && exp_sig.size() < 2) begin eh[i] = 1; exp_sig.push_back(hi_sig[i]); end
      for (int i = 0; i < 144; i++) if (lo_req[i] && exp_sig.size() < 2) begin el[i] = 1; exp_sig.push_back(lo_sig[i]); end
      #1;
      check(hi_gnt == eh, "AMT grants");
      check(lo_gnt == el, "RMT grants");
      for (int p = 0; p < 2; p++) begin
        check(clr_valid[p] == (p < exp_sig.size()), "port valid");
        if (p < exp_sig.size()) check(clr_sig[p] == exp_sig[p], "port signature");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
