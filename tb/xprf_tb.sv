// xprf_tb: self-checking test of the extra register file.
//
// Random allocation requests on the three ports, frees of allocated registers
// on the three free ports and reads on the two read ports, against a model of
// the free bitmap and the stored values. Checks that grants go to the lowest
// free registers in port order, that a request is refused exactly when the
// file is full, that values read back are the ones written, and free_cnt.
// Counts refused allocations (the "no free xPRF register" case) and fails if
// none happened.
module xprf_tb;
  logic clk = 0, rst_n = 0;
  logic [2:0] alloc_req, alloc_gnt;
  logic [2:0][63:0] alloc_val;
  logic [2:0][4:0] alloc_idx;
  logic [1:0][4:0] rd_idx;
  logic [1:0][63:0] rd_val;
  logic [2:0] free_valid;
  logic [2:0][4:0] free_idx;
  logic [5:0] free_cnt;
  int checks = 0, failures = 0, n_full = 0, n_gnt = 0;

  xprf dut (.*);
  always #5 clk = ~clk;

  bit used [32];
  bit [63:0] data [32];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alloc_req = '0; free_valid = '0; rd_idx = '0; alloc_val = '0; free_idx = '0;
    foreach (used[i]) used[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      bit taken [32];
      int nfree, exp_idx [3];
      bit exp_gnt [3];
      bit [4:0] fi;
      // allocation-heavy phases alternate with free-heavy phases
      bit heavy;
      heavy = ((cyc / 500) % 2) == 0;
      for (int p = 0; p < 3; p++) begin
        alloc_req[p] = heavy ? ($urandom_range(0, 1) == 1) : ($urandom_range(0, 5) == 0);
        alloc_val[p] = {$urandom, $urandom};
      end
      free_valid = '0;
      for (int p = 0; p < 3; p++) begin
        fi = 5'($urandom_range(0, 31));
        if (used[fi] && (heavy ? $urandom_range(0, 5) == 0 : $urandom_range(0, 1) == 1)) begin
          bit dup;
          dup = 0;
          for (int q = 0; q < p; q++) if (free_valid[q] && free_idx[q] == fi) dup = 1;
          if (!dup) begin free_valid[p] = 1; free_idx[p] = fi; end
        end
      end
      rd_idx[0] = 5'($urandom_range(0, 31)); rd_idx[1] = 5'($urandom_range(0, 31));
      // model
      nfree = 0;
      foreach (used[i]) begin taken[i] = used[i]; nfree += !used[i]; end
      for (int p = 0; p < 3; p++) begin
        exp_gnt[p] = 0; exp_idx[p] = 0;
        if (alloc_req[p])
          for (int e = 0; e < 32; e++) if (!taken[e]) begin
            exp_gnt[p] = 1; exp_idx[p] = e; taken[e] = 1; break;
          end
      end
      #1;
      check(free_cnt == 6'(nfree), "free_cnt");
      for (int p = 0; p < 3; p++) begin
        check(alloc_gnt[p] == exp_gnt[p], "grant");
        if (exp_gnt[p]) check(alloc_idx[p] == 5'(exp_idx[p]), "lowest free index");
        if (alloc_req[p] && !exp_gnt[p]) n_full++;
        if (exp_gnt[p]) n_gnt++;
      end
      for (int p = 0; p < 2; p++) if (used[rd_idx[p]]) check(rd_val[p] == data[rd_idx[p]], "read value");
      @(posedge clk);
      for (int p = 0; p < 3; p++) if (free_valid[p]) used[free_idx[p]] = 0;
      for (int p = 0; p < 3; p++) if (exp_gnt[p]) begin used[exp_idx[p]] = 1; data[exp_idx[p]] = alloc_val[p]; end
      #1;
    end
    check(n_full > 0 && n_gnt > 0, "both full and granted cases seen");
    $display("granted=%0d refused=%0d", n_gnt, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
