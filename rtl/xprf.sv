// xprf: extra physical register file for eliminated loads.
//
// An eliminated load is turned into a register move whose source is an xPRF
// register holding the load's last fetched value; dependents read it from
// here. The file has ENTRIES registers and a free bitmap.
//
//  * Allocation (ALLOC ports, rename stage): alloc_gnt/alloc_idx are a
//    combinational answer; requests are served in port order from the lowest
//    free registers, each port getting a different one. A request that finds
//    no free register is not granted, and the load is then executed normally.
//    The value on alloc_val is written at the clock edge.
//  * Read (READ ports): combinational read by dependents.
//  * Free (FREE ports): the core returns a register when the mapping that uses
//    it is released. Freeing a register that is not allocated is a protocol
//    error, checked by an assertion.
//  * free_cnt gives the number of free registers.
// The assertion is disabled during reset (disable iff on rst_n), so linters
// see rst_n used both as an asynchronous reset and in a clocked expression.
//
// From the source design: 32 entries, allocation at rename, fallback to normal
// execution when no register is free. Own choices: the port counts (three
// allocations, matching the three SLD reads per cycle), first-free allocation
// and release by explicit index from the core.
module xprf #(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned WIDTH   = 64,
  parameter int unsigned ALLOC   = 3,
  parameter int unsigned READ    = 2,
  parameter int unsigned FREE    = 3,
  parameter int unsigned IW      = $clog2(ENTRIES)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ALLOC-1:0]            alloc_req,
  input  logic [ALLOC-1:0][WIDTH-1:0] alloc_val,
  output logic [ALLOC-1:0]            alloc_gnt,
  output logic [ALLOC-1:0][IW-1:0]    alloc_idx,
  input  logic [READ-1:0][IW-1:0]     rd_idx,
  output logic [READ-1:0][WIDTH-1:0]  rd_val,
  input  logic [FREE-1:0]             free_valid,
  input  logic [FREE-1:0][IW-1:0]     free_idx,
  output logic [IW:0]                 free_cnt
);

  logic [ENTRIES-1:0]  used_q;
  logic [WIDTH-1:0]    data_q [ENTRIES];

  always_comb begin
    logic [ENTRIES-1:0] taken;
    taken = used_q;
    for (int p = 0; p < ALLOC; p++) begin
      alloc_gnt[p] = 1'b0;
      alloc_idx[p] = '0;
      if (alloc_req[p]) begin
        for (int e = ENTRIES - 1; e >= 0; e--)
          if (!taken[e]) begin
            alloc_gnt[p] = 1'b1;
            alloc_idx[p] = IW'(e);
          end
        if (alloc_gnt[p]) taken[alloc_idx[p]] = 1'b1;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < READ; p++) rd_val[p] = data_q[rd_idx[p]];
  end

  always_comb begin
    free_cnt = '0;
    for (int e = 0; e < ENTRIES; e++) free_cnt += (IW + 1)'(!used_q[e]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used_q <= '0;
    end else begin
      for (int p = 0; p < FREE; p++)
        if (free_valid[p]) used_q[free_idx[p]] <= 1'b0;
      for (int p = 0; p < ALLOC; p++)
        if (alloc_gnt[p]) used_q[alloc_idx[p]] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < ALLOC; p++)
      if (alloc_gnt[p]) data_q[alloc_idx[p]] <= alloc_val[p];
  end

  for (genvar p = 0; p < FREE; p++) begin : g_chk
    a_free_allocated: assert property (@(posedge clk) disable iff (!rst_n)
      free_valid[p] |-> used_q[free_idx[p]])
      else $error("xprf: freeing register %0d that is not allocated", free_idx[p]);
  end

endmodule
