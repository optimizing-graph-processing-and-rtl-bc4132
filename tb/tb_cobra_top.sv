// tb_cobra_top -- end-to-end test: Edgelist-to-CSR (Neighbor-Populate) with
// COBRA doing the Binning phase.
//
// Reduced sizes: 2 cores, 4/8/32 C-Buffers per level, bins of up to 2**9
// tuples. Each test loads the index count, clears the bins, feeds every edge
// (src, dst) of an edge list as a binupdate on one of the cores (edges are
// dealt round robin), drains, and then plays the Bin-Read phase in the
// testbench: offsets = prefix sum of degrees, then for each bin and each core
// in turn, neighs[offsets[src]++] = dst. The result must equal the CSR built
// directly from the edge list (neighbor order within a vertex may differ, so
// lists are compared sorted). Test 1 is the 5-vertex, 7-edge example graph
// (CSR and CSC); test 2 a random graph of 1000 vertices and 6000 edges under
// random memory backpressure, again both CSR and CSC. Every mechanism must
// happen at least once: C-Buffer fill evictions and end-of-Binning drains at
// L1, L2 and LLC, core stalls on full eviction buffers, DRAM bin writes and
// bin clears.
module tb_cobra_top;
  import cobra_pkg::*;

  localparam int NC = 2, Y1 = 4, Y2 = 8, Y3 = 32, SS = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_load, clear, drain_start, done, range_err, overflow;
  logic [IDX_W:0] num_idx, bins_used;
  logic [SHIFT_W-1:0] shift_l1, shift_l2, shift_llc;
  logic [NC-1:0] bu_valid, bu_ready, mem_valid, mem_ready, ev_memwr;
  tuple_t bu_tuple [NC];
  logic [47:0] mem_addr [NC];
  line_t mem_line [NC];
  logic [CNT_W-1:0] mem_cnt [NC];
  logic [0:0] q_core;
  logic [4:0] q_bin;
  logic [31:0] q_count;
  logic [2:0] ev_fill [NC], ev_drain [NC], ev_stall [NC];

  cobra_top #(.NCORE(NC), .Y1(Y1), .Y2(Y2), .Y3(Y3), .ADDR_W(48)) dut (
    .clk, .rst_n, .cfg_load, .num_idx, .bin_base(48'h4000), .stride_shift(6'(SS)), .clear,
    .shift_l1, .shift_l2, .shift_llc, .bins_used,
    .bu_valid, .bu_ready, .bu_tuple, .drain_start, .done,
    .mem_valid, .mem_ready, .mem_addr, .mem_line, .mem_cnt,
    .q_core, .q_bin, .q_count, .range_err, .overflow,
    .ev_fill, .ev_drain, .ev_stall, .ev_memwr
  );

  int checks = 0, failures = 0;
  tuple_t mem [longint];
  int n_fill [3], n_drain [3], n_stall = 0, n_wr = 0, n_clear = 0;
  bit bp;                                    // memory backpressure on/off

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int t = 0; t < NC; t++) begin
      for (int l = 0; l < 3; l++) begin
        n_fill[l]  += int'(ev_fill[t][l]);
        n_drain[l] += int'(ev_drain[t][l]);
      end
      if (bu_valid[t] && !bu_ready[t]) n_stall++;
      if (mem_valid[t] && mem_ready[t]) begin
        n_wr++;
        for (int s = 0; s < int'(mem_cnt[t]); s++) begin
          longint a;
          a = (longint'(mem_addr[t]) - 48'h4000) / 8 + s;
          check(!mem.exists(a), "each DRAM slot written once");
          mem[a] = mem_line[t][s];
        end
      end
    end
  end

  always @(negedge clk) begin
    for (int t = 0; t < NC; t++) mem_ready[t] = bp ? ($urandom_range(0, 19) == 0) : 1'b1;
  end

  function automatic int exp_shift(longint n, longint y);
    longint r = 1;
    int s = 0;
    while ((n + r - 1) / r > y) begin r = r * 2; s++; end
    return s;
  endfunction

  // Bin the (a, b) pairs, then Bin-Read them into a CSR: oa, na.
  task automatic bin_and_build(input int n, input int ea [$], input int eb [$],
                               output int oa [], output int na []);
    tuple_t tq [NC][$];
    int ptr [NC];
    int deg [], off [];
    bit acc [NC];
    // configure and clear
    @(negedge clk);
    num_idx = (IDX_W+1)'(n); cfg_load = 1; clear = 1;
    @(negedge clk);
    cfg_load = 0; clear = 0; n_clear++;
    check(int'(shift_l1) == exp_shift(n, Y1) && int'(shift_l2) == exp_shift(n, Y2)
          && int'(shift_llc) == exp_shift(n, Y3), "bin ranges set from cache sizes");
    mem.delete();
    for (int i = 0; i < ea.size(); i++) begin
      tuple_t tp;
      tp.idx = IDX_W'(ea[i]);
      tp.upd = UPD_W'(eb[i]);
      tq[i % NC].push_back(tp);
    end
    for (int t = 0; t < NC; t++) ptr[t] = 0;
    // Binning: all cores issue binupdates concurrently
    forever begin
      bit more = 0;
      for (int t = 0; t < NC; t++) begin
        bu_valid[t] = (ptr[t] < tq[t].size()) && ($urandom_range(0, 4) != 0);
        if (ptr[t] < tq[t].size()) bu_tuple[t] = tq[t][ptr[t]];
      end
      @(posedge clk);
      for (int t = 0; t < NC; t++) acc[t] = bu_valid[t] && bu_ready[t];
      @(negedge clk);
      for (int t = 0; t < NC; t++) begin
        if (acc[t]) ptr[t]++;
        if (ptr[t] < tq[t].size()) more = 1;
      end
      if (!more) break;
    end
    bu_valid = '0;
    drain_start = 1; @(negedge clk); drain_start = 0;
    while (!done) @(negedge clk);
    check(!range_err && !overflow, "no range error or overflow");
    // Bin-Read (software, Algorithm 2 lines 8-14)
    deg = new[n]; off = new[n + 1]; oa = new[n + 1]; na = new[ea.size()];
    foreach (deg[v]) deg[v] = 0;
    foreach (ea[i]) deg[ea[i]]++;
    off[0] = 0;
    for (int v = 0; v < n; v++) off[v + 1] = off[v] + deg[v];
    oa = off;
    for (int b = 0; b < Y3; b++) begin
      for (int t = 0; t < NC; t++) begin
        q_core = 1'(t); q_bin = 5'(b); #1;
        for (int k = 0; k < int'(q_count); k++) begin
          longint a;
          tuple_t tp;
          a = (longint'(t) * Y3 + b) * (1 << SS) + k;
          check(mem.exists(a), "bin slot written");
          tp = mem[a];
          check(int'(tp.idx >> shift_llc) == b, "tuple in its bin");
          na[off[tp.idx]] = int'(tp.upd);
          off[tp.idx]++;
        end
      end
    end
    check(mem.size() == ea.size(), "every edge binned exactly once");
  endtask

  // Compare a CSR with the one built directly from the pairs (Algorithm 1).
  task automatic compare(input string what, input int n, input int ea [$], input int eb [$],
                         input int oa [], input int na []);
    int want [][$];
    want = new[n];
    foreach (ea[i]) want[ea[i]].push_back(eb[i]);
    for (int v = 0; v < n; v++) begin
      int got [$];
      got.delete();
      for (int k = oa[v]; k < oa[v + 1]; k++) got.push_back(na[k]);
      got.sort(); want[v].sort();
      check(got == want[v], $sformatf("%s neighbors of vertex %0d", what, v));
    end
  endtask

  initial begin
    int ea [$], eb [$], oa [], na [];
    cfg_load = 0; clear = 0; drain_start = 0; num_idx = '0; bu_valid = '0; bp = 0;
    q_core = '0; q_bin = '0;
    for (int t = 0; t < NC; t++) bu_tuple[t] = '0;
    for (int l = 0; l < 3; l++) begin n_fill[l] = 0; n_drain[l] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (Y3 + 2) @(negedge clk);

    // Test 1: the 5-vertex example graph, edges (src, dst).
    ea = '{0, 2, 1, 0, 2, 0, 0};
    eb = '{1, 0, 0, 2, 3, 4, 3};
    bin_and_build(5, ea, eb, oa, na);
    check(oa.size() == 6 && oa[0] == 0 && oa[1] == 4 && oa[2] == 5 && oa[3] == 7 && oa[4] == 7
          && oa[5] == 7, "example CSR offsets");
    compare("example CSR", 5, ea, eb, oa, na);
    bin_and_build(5, eb, ea, oa, na);                 // CSC: bin by destination
    check(oa.size() == 6 && oa[0] == 0 && oa[1] == 2 && oa[2] == 3 && oa[3] == 4 && oa[4] == 6
          && oa[5] == 7, "example CSC offsets");
    compare("example CSC", 5, eb, ea, oa, na);

    // Test 2: random graph with memory backpressure.
    bp = 1;
    ea.delete(); eb.delete();
    for (int i = 0; i < 6000; i++) begin
      ea.push_back($urandom_range(0, 999));
      eb.push_back($urandom_range(0, 999));
    end
    bin_and_build(1000, ea, eb, oa, na);
    compare("random CSR", 1000, ea, eb, oa, na);
    bin_and_build(1000, eb, ea, oa, na);
    compare("random CSC", 1000, eb, ea, oa, na);

    for (int l = 0; l < 3; l++) begin
      check(n_fill[l] > 0, $sformatf("level %0d C-Buffer fill evictions happened", l));
      check(n_drain[l] > 0, $sformatf("level %0d drains happened", l));
    end
    check(n_stall > 0, "binupdate stalls happened");
    check(n_wr > 0 && n_clear > 0, "DRAM bin writes and clears happened");
    $display("fills L1/L2/LLC=%0d/%0d/%0d drains=%0d/%0d/%0d stalls=%0d dram writes=%0d clears=%0d",
             n_fill[0], n_fill[1], n_fill[2], n_drain[0], n_drain[1], n_drain[2], n_stall, n_wr, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
