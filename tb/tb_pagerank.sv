// tb_pagerank -- PageRank iterations with COBRA doing the Binning phase.
//
// Push-style PageRank with Propagation Blocking: for every edge (src, dst)
// the cores issue binupdate(dst, rank[src] / outdeg[src]); Bin-Read then adds
// each bin's contributions into the new rank array. Ranks are 32-bit fixed
// point (16 fractional bits), so the sums can be compared exactly with a
// directly computed iteration. Runs on a reduced top (4 cores, 4/16/64
// C-Buffers per level) over two graphs: a uniform random one and a skewed
// one in which a few destinations receive most edges (a power-law-like
// in-degree), three iterations each, with a clear between iterations and
// random memory backpressure. Every new rank must equal the reference, and
// fills, drains and stalls must occur.
module tb_pagerank;
  import cobra_pkg::*;

  localparam int NC = 4, Y1 = 4, Y2 = 16, Y3 = 64, SS = 12;
  localparam int NV = 2000, NE = 12000;
  localparam logic [47:0] BASE = 48'h10_0000;

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
  logic [1:0] q_core;
  logic [5:0] q_bin;
  logic [31:0] q_count;
  logic [2:0] ev_fill [NC], ev_drain [NC], ev_stall [NC];

  cobra_top #(.NCORE(NC), .Y1(Y1), .Y2(Y2), .Y3(Y3), .ADDR_W(48)) dut (
    .clk, .rst_n, .cfg_load, .num_idx, .bin_base(BASE), .stride_shift(6'(SS)), .clear,
    .shift_l1, .shift_l2, .shift_llc, .bins_used,
    .bu_valid, .bu_ready, .bu_tuple, .drain_start, .done,
    .mem_valid, .mem_ready, .mem_addr, .mem_line, .mem_cnt,
    .q_core, .q_bin, .q_count, .range_err, .overflow,
    .ev_fill, .ev_drain, .ev_stall, .ev_memwr
  );

  int checks = 0, failures = 0;
  logic [63:0] mem [longint];
  int n_fill [3], n_drain [3], n_stall = 0;

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
      if (mem_valid[t] && mem_ready[t])
        for (int s = 0; s < int'(mem_cnt[t]); s++) begin
          longint a;
          a = (longint'(mem_addr[t]) - longint'(BASE)) / 8 + s;
          mem[a] = mem_line[t][s];
        end
    end
  end

  always @(negedge clk)
    for (int t = 0; t < NC; t++) mem_ready[t] = ($urandom_range(0, 3) != 0);

  // One PageRank iteration's scatter through COBRA, gathered by Bin-Read.
  task automatic iterate(input int src [], input int dst [], input int outdeg [],
                         input logic [31:0] rank [], output logic [31:0] nrank []);
    tuple_t tq [NC][$];
    int ptr [NC];
    bit acc [NC];
    @(negedge clk);
    clear = 1; @(negedge clk); clear = 0;
    repeat (Y3 + 2) @(negedge clk);          // bin tails cleared
    mem.delete();
    foreach (src[e]) begin
      tuple_t tp;
      tp.idx = IDX_W'(dst[e]);
      tp.upd = rank[src[e]] / 32'(outdeg[src[e]]);
      tq[e % NC].push_back(tp);
    end
    for (int t = 0; t < NC; t++) ptr[t] = 0;
    forever begin
      bit more = 0;
      for (int t = 0; t < NC; t++) begin
        bu_valid[t] = (ptr[t] < tq[t].size());
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
    nrank = new[NV];
    foreach (nrank[v]) nrank[v] = '0;
    for (int b = 0; b < Y3; b++)
      for (int t = 0; t < NC; t++) begin
        q_core = 2'(t); q_bin = 6'(b); #1;
        for (int k = 0; k < int'(q_count); k++) begin
          tuple_t tp;
          tp = mem[(longint'(t) * Y3 + b) * (1 << SS) + k];
          nrank[tp.idx] += tp.upd;
        end
      end
  endtask

  task automatic run_graph(input string name, input bit skewed);
    int src [], dst [], outdeg [];
    logic [31:0] rank [], nrank [], want [];
    src = new[NE]; dst = new[NE]; outdeg = new[NV];
    foreach (outdeg[v]) outdeg[v] = 0;
    foreach (src[e]) begin
      int r;
      src[e] = $urandom_range(0, NV - 1);
      r = $urandom_range(0, NV - 1);
      dst[e] = skewed ? (r * r) / NV * ((r * r) / NV) / NV : r;   // r^4 / NV^3
      outdeg[src[e]]++;
    end
    rank = new[NV];
    foreach (rank[v]) rank[v] = 32'h0001_0000;          // 1.0 per vertex
    for (int it = 0; it < 3; it++) begin
      iterate(src, dst, outdeg, rank, nrank);
      want = new[NV];
      foreach (want[v]) want[v] = '0;
      foreach (src[e]) want[dst[e]] += rank[src[e]] / 32'(outdeg[src[e]]);
      foreach (want[v]) check(nrank[v] == want[v], $sformatf("%s iteration %0d vertex %0d", name, it, v));
      rank = nrank;
    end
  endtask

  initial begin
    cfg_load = 0; clear = 0; drain_start = 0; num_idx = '0; bu_valid = '0;
    q_core = '0; q_bin = '0;
    for (int t = 0; t < NC; t++) bu_tuple[t] = '0;
    for (int l = 0; l < 3; l++) begin n_fill[l] = 0; n_drain[l] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    num_idx = (IDX_W+1)'(NV); cfg_load = 1; @(negedge clk); cfg_load = 0;
    run_graph("uniform", 1'b0);
    run_graph("skewed", 1'b1);
    for (int l = 0; l < 3; l++) check(n_fill[l] > 0 && n_drain[l] > 0, "fills and drains at every level");
    check(n_stall > 0, "binupdate stalls happened");
    $display("fills L1/L2/LLC=%0d/%0d/%0d drains=%0d/%0d/%0d stalls=%0d",
             n_fill[0], n_fill[1], n_fill[2], n_drain[0], n_drain[1], n_drain[2], n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
