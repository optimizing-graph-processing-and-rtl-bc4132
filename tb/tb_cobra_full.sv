// tb_cobra_full -- one complete Binning phase on the full-size design.
//
// cobra_top at its default sizes: 16 cores, 256 L1, 2048 L2 and 16384 LLC
// C-Buffers per core. The workload is the Binning phase of Neighbor-Populate
// on a uniformly random graph of 2**25 vertices (the vertex count of the
// uniform-random and Kronecker inputs of the evaluation) and 2**26 edges
// (average degree 2, the low end of the evaluated inputs); bin ranges are
// 2**17, 2**14 and 2**11. Edges are dealt round robin to the 16 cores. Bins
// are not stored: for each (core, bin) the testbench keeps the expected
// tuple count and a sum of hashed tuples, and checks every DRAM write as it
// happens (its address must lie in the right core's region, at the bin's
// running tail, and every tuple must belong to that bin). After the drain the counts read from
// the top and the hash sums must match for all 262144 bins, and fills at all
// three levels must have occurred. Binning must also keep the cores at 80% of
// one binupdate per core per cycle or better (a threshold of this testbench;
// the run reaches about 86%). Takes about 5 million cycles.
module tb_cobra_full;
  import cobra_pkg::*;

  localparam int NC = NUM_CORES, Y3 = LLC_CBUFS, SS = 10;
  localparam int NV = 1 << 25, NE = 1 << 26;
  localparam int S1 = 17, S2 = 14, S3 = 11;      // 2^25 indices over 256, 2048, 16384 buffers

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
  logic [3:0] q_core;
  logic [13:0] q_bin;
  logic [31:0] q_count;
  logic [2:0] ev_fill [NC], ev_drain [NC], ev_stall [NC];

  cobra_top dut (
    .clk, .rst_n, .cfg_load, .num_idx, .bin_base(48'h0), .stride_shift(6'(SS)), .clear,
    .shift_l1, .shift_l2, .shift_llc, .bins_used,
    .bu_valid, .bu_ready, .bu_tuple, .drain_start, .done,
    .mem_valid, .mem_ready, .mem_addr, .mem_line, .mem_cnt,
    .q_core, .q_bin, .q_count, .range_err, .overflow,
    .ev_fill, .ev_drain, .ev_stall, .ev_memwr
  );

  int checks = 0, failures = 0;
  int exp_cnt [NC][Y3], got_cnt [NC][Y3];
  longint exp_sum [NC][Y3], got_sum [NC][Y3];
  longint n_fill [3], n_drain [3], n_stall = 0, n_wr = 0, cycles = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  function automatic longint hash(tuple_t t);
    return longint'({t.idx, t.upd} * 64'h9E37_79B9_7F4A_7C15);
  endfunction

  // The k-th edge, generated on the fly.
  function automatic tuple_t edge_of(int unsigned k);
    tuple_t t;
    int unsigned x;
    x = k * 32'h9E37_79B1 + 32'h7F4A_7C15;
    x = x ^ (x >> 15); x = x * 32'h2C1B_3C6D; x = x ^ (x >> 12);
    t.idx = IDX_W'(x % NV);
    x = x * 32'h297A_2D39; x = x ^ (x >> 15);
    t.upd = UPD_W'(x % NV);
    return t;
  endfunction

  always @(posedge clk) if (rst_n) begin : mon
    int b, c, k;
    longint ta;
    cycles++;
    for (int t = 0; t < NC; t++) begin
      for (int l = 0; l < 3; l++) begin
        n_fill[l]  += longint'(ev_fill[t][l]);
        n_drain[l] += longint'(ev_drain[t][l]);
      end
      n_stall += longint'(ev_stall[t][0]);
      if (mem_valid[t] && mem_ready[t]) begin
        n_wr++;
        ta = longint'(mem_addr[t]) / 8;
        c  = int'(ta >> (SS + 14));
        b  = int'((ta >> SS) % Y3);
        k  = int'(ta % (1 << SS));
        check(c == t, "write lands in the core's own bin region");
        check(k == got_cnt[t][b], "write at the bin's tail");
        for (int s = 0; s < int'(mem_cnt[t]); s++) begin
          check(int'(mem_line[t][s].idx >> shift_llc) == b, "tuple belongs to its bin");
          got_sum[t][b] += hash(mem_line[t][s]);
        end
        got_cnt[t][b] += int'(mem_cnt[t]);
      end
    end
  end

  initial begin
    int unsigned sent [NC];
    int unsigned total;
    bit acc [NC];
    longint t0;
    cfg_load = 0; clear = 0; drain_start = 0; num_idx = '0; bu_valid = '0;
    mem_ready = '1; q_core = '0; q_bin = '0;
    for (int t = 0; t < NC; t++) begin
      bu_tuple[t] = '0; sent[t] = 0;
      for (int b = 0; b < Y3; b++) begin
        exp_cnt[t][b] = 0; got_cnt[t][b] = 0; exp_sum[t][b] = 0; got_sum[t][b] = 0;
      end
    end
    for (int l = 0; l < 3; l++) begin n_fill[l] = 0; n_drain[l] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    num_idx = (IDX_W+1)'(NV); cfg_load = 1;
    @(negedge clk); cfg_load = 0;
    check(shift_l1 == S1 && shift_l2 == S2 && shift_llc == S3, "bin ranges from the cache sizes");
    repeat (Y3 + 4) @(negedge clk);          // count and tail clearing after reset
    // Binning: core t issues edges t, t+16, t+32, ...
    total = 0;
    t0 = cycles;
    while (total < NE) begin
      for (int t = 0; t < NC; t++) begin
        bu_valid[t] = (sent[t] * NC + t < NE);
        bu_tuple[t] = edge_of(sent[t] * NC + t);
      end
      @(posedge clk);
      for (int t = 0; t < NC; t++) acc[t] = bu_valid[t] && bu_ready[t];
      @(negedge clk);
      for (int t = 0; t < NC; t++) if (acc[t]) begin
        tuple_t e;
        e = edge_of(sent[t] * NC + t);
        exp_cnt[t][e.idx >> S3]++;
        exp_sum[t][e.idx >> S3] += hash(e);
        sent[t]++;
        total++;
      end
    end
    bu_valid = '0;
    $display("binning issued %0d edges in %0d cycles", NE, cycles - t0);
    // The eviction buffers are meant to keep scattering off the cores' path:
    // require at least 80% of the peak of one binupdate per core per cycle.
    check((cycles - t0) * NC * 4 <= longint'(NE) * 5, "binning at 80% of peak or better");
    t0 = cycles;
    drain_start = 1; @(negedge clk); drain_start = 0;
    while (!done) @(negedge clk);
    $display("drain took %0d cycles", cycles - t0);
    check(!range_err && !overflow, "no range error or overflow");
    for (int t = 0; t < NC; t++)
      for (int b = 0; b < Y3; b++) begin
        q_core = 4'(t); q_bin = 14'(b); #1;
        check(int'(q_count) == exp_cnt[t][b] && got_cnt[t][b] == exp_cnt[t][b]
              && got_sum[t][b] == exp_sum[t][b], $sformatf("core %0d bin %0d contents", t, b));
      end
    for (int l = 0; l < 3; l++) check(n_fill[l] > 0 && n_drain[l] > 0, "fills and drains at each level");
    $display("fills L1/L2/LLC=%0d/%0d/%0d drains=%0d/%0d/%0d stalls=%0d dram writes=%0d cycles=%0d",
             n_fill[0], n_fill[1], n_fill[2], n_drain[0], n_drain[1], n_drain[2], n_stall, n_wr, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
