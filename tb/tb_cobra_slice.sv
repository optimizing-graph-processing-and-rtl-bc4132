// tb_cobra_slice -- one core's binning hierarchy, from binupdate to DRAM.
//
// Small sizes (4 L1, 8 L2 and 32 LLC C-Buffers, 256 indices, so bin ranges
// 64, 32 and 8) and a memory that is ready only part of the time, so that the
// eviction buffers fill and the core's binupdate stalls. After the drain,
// every bin in the memory model must hold exactly the tuples whose index
// falls in that bin's range (compared as sorted multisets), the bin counts
// must match, and no tuple may be lost or duplicated. Each mechanism (fills,
// drains at all three levels, eviction-buffer stalls, DRAM writes) must occur.
module tb_cobra_slice;
  import cobra_pkg::*;

  localparam int Y1 = 4, Y2 = 8, Y3 = 32, N = 256, SS = 8;
  localparam int S1 = 6, S2 = 5, S3 = 3;
  localparam int NT = 4000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic bu_valid, bu_ready, drain_start, drain_busy, drain_done, clear;
  tuple_t bu_tuple;
  logic mem_valid, mem_ready;
  logic [47:0] mem_addr;
  line_t mem_line;
  logic [CNT_W-1:0] mem_cnt;
  logic [4:0] q_bin;
  logic [31:0] q_count;
  logic range_err, overflow, ev_memwr;
  logic [2:0] ev_fill, ev_drain, ev_stall;

  cobra_slice #(.Y1(Y1), .Y2(Y2), .Y3(Y3), .ADDR_W(48)) dut (
    .clk, .rst_n, .shift_l1(SHIFT_W'(S1)), .shift_l2(SHIFT_W'(S2)), .shift_llc(SHIFT_W'(S3)),
    .bin_base(48'h0), .stride_shift(6'(SS)), .clear,
    .bu_valid, .bu_ready, .bu_tuple,
    .drain_start, .drain_busy, .drain_done,
    .mem_valid, .mem_ready, .mem_addr, .mem_line, .mem_cnt,
    .q_bin, .q_count, .range_err, .overflow,
    .ev_fill, .ev_drain, .ev_stall, .ev_memwr
  );

  int checks = 0, failures = 0;
  tuple_t mem [longint];
  logic [63:0] expb [Y3][$];
  int n_fill [3], n_drain [3], n_stall [3], n_wr = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < 3; l++) begin
      n_fill[l]  += int'(ev_fill[l]);
      n_drain[l] += int'(ev_drain[l]);
      n_stall[l] += int'(ev_stall[l]);
    end
    if (mem_valid && mem_ready) begin
      n_wr++;
      for (int s = 0; s < int'(mem_cnt); s++) begin
        longint a;
        a = longint'(mem_addr) / 8 + s;
        check(!mem.exists(a), "each DRAM slot written once");
        mem[a] = mem_line[s];
      end
    end
  end

  initial begin
    bit acc;
    bu_valid = 0; bu_tuple = '0; drain_start = 0; clear = 0; mem_ready = 1; q_bin = 0;
    for (int l = 0; l < 3; l++) begin n_fill[l] = 0; n_drain[l] = 0; n_stall[l] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NT; i++) begin
      bu_valid = 1;
      bu_tuple.idx = IDX_W'($urandom_range(0, N - 1));
      bu_tuple.upd = UPD_W'(i);
      expb[bu_tuple.idx >> S3].push_back(bu_tuple);
      do begin
        mem_ready = ($urandom_range(0, 9) < 2);
        @(posedge clk); acc = bu_ready;
        @(negedge clk);
      end while (!acc);
      bu_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    bu_valid = 0;
    drain_start = 1; @(negedge clk); drain_start = 0;
    while (!drain_done) begin
      mem_ready = ($urandom_range(0, 1) == 1);
      @(negedge clk);
    end
    mem_ready = 1;
    check(!range_err && !overflow, "no range error or overflow");
    for (int b = 0; b < Y3; b++) begin
      logic [63:0] got [$], want [$];
      got.delete(); want.delete();
      q_bin = 5'(b); #1;
      check(int'(q_count) == expb[b].size(), $sformatf("bin %0d count", b));
      for (int k = 0; k < int'(q_count); k++) begin
        longint a;
        a = longint'(b) * (1 << SS) + k;
        check(mem.exists(a), "bin slot written");
        got.push_back(mem[a]);
        check((mem[a].idx >> S3) == IDX_W'(b), "tuple in its bin");
      end
      want = expb[b];
      got.sort(); want.sort();
      for (int k = 0; k < want.size(); k++)
        if (k < got.size() && got[k] != want[k] && failures < 3)
          $display("bin %0d k %0d got %h want %h", b, k, got[k], want[k]);
      check(got == want, $sformatf("bin %0d holds exactly its tuples", b));
    end
    check(mem.size() == NT, "no tuple lost or duplicated");
    for (int l = 0; l < 3; l++) begin
      check(n_fill[l] > 0, $sformatf("level %0d fill evictions happened", l));
      check(n_drain[l] > 0, $sformatf("level %0d drains happened", l));
    end
    check(n_stall[0] > 0, "core binupdate stalled on full eviction buffers");
    $display("fills L1/L2/LLC=%0d/%0d/%0d drains=%0d/%0d/%0d stalls=%0d/%0d/%0d dram writes=%0d",
             n_fill[0], n_fill[1], n_fill[2], n_drain[0], n_drain[1], n_drain[2],
             n_stall[0], n_stall[1], n_stall[2], n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
