// tb_bin_writer -- self-checking test of the LLC-to-DRAM bin writer.
//
// Eight bins of 32 tuples each at a base address. Random lines (mostly full,
// some partial) for random bins are sent while the memory is randomly not
// ready. Every memory write must carry the line unchanged, its fill count, and
// the byte address base + (bin * 32 + tuples already in the bin) * 8; the
// per-bin counts read through the query port must match. A line that would
// run past its bin's 32 tuples must be dropped and raise overflow, and clear
// must reset the counts.
module tb_bin_writer;
  import cobra_pkg::*;

  localparam int NB = 8;
  localparam int SS = 5;
  localparam logic [47:0] BASE = 48'h1000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, in_valid, in_ready, mem_valid, mem_ready, overflow, idle;
  evline_t in_line;
  logic [2:0] in_bin, q_bin;
  logic [47:0] mem_addr;
  line_t mem_line;
  logic [CNT_W-1:0] mem_cnt;
  logic [31:0] q_count;

  bin_writer #(.NBINS(NB), .ADDR_W(48)) dut (
    .clk, .rst_n, .bin_base(BASE), .stride_shift(6'(SS)), .clear,
    .in_valid, .in_ready, .in_line, .in_bin,
    .mem_valid, .mem_ready, .mem_addr, .mem_line, .mem_cnt,
    .q_bin, .q_count, .overflow, .idle
  );

  int checks = 0, failures = 0;
  int tail [NB];
  typedef struct { logic [47:0] addr; line_t line; int cnt; } wr_t;
  wr_t exp_q [$];
  int n_wr = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  always @(posedge clk) if (rst_n && !clear) begin
    if (mem_valid && mem_ready) begin
      wr_t e;
      check(exp_q.size() > 0, "no unexpected write");
      if (exp_q.size() > 0) begin
        e = exp_q.pop_front();
        check(mem_addr == e.addr, $sformatf("address %h expected %h", mem_addr, e.addr));
        check(mem_line == e.line && int'(mem_cnt) == e.cnt, "line and count");
      end
      n_wr++;
    end
    if (in_valid && in_ready) begin
      wr_t e;
      int b;
      b = int'(in_bin);
      if (tail[b] + int'(in_line.cnt) <= (1 << SS)) begin
        e.addr = BASE + 48'((b * (1 << SS) + tail[b]) * 8);
        e.line = in_line.data;
        e.cnt  = int'(in_line.cnt);
        exp_q.push_back(e);
        tail[b] += int'(in_line.cnt);
      end
    end
  end

  initial begin
    bit acc;
    clear = 0; in_valid = 0; in_line = '0; in_bin = 0; mem_ready = 1; q_bin = 0;
    for (int b = 0; b < NB; b++) tail[b] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (NB) @(negedge clk);             // tail clearing after reset
    check(idle, "idle once the tails are cleared");
    // Back-to-back full lines with an always-ready memory: one per cycle.
    for (int i = 0; i < 8; i++) begin
      in_valid = 1; in_bin = 3'(i); in_line.cnt = CNT_W'(TPL);
      for (int s = 0; s < TPL; s++) in_line.data[s] = {$urandom, $urandom};
      @(posedge clk); check(in_ready, "one line per cycle when memory is ready");
      @(negedge clk);
    end
    in_valid = 0;
    // Random traffic with memory backpressure until some bin overflows.
    for (int i = 0; i < 400; i++) begin
      in_valid = ($urandom_range(0, 1) == 1);
      in_bin = 3'($urandom_range(0, NB - 1));
      in_line.cnt = ($urandom_range(0, 4) == 0) ? CNT_W'($urandom_range(1, TPL)) : CNT_W'(TPL);
      for (int s = 0; s < TPL; s++) in_line.data[s] = {$urandom, $urandom};
      mem_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk); acc = in_valid && in_ready;
      @(negedge clk);
      while (in_valid && !acc) begin
        mem_ready = ($urandom_range(0, 2) != 0);
        @(posedge clk); acc = in_ready;
        @(negedge clk);
      end
    end
    in_valid = 0; mem_ready = 1;
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0 && idle, "all writes issued");
    check(overflow, "overflowing line raised overflow");
    for (int b = 0; b < NB; b++) begin
      q_bin = 3'(b); #1;
      check(int'(q_count) == tail[b], $sformatf("bin %0d count %0d expected %0d", b, q_count, tail[b]));
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    check(!idle, "clear walk in progress");
    repeat (NB) @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      q_bin = 3'(b); #1;
      check(q_count == 0, "clear resets counts");
    end
    check(!overflow, "clear resets overflow");
    $display("writes=%0d", n_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
