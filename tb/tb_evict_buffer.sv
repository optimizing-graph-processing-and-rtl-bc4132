// tb_evict_buffer -- self-checking test of the eviction buffers.
//
// Pushes lines with random fill counts (1..TPL) and random tuples while the
// consumer is randomly stalled, and checks that the tuples come out one per
// accepted cycle, line after line in FIFO order and slot 0 first, that the
// buffer reports full after DEPTH lines with no consumer, that in_ready is low
// only then, and that empty is high only when every tuple has left.
module tb_evict_buffer;
  import cobra_pkg::*;

  localparam int DEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, empty, full;
  evline_t in_line;
  tuple_t out_tuple;

  evict_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  tuple_t exp_q [$];
  int lines_in = 0, n_full = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    check(empty == (exp_q.size() == 0), "empty flag matches content");
    if (in_valid && in_ready) begin
      for (int s = 0; s < int'(in_line.cnt); s++) exp_q.push_back(in_line.data[s]);
      lines_in++;
    end
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0, "no tuple out of an empty buffer");
      if (exp_q.size() > 0) check(out_tuple == exp_q.pop_front(), "tuple order and value");
    end
    check(in_ready == !full, "in_ready is not-full");
    if (full) n_full++;
  end

  task automatic new_line();
    in_line.cnt = CNT_W'($urandom_range(1, TPL));
    for (int s = 0; s < TPL; s++) in_line.data[s] = {$urandom, $urandom};
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_line = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Fill with no consumer: full after DEPTH lines.
    for (int i = 0; i < DEPTH + 2; i++) begin
      in_valid = 1; new_line();
      @(negedge clk);
    end
    in_valid = 0;
    check(full && lines_in == DEPTH, "full after exactly DEPTH lines");
    // Random traffic.
    for (int i = 0; i < 3000; i++) begin
      bit acc;
      in_valid = ($urandom_range(0, 2) == 0);
      out_ready = ($urandom_range(0, 3) != 0);
      acc = 0;
      @(posedge clk);
      acc = in_valid && in_ready;
      @(negedge clk);
      if (acc) new_line();
    end
    in_valid = 0; out_ready = 1;
    repeat (DEPTH * TPL + 2) @(negedge clk);
    check(empty && exp_q.size() == 0, "drains completely");
    check(n_full > 0, "full condition seen");
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
