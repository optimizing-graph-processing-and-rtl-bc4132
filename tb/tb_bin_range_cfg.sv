// tb_bin_range_cfg -- self-checking test of the per-level bin-range setting.
//
// For a set of index counts, including the smallest and largest input graphs
// of the evaluation (18 and 51 million vertices) and the 2**10..2**17 bin
// ranges of the bin-range sweep, the expected shift of each level is found by
// doubling a range until ceil(n / range) fits the level's C-Buffers. Also
// checks that the L1 range is never smaller than the L2 range, nor the L2
// range smaller than the LLC range, and that the shifts load one cycle after
// load is pulsed.
module tb_bin_range_cfg;
  import cobra_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic load;
  logic [IDX_W:0] num_idx, bins_used;
  logic [SHIFT_W-1:0] shift_l1, shift_l2, shift_llc;

  bin_range_cfg dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  function automatic int exp_shift(longint n, longint y);
    longint r = 1;
    int s = 0;
    while ((n + r - 1) / r > y) begin r = r * 2; s++; end
    return s;
  endfunction

  task automatic try(longint n);
    @(negedge clk);
    num_idx = (IDX_W+1)'(n); load = 1;
    @(negedge clk);
    load = 0;
    check(int'(shift_l1)  == exp_shift(n, L1_CBUFS),  $sformatf("n=%0d L1 shift %0d", n, shift_l1));
    check(int'(shift_l2)  == exp_shift(n, L2_CBUFS),  $sformatf("n=%0d L2 shift %0d", n, shift_l2));
    check(int'(shift_llc) == exp_shift(n, LLC_CBUFS), $sformatf("n=%0d LLC shift %0d", n, shift_llc));
    check(shift_l1 >= shift_l2 && shift_l2 >= shift_llc, "range shrinks towards the LLC");
    check(longint'(bins_used) == (n + (longint'(1) << shift_llc) - 1) >> shift_llc
          && longint'(bins_used) <= LLC_CBUFS, "bins used");
  endtask

  initial begin
    load = 0; num_idx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    try(1); try(5); try(256); try(257); try(16384); try(16385);
    try(18_000_000); try(51_000_000); try(longint'(1) << 27); try(longint'(1) << 32);
    for (int i = 0; i < 50; i++) try(longint'($urandom_range(1, 32'h7fff_ffff)));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
