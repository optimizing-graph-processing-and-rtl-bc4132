// tb_binning_engine -- self-checking test of one level's binning engine.
//
// Drives random tuples into a 16-buffer engine (bin range 4) whose eviction
// side is randomly not ready, and keeps its own per-buffer queue of accepted
// tuples. Every evicted line must equal, slot by slot, the TPL tuples that
// buffer collected, and must leave on the cycle its last tuple is accepted.
// A drain must then send each non-empty buffer once, in buffer order, with
// its exact partial contents. Also checks the stall rule (in_ready follows
// out_ready when the tuple completes a line), one tuple per cycle throughput
// when nothing blocks, the range error for an index beyond the buffers, and a
// drain requested during the clearing that follows reset.
module tb_binning_engine;
  import cobra_pkg::*;

  localparam int NBUF = 16;
  localparam int SH   = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  tuple_t in_tuple;
  evline_t out_line;
  logic [3:0] out_id;
  logic drain_start, draining, drain_done, range_err, ev_fill, ev_drain, ev_stall;

  binning_engine #(.NBUF(NBUF)) dut (
    .clk, .rst_n, .shift(SHIFT_W'(SH)),
    .in_valid, .in_ready, .in_tuple,
    .out_valid, .out_ready, .out_line, .out_id,
    .drain_start, .draining, .drain_done,
    .range_err, .ev_fill, .ev_drain, .ev_stall
  );

  int checks = 0, failures = 0;
  tuple_t q [NBUF][$];
  int n_fill = 0, n_drain = 0, n_stall = 0, n_acc = 0;
  int last_drain_id = -1;
  bit in_drain = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  // Monitor: sample at the clock edge, before the edge's updates.
  always @(posedge clk) if (rst_n) begin : mon
    int id;
    if (!in_drain && in_valid && in_ready && (in_tuple.idx >> SH) < NBUF) begin
      id = int'(in_tuple.idx >> SH);
      n_acc++;
      q[id].push_back(in_tuple);
      if (q[id].size() == TPL) begin
        check(out_valid && out_ready && out_id == 4'(id) && out_line.cnt == CNT_W'(TPL),
              "full buffer must be evicted in the accepting cycle");
        for (int s = 0; s < TPL; s++)
          check(out_line.data[s] == q[id][s], $sformatf("line %0d slot %0d", id, s));
        q[id].delete();
        n_fill++;
      end else begin
        check(!out_valid, "no eviction before the line is full");
      end
    end
    if (!in_drain && in_valid && !in_ready) begin
      n_stall++;
      check(!out_ready && ev_stall, "stall only when the eviction buffer is full");
    end
    if (in_drain && out_valid && out_ready) begin
      id = int'(out_id);
      check(id > last_drain_id, "drain walks buffers in order, each once");
      last_drain_id = id;
      check(int'(out_line.cnt) == q[id].size(), $sformatf("drain count of buffer %0d", id));
      for (int s = 0; s < q[id].size(); s++)
        check(out_line.data[s] == q[id][s], $sformatf("drained buffer %0d slot %0d", id, s));
      q[id].delete();
      n_drain++;
    end
  end

  initial begin
    in_valid = 0; in_tuple = '0; out_ready = 1; drain_start = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // A drain requested while the counts are still being cleared is held
    // and then runs over the (empty) buffers.
    in_drain = 1;
    drain_start = 1; @(negedge clk); drain_start = 0;
    for (int i = 0; i < 3 * NBUF && !drain_done; i++) @(negedge clk);
    check(drain_done, "drain requested during the post-reset clear completes");
    in_drain = 0;
    repeat (2) @(negedge clk);
    // Phase 1: full-rate input, always ready: one tuple per cycle.
    for (int i = 0; i < 200; i++) begin
      in_valid = 1;
      in_tuple.idx = IDX_W'($urandom_range(0, NBUF * (1 << SH) - 1));
      in_tuple.upd = $urandom;
      @(negedge clk);
    end
    check(n_acc == 200, "one tuple accepted per cycle when not blocked");
    // Phase 2: random backpressure from the eviction side.
    for (int i = 0; i < 2000; i++) begin
      in_valid = ($urandom_range(0, 3) != 0);
      out_ready = ($urandom_range(0, 2) != 0);
      in_tuple.idx = IDX_W'($urandom_range(0, NBUF * (1 << SH) - 1));
      in_tuple.upd = $urandom;
      if (in_valid) begin
        bit acc;
        do begin
          @(posedge clk);
          acc = in_ready;
          @(negedge clk);
          if (!acc) out_ready = ($urandom_range(0, 2) != 0);
        end while (!acc);
      end else begin
        @(negedge clk);
      end
    end
    in_valid = 0; out_ready = 1;
    // Range error.
    check(!range_err, "no range error yet");
    in_valid = 1; in_tuple.idx = IDX_W'(NBUF << SH); @(negedge clk); in_valid = 0;
    @(negedge clk);
    check(range_err, "index beyond the last buffer flags range_err");
    // Phase 3: drain with some backpressure.
    in_drain = 1;
    drain_start = 1; @(negedge clk); drain_start = 0;
    while (!drain_done) begin
      out_ready = ($urandom_range(0, 1) != 0);
      @(negedge clk);
    end
    out_ready = 1;
    @(negedge clk);
    for (int b = 0; b < NBUF; b++) check(q[b].size() == 0, "every buffer empty after drain");
    check(n_fill > 0 && n_drain > 0 && n_stall > 0, "fills, drains and stalls all happened");
    $display("fills=%0d drains=%0d stalls=%0d", n_fill, n_drain, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
