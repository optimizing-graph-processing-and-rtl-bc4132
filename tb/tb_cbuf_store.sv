// tb_cbuf_store -- self-checking test of the reserved C-Buffer ways.
//
// After reset the store must clear its counts in NBUF cycles, after which
// every count reads 0. Random slot and count writes are then
// mirrored in a reference array and every line's slots and count are read
// back; a read in the cycle of a write must still see the old value.
module tb_cbuf_store;
  import cobra_pkg::*;

  localparam int NBUF = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [2:0] rd_id, wr_id;
  line_t rd_line;
  logic [CNT_W-1:0] rd_cnt, wr_cnt;
  logic wr_slot_en, wr_cnt_en, init_busy;
  logic [$clog2(TPL)-1:0] wr_slot;
  tuple_t wr_tuple;

  cbuf_store #(.NBUF(NBUF)) dut (.*);

  int checks = 0, failures = 0;
  tuple_t ref_d [NBUF][TPL];
  logic [CNT_W-1:0] ref_c [NBUF];
  bit written [NBUF][TPL];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    wr_slot_en = 0; wr_cnt_en = 0; rd_id = 0; wr_id = 0; wr_slot = 0; wr_tuple = '0; wr_cnt = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(init_busy, "count clearing starts at reset");
    repeat (NBUF) @(negedge clk);
    check(!init_busy, "count clearing takes NBUF cycles");
    for (int b = 0; b < NBUF; b++) begin
      rd_id = 3'(b); #1;
      check(rd_cnt == '0, "count is 0 after reset");
      ref_c[b] = '0;
    end
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      wr_id = 3'($urandom_range(0, NBUF - 1));
      wr_slot = 3'($urandom_range(0, TPL - 1));
      wr_tuple = {$urandom, $urandom};
      wr_cnt = CNT_W'($urandom_range(0, TPL));
      wr_slot_en = $urandom_range(0, 1);
      wr_cnt_en = $urandom_range(0, 1);
      rd_id = wr_id; #1;
      check(rd_cnt == ref_c[wr_id], "old count visible in write cycle");
      if (written[wr_id][wr_slot])
        check(rd_line[wr_slot] == ref_d[wr_id][wr_slot], "old data visible in write cycle");
      @(posedge clk);
      if (wr_slot_en) begin ref_d[wr_id][wr_slot] = wr_tuple; written[wr_id][wr_slot] = 1; end
      if (wr_cnt_en) ref_c[wr_id] = wr_cnt;
    end
    @(negedge clk); wr_slot_en = 0; wr_cnt_en = 0;
    for (int b = 0; b < NBUF; b++) begin
      rd_id = 3'(b); #1;
      check(rd_cnt == ref_c[b], "count read back");
      for (int s = 0; s < TPL; s++)
        if (written[b][s]) check(rd_line[s] == ref_d[b][s], "slot read back");
    end
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
