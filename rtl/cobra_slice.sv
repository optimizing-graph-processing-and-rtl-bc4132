// cobra_slice -- one core's COBRA binning hierarchy, from binupdate to DRAM.
//
// A binupdate from the core enters the L1 binning engine, which coalesces it
// into one of Y1 L1 C-Buffers (bin range 2**shift_l1). A filled L1 C-Buffer
// goes as a line into the L1->L2 eviction buffers, which unpack it into the L2
// engine; that engine scatters the tuples over Y2 L2 C-Buffers (range
// 2**shift_l2). Filled L2 C-Buffers pass through the L2->LLC eviction buffers
// into the LLC engine and its Y3 C-Buffers (range 2**shift_llc), and a filled
// LLC C-Buffer is written by the bin writer to the tail of its bin in DRAM.
// The core therefore sees the latency and buffer count of the L1 level only,
// while the bins in memory have the LLC's small range.
//
// drain_start (after the core's last binupdate) flushes the levels in order:
// L1 drain, wait until the L1->L2 buffers are empty; L2 drain, wait for the
// L2->LLC buffers; LLC drain, wait for the last DRAM write. drain_done then
// pulses and every tuple is in a bin. clear resets the bin tails for a new
// Binning phase.
//
// Interface: core side bu_valid/bu_ready/bu_tuple (bu_ready low stalls the
// binupdate); DRAM side one line-write port (see bin_writer); q_bin/q_count
// read bin sizes. ev_* pulse once per event and feed statistics counters.
//
// Following the paper: the three-level C-Buffer hierarchy, eviction buffers
// between levels, binning engines that unpack and re-bin, LLC-to-DRAM bins.
// Design choices: the drain sequence, the one-tuple-per-cycle datapaths and
// the sizes documented in cobra_pkg.
module cobra_slice
  import cobra_pkg::*;
#(
  parameter int unsigned Y1     = L1_CBUFS,
  parameter int unsigned Y2     = L2_CBUFS,
  parameter int unsigned Y3     = LLC_CBUFS,
  parameter int unsigned ADDR_W = 48,
  localparam int unsigned B_W   = (Y3 > 1) ? $clog2(Y3) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SHIFT_W-1:0] shift_l1,
  input  logic [SHIFT_W-1:0] shift_l2,
  input  logic [SHIFT_W-1:0] shift_llc,
  input  logic [ADDR_W-1:0]  bin_base,
  input  logic [5:0]         stride_shift,
  input  logic               clear,
  // binupdate from the core
  input  logic               bu_valid,
  output logic               bu_ready,
  input  tuple_t             bu_tuple,
  // end of Binning
  input  logic               drain_start,
  output logic               drain_busy,
  output logic               drain_done,
  // DRAM bin writes
  output logic               mem_valid,
  input  logic               mem_ready,
  output logic [ADDR_W-1:0]  mem_addr,
  output line_t              mem_line,
  output logic [CNT_W-1:0]   mem_cnt,
  // bin sizes and status
  input  logic [B_W-1:0]     q_bin,
  output logic [31:0]        q_count,
  output logic               range_err,
  output logic               overflow,
  // events: [0] L1, [1] L2, [2] LLC
  output logic [2:0]         ev_fill,
  output logic [2:0]         ev_drain,
  output logic [2:0]         ev_stall,
  output logic               ev_memwr
);

  // L1 level
  evline_t l1_line;  logic l1_ov, l1_or;
  logic [((Y1 > 1) ? $clog2(Y1) : 1)-1:0] l1_id;
  // L1 -> L2 eviction buffers
  logic e1_v, e1_r, e1_empty, e1_full;  tuple_t e1_t;
  // L2 level
  evline_t l2_line;  logic l2_ov, l2_or;
  logic [((Y2 > 1) ? $clog2(Y2) : 1)-1:0] l2_id;
  // L2 -> LLC eviction buffers
  logic e2_v, e2_r, e2_empty, e2_full;  tuple_t e2_t;
  // LLC level
  evline_t l3_line;  logic l3_ov, l3_or;
  logic [B_W-1:0] l3_id;

  logic [2:0] dr_start, dr_busy, dr_done, rerr;
  logic       bw_idle;

  binning_engine #(.NBUF(Y1)) u_l1 (
    .clk, .rst_n, .shift(shift_l1),
    .in_valid(bu_valid), .in_ready(bu_ready), .in_tuple(bu_tuple),
    .out_valid(l1_ov), .out_ready(l1_or), .out_line(l1_line), .out_id(l1_id),
    .drain_start(dr_start[0]), .draining(dr_busy[0]), .drain_done(dr_done[0]),
    .range_err(rerr[0]), .ev_fill(ev_fill[0]), .ev_drain(ev_drain[0]), .ev_stall(ev_stall[0])
  );

  evict_buffer u_evb12 (
    .clk, .rst_n,
    .in_valid(l1_ov), .in_ready(l1_or), .in_line(l1_line),
    .out_valid(e1_v), .out_ready(e1_r), .out_tuple(e1_t),
    .empty(e1_empty), .full(e1_full)
  );

  binning_engine #(.NBUF(Y2)) u_l2 (
    .clk, .rst_n, .shift(shift_l2),
    .in_valid(e1_v), .in_ready(e1_r), .in_tuple(e1_t),
    .out_valid(l2_ov), .out_ready(l2_or), .out_line(l2_line), .out_id(l2_id),
    .drain_start(dr_start[1]), .draining(dr_busy[1]), .drain_done(dr_done[1]),
    .range_err(rerr[1]), .ev_fill(ev_fill[1]), .ev_drain(ev_drain[1]), .ev_stall(ev_stall[1])
  );

  evict_buffer u_evb23 (
    .clk, .rst_n,
    .in_valid(l2_ov), .in_ready(l2_or), .in_line(l2_line),
    .out_valid(e2_v), .out_ready(e2_r), .out_tuple(e2_t),
    .empty(e2_empty), .full(e2_full)
  );

  binning_engine #(.NBUF(Y3)) u_llc (
    .clk, .rst_n, .shift(shift_llc),
    .in_valid(e2_v), .in_ready(e2_r), .in_tuple(e2_t),
    .out_valid(l3_ov), .out_ready(l3_or), .out_line(l3_line), .out_id(l3_id),
    .drain_start(dr_start[2]), .draining(dr_busy[2]), .drain_done(dr_done[2]),
    .range_err(rerr[2]), .ev_fill(ev_fill[2]), .ev_drain(ev_drain[2]), .ev_stall(ev_stall[2])
  );

  bin_writer #(.NBINS(Y3), .ADDR_W(ADDR_W)) u_bw (
    .clk, .rst_n, .bin_base, .stride_shift, .clear,
    .in_valid(l3_ov), .in_ready(l3_or), .in_line(l3_line), .in_bin(l3_id),
    .mem_valid, .mem_ready, .mem_addr, .mem_line, .mem_cnt,
    .q_bin, .q_count, .overflow, .idle(bw_idle)
  );

  assign range_err = |rerr;
  assign ev_memwr  = mem_valid && mem_ready;

  // End-of-Binning drain sequence.
  typedef enum logic [2:0] {D_IDLE, D_L1, D_W1, D_L2, D_W2, D_L3, D_W3} dstate_t;
  dstate_t dst;

  always_comb begin
    dr_start = '0;
    unique case (dst)
      D_IDLE: dr_start[0] = drain_start;
      D_W1:   dr_start[1] = e1_empty;
      D_W2:   dr_start[2] = e2_empty;
      default: ;
    endcase
  end

  assign drain_busy = (dst != D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst        <= D_IDLE;
      drain_done <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      unique case (dst)
        D_IDLE: if (drain_start) dst <= D_L1;
        D_L1:   if (dr_done[0]) dst <= D_W1;
        D_W1:   if (e1_empty) dst <= D_L2;
        D_L2:   if (dr_done[1]) dst <= D_W2;
        D_W2:   if (e2_empty) dst <= D_L3;
        D_L3:   if (dr_done[2]) dst <= D_W3;
        D_W3:   if (bw_idle) begin
          dst        <= D_IDLE;
          drain_done <= 1'b1;
        end
        default: dst <= D_IDLE;
      endcase
    end
  end

  // No binupdate may arrive while the hierarchy drains.
  a_no_input_in_drain : assert property (@(posedge clk) disable iff (!rst_n)
                                         drain_busy |-> !bu_valid);

endmodule
