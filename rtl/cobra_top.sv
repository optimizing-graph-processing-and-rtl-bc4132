// cobra_top -- COBRA binning hardware for a 16-core processor.
//
// Propagation Blocking splits an irregular-update kernel into Binning, which
// appends (index, update) tuples to bins that each cover a small index range,
// and Bin-Read, which replays one bin at a time with good cache locality.
// COBRA performs Binning in the cache hierarchy: each core has a chain of
// hardware C-Buffers in its L1, L2 and its share of the LLC (cobra_slice),
// each level with its own bin range, so the core bins into a few large-range
// L1 buffers while the bins that reach DRAM have the LLC's small range.
//
// This top holds NUM_CORES slices and what they share: the bin-range setting
// (bin_range_cfg, loaded from the number of indices), the placement of each
// core's bins in memory, and the drain broadcast. Core t's Y3 bins start at
// bin_base + t * Y3 * 2**stride_shift tuples (8 bytes each), so the bins are
// bins[t][b] as in software Propagation Blocking.
//
// Use: cfg_load with num_idx; clear (the bin tails then clear in Y3 cycles,
// as do all C-Buffer counts after reset, and bu_ready stays low meanwhile
// once a tuple reaches a busy level); each core issues binupdates on its
// bu_* port (bu_ready low = stall); pulse drain_start after the last one;
// done rises once every core's hierarchy has drained and stays high until the
// next drain_start. Each core has its own DRAM line-write port (the mesh and
// memory controller are outside this design). q_core/q_bin read a bin's tuple
// count. ev_* are one-cycle event pulses per core and level.
//
// Following the paper: 16 cores, 2 MB of LLC per core, three C-Buffer levels,
// per-core bins. Design choices: private LLC C-Buffer partitions per core,
// the memory layout of the bins and the drain handshake.
module cobra_top
  import cobra_pkg::*;
#(
  parameter int unsigned NCORE  = NUM_CORES,
  parameter int unsigned Y1     = L1_CBUFS,
  parameter int unsigned Y2     = L2_CBUFS,
  parameter int unsigned Y3     = LLC_CBUFS,
  parameter int unsigned ADDR_W = 48,
  localparam int unsigned B_W   = (Y3 > 1) ? $clog2(Y3) : 1,
  localparam int unsigned C_W   = (NCORE > 1) ? $clog2(NCORE) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               cfg_load,
  input  logic [IDX_W:0]     num_idx,
  input  logic [ADDR_W-1:0]  bin_base,
  input  logic [5:0]         stride_shift,
  input  logic               clear,
  output logic [SHIFT_W-1:0] shift_l1,
  output logic [SHIFT_W-1:0] shift_l2,
  output logic [SHIFT_W-1:0] shift_llc,
  output logic [IDX_W:0]     bins_used,
  // binupdate, one port per core
  input  logic [NCORE-1:0]   bu_valid,
  output logic [NCORE-1:0]   bu_ready,
  input  tuple_t             bu_tuple [NCORE],
  // end of Binning
  input  logic               drain_start,
  output logic               done,
  // DRAM bin writes, one port per core
  output logic [NCORE-1:0]   mem_valid,
  input  logic [NCORE-1:0]   mem_ready,
  output logic [ADDR_W-1:0]  mem_addr [NCORE],
  output line_t              mem_line [NCORE],
  output logic [CNT_W-1:0]   mem_cnt  [NCORE],
  // bin sizes and status
  input  logic [C_W-1:0]     q_core,
  input  logic [B_W-1:0]     q_bin,
  output logic [31:0]        q_count,
  output logic               range_err,
  output logic               overflow,
  output logic [2:0]         ev_fill  [NCORE],
  output logic [2:0]         ev_drain [NCORE],
  output logic [2:0]         ev_stall [NCORE],
  output logic [NCORE-1:0]   ev_memwr
);

  logic [NCORE-1:0] s_done, s_rerr, s_ovf, got_done;
  logic [31:0]      s_count [NCORE];

  bin_range_cfg #(.Y1(Y1), .Y2(Y2), .Y3(Y3)) u_cfg (
    .clk, .rst_n, .load(cfg_load), .num_idx,
    .shift_l1, .shift_l2, .shift_llc, .bins_used
  );

  for (genvar t = 0; t < NCORE; t++) begin : g_core
    logic [ADDR_W-1:0] base_t;
    assign base_t = bin_base
                  + ((ADDR_W'(t) * ADDR_W'(Y3)) << stride_shift) * ADDR_W'(TUPLE_BYTES);

    cobra_slice #(.Y1(Y1), .Y2(Y2), .Y3(Y3), .ADDR_W(ADDR_W)) u_slice (
      .clk, .rst_n, .shift_l1, .shift_l2, .shift_llc,
      .bin_base(base_t), .stride_shift, .clear,
      .bu_valid(bu_valid[t]), .bu_ready(bu_ready[t]), .bu_tuple(bu_tuple[t]),
      .drain_start, .drain_busy(), .drain_done(s_done[t]),
      .mem_valid(mem_valid[t]), .mem_ready(mem_ready[t]), .mem_addr(mem_addr[t]),
      .mem_line(mem_line[t]), .mem_cnt(mem_cnt[t]),
      .q_bin, .q_count(s_count[t]), .range_err(s_rerr[t]), .overflow(s_ovf[t]),
      .ev_fill(ev_fill[t]), .ev_drain(ev_drain[t]), .ev_stall(ev_stall[t]),
      .ev_memwr(ev_memwr[t])
    );
  end

  assign q_count   = s_count[q_core];
  assign range_err = |s_rerr;
  assign overflow  = |s_ovf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got_done <= '0;
      done     <= 1'b0;
    end else if (drain_start) begin
      got_done <= '0;
      done     <= 1'b0;
    end else begin
      got_done <= got_done | s_done;
      if (&(got_done | s_done)) done <= 1'b1;
    end
  end

endmodule
