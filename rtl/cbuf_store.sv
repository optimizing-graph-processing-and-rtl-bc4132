// cbuf_store -- the ways of one cache level that are pinned to hold C-Buffers.
//
// COBRA reserves part of each cache level's ways for the whole Binning phase,
// so every C-Buffer (coalescing buffer) has one fixed line and the binning
// engine finds it by its buffer number alone, without a tag lookup. This
// module is that reserved region: NBUF lines of TPL tuples each, plus a fill
// count per line that says how many slots hold tuples.
//
// Interface: one combinational read port (rd_id -> whole line and its count)
// and one write port that writes a single tuple slot and/or the line's count
// on the rising clock edge. A read in the same cycle as a write to the same
// line returns the old contents. After reset the store clears one count per
// cycle, as an SRAM would be initialised, and holds init_busy high for those
// NBUF cycles; the writer must wait for it. Line data is never cleared,
// because a slot is only read after it was written.
//
// Following the paper: cacheline-sized C-Buffers pinned by way partitioning,
// Y buffers per level. Design choices: the line size (64 B) and the number of
// reserved lines (NBUF, set from an assumed cache size and way split), the
// slot-at-a-time write port and the asynchronous read.
module cbuf_store
  import cobra_pkg::*;
#(
  parameter int unsigned NBUF = L1_CBUFS,
  localparam int unsigned ID_W = (NBUF > 1) ? $clog2(NBUF) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // read port
  input  logic [ID_W-1:0]  rd_id,
  output line_t            rd_line,
  output logic [CNT_W-1:0] rd_cnt,
  // write port
  input  logic             wr_slot_en,
  input  logic [ID_W-1:0]  wr_id,
  input  logic [$clog2(TPL)-1:0] wr_slot,
  input  tuple_t           wr_tuple,
  input  logic             wr_cnt_en,
  input  logic [CNT_W-1:0] wr_cnt,
  output logic             init_busy
);

  line_t            data [NBUF];
  logic [CNT_W-1:0] cnt  [NBUF];

  assign rd_line = data[rd_id];
  assign rd_cnt  = cnt[rd_id];

  always_ff @(posedge clk) begin
    if (wr_slot_en) data[wr_id][wr_slot] <= wr_tuple;
  end

  logic [ID_W-1:0] init_id;

  always_ff @(posedge clk) begin
    if (init_busy)      cnt[init_id] <= '0;
    else if (wr_cnt_en) cnt[wr_id]   <= wr_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_id   <= '0;
    end else if (init_busy) begin
      init_id <= init_id + 1'b1;
      if (init_id == ID_W'(NBUF - 1)) init_busy <= 1'b0;
    end
  end

endmodule
