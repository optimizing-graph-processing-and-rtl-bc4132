// bin_writer -- moves evicted LLC C-Buffers into their bins in main memory.
//
// Below the LLC there are as many bins in DRAM as there are LLC C-Buffers
// (Y3); LLC C-Buffer b always goes to bin b. Bin b occupies a fixed region of
// 2**stride_shift tuples starting at bin_base + b * 2**stride_shift tuples,
// and is filled sequentially: the writer keeps a tail count per bin and writes
// each incoming line at the tail, then advances the tail by the line's fill
// count. Full lines arrive during Binning, so tails stay line-aligned; only
// the last, drained line of a bin may be partial.
//
// Interface: in_valid/in_ready/in_line/in_bin from the LLC binning engine; a
// line is held in one output register until the memory accepts it
// (mem_valid/mem_ready, byte address mem_addr, mem_line, mem_cnt = valid
// tuples, slot 0 at mem_addr). The writer takes a new line on the cycle the
// previous one is accepted, so back-to-back writes run at one line per cycle.
// clear resets all tails at the start of a Binning phase; like reset, it
// starts a walk that zeroes one tail per cycle for NBINS cycles, during which
// no line is taken and idle is low. q_bin/q_count read a
// bin's tuple count combinationally, for the Bin-Read software. A line that
// would run past its bin's region is dropped and sets sticky overflow.
//
// Following the paper: a filled LLC C-Buffer is transferred to the
// corresponding bin in main memory, Y3 bins. Design choices: the fixed-stride
// bin layout, byte addressing, the tail table and the overflow check.
module bin_writer
  import cobra_pkg::*;
#(
  parameter int unsigned NBINS  = LLC_CBUFS,
  parameter int unsigned ADDR_W = 48,
  localparam int unsigned ID_W  = (NBINS > 1) ? $clog2(NBINS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] bin_base,       // byte address of bin 0
  input  logic [5:0]        stride_shift,   // log2(tuples per bin region)
  input  logic              clear,
  // evicted LLC lines in
  input  logic              in_valid,
  output logic              in_ready,
  input  evline_t           in_line,
  input  logic [ID_W-1:0]   in_bin,
  // line writes to DRAM
  output logic              mem_valid,
  input  logic              mem_ready,
  output logic [ADDR_W-1:0] mem_addr,
  output line_t             mem_line,
  output logic [CNT_W-1:0]  mem_cnt,
  // bin sizes
  input  logic [ID_W-1:0]   q_bin,
  output logic [31:0]       q_count,
  output logic              overflow,
  output logic              idle
);

  logic [31:0]     tail [NBINS];
  logic [31:0]     cur_tail, new_tail;
  logic            fits, take;
  logic            clr_busy;
  logic [ID_W-1:0] clr_id;

  assign cur_tail = tail[in_bin];
  assign new_tail = cur_tail + 32'(in_line.cnt);
  assign fits     = ({1'b0, new_tail} <= (33'd1 << stride_shift));
  assign in_ready = !clr_busy && (!mem_valid || mem_ready);
  assign take     = in_valid && in_ready;
  assign q_count  = tail[q_bin];
  assign idle     = !mem_valid && !clr_busy;

  // Tail table: a memory, cleared one entry per cycle after reset or clear.
  always_ff @(posedge clk) begin
    if (clr_busy)          tail[clr_id] <= '0;
    else if (take && fits) tail[in_bin] <= new_tail;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_busy  <= 1'b1;
      clr_id    <= '0;
      mem_valid <= 1'b0;
      mem_addr  <= '0;
      mem_cnt   <= '0;
      overflow  <= 1'b0;
    end else if (clear) begin
      clr_busy  <= 1'b1;
      clr_id    <= '0;
      mem_valid <= 1'b0;
      overflow  <= 1'b0;
    end else begin
      if (clr_busy) begin
        clr_id <= clr_id + 1'b1;
        if (clr_id == ID_W'(NBINS - 1)) clr_busy <= 1'b0;
      end
      if (mem_valid && mem_ready) mem_valid <= 1'b0;
      if (take) begin
        if (fits) begin
          mem_valid    <= 1'b1;
          mem_addr     <= bin_base
                        + ((ADDR_W'(in_bin) << stride_shift) + ADDR_W'(cur_tail))
                          * ADDR_W'(TUPLE_BYTES);
          mem_cnt      <= in_line.cnt;
        end else begin
          overflow <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (take && fits) mem_line <= in_line.data;
  end

endmodule
