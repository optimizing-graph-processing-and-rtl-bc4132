// cobra_pkg -- types and default sizes shared by the COBRA binning hierarchy.
//
// A tuple is one (index, update) pair handed to the hardware by a binupdate
// instruction. A C-Buffer (coalescing buffer) is one cacheline of tuples; an
// evicted C-Buffer travels between levels as a line plus a fill count, so that
// partially filled buffers drained at the end of Binning carry how many of
// their slots are valid.
//
// Following the paper: tuples are (index, update) pairs, C-Buffers are
// cacheline sized, there are 16 cores and 2 MB of LLC per core.
// Design choices: 32-bit index and update, 64-byte lines (8 tuples per
// C-Buffer), and the L1/L2 capacities and the share of each cache's ways that
// is reserved for C-Buffers (see the *_CBUFS constants below).
package cobra_pkg;

  parameter int unsigned IDX_W = 32;             // tuple index width
  parameter int unsigned UPD_W = 32;             // tuple update width
  parameter int unsigned LINE_BYTES = 64;        // cacheline size
  parameter int unsigned TUPLE_BYTES = (IDX_W + UPD_W) / 8;
  parameter int unsigned TPL = LINE_BYTES / TUPLE_BYTES;  // tuples per C-Buffer (8)
  parameter int unsigned CNT_W = $clog2(TPL + 1);         // fill count width

  parameter int unsigned NUM_CORES = 16;         // cores in the evaluated system

  // C-Buffers per level and core: (ways reserved / ways) * capacity / line.
  //   L1 : 32 KB, 4 of 8 ways reserved  -> 16 KB / 64 B =   256 buffers
  //   L2 : 256 KB, 4 of 8 ways reserved -> 128 KB / 64 B =  2048 buffers
  //   LLC: 2 MB per core, 8 of 16 ways  -> 1 MB / 64 B   = 16384 buffers
  parameter int unsigned L1_CBUFS  = 256;
  parameter int unsigned L2_CBUFS  = 2048;
  parameter int unsigned LLC_CBUFS = 16384;

  parameter int unsigned EVB_DEPTH = 4;          // eviction buffers between two levels
  parameter int unsigned SHIFT_W   = 6;          // width of a bin-range shift amount

  typedef struct packed {
    logic [IDX_W-1:0] idx;
    logic [UPD_W-1:0] upd;
  } tuple_t;

  typedef tuple_t [TPL-1:0] line_t;              // slot 0 is filled first

  typedef struct packed {
    line_t            data;
    logic [CNT_W-1:0] cnt;                       // valid slots 0..cnt-1
  } evline_t;

  // Smallest shift s with ((n - 1) >> s) < nbufs: the bin range 2**s that
  // spreads n indices over at most nbufs C-Buffers.
  function automatic logic [SHIFT_W-1:0] range_shift(input logic [IDX_W:0] n,
                                                     input logic [IDX_W:0] nbufs);
    logic [IDX_W:0] top;
    logic [SHIFT_W-1:0] s;
    top = (n == '0) ? '0 : n - 1'b1;
    s = '0;
    for (int i = IDX_W; i >= 0; i--) begin
      if ((top >> i) < nbufs) s = SHIFT_W'(i);
    end
    return s;
  endfunction

endpackage
