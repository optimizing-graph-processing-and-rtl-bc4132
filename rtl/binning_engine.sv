// binning_engine -- the binning engine of one cache level's controller.
//
// Each incoming tuple goes to C-Buffer number idx >> shift, where 2**shift is
// this level's bin range. The engine reads that buffer's line and fill count
// from the reserved ways (cbuf_store) and, in the same cycle, either appends
// the tuple in the next free slot, or, when the tuple is the last one the line
// can take, sends the full line (its stored tuples plus the incoming one) to
// the eviction buffer and marks the C-Buffer empty. So a filled C-Buffer
// leaves as one line, and its tuples are scattered over the next level's
// C-Buffers by the next engine. If the eviction buffer is full, the engine
// holds in_ready low and the tuple waits: this is the only stall.
//
// At the end of Binning, drain_start makes the engine walk all its C-Buffers
// in order, one per cycle, and send every partly filled one down as a line
// with its fill count; drain_done pulses when the walk is over. No input is
// taken while draining. A tuple whose buffer number is not below NBUF is
// dropped and sets the sticky range_err flag (the bin range was set too small).
// For NBUF cycles after reset the store clears its counts and the engine
// takes no input; a drain_start in that time is held until the clear ends.
//
// Interface: in_valid/in_ready/in_tuple; out_valid/out_ready/out_line/out_id
// (out_id is the C-Buffer number, used as the bin number below the LLC).
// out_valid may depend on in_valid in the same cycle; out_ready must not
// depend on out_valid. Throughput is one tuple per cycle when not stalled.
// Event outputs pulse for one cycle: ev_fill on an eviction of a full buffer,
// ev_drain on a drained partial buffer, ev_stall on a cycle in which a tuple
// waits for a free eviction buffer.
//
// Following the paper: per-level bin range, buffer = index / bin range,
// unpack-and-append of evicted tuples, eviction of a C-Buffer when it fills.
// Design choices: power-of-two bin ranges (a shift), the single-cycle
// read-modify-write, the drain walk and the range check.
module binning_engine
  import cobra_pkg::*;
#(
  parameter int unsigned NBUF = L1_CBUFS,
  localparam int unsigned ID_W = (NBUF > 1) ? $clog2(NBUF) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SHIFT_W-1:0] shift,
  // tuples in
  input  logic               in_valid,
  output logic               in_ready,
  input  tuple_t             in_tuple,
  // evicted lines out
  output logic               out_valid,
  input  logic               out_ready,
  output evline_t            out_line,
  output logic [ID_W-1:0]    out_id,
  // end-of-Binning drain
  input  logic               drain_start,
  output logic               draining,
  output logic               drain_done,
  // status
  output logic               range_err,
  output logic               ev_fill,
  output logic               ev_drain,
  output logic               ev_stall
);

  typedef enum logic [0:0] {S_RUN, S_DRAIN} state_t;
  state_t state;

  logic [ID_W-1:0]        drain_id;
  logic                   drain_pend;          // drain asked for during init
  logic [IDX_W-1:0]       bufnum;
  logic                   in_range;
  logic [ID_W-1:0]        id;
  line_t                  rd_line;
  logic [CNT_W-1:0]       rd_cnt;
  logic                   last_slot;
  logic                   init_busy;

  logic                   wr_slot_en, wr_cnt_en;
  logic [CNT_W-1:0]       wr_cnt;
  line_t                  full_line;

  assign bufnum   = in_tuple.idx >> shift;
  assign in_range = (bufnum < IDX_W'(NBUF));
  assign id       = (state == S_DRAIN) ? drain_id : ID_W'(bufnum);
  assign last_slot = (rd_cnt == CNT_W'(TPL - 1));

  cbuf_store #(.NBUF(NBUF)) u_store (
    .clk, .rst_n,
    .rd_id   (id),
    .rd_line (rd_line),
    .rd_cnt  (rd_cnt),
    .wr_slot_en,
    .wr_id   (id),
    .wr_slot (rd_cnt[$clog2(TPL)-1:0]),
    .wr_tuple(in_tuple),
    .wr_cnt_en,
    .wr_cnt,
    .init_busy
  );

  always_comb begin
    full_line = rd_line;
    full_line[TPL-1] = in_tuple;
  end

  always_comb begin
    in_ready   = 1'b0;
    out_valid  = 1'b0;
    out_line   = '{data: rd_line, cnt: rd_cnt};
    out_id     = id;
    wr_slot_en = 1'b0;
    wr_cnt_en  = 1'b0;
    wr_cnt     = '0;
    ev_fill    = 1'b0;
    ev_drain   = 1'b0;
    ev_stall   = 1'b0;
    if (init_busy) begin
      // C-Buffer counts are being cleared after reset: accept nothing
    end else if (state == S_RUN) begin
      if (!in_range) begin
        in_ready = 1'b1;                       // dropped, flagged below
      end else if (last_slot) begin
        out_valid = in_valid;
        out_line  = '{data: full_line, cnt: CNT_W'(TPL)};
        in_ready  = out_ready;
        if (in_valid && out_ready) begin
          wr_cnt_en = 1'b1;                    // buffer is empty again
          ev_fill   = 1'b1;
        end
        ev_stall = in_valid && !out_ready;
      end else begin
        in_ready = 1'b1;
        if (in_valid) begin
          wr_slot_en = 1'b1;
          wr_cnt_en  = 1'b1;
          wr_cnt     = rd_cnt + 1'b1;
        end
      end
    end else begin
      out_valid = (rd_cnt != '0);
      if (out_valid && out_ready) begin
        wr_cnt_en = 1'b1;
        ev_drain  = 1'b1;
      end
    end
  end

  assign draining = (state == S_DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_RUN;
      drain_id   <= '0;
      drain_done <= 1'b0;
      drain_pend <= 1'b0;
      range_err  <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      if (state == S_RUN && !init_busy && in_valid && !in_range) range_err <= 1'b1;
      case (state)
        S_RUN: if ((drain_start || drain_pend) && !init_busy) begin
          state      <= S_DRAIN;
          drain_id   <= '0;
          drain_pend <= 1'b0;
        end else if (drain_start) begin
          drain_pend <= 1'b1;
        end
        S_DRAIN: if (!init_busy && (rd_cnt == '0 || out_ready)) begin
          if (drain_id == ID_W'(NBUF - 1)) begin
            state      <= S_RUN;
            drain_done <= 1'b1;
          end else begin
            drain_id <= drain_id + 1'b1;
          end
        end
        default: state <= S_RUN;
      endcase
    end
  end

  // A line leaves with at least one tuple in it.
  a_out_nonempty : assert property (@(posedge clk) disable iff (!rst_n)
                                    out_valid |-> out_line.cnt != '0);

endmodule
