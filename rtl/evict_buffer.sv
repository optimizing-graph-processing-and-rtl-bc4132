// evict_buffer -- eviction buffers between two cache levels.
//
// When a C-Buffer at level i fills (or is drained at the end of Binning), its
// whole line is copied here in one cycle, which frees the C-Buffer at once and
// keeps the scatter of its tuples off the core's path. The buffer is a FIFO of
// DEPTH lines. Its output unpacks the head line one tuple per cycle, slot 0
// first, for the binning engine of level i+1, which may send each tuple to a
// different C-Buffer of its own.
//
// Interface: in_valid/in_ready/in_line (line plus fill count; in_ready is
// simply "not full" and does not depend on in_valid), out_valid/out_ready/
// out_tuple (one tuple per accepted cycle). empty is high when no tuple is
// held, used to sequence the end-of-Binning drain. A line is written on the
// cycle it is accepted and its first tuple is offered on the next cycle.
//
// Following the paper: "a small number of eviction buffers between cache
// levels" that hide the latency of scattering evicted tuples. Design choices:
// the depth (4), FIFO order, and unpacking at one tuple per cycle.
module evict_buffer
  import cobra_pkg::*;
#(
  parameter int unsigned DEPTH = EVB_DEPTH
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  evline_t in_line,
  output logic    out_valid,
  input  logic    out_ready,
  output tuple_t  out_tuple,
  output logic    empty,
  output logic    full
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  evline_t                 q [DEPTH];
  logic [PW-1:0]           rd_ptr, wr_ptr;
  localparam int unsigned UW = $clog2(DEPTH + 1);
  logic [UW-1:0]           used;
  logic [$clog2(TPL)-1:0]  slot;

  logic push, pop_tuple, pop_line;

  assign full      = (used == UW'(DEPTH));
  assign empty     = (used == '0);
  assign in_ready  = !full;
  assign push      = in_valid && in_ready;
  assign out_valid = !empty;
  assign out_tuple = q[rd_ptr].data[slot];
  assign pop_tuple = out_valid && out_ready;
  assign pop_line  = pop_tuple && ({1'b0, slot} == CNT_W'(q[rd_ptr].cnt - 1'b1));

  always_ff @(posedge clk) begin
    if (push) q[wr_ptr] <= in_line;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      used   <= '0;
      slot   <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop_line) begin
        rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
        slot   <= '0;
      end else if (pop_tuple) begin
        slot <= slot + 1'b1;
      end
      used <= used + UW'(push) - UW'(pop_line);
    end
  end

  // An evicted line always holds at least one tuple.
  a_nonempty_line : assert property (@(posedge clk) disable iff (!rst_n)
                                     push |-> (in_line.cnt != '0 && in_line.cnt <= CNT_W'(TPL)));

endmodule
