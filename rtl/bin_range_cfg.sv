// bin_range_cfg -- sets each cache level's bin range from the cache sizes.
//
// In COBRA the bin range is no longer a software tuning knob: each level uses
// the smallest power-of-two range that spreads all indices over the C-Buffers
// that level can hold. Given the number of distinct indices n (e.g. vertices),
// level k with Y_k C-Buffers gets shift_k = the smallest s with
// (n-1) >> s < Y_k, i.e. bin range 2**s >= n / Y_k. The L1, holding the fewest
// buffers, ends up with the largest range and the LLC with the smallest, as
// in the 16R / 8R / R example. The LLC shift also fixes the bins in DRAM: one
// per LLC C-Buffer. The shifts are registered on load and held for the whole
// Binning phase.
//
// Interface: load, num_idx (n, up to 2**IDX_W) in; shift_l1/l2/llc and
// bins_used (LLC buffers actually used, = ceil(n / 2**shift_llc)) out, one
// cycle after load.
//
// Following the paper: per-level bin ranges set by each level's capacity.
// Design choice: power-of-two ranges and this exact rule for choosing them.
module bin_range_cfg
  import cobra_pkg::*;
#(
  parameter int unsigned Y1 = L1_CBUFS,
  parameter int unsigned Y2 = L2_CBUFS,
  parameter int unsigned Y3 = LLC_CBUFS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               load,
  input  logic [IDX_W:0]     num_idx,
  output logic [SHIFT_W-1:0] shift_l1,
  output logic [SHIFT_W-1:0] shift_l2,
  output logic [SHIFT_W-1:0] shift_llc,
  output logic [IDX_W:0]     bins_used
);

  logic [SHIFT_W-1:0] s1, s2, s3;
  logic [IDX_W:0]     range3;

  assign s1 = range_shift(num_idx, (IDX_W+1)'(Y1));
  assign s2 = range_shift(num_idx, (IDX_W+1)'(Y2));
  assign s3 = range_shift(num_idx, (IDX_W+1)'(Y3));
  assign range3 = (IDX_W+1)'(1) << s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift_l1  <= '0;
      shift_l2  <= '0;
      shift_llc <= '0;
      bins_used <= '0;
    end else if (load) begin
      shift_l1  <= s1;
      shift_l2  <= s2;
      shift_llc <= s3;
      bins_used <= (num_idx + range3 - 1'b1) >> s3;
    end
  end

endmodule
