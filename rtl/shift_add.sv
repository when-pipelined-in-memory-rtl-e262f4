// shift_add -- shift-and-add stage behind a crossbar ("S&A").
//
// A 4-bit synapse is held in two 2-bit RRAM cells on neighbouring bitlines:
// the high cell holds bits [3:2], the low cell bits [1:0] of the weight in
// offset-binary form (w + 8, so -8..7 maps to 0..15). For a binary input
// vector x the two columns give S_hi = sum x*hi and S_lo = sum x*lo; this
// stage returns the signed dot product
//     y = 4*S_hi + S_lo - 8*popcount(x) = sum x*w .
// Purely combinational. Two cells per synapse follow the paper; the
// offset-binary encoding and the popcount correction are this design's.
module shift_add
  import sdfa_pkg::*;
#(
  parameter int unsigned N_SYN = 128,
  parameter int unsigned IN_W  = 12,   // width of a column sum
  parameter int unsigned CNT_W = 9,    // width of the active-input count
  parameter int unsigned OUT_W = 14
) (
  input  logic signed [IN_W-1:0]  hi_sum [N_SYN],
  input  logic signed [IN_W-1:0]  lo_sum [N_SYN],
  input  logic [CNT_W-1:0]        act_cnt,
  output logic signed [OUT_W-1:0] y      [N_SYN]
);

  always_comb begin
    for (int i = 0; i < N_SYN; i++)
      y[i] = OUT_W'((int'(hi_sum[i]) <<< CELL_BITS) + int'(lo_sum[i])
                    - int'(W_OFFSET) * int'(act_cnt));
  end

endmodule
