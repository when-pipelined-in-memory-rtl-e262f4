// error_calc -- output-layer error unit ("Err" stage).
//
// Each cycle cnt_en is high, the output layer's spike vector of one
// timestep is added to a per-neuron counter (restarted by first). On the
// sample's last timestep (last high together with cnt_en) the unit also
// produces, in the same cycle,
//     delta[c] = count[c] - T * (c == label)        = T * (h_L - y)
// where h_L = count / T is the mean firing rate and y the one-hot target,
// and pred = argmax count (lowest index wins ties). delta is combinational
// and valid only in that cycle (delta_valid). The rate-minus-target form is
// this design's simplification of the cross-entropy gradient: it needs no
// exponent and no divider.
module error_calc
  import sdfa_pkg::*;
#(
  parameter int unsigned N   = 256,
  parameter int unsigned T   = 16,
  parameter int unsigned D_W = $clog2(T + 1) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cnt_en,
  input  logic                  first,
  input  logic                  last,
  input  logic [N-1:0]          spikes,
  input  logic [LBL_W-1:0]      label,
  output logic                  delta_valid,
  output logic signed [D_W-1:0] delta [N],
  output logic [LBL_W-1:0]      pred
);

  localparam int unsigned C_W = $clog2(T + 1);

  logic [C_W-1:0] cnt   [N];
  logic [C_W-1:0] cnt_n [N];

  always_comb begin
    int best;
    best = 0;
    pred = '0;
    for (int c = 0; c < N; c++) begin
      cnt_n[c] = (first ? '0 : cnt[c]) + C_W'(spikes[c]);
      delta[c] = D_W'(int'(cnt_n[c]) - ((c == int'(label)) ? int'(T) : 0));
      if (int'(cnt_n[c]) > best) begin
        best = int'(cnt_n[c]);
        pred = LBL_W'(c);
      end
    end
  end

  assign delta_valid = cnt_en && last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N; c++) cnt[c] <= '0;
    end else if (cnt_en) begin
      cnt <= cnt_n;
    end
  end

endmodule
