// backward_core -- gradient accumulation and weight update of one layer.
//
// In every cycle en is high the core handles one (sample, timestep) item:
//     delta_i   = mask_i ? err_i : 0          (e_l (.) f'_l, SDFA error)
//     dW[i][j] += delta_i * h_j               (h = layer input spikes h_{l-1})
//     db[i]    += delta_i
// Because h is binary the outer product needs no multiplier. The items of a
// whole batch accumulate. When the batch's last item arrives (en and
// last_item) the core raises upd_en in that same cycle with
//     upd_dw = sat(total_dW >>> eta_shift), upd_db = sat(total_db >>> eta_shift)
// (total including the current item), i.e. eta = 2^-eta_shift, and clears
// its accumulators at the clock edge. The forward core applies the step at
// that edge, so the next batch's forward pass of this layer, one cycle
// later, already sees the new weights. The accumulate-then-update order
// follows the paper's algorithm; the power-of-two learning rate, the
// saturation and the register-based accumulators are this design's.
module backward_core
  import sdfa_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter int unsigned E_W   = 17,
  parameter int unsigned ACC_W = 26,
  parameter int unsigned DW_W  = 5
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   last_item,
  input  logic [N-1:0]           h_in,
  input  logic [N-1:0]           mask,
  input  logic signed [E_W-1:0]  err [N],
  input  logic [4:0]             eta_shift,
  output logic                   upd_en,
  output logic signed [DW_W-1:0] upd_dw [N][N],   // [input][neuron]
  output logic signed [DW_W-1:0] upd_db [N]
);

  logic signed [ACC_W-1:0] dw [N][N];   // dw[neuron][input]
  logic signed [ACC_W-1:0] db [N];
  logic signed [E_W-1:0]   delta [N];

  always_comb
    for (int i = 0; i < N; i++) delta[i] = mask[i] ? err[i] : '0;

  assign upd_en = en && last_item;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        db[i] <= '0;
        for (int j = 0; j < N; j++) dw[i][j] <= '0;
      end
    end else if (upd_en) begin
      for (int i = 0; i < N; i++) begin
        db[i] <= '0;
        for (int j = 0; j < N; j++) dw[i][j] <= '0;
      end
    end else if (en) begin
      for (int i = 0; i < N; i++) begin
        db[i] <= db[i] + ACC_W'(delta[i]);
        if (mask[i])
          for (int j = 0; j < N; j++)
            if (h_in[j]) dw[i][j] <= dw[i][j] + ACC_W'(delta[i]);
      end
    end
  end

  // Learning-rate scaling of the batch totals, evaluated for the update.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      upd_db[i] = DW_W'(sat_signed((int'(db[i]) + int'(delta[i])) >>> eta_shift, DW_W));
      for (int j = 0; j < N; j++)
        upd_dw[j][i] = DW_W'(sat_signed(
          (int'(dw[i][j]) + (h_in[j] ? int'(delta[i]) : 0)) >>> eta_shift, DW_W));
    end
  end

endmodule
