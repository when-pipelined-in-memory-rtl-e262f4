// forward_core -- forward engine of one network layer.
//
// One timestep of one layer per enabled cycle: the PE's crossbars compute
// W_l * h_{l-1}^t from the input spike vector, the layer bias b_l is added,
// and the spiking neurons integrate, fire and reset. The output spikes
// h_l^t and the surrogate-derivative mask f'_l are registered and valid the
// cycle after en. The layer is N inputs by N neurons, held in a tile of
// ceil(N/ARRAY_ROWS) PEs whose partial sums are added (one PE at the defaults).
//
// Weights are written row by row through prog_*; biases through
// prog_bias_*. At the end of a batch the backward core raises upd_en and
// every weight and bias is replaced by sat(W - upd_dw), sat(b - upd_db) in
// that clock edge, so the next batch's forward pass uses the new values.
// Bias storage as an 8-bit register per neuron is this design's choice.
module forward_core
  import sdfa_pkg::*;
#(
  parameter int unsigned N       = 256,
  parameter int unsigned ARRAY_ROWS = XB_ROWS,
  parameter int unsigned N_CB    = 2,
  parameter int unsigned B_W  = 8,
  parameter int unsigned DW_W = 5,
  parameter int unsigned V_W  = 20
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     first,
  input  logic [N-1:0]             in_spikes,
  input  logic signed [V_W-1:0]    vth,
  input  logic                     leak_en,
  input  logic [4:0]               leak_shift,
  input  logic                     prog_en,
  input  logic [$clog2(N)-1:0]     prog_row,
  input  logic signed [W_BITS-1:0] prog_w    [N],
  input  logic                     prog_bias_en,
  input  logic signed [B_W-1:0]    prog_bias [N],
  input  logic                     upd_en,
  input  logic signed [DW_W-1:0]   upd_dw    [N][N],
  input  logic signed [DW_W-1:0]   upd_db    [N],
  output logic [N-1:0]             spikes,
  output logic [N-1:0]             mask,
  output logic signed [W_BITS-1:0] w_q       [N][N],
  output logic signed [B_W-1:0]    bias_q    [N]
);

  localparam int unsigned S_W = $clog2(N) + 5;
  localparam int unsigned I_W = S_W + 1;

  logic signed [S_W-1:0] syn [N];
  logic signed [I_W-1:0] cur [N];
  logic signed [V_W-1:0] v_unused [N];

  tile #(.N_IN(N), .ROWS(ARRAY_ROWS), .N_NEUR(N), .N_CB(N_CB), .DW_W(DW_W), .S_W(S_W)) u_tile (
    .clk     (clk),
    .spikes  (in_spikes),
    .syn_out (syn),
    .prog_en (prog_en),
    .prog_row(prog_row),
    .prog_w  (prog_w),
    .upd_en  (upd_en),
    .upd_dw  (upd_dw),
    .w_q     (w_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) bias_q[n] <= '0;
    end else if (upd_en) begin
      for (int n = 0; n < N; n++)
        bias_q[n] <= B_W'(sat_signed(int'(bias_q[n]) - int'(upd_db[n]), B_W));
    end else if (prog_bias_en) begin
      bias_q <= prog_bias;
    end
  end

  always_comb
    for (int n = 0; n < N; n++) cur[n] = I_W'(int'(syn[n]) + int'(bias_q[n]));

  spiking_neuron #(.N(N), .I_W(I_W), .V_W(V_W)) u_neur (
    .clk       (clk),
    .rst_n     (rst_n),
    .en        (en),
    .first     (first),
    .i_in      (cur),
    .vth       (vth),
    .leak_en   (leak_en),
    .leak_shift(leak_shift),
    .spikes    (spikes),
    .mask      (mask),
    .v_mem     (v_unused)
  );

endmodule
