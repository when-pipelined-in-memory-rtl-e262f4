// pipesdfa_top -- in-memory training accelerator for spiking MLPs using
// spiking direct feedback alignment (SDFA) and a three-level pipeline.
//
// The network has L fully connected spiking layers of N neurons each (layer
// 1 takes N input spikes). Per layer there is a forward core (RRAM
// crossbars holding 4-bit weights, bias, spiking neurons), a data buffer
// holding the layer's input spikes h_{l-1} and a derivative buffer holding
// the surrogate mask f'_l of every item until its backward pass, and a
// backward core accumulating dW_l and db_l. One error unit turns the output
// spike counts of a sample into the global error delta_L, and one error
// propagation core projects it through the fixed random RRAM feedback
// matrices B_l to every hidden layer at once. pipeline_ctrl issues one
// (sample, timestep) item per cycle and times every stage:
//     F_l  at tap l-1,  Err at tap L,  B_l at tap T+L+l-1.
// A run of num_batches batches takes (L+T+T*B)*num_batches + L-1 cycles.
//
// Use: program the forward weights (prog_*), biases (prog_bias_*) and the
// feedback matrices (fb_rand_init for stochastic programming, or fb_prog_*),
// set cfg_*, pulse start. While in_req is high the host must present the
// requested item's spikes (sample in_d, timestep in_t, batch in_b) and label
// in the same cycle. err_valid marks each sample's Err cycle with the
// predicted class err_pred. upd_pulse[l] shows layer l+1's weight update.
// Layers are wired point to point here; the paper routes them over a NoC.
module pipesdfa_top
  import sdfa_pkg::*;
#(
  parameter int unsigned L    = 3,
  parameter int unsigned T    = 16,
  parameter int unsigned B    = 8,
  parameter int unsigned N    = 256,
  parameter int unsigned ARRAY_ROWS = XB_ROWS,
  parameter int unsigned N_CB = 2,
  parameter int unsigned V_W  = 20,
  parameter int unsigned DW_W = 5,
  parameter int unsigned B_W  = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // run control and configuration
  input  logic                     start,
  input  logic [IDX_W-1:0]         cfg_num_batches,
  input  logic signed [V_W-1:0]    cfg_vth,
  input  logic                     cfg_leak_en,
  input  logic [4:0]               cfg_leak_shift,
  input  logic [4:0]               cfg_eta_shift [L],
  // feedback matrix programming
  input  logic                     fb_rand_init,
  input  logic                     fb_prog_en,
  input  logic [$clog2(L)-1:0]     fb_prog_layer,
  input  logic [$clog2(N)-1:0]     fb_prog_row,
  input  logic [CELL_BITS-1:0]     fb_prog_data [N],
  // forward weight / bias programming
  input  logic                     prog_en,
  input  logic [$clog2(L)-1:0]     prog_layer,
  input  logic [$clog2(N)-1:0]     prog_row,
  input  logic signed [W_BITS-1:0] prog_w    [N],
  input  logic                     prog_bias_en,
  input  logic signed [B_W-1:0]    prog_bias [N],
  // input stream
  output logic                     in_req,
  output logic [IDX_W-1:0]         in_t,
  output logic [IDX_W-1:0]         in_d,
  output logic [IDX_W-1:0]         in_b,
  input  logic [N-1:0]             in_spikes,
  input  logic [LBL_W-1:0]         in_label,
  // status
  output logic                     err_valid,
  output logic [LBL_W-1:0]         err_pred,
  output logic [L-1:0]             upd_pulse,
  output logic                     busy,
  output logic                     done,
  output logic [31:0]              cycles
);

  localparam int unsigned D_W    = $clog2(T + 1) + 1;
  localparam int unsigned E_W    = D_W + $clog2(N) + 3;
  localparam int unsigned ACC_W  = E_W + $clog2(T * B) + 2;
  localparam int unsigned EDEPTH = (2 * T + L - 2) / T;
  localparam int unsigned SW     = (EDEPTH > 1) ? $clog2(EDEPTH) : 1;
  localparam int unsigned NTAP   = T + 2 * L;
  localparam int unsigned DEPTH  = T + L;

  token_t                tap [NTAP];
  logic [N-1:0]          spk  [L];
  logic [N-1:0]          msk  [L];
  logic signed [E_W-1:0] e_out [L][N];
  logic [SW-1:0]         rd_slot [L];
  logic signed [D_W-1:0] delta [N];
  logic                  delta_valid;
  logic [CELL_BITS-1:0]  fb_code [L-1][N][N];
  logic [IDX_W-1:0]      batch_q;

  pipeline_ctrl #(.L(L), .T(T), .B(B), .EDEPTH(EDEPTH), .NTAP(NTAP)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .num_batches(cfg_num_batches),
    .in_label   (in_label),
    .in_req     (in_req),
    .tap        (tap),
    .busy       (busy),
    .done       (done),
    .cycles     (cycles)
  );

  // Batch number of the item now being issued (for the host).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                batch_q <= '0;
    else if (start && !busy)                   batch_q <= '0;
    else if (in_req && tap[0].last_item)       batch_q <= batch_q + 1'b1;
  end
  assign in_t = tap[0].t;
  assign in_d = tap[0].d;
  assign in_b = batch_q;

  for (genvar l = 0; l < L; l++) begin : g_layer
    logic [N-1:0]           f_in, h_buf, m_buf;
    logic                   upd_en;
    logic signed [DW_W-1:0] upd_dw [N][N];
    logic signed [DW_W-1:0] upd_db [N];
    logic signed [W_BITS-1:0] w_q  [N][N];
    logic signed [B_W-1:0]  bias_q [N];
    logic signed [E_W-1:0]  err [N];
    logic [$clog2(DEPTH+1)-1:0] dcnt, mcnt;

    if (l == 0) begin : g_in
      assign f_in = in_spikes;
    end else begin : g_hid
      assign f_in = spk[l-1];
    end

    forward_core #(.N(N), .ARRAY_ROWS(ARRAY_ROWS), .N_CB(N_CB), .B_W(B_W), .DW_W(DW_W), .V_W(V_W)) u_fwd (
      .clk         (clk),
      .rst_n       (rst_n),
      .en          (tap[l].valid),
      .first       (tap[l].first_t),
      .in_spikes   (f_in),
      .vth         (cfg_vth),
      .leak_en     (cfg_leak_en),
      .leak_shift  (cfg_leak_shift),
      .prog_en     (prog_en && int'(prog_layer) == l),
      .prog_row    (prog_row),
      .prog_w      (prog_w),
      .prog_bias_en(prog_bias_en && int'(prog_layer) == l),
      .prog_bias   (prog_bias),
      .upd_en      (upd_en),
      .upd_dw      (upd_dw),
      .upd_db      (upd_db),
      .spikes      (spk[l]),
      .mask        (msk[l]),
      .w_q         (w_q),
      .bias_q      (bias_q)
    );

    // Data buffer: input spikes of the layer, F_l -> B_l.
    circ_buffer #(.W(N), .DEPTH(DEPTH)) u_dbuf (
      .clk    (clk),
      .rst_n  (rst_n),
      .wr_en  (tap[l].valid),
      .wr_data(f_in),
      .rd_en  (tap[T+L+l].valid),
      .rd_data(h_buf),
      .count  (dcnt)
    );

    // Derivative buffer: f'_l mask, registered one cycle after F_l.
    circ_buffer #(.W(N), .DEPTH(DEPTH)) u_mbuf (
      .clk    (clk),
      .rst_n  (rst_n),
      .wr_en  (tap[l+1].valid),
      .wr_data(msk[l]),
      .rd_en  (tap[T+L+l].valid),
      .rd_data(m_buf),
      .count  (mcnt)
    );

    assign rd_slot[l] = tap[T+L+l].slot[SW-1:0];

    always_comb
      for (int i = 0; i < N; i++) err[i] = e_out[l][i];

    backward_core #(.N(N), .E_W(E_W), .ACC_W(ACC_W), .DW_W(DW_W)) u_bwd (
      .clk      (clk),
      .rst_n    (rst_n),
      .en       (tap[T+L+l].valid),
      .last_item(tap[T+L+l].last_item),
      .h_in     (h_buf),
      .mask     (m_buf),
      .err      (err),
      .eta_shift(cfg_eta_shift[l]),
      .upd_en   (upd_en),
      .upd_dw   (upd_dw),
      .upd_db   (upd_db)
    );

    assign upd_pulse[l] = upd_en;
  end

  error_calc #(.N(N), .T(T), .D_W(D_W)) u_err (
    .clk        (clk),
    .rst_n      (rst_n),
    .cnt_en     (tap[L].valid),
    .first      (tap[L].first_t),
    .last       (tap[L].last_t),
    .spikes     (spk[L-1]),
    .label      (tap[L].label),
    .delta_valid(delta_valid),
    .delta      (delta),
    .pred       (err_pred)
  );

  assign err_valid = delta_valid;

  error_prop_core #(.L(L), .N(N), .T(T), .D_W(D_W), .E_W(E_W), .EDEPTH(EDEPTH), .SW(SW)) u_eprop (
    .clk          (clk),
    .rst_n        (rst_n),
    .rand_init    (fb_rand_init),
    .fb_prog_en   (fb_prog_en),
    .fb_prog_layer(fb_prog_layer),
    .fb_prog_row  (fb_prog_row),
    .fb_prog_data (fb_prog_data),
    .err_en       (delta_valid),
    .err_slot     (tap[L].slot[SW-1:0]),
    .delta        (delta),
    .rd_slot      (rd_slot),
    .e_out        (e_out),
    .fb_code      (fb_code)
  );

endmodule
