// error_prop_core -- direct feedback of the global error to every layer.
//
// For each hidden layer l = 1..L-1 a crossbar holds the fixed random
// feedback matrix B_l (N neurons x N output classes), one 2-bit cell per
// weight, code k standing for the zero-mean value 2k-3 (-3,-1,+1,+3). The
// matrices are made by rand_init, which programs all cells at once and lets
// the write variation of the cells set their values (see rram_crossbar);
// fb_prog_* can instead load known codes row by row.
//
// In the cycle err_en is high the global error delta_L (signed, one value
// per output neuron) drives the wordlines of all feedback arrays at once and
//     e_l[i] = sum_c (2*code[c][i] - 3) * delta_L[c]
//            = 2 * column_sum[i] - 3 * sum_c delta_L[c]
// is written, together with delta_L itself as e_L, into slot err_slot of
// the error buffer. The error is computed once per sample and read back for
// every one of its T timesteps (rd_slot[l] -> e_out[l], combinational),
// which is the point of spiking DFA: no per-timestep feedback multiply and
// no layer-to-layer error chain. EDEPTH slots cover the samples whose
// backward passes overlap. Array index l-1 holds layer l.
// The feedback-through-RRAM scheme and the reuse across timesteps follow
// the paper; the value encoding and buffer depth are this design's.
module error_prop_core
  import sdfa_pkg::*;
#(
  parameter int unsigned L      = 3,
  parameter int unsigned N      = 256,
  parameter int unsigned T      = 16,
  parameter int unsigned D_W    = $clog2(T + 1) + 1,
  parameter int unsigned E_W    = D_W + $clog2(N) + 3,
  parameter int unsigned EDEPTH = (2 * T + L - 2) / T,
  parameter int unsigned SW     = (EDEPTH > 1) ? $clog2(EDEPTH) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     rand_init,
  input  logic                     fb_prog_en,
  input  logic [$clog2(L)-1:0]     fb_prog_layer,   // 0 .. L-2 (layer 1 .. L-1)
  input  logic [$clog2(N)-1:0]     fb_prog_row,     // output-class index
  input  logic [CELL_BITS-1:0]     fb_prog_data [N],
  input  logic                     err_en,
  input  logic [SW-1:0]            err_slot,
  input  logic signed [D_W-1:0]    delta [N],
  input  logic [SW-1:0]            rd_slot [L],
  output logic signed [E_W-1:0]    e_out   [L][N],
  output logic [CELL_BITS-1:0]     fb_code [L-1][N][N]
);

  localparam int unsigned CS_W = D_W + CELL_BITS + $clog2(N) + 1;

  logic signed [E_W-1:0] ebuf [EDEPTH][L][N];
  logic signed [E_W-1:0] e_new [L][N];
  logic [D_W-1:0]        drv [N];
  int                    dsum;

  always_comb begin
    dsum = 0;
    for (int c = 0; c < N; c++) begin
      drv[c] = delta[c];
      dsum   = dsum + int'(delta[c]);
    end
  end

  for (genvar l = 0; l < L - 1; l++) begin : g_fb
    logic signed [CS_W-1:0] col [N];
    logic [CELL_BITS-1:0]   cq  [N][N];
    rram_crossbar #(
      .ROWS(N), .COLS(N), .CELL_BITS(CELL_BITS),
      .IN_BITS(D_W), .IN_SIGNED(1'b1), .OUT_BITS(CS_W)
    ) u_fb (
      .clk        (clk),
      .rd_in      (drv),
      .col_out    (col),
      .prog_en    (fb_prog_en && int'(fb_prog_layer) == l),
      .prog_row   (fb_prog_row),
      .prog_data  (fb_prog_data),
      .rand_en    (rand_init),
      .wr_all_en  (1'b0),
      .wr_all_data(cq),   // parallel write unused: feedback stays fixed
      .cell_q     (cq)
    );

    always_comb
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) fb_code[l][r][c] = cq[r][c];

    always_comb
      for (int i = 0; i < N; i++)
        e_new[l][i] = E_W'(2 * int'(col[i]) - 3 * dsum);
  end

  always_comb
    for (int i = 0; i < N; i++) e_new[L-1][i] = E_W'(delta[i]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < EDEPTH; s++)
        for (int l = 0; l < L; l++)
          for (int i = 0; i < N; i++) ebuf[s][l][i] <= '0;
    end else if (err_en) begin
      ebuf[err_slot] <= e_new;
    end
  end

  always_comb
    for (int l = 0; l < L; l++) e_out[l] = ebuf[rd_slot[l]][l];

endmodule
