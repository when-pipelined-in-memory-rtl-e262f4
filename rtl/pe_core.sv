// pe_core -- processing element: N_CB crossbars, their drivers and their
// shift-and-add stages, computing the synaptic sums of N_NEUR neurons for a
// binary spike vector on ROWS inputs in one cycle (combinational read).
//
// Synapse j lives in crossbar j / (N_NEUR/N_CB); inside it, bitline 2k holds
// the high cell and bitline 2k+1 the low cell of local synapse k, in the
// offset-binary code of shift_add. Weights are signed 4-bit (-8..7).
//
// Interface and timing:
//   spikes    -> syn_out     same cycle (analog read + S&A).
//   prog_en   writes the 4-bit weights prog_w of row prog_row at the clock.
//   upd_en    applies W <- sat(W - upd_dw) to every synapse at the clock
//             (the weight update at the end of a batch).
//   w_q       current weights, decoded from the cell read-back.
// Several crossbars with driver and S&A per PE follow the paper's figure;
// the number of crossbars and the column layout are this design's choice.
module pe_core
  import sdfa_pkg::*;
#(
  parameter int unsigned ROWS   = 256,
  parameter int unsigned N_NEUR = 256,
  parameter int unsigned N_CB   = 2,
  parameter int unsigned DW_W   = 5,
  parameter int unsigned S_W    = $clog2(ROWS) + 5
) (
  input  logic                     clk,
  input  logic [ROWS-1:0]          spikes,
  output logic signed [S_W-1:0]    syn_out [N_NEUR],
  input  logic                     prog_en,
  input  logic [$clog2(ROWS)-1:0]  prog_row,
  input  logic signed [W_BITS-1:0] prog_w  [N_NEUR],
  input  logic                     upd_en,
  input  logic signed [DW_W-1:0]   upd_dw  [ROWS][N_NEUR],
  output logic signed [W_BITS-1:0] w_q     [ROWS][N_NEUR]
);

  localparam int unsigned SPC     = N_NEUR / N_CB;      // synapses per crossbar
  localparam int unsigned CB_COLS = 2 * SPC;
  localparam int unsigned CS_W    = 1 + CELL_BITS + $clog2(ROWS) + 1;
  localparam int unsigned CNT_W   = $clog2(ROWS + 1);

  // Offset-binary split of a signed 4-bit weight into two cell codes.
  function automatic logic [W_BITS-1:0] enc(input logic signed [W_BITS-1:0] w);
    return W_BITS'(int'(w) + int'(W_OFFSET));
  endfunction

  logic [0:0]     drv [ROWS];
  logic [CNT_W-1:0] act_cnt;

  always_comb begin
    act_cnt = '0;
    for (int r = 0; r < ROWS; r++) begin
      drv[r]  = spikes[r];
      act_cnt = act_cnt + CNT_W'(spikes[r]);
    end
  end

  // Weights decoded from every crossbar's read-back (used for the update
  // and exported as w_q).
  logic signed [W_BITS-1:0] w_cur [ROWS][N_NEUR];

  for (genvar cb = 0; cb < N_CB; cb++) begin : g_cb
    logic signed [CS_W-1:0]  col     [CB_COLS];
    logic [CELL_BITS-1:0]    pdata   [CB_COLS];
    logic [CELL_BITS-1:0]    wdata   [ROWS][CB_COLS];
    logic [CELL_BITS-1:0]    cq      [ROWS][CB_COLS];
    logic signed [CS_W-1:0]  hi_s    [SPC];
    logic signed [CS_W-1:0]  lo_s    [SPC];
    logic signed [S_W-1:0]   y       [SPC];

    always_comb begin
      for (int k = 0; k < SPC; k++) begin
        logic [W_BITS-1:0] u;
        u = enc(prog_w[cb*SPC + k]);
        pdata[2*k]   = u[W_BITS-1:CELL_BITS];
        pdata[2*k+1] = u[CELL_BITS-1:0];
        hi_s[k] = col[2*k];
        lo_s[k] = col[2*k+1];
      end
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < SPC; k++) begin
          logic [W_BITS-1:0] u;
          int wn;
          u  = {cq[r][2*k], cq[r][2*k+1]};
          w_cur[r][cb*SPC + k] = W_BITS'(int'(u) - int'(W_OFFSET));
          wn = sat_signed(int'(u) - int'(W_OFFSET) - int'(upd_dw[r][cb*SPC + k]), W_BITS);
          u  = enc(W_BITS'(wn));
          wdata[r][2*k]   = u[W_BITS-1:CELL_BITS];
          wdata[r][2*k+1] = u[CELL_BITS-1:0];
        end
    end

    rram_crossbar #(
      .ROWS(ROWS), .COLS(CB_COLS), .CELL_BITS(CELL_BITS),
      .IN_BITS(1), .IN_SIGNED(1'b0), .OUT_BITS(CS_W)
    ) u_xb (
      .clk        (clk),
      .rd_in      (drv),
      .col_out    (col),
      .prog_en    (prog_en),
      .prog_row   (prog_row),
      .prog_data  (pdata),
      .rand_en    (1'b0),
      .wr_all_en  (upd_en),
      .wr_all_data(wdata),
      .cell_q     (cq)
    );

    shift_add #(.N_SYN(SPC), .IN_W(CS_W), .CNT_W(CNT_W), .OUT_W(S_W)) u_sa (
      .hi_sum (hi_s),
      .lo_sum (lo_s),
      .act_cnt(act_cnt),
      .y      (y)
    );

    always_comb
      for (int k = 0; k < SPC; k++) syn_out[cb*SPC + k] = y[k];
  end

  assign w_q = w_cur;

endmodule
