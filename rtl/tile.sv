// tile -- group of PE cores sharing one layer, with partial-sum accumulation.
//
// A layer with N_IN inputs is cut into N_PE = ceil(N_IN/ROWS) slices of at
// most ROWS inputs (the wordlines of one crossbar). PE p holds the weights
// of inputs p*ROWS .. p*ROWS+ROWS-1 for all N_NEUR neurons; missing inputs of
// the last slice are driven with zero. The accumulator adds the PEs'
// partial sums, so syn_out[n] = sum over all N_IN inputs of spike * w, in
// the same cycle as the input (the sum feeds the neurons directly; no
// output register). Programming and update ports address the full N_IN
// rows and are routed to the PE that owns each row.
// Several PEs per tile whose results are accumulated follow the paper; the
// input-slice assignment and the combinational accumulation are this
// design's choices.
module tile
  import sdfa_pkg::*;
#(
  parameter int unsigned N_IN   = 256,
  parameter int unsigned ROWS   = 256,
  parameter int unsigned N_NEUR = 256,
  parameter int unsigned N_CB   = 2,
  parameter int unsigned DW_W   = 5,
  parameter int unsigned S_W    = $clog2(N_IN) + 5
) (
  input  logic                      clk,
  input  logic [N_IN-1:0]           spikes,
  output logic signed [S_W-1:0]     syn_out [N_NEUR],
  input  logic                      prog_en,
  input  logic [$clog2(N_IN)-1:0]   prog_row,
  input  logic signed [W_BITS-1:0]  prog_w  [N_NEUR],
  input  logic                      upd_en,
  input  logic signed [DW_W-1:0]    upd_dw  [N_IN][N_NEUR],
  output logic signed [W_BITS-1:0]  w_q     [N_IN][N_NEUR]
);

  localparam int unsigned N_PE  = (N_IN + ROWS - 1) / ROWS;
  localparam int unsigned PS_W  = $clog2(ROWS) + 5;

  logic signed [PS_W-1:0] part [N_PE][N_NEUR];

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    logic [ROWS-1:0]          sp;
    logic signed [PS_W-1:0]   so  [N_NEUR];
    logic signed [DW_W-1:0]   udw [ROWS][N_NEUR];
    logic signed [W_BITS-1:0] wq  [ROWS][N_NEUR];
    logic                     pen;

    always_comb begin
      for (int r = 0; r < ROWS; r++) begin
        sp[r] = (p * ROWS + r < N_IN) ? spikes[p*ROWS + r] : 1'b0;
        for (int n = 0; n < N_NEUR; n++)
          udw[r][n] = (p * ROWS + r < N_IN) ? upd_dw[p*ROWS + r][n] : '0;
      end
      for (int n = 0; n < N_NEUR; n++) part[p][n] = so[n];
    end

    assign pen = prog_en && (int'(prog_row) / ROWS == p);

    pe_core #(.ROWS(ROWS), .N_NEUR(N_NEUR), .N_CB(N_CB), .DW_W(DW_W), .S_W(PS_W)) u_pe (
      .clk     (clk),
      .spikes  (sp),
      .syn_out (so),
      .prog_en (pen),
      .prog_row($clog2(ROWS)'(int'(prog_row) % ROWS)),
      .prog_w  (prog_w),
      .upd_en  (upd_en),
      .upd_dw  (udw),
      .w_q     (wq)
    );

    // rows of this PE that belong to the layer (fewer in a partly used PE)
    localparam int unsigned NR = (N_IN - p * ROWS < ROWS) ? N_IN - p * ROWS : ROWS;

    always_comb
      for (int r = 0; r < NR; r++)
        for (int n = 0; n < N_NEUR; n++) w_q[p*ROWS + r][n] = wq[r][n];
  end

  // Accumulator: sum of the PEs' partial results.
  always_comb
    for (int n = 0; n < N_NEUR; n++) begin
      int acc;
      acc = 0;
      for (int p = 0; p < N_PE; p++) acc += int'(part[p][n]);
      syn_out[n] = S_W'(acc);
    end

endmodule
