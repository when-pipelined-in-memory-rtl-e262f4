// rram_crossbar -- behavioural model of a 1T1R RRAM crossbar with its
// wordline/sourceline drivers, column multiplexer and ADCs.
//
// This is a behavioural model of an analog, process-specific macro, not
// synthesizable logic of a real chip: the stochastic programming below uses
// $urandom to stand in for the physical variation of RRAM writes.
//
// Each cell stores a CELL_BITS conductance level (code 0 .. 2^CELL_BITS-1).
// A read drives every wordline r with the value rd_in[r] (a spike bit, or a
// signed multi-bit value through a DAC-style driver when IN_BITS > 1) and
// each column returns sum_r rd_in[r] * code[r][c]. The ADC is modelled as
// lossless: OUT_BITS is wide enough for the exact sum. The read is
// combinational, so a complete vector-matrix multiply fits in one clock.
//
// Writes (all at the rising clock edge, highest priority first):
//   rand_en    programs every cell towards the middle of the range; the
//              outcome spreads like a Gaussian and is binned into the four
//              2-bit levels at mean-sigma, mean and mean+sigma. This is how
//              the fixed random feedback matrices are made without an RNG.
//   wr_all_en  writes every cell from wr_all_data (parallel weight update).
//   prog_en    writes one row, prog_row, from prog_data.
// cell_q is the digital read-back of the stored codes.
//
// The array size and the 2-bit cell follow the paper; the ADC resolution,
// the driver encoding and the Gaussian bin edges are this model's choices.
module rram_crossbar #(
  parameter int unsigned ROWS      = 256,
  parameter int unsigned COLS      = 256,
  parameter int unsigned CELL_BITS = 2,
  parameter int unsigned IN_BITS   = 1,
  parameter bit          IN_SIGNED = 1'b0,
  parameter int unsigned OUT_BITS  = IN_BITS + CELL_BITS + $clog2(ROWS) + 1
) (
  input  logic                         clk,
  // read (vector-matrix multiply)
  input  logic [IN_BITS-1:0]           rd_in   [ROWS],
  output logic signed [OUT_BITS-1:0]   col_out [COLS],
  // programming
  input  logic                         prog_en,
  input  logic [$clog2(ROWS)-1:0]      prog_row,
  input  logic [CELL_BITS-1:0]         prog_data [COLS],
  input  logic                         rand_en,
  input  logic                         wr_all_en,
  input  logic [CELL_BITS-1:0]         wr_all_data [ROWS][COLS],
  // digital read-back
  output logic [CELL_BITS-1:0]         cell_q [ROWS][COLS]
);

  logic [CELL_BITS-1:0] cells [ROWS][COLS];

  // Wordline drive value of row r as a signed integer.
  function automatic int drive_val(input logic [IN_BITS-1:0] v);
    if (IN_SIGNED && v[IN_BITS-1]) return int'(v) - (1 <<< IN_BITS);
    return int'(v);
  endfunction

  // Programming outcome of one cell: a sum of four uniform variates is close
  // to Gaussian (mean 510, sigma about 148); it is binned into 2-bit levels.
  function automatic logic [CELL_BITS-1:0] stochastic_level();
    int unsigned r;
    r = ($urandom & 32'hFF) + ($urandom & 32'hFF) + ($urandom & 32'hFF) + ($urandom & 32'hFF);
    if (r < 362)      return CELL_BITS'(0);
    else if (r < 510) return CELL_BITS'(1);
    else if (r < 658) return CELL_BITS'(2);
    else              return CELL_BITS'((1 << CELL_BITS) - 1);
  endfunction

  always_ff @(posedge clk) begin
    if (rand_en) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          cells[r][c] <= stochastic_level();
    end else if (wr_all_en) begin
      cells <= wr_all_data;
    end else if (prog_en) begin
      for (int c = 0; c < COLS; c++) cells[prog_row][c] <= prog_data[c];
    end
  end

  // Analog column summation followed by the (lossless) ADC.
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      int acc;
      acc = 0;
      for (int r = 0; r < ROWS; r++)
        acc += drive_val(rd_in[r]) * int'(cells[r][c]);
      col_out[c] = OUT_BITS'(acc);
    end
  end

  assign cell_q = cells;

endmodule
