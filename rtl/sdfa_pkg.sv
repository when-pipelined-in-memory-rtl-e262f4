// sdfa_pkg -- constants and types shared by the spiking-DFA training engine.
//
// The array geometry (256 x 256 one-transistor-one-resistor cells), the
// 4-bit synapse built from two 2-bit cells, and the 2-bit feedback cell are
// the figures the design is built around. The pipeline token carries one
// (data sample, timestep) item through the stage delay line of
// pipeline_ctrl; its field widths are this design's choice.
package sdfa_pkg;

  localparam int unsigned XB_ROWS   = 256;  // wordlines per crossbar
  localparam int unsigned XB_COLS   = 256;  // bitlines per crossbar
  localparam int unsigned W_BITS    = 4;    // forward weight precision
  localparam int unsigned CELL_BITS = 2;    // bits stored per RRAM cell
  localparam int unsigned W_OFFSET  = 8;    // offset-binary bias of a 4-bit weight

  localparam int unsigned IDX_W = 16;       // width of item counters
  localparam int unsigned LBL_W = 8;        // width of a class label

  // One pipeline item: timestep t of data sample d in the current batch.
  typedef struct packed {
    logic             valid;
    logic [IDX_W-1:0] t;          // timestep within the sample
    logic [IDX_W-1:0] d;          // sample within the batch
    logic [IDX_W-1:0] slot;       // error-buffer slot of the sample
    logic [LBL_W-1:0] label;      // class label of the sample
    logic             first_t;    // t == 0
    logic             last_t;     // t == T-1
    logic             last_item;  // last item of the batch
    logic             last_batch; // item belongs to the last batch of the run
  } token_t;

  // Saturate a signed value to a signed field of width w (w <= 31).
  function automatic int sat_signed(input int v, input int unsigned w);
    int hi, lo;
    hi = (1 <<< (w - 1)) - 1;
    lo = -(1 <<< (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

endpackage
