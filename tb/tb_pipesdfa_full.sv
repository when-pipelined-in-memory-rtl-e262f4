// tb_pipesdfa_full -- end-to-end test of the training accelerator at its
// default size (3 layers of 256 neurons on 256x256 arrays, 16 timesteps,
// batches of 8) for two batches, so that the second batch overlaps the
// first one's backward passes, against a sequential model of the SDFA
// algorithm; see tb_pipesdfa_body.svh for what is checked.
module automatic tb_pipesdfa_full;
  localparam int L = 3, T = 16, B = 8, N = 256, NB = 2;
  localparam int VTH = 24, ETA_H = 14, ETA_O = 6;
`include "tb_pipesdfa_body.svh"
  pipesdfa_top dut (.*);
endmodule
