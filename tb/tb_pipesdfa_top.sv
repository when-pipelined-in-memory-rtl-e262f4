// tb_pipesdfa_top -- end-to-end test of the training accelerator at a
// reduced size (3 layers of 16 neurons, 4 timesteps, batches of 2, three
// batches; 8-row crossbars, so every layer is a tile of two PEs) against a
// sequential model of the SDFA algorithm; see
// tb_pipesdfa_body.svh for what is checked.
module automatic tb_pipesdfa_top;
  localparam int L = 3, T = 4, B = 2, N = 16, NB = 3;
  localparam int VTH = 4, ETA_H = 7, ETA_O = 2;
`include "tb_pipesdfa_body.svh"
  pipesdfa_top #(.L(L), .T(T), .B(B), .N(N), .ARRAY_ROWS(8)) dut (.*);
endmodule
