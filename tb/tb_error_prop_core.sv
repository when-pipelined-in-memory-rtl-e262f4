// tb_error_prop_core -- loads known feedback codes, writes several samples'
// global errors into the error buffer and checks every layer's projected
// error e_l = B_l delta (values 2*code-3) and the stored delta for the
// output layer, read back from each slot. Then programs the feedback arrays
// stochastically and checks that their values are spread and zero-mean.
module automatic tb_error_prop_core;
  import sdfa_pkg::*;
  localparam int L = 3, N = 8, T = 4;
  localparam int DW = $clog2(T + 1) + 1;
  localparam int EW = DW + $clog2(N) + 3;
  localparam int ED = (2 * T + L - 2) / T;
  localparam int SW = (ED > 1) ? $clog2(ED) : 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rand_init = 0, fb_prog_en = 0, err_en = 0;
  logic [$clog2(L)-1:0] fb_prog_layer = 0;
  logic [$clog2(N)-1:0] fb_prog_row = 0;
  logic [1:0] fb_prog_data [N];
  logic [SW-1:0] err_slot = 0;
  logic signed [DW-1:0] delta [N];
  logic [SW-1:0] rd_slot [L];
  logic signed [EW-1:0] e_out [L][N];
  logic [1:0] fb_code [L-1][N][N];
  int code [L-1][N][N];
  int dl [ED][N];

  error_prop_core #(.L(L), .N(N), .T(T)) dut (
    .clk, .rst_n, .rand_init, .fb_prog_en, .fb_prog_layer, .fb_prog_row, .fb_prog_data,
    .err_en, .err_slot, .delta, .rd_slot, .e_out, .fb_code);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) rd_slot[l] = '0;
    for (int c = 0; c < N; c++) delta[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < L - 1; l++)
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        fb_prog_en = 1; fb_prog_layer = l[$clog2(L)-1:0]; fb_prog_row = r[$clog2(N)-1:0];
        for (int c = 0; c < N; c++) begin
          code[l][r][c] = $urandom_range(0, 3);
          fb_prog_data[c] = 2'(code[l][r][c]);
        end
      end
    @(negedge clk); fb_prog_en = 0;
    for (int round = 0; round < 10; round++) begin
      for (int s = 0; s < ED; s++) begin
        @(negedge clk);
        err_en = 1; err_slot = SW'(s);
        for (int c = 0; c < N; c++) begin
          dl[s][c] = int'($urandom_range(0, 2 * T)) - T;
          delta[c] = DW'(dl[s][c]);
        end
      end
      @(negedge clk); err_en = 0;
      for (int s = 0; s < ED; s++) begin
        for (int l = 0; l < L; l++) rd_slot[l] = SW'(s);
        #1;
        for (int l = 0; l < L; l++)
          for (int i = 0; i < N; i++) begin
            int e = 0;
            if (l == L - 1) e = dl[s][i];
            else for (int c = 0; c < N; c++) e += (2 * code[l][c][i] - 3) * dl[s][c];
            checks++;
            if (int'(e_out[l][i]) != e) begin
              failures++;
              $display("slot %0d layer %0d neuron %0d: got %0d exp %0d", s, l, i, e_out[l][i], e);
            end
          end
      end
    end
    // stochastic programming of the feedback matrices
    @(negedge clk); rand_init = 1;
    @(negedge clk); rand_init = 0;
    begin
      int sum = 0, nlev [4];
      nlev = '{0, 0, 0, 0};
      for (int l = 0; l < L - 1; l++)
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            sum += 2 * int'(fb_code[l][r][c]) - 3;
            nlev[fb_code[l][r][c]]++;
          end
      $display("feedback levels %0d %0d %0d %0d, value sum %0d", nlev[0], nlev[1], nlev[2], nlev[3], sum);
      for (int k = 0; k < 4; k++) begin checks++; if (nlev[k] == 0) failures++; end
      checks++; if (sum < -64 || sum > 64) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
