// tb_forward_core -- programs random weights and biases into one small
// layer, runs samples of several timesteps of random input spikes and checks
// the output spikes and surrogate masks (valid the cycle after en) against
// a model here: current = sum(spike*w) + b, IF neuron with reset to zero.
// Then applies an update and checks the new weights and biases.
module automatic tb_forward_core;
  import sdfa_pkg::*;
  localparam int N = 8, DW = 5, VW = 16;
  int checks = 0, failures = 0, nspk = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, first = 0, leak_en = 0, prog_en = 0, prog_bias_en = 0, upd_en = 0;
  logic [N-1:0] in_spikes = 0, spikes, mask;
  logic signed [VW-1:0] vth = 12;
  logic [4:0] leak_shift = 0;
  logic [$clog2(N)-1:0] prog_row = 0;
  logic signed [3:0] prog_w [N];
  logic signed [7:0] prog_bias [N];
  logic signed [DW-1:0] upd_dw [N][N];
  logic signed [DW-1:0] upd_db [N];
  logic signed [3:0] w_q [N][N];
  logic signed [7:0] bias_q [N];
  int w [N][N], bs [N], v [N];

  forward_core #(.N(N), .N_CB(2), .DW_W(DW), .V_W(VW)) dut (
    .clk, .rst_n, .en, .first, .in_spikes, .vth, .leak_en, .leak_shift, .prog_en, .prog_row,
    .prog_w, .prog_bias_en, .prog_bias, .upd_en, .upd_dw, .upd_db, .spikes, .mask, .w_q, .bias_q);

  task automatic run_sample(int steps);
    for (int t = 0; t < steps; t++) begin
      bit es [N], em [N];
      @(negedge clk);
      en = 1; first = (t == 0);
      in_spikes = N'($urandom);
      for (int n = 0; n < N; n++) begin
        int c = bs[n];
        for (int r = 0; r < N; r++) if (in_spikes[r]) c += w[r][n];
        if (t == 0) v[n] = 0;
        v[n] += c;
        es[n] = (v[n] >= 12);
        em[n] = (2 * v[n] > 12) && (2 * v[n] < 36);
        if (es[n]) v[n] = 0;
      end
      @(posedge clk); #1;
      for (int n = 0; n < N; n++) begin
        checks++;
        if (spikes[n] != es[n] || mask[n] != em[n]) begin
          failures++;
          $display("t %0d n %0d: spk %0b/%0b mask %0b/%0b", t, n, spikes[n], es[n], mask[n], em[n]);
        end
        nspk += int'(es[n]);
      end
    end
    @(negedge clk); en = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      upd_db[n] = '0;
      for (int r = 0; r < N; r++) upd_dw[r][n] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      prog_en = 1; prog_row = r[$clog2(N)-1:0];
      for (int n = 0; n < N; n++) begin
        w[r][n] = int'($urandom_range(0, 15)) - 8;
        prog_w[n] = 4'(w[r][n]);
      end
    end
    @(negedge clk);
    prog_en = 0; prog_bias_en = 1;
    for (int n = 0; n < N; n++) begin
      bs[n] = int'($urandom_range(0, 6)) - 2;
      prog_bias[n] = 8'(bs[n]);
    end
    @(negedge clk); prog_bias_en = 0;
    for (int s = 0; s < 10; s++) run_sample(6);
    // update
    @(negedge clk);
    upd_en = 1;
    for (int n = 0; n < N; n++) begin
      int d = int'($urandom_range(0, 6)) - 3;
      upd_db[n] = DW'(d);
      bs[n] -= d;
      for (int r = 0; r < N; r++) begin
        int wn;
        d = int'($urandom_range(0, 10)) - 5;
        upd_dw[r][n] = DW'(d);
        wn = w[r][n] - d;
        w[r][n] = (wn > 7) ? 7 : (wn < -8) ? -8 : wn;
      end
    end
    @(negedge clk); upd_en = 0;
    for (int n = 0; n < N; n++) begin
      checks++; if (int'(bias_q[n]) != bs[n]) failures++;
      for (int r = 0; r < N; r++) begin checks++; if (int'(w_q[r][n]) != w[r][n]) failures++; end
    end
    for (int s = 0; s < 10; s++) run_sample(6);
    checks++; if (nspk == 0) failures++;
    $display("spikes seen %0d", nspk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
