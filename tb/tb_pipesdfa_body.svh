// Shared body of the end-to-end testbenches of pipesdfa_top.
//
// The including module defines localparams L, T, B, N, NB (batches), VTH,
// ETA_H, ETA_O, the signals below are declared here, and the including
// module instantiates the design as "dut" connected to them.
//
// The test programs random forward weights, programs the feedback arrays
// stochastically, and trains NB batches on generated spike data (each
// sample favours the inputs of its class). A plain sequential model of the
// SDFA algorithm (forward over timesteps, delta_L = T*(rate - target),
// e_l = B_l*delta_L reused for every timestep, dW accumulated over the
// batch, update at the batch end) runs alongside; the pipelined design must
// agree with it on every sample's predicted class and on all weights and
// biases after every batch. It also checks the run length against
// (L+T+T*B)*NB + L-1 and counts the pipeline mechanisms.

  localparam int NTAP_TB = T + 2 * L;
  localparam int DEPTH_TB = T + L;
  localparam int NCLS = (N < 4) ? N : 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                     start = 0;
  logic [15:0]              cfg_num_batches = 16'(NB);
  logic signed [19:0]       cfg_vth = 20'(VTH);
  logic                     cfg_leak_en = 0;
  logic [4:0]               cfg_leak_shift = 3;
  logic [4:0]               cfg_eta_shift [L];
  logic                     fb_rand_init = 0, fb_prog_en = 0;
  logic [$clog2(L)-1:0]     fb_prog_layer = 0;
  logic [$clog2(N)-1:0]     fb_prog_row = 0;
  logic [1:0]               fb_prog_data [N];
  logic                     prog_en = 0, prog_bias_en = 0;
  logic [$clog2(L)-1:0]     prog_layer = 0;
  logic [$clog2(N)-1:0]     prog_row = 0;
  logic signed [3:0]        prog_w [N];
  logic signed [7:0]        prog_bias [N];
  logic                     in_req;
  logic [15:0]              in_t, in_d, in_b;
  logic [N-1:0]             in_spikes;
  logic [7:0]               in_label;
  logic                     err_valid;
  logic [7:0]               err_pred;
  logic [L-1:0]             upd_pulse;
  logic                     busy, done;
  logic [31:0]              cycles;

  // stimulus
  logic [N-1:0] stim  [NB][B][T];
  int           label [NB][B];

  // sequential reference model state
  int Wm [L][N][N];      // [layer][input][neuron]
  int Bm [L][N];
  int Fm [L][N][N];      // feedback value [layer][class][neuron]
  int pred_ref [NB][B];

  // host: serve the requested item combinationally
  always_comb begin
    in_spikes = stim[in_b % NB][in_d % B][in_t % T];
    in_label  = 8'(label[in_b % NB][in_d % B]);
  end

  // weights and biases of the design, copied out of the hierarchy
  int w_dut [L][N][N];
  int b_dut [L][N];
  for (genvar g = 0; g < L; g++) begin : g_peek
    always_comb
      for (int r = 0; r < N; r++) begin
        b_dut[g][r] = int'(dut.g_layer[g].u_fwd.bias_q[r]);
        for (int n = 0; n < N; n++) w_dut[g][r][n] = int'(dut.g_layer[g].u_fwd.w_q[r][n]);
      end
  end

  function automatic int sat(int v, int w);
    int hi = (1 <<< (w - 1)) - 1;
    int lo = -(1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // one batch of the SDFA algorithm, sequentially
  task automatic ref_batch(int b);
    int dW [L][N][N];
    int dB [L][N];
    for (int l = 0; l < L; l++)
      for (int n = 0; n < N; n++) begin
        dB[l][n] = 0;
        for (int r = 0; r < N; r++) dW[l][r][n] = 0;
      end
    for (int d = 0; d < B; d++) begin
      int  v [L][N];
      int  cnt [N];
      int  dl [N];
      int  e [L][N];
      bit  hin [T][L][N];
      bit  msk [T][L][N];
      int  best, bi;
      for (int n = 0; n < N; n++) cnt[n] = 0;
      for (int t = 0; t < T; t++) begin
        bit x [N];
        for (int r = 0; r < N; r++) x[r] = stim[b][d][t][r];
        for (int l = 0; l < L; l++) begin
          bit y [N];
          for (int n = 0; n < N; n++) begin
            int c = Bm[l][n];
            int vp = (t == 0) ? 0 : v[l][n];
            for (int r = 0; r < N; r++) if (x[r]) c += Wm[l][r][n];
            vp = sat(vp + c, 20);
            y[n] = (vp >= VTH);
            msk[t][l][n] = (2 * vp > VTH) && (2 * vp < 3 * VTH);
            v[l][n] = y[n] ? 0 : vp;
          end
          for (int r = 0; r < N; r++) hin[t][l][r] = x[r];
          x = y;
        end
        for (int n = 0; n < N; n++) cnt[n] += int'(x[n]);
      end
      best = 0; bi = 0;
      for (int n = 0; n < N; n++) begin
        dl[n] = cnt[n] - ((n == label[b][d]) ? T : 0);
        if (cnt[n] > best) begin best = cnt[n]; bi = n; end
      end
      pred_ref[b][d] = bi;
      for (int l = 0; l < L; l++)
        for (int n = 0; n < N; n++) begin
          if (l == L - 1) e[l][n] = dl[n];
          else begin
            e[l][n] = 0;
            for (int c = 0; c < N; c++) e[l][n] += Fm[l][c][n] * dl[c];
          end
        end
      for (int t = 0; t < T; t++)
        for (int l = 0; l < L; l++)
          for (int n = 0; n < N; n++) if (msk[t][l][n]) begin
            dB[l][n] += e[l][n];
            for (int r = 0; r < N; r++) if (hin[t][l][r]) dW[l][r][n] += e[l][n];
          end
    end
    for (int l = 0; l < L; l++) begin
      int sh = (l == L - 1) ? ETA_O : ETA_H;
      for (int n = 0; n < N; n++) begin
        Bm[l][n] = sat(Bm[l][n] - sat(dB[l][n] >>> sh, 5), 8);
        for (int r = 0; r < N; r++)
          Wm[l][r][n] = sat(Wm[l][r][n] - sat(dW[l][r][n] >>> sh, 5), 4);
      end
    end
  endtask

  // mechanism counters
  int n_time = 0, n_data = 0, n_batch = 0, n_upd = 0, n_reuse = 0, n_buf_full = 0;
  int n_err = 0, n_fire = 0, n_mask = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.tap[0].valid && dut.tap[1].valid && dut.tap[0].d == dut.tap[1].d) n_time++;
    for (int j = 1; j < NTAP_TB; j++)
      if (dut.tap[0].valid && dut.tap[j].valid && dut.tap[0].d != dut.tap[j].d) begin
        n_data++;
        break;
      end
    if (L > 1)
      if (dut.tap[0].valid && dut.tap[T+L+1].valid && dut.tap[T+L+1].last_item) n_batch++;
    for (int l = 0; l < L; l++) if (upd_pulse[l]) n_upd++;
    for (int l = 0; l < L; l++)
      if (dut.tap[T+L+l].valid && dut.tap[T+L+l].t != 0) n_reuse++;
    if (int'(dut.g_layer[0].dcnt) == DEPTH_TB) n_buf_full++;
    if (dut.spk[L-1] != '0) n_fire++;
    if (dut.msk[0] != '0) n_mask++;
  end

  int sample_idx = 0;
  always @(posedge clk) if (err_valid) begin
    int bb = sample_idx / B, dd = sample_idx % B;
    n_err++;
    checks++;
    if (bb < NB && int'(err_pred) != pred_ref[bb][dd]) begin
      failures++;
      $display("sample b%0d d%0d: predicted %0d, model %0d", bb, dd, err_pred, pred_ref[bb][dd]);
    end
    sample_idx++;
  end

  initial begin
    #(64'd10 * (64'd2000 + 64'd2 * N * L + 64'(NB) * 64'(L + T + T * B) * 64'd2));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int changed = 0;
    for (int l = 0; l < L; l++) cfg_eta_shift[l] = 5'((l == L - 1) ? ETA_O : ETA_H);
    for (int n = 0; n < N; n++) begin fb_prog_data[n] = '0; prog_w[n] = '0; prog_bias[n] = '0; end
    for (int b = 0; b < NB; b++)
      for (int d = 0; d < B; d++) begin
        label[b][d] = $urandom_range(0, NCLS - 1);
        for (int t = 0; t < T; t++)
          for (int r = 0; r < N; r++)
            stim[b][d][t][r] = (r % NCLS == label[b][d]) ? ($urandom_range(0, 1) == 1)
                                                         : ($urandom_range(0, 7) == 0);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // forward weights and biases
    for (int l = 0; l < L; l++) begin
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        prog_en = 1; prog_layer = l[$clog2(L)-1:0]; prog_row = r[$clog2(N)-1:0];
        for (int n = 0; n < N; n++) begin
          Wm[l][r][n] = int'($urandom_range(0, 5)) - 2;
          prog_w[n] = 4'(Wm[l][r][n]);
        end
      end
      @(negedge clk);
      prog_en = 0; prog_bias_en = 1;
      for (int n = 0; n < N; n++) begin
        Bm[l][n] = int'($urandom_range(0, 2)) - 1;
        prog_bias[n] = 8'(Bm[l][n]);
      end
      @(negedge clk); prog_bias_en = 0;
    end
    // stochastic programming of the feedback matrices
    @(negedge clk); fb_rand_init = 1;
    @(negedge clk); fb_rand_init = 0;
    for (int l = 0; l < L - 1; l++)
      for (int c = 0; c < N; c++)
        for (int n = 0; n < N; n++) Fm[l][c][n] = 2 * int'(dut.fb_code[l][c][n]) - 3;
    for (int b = 0; b < NB; b++) ref_batch(b);
    // (reference weights now hold the values after all NB batches)
    for (int l = 0; l < L; l++)
      for (int r = 0; r < N; r++)
        for (int n = 0; n < N; n++) changed += int'(Wm[l][r][n] != w_dut[l][r][n]);
    // run the design
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    @(posedge done);
    @(negedge clk);
    $display("run: %0d cycles, expected %0d", cycles, (L + T + T * B) * NB + L - 1);
    checks++; if (int'(cycles) != (L + T + T * B) * NB + L - 1) failures++;
    for (int l = 0; l < L; l++)
      for (int n = 0; n < N; n++) begin
        checks++;
        if (b_dut[l][n] != Bm[l][n]) failures++;
        for (int r = 0; r < N; r++) begin
          checks++;
          if (w_dut[l][r][n] != Wm[l][r][n]) begin
            failures++;
            if (failures < 10) $display("W%0d[%0d][%0d]: design %0d model %0d", l + 1, r, n,
                                        w_dut[l][r][n], Wm[l][r][n]);
          end
        end
      end
    $display("weights changed by training: %0d", changed);
    $display("mechanisms: time-level %0d, data-level %0d, batch-level %0d, updates %0d, feedback reuse %0d, full buffer %0d, Err %0d, output firing cycles %0d, f' cycles %0d",
             n_time, n_data, n_batch, n_upd, n_reuse, n_buf_full, n_err, n_fire, n_mask);
    checks++; if (n_time == 0) failures++;
    checks++; if (n_data == 0 && B > 1) failures++;
    checks++; if (n_batch == 0 && NB > 1) failures++;
    checks++; if (n_upd != L * NB) failures++;
    checks++; if (n_reuse == 0) failures++;
    checks++; if (n_buf_full == 0) failures++;
    checks++; if (n_err != B * NB) failures++;
    checks++; if (changed == 0) failures++;
    checks++; if (n_fire == 0 || n_mask == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
