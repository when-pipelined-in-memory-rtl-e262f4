// tb_error_calc -- streams random output spike vectors of several samples
// (T timesteps each) and checks, on each last timestep, delta = count - T*y
// and the arg-max prediction, both computed here from the same spikes.
module automatic tb_error_calc;
  import sdfa_pkg::*;
  localparam int N = 8, T = 4;
  localparam int DW = $clog2(T + 1) + 1;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cnt_en = 0, first = 0, last = 0;
  logic [N-1:0] spikes = 0;
  logic [LBL_W-1:0] label = 0;
  logic delta_valid;
  logic signed [DW-1:0] delta [N];
  logic [LBL_W-1:0] pred;

  error_calc #(.N(N), .T(T)) dut (.clk, .rst_n, .cnt_en, .first, .last, .spikes, .label,
                                   .delta_valid, .delta, .pred);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      int cnt [N];
      label = LBL_W'($urandom_range(0, N - 1));
      for (int c = 0; c < N; c++) cnt[c] = 0;
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin   // bubble between items
          cnt_en = 0; first = 0; last = 0; spikes = N'($urandom);
          @(negedge clk);
        end
        cnt_en = 1; first = (t == 0); last = (t == T - 1);
        spikes = N'($urandom);
        for (int c = 0; c < N; c++) cnt[c] += int'(spikes[c]);
        #1;
        checks++;
        if (delta_valid != last) failures++;
        if (last) begin
          int best = 0, bi = 0;
          for (int c = 0; c < N; c++) begin
            checks++;
            if (int'(delta[c]) != cnt[c] - ((c == int'(label)) ? T : 0)) begin
              failures++;
              $display("sample %0d class %0d: delta %0d cnt %0d", s, c, delta[c], cnt[c]);
            end
            if (cnt[c] > best) begin best = cnt[c]; bi = c; end
          end
          checks++;
          if (int'(pred) != bi) failures++;
        end
      end
      @(negedge clk); cnt_en = 0; last = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
