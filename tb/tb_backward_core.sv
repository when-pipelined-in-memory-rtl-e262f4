// tb_backward_core -- feeds batches of random items (input spikes, masks,
// errors) and checks the update raised on each batch's last item:
// upd_dw = sat((sum over items of mask_i*err_i*h_j) >>> eta), likewise
// upd_db, with sums kept here; also that no update appears on other items
// and that the accumulators start from zero after an update.
module automatic tb_backward_core;
  localparam int N = 4, EW = 12, AW = 20, DW = 5, ITEMS = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, last_item = 0;
  logic [N-1:0] h_in = 0, mask = 0;
  logic signed [EW-1:0] err [N];
  logic [4:0] eta_shift = 3;
  logic upd_en;
  logic signed [DW-1:0] upd_dw [N][N];
  logic signed [DW-1:0] upd_db [N];
  int sdw [N][N], sdb [N];

  backward_core #(.N(N), .E_W(EW), .ACC_W(AW), .DW_W(DW)) dut (
    .clk, .rst_n, .en, .last_item, .h_in, .mask, .err, .eta_shift, .upd_en, .upd_dw, .upd_db);

  function automatic int satq(int v, int sh);
    int q = v >>> sh;
    return (q > 15) ? 15 : (q < -16) ? -16 : q;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) err[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 30; b++) begin
      eta_shift = 5'($urandom_range(0, 6));
      for (int i = 0; i < N; i++) begin
        sdb[i] = 0;
        for (int j = 0; j < N; j++) sdw[i][j] = 0;
      end
      for (int k = 0; k < ITEMS; k++) begin
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin en = 0; last_item = 0; @(negedge clk); end
        en = 1; last_item = (k == ITEMS - 1);
        h_in = N'($urandom); mask = N'($urandom);
        for (int i = 0; i < N; i++) begin
          err[i] = EW'(int'($urandom_range(0, 200)) - 100);
          if (mask[i]) begin
            sdb[i] += int'(err[i]);
            for (int j = 0; j < N; j++) if (h_in[j]) sdw[i][j] += int'(err[i]);
          end
        end
        #1;
        checks++;
        if (upd_en != last_item) failures++;
        if (last_item) begin
          for (int i = 0; i < N; i++) begin
            checks++;
            if (int'(upd_db[i]) != satq(sdb[i], eta_shift)) failures++;
            for (int j = 0; j < N; j++) begin
              checks++;
              if (int'(upd_dw[j][i]) != satq(sdw[i][j], eta_shift)) begin
                failures++;
                $display("batch %0d dw[%0d][%0d] got %0d exp %0d", b, i, j, upd_dw[j][i],
                         satq(sdw[i][j], eta_shift));
              end
            end
          end
        end
      end
      @(negedge clk); en = 0; last_item = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
