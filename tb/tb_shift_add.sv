// tb_shift_add -- checks the shift-and-add stage against dot products of
// random signed 4-bit weights and random spike vectors, with the two cell
// column sums formed here from the offset-binary split of the weights.
module automatic tb_shift_add;
  localparam int NS = 6, R = 16, IW = 10, CW = 5, OW = 12;
  int checks = 0, failures = 0;
  logic signed [IW-1:0] hi [NS], lo [NS];
  logic [CW-1:0]        cnt;
  logic signed [OW-1:0] y [NS];
  logic clk = 0;
  always #5 clk = ~clk;

  shift_add #(.N_SYN(NS), .IN_W(IW), .CNT_W(CW), .OUT_W(OW)) dut (
    .hi_sum(hi), .lo_sum(lo), .act_cnt(cnt), .y(y));

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      int w [R][NS];
      bit x [R];
      int n = 0;
      for (int r = 0; r < R; r++) begin
        x[r] = 1'($urandom_range(0, 1));
        n += x[r];
        for (int s = 0; s < NS; s++) w[r][s] = int'($urandom_range(0, 15)) - 8;
      end
      for (int s = 0; s < NS; s++) begin
        int sh = 0, sl = 0;
        for (int r = 0; r < R; r++) if (x[r]) begin
          sh += (w[r][s] + 8) / 4;
          sl += (w[r][s] + 8) % 4;
        end
        hi[s] = IW'(sh); lo[s] = IW'(sl);
      end
      cnt = CW'(n);
      @(posedge clk); #1;
      for (int s = 0; s < NS; s++) begin
        int e = 0;
        for (int r = 0; r < R; r++) if (x[r]) e += w[r][s];
        checks++;
        if (int'(y[s]) != e) begin
          failures++;
          $display("mismatch it %0d syn %0d: got %0d exp %0d", it, s, y[s], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
