// tb_pe_core -- programs random 4-bit weights into a small PE (two
// crossbars), checks the synaptic sums for random spike vectors against a
// dot product computed here, then applies a random update and checks the
// saturated new weights and the sums again. The read is combinational, so
// the sums are checked in the same cycle as the input.
module automatic tb_pe_core;
  import sdfa_pkg::*;
  localparam int R = 16, NN = 8, DW = 5;
  localparam int SW = $clog2(R) + 5;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [R-1:0]          spikes;
  logic signed [SW-1:0]  syn [NN];
  logic                  prog_en = 0, upd_en = 0;
  logic [$clog2(R)-1:0]  prog_row = 0;
  logic signed [3:0]     prog_w [NN];
  logic signed [DW-1:0]  upd_dw [R][NN];
  logic signed [3:0]     w_q [R][NN];
  int                    w [R][NN];

  pe_core #(.ROWS(R), .N_NEUR(NN), .N_CB(2), .DW_W(DW)) dut (
    .clk, .spikes, .syn_out(syn), .prog_en, .prog_row, .prog_w, .upd_en, .upd_dw, .w_q);

  task automatic check_sums();
    for (int k = 0; k < 10; k++) begin
      spikes = R'({$urandom, $urandom});
      #1;
      for (int n = 0; n < NN; n++) begin
        int e = 0;
        for (int r = 0; r < R; r++) if (spikes[r]) e += w[r][n];
        checks++;
        if (int'(syn[n]) != e) begin
          failures++;
          $display("sum mismatch n %0d got %0d exp %0d", n, syn[n], e);
        end
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    spikes = '0;
    for (int r = 0; r < R; r++) for (int n = 0; n < NN; n++) upd_dw[r][n] = '0;
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      prog_en = 1; prog_row = r[$clog2(R)-1:0];
      for (int n = 0; n < NN; n++) begin
        w[r][n] = int'($urandom_range(0, 15)) - 8;
        prog_w[n] = 4'(w[r][n]);
      end
    end
    @(negedge clk); prog_en = 0;
    check_sums();
    for (int u = 0; u < 3; u++) begin
      @(negedge clk);
      upd_en = 1;
      for (int r = 0; r < R; r++) for (int n = 0; n < NN; n++) begin
        int d = int'($urandom_range(0, 31)) - 16;
        int wn = w[r][n] - d;
        upd_dw[r][n] = DW'(d);
        w[r][n] = (wn > 7) ? 7 : (wn < -8) ? -8 : wn;
      end
      @(negedge clk); upd_en = 0;
      for (int r = 0; r < R; r++) for (int n = 0; n < NN; n++) begin
        checks++;
        if (int'(w_q[r][n]) != w[r][n]) failures++;
      end
      check_sums();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
