// tb_tile -- a tile of three 16-row PEs serving a 40-input layer (the last
// PE only partly used): programs random weights through the tile's row
// addresses, checks the accumulated sums against dot products over all 40
// inputs, applies an update and checks weights and sums again.
module automatic tb_tile;
  import sdfa_pkg::*;
  localparam int NI = 40, R = 16, NN = 8, DW = 5;
  localparam int SW = $clog2(NI) + 5;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [NI-1:0]         spikes;
  logic signed [SW-1:0]  syn [NN];
  logic                  prog_en = 0, upd_en = 0;
  logic [$clog2(NI)-1:0] prog_row = 0;
  logic signed [3:0]     prog_w [NN];
  logic signed [DW-1:0]  upd_dw [NI][NN];
  logic signed [3:0]     w_q [NI][NN];
  int                    w [NI][NN];

  tile #(.N_IN(NI), .ROWS(R), .N_NEUR(NN), .N_CB(2), .DW_W(DW)) dut (
    .clk, .spikes, .syn_out(syn), .prog_en, .prog_row, .prog_w, .upd_en, .upd_dw, .w_q);

  task automatic check_sums();
    for (int k = 0; k < 10; k++) begin
      spikes = NI'({$urandom, $urandom});
      #1;
      for (int n = 0; n < NN; n++) begin
        int e = 0;
        for (int r = 0; r < NI; r++) if (spikes[r]) e += w[r][n];
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
    for (int r = 0; r < NI; r++) for (int n = 0; n < NN; n++) upd_dw[r][n] = '0;
    for (int r = 0; r < NI; r++) begin
      @(negedge clk);
      prog_en = 1; prog_row = r[$clog2(NI)-1:0];
      for (int n = 0; n < NN; n++) begin
        w[r][n] = int'($urandom_range(0, 15)) - 8;
        prog_w[n] = 4'(w[r][n]);
      end
    end
    @(negedge clk); prog_en = 0;
    check_sums();
    for (int r = 0; r < NI; r++) for (int n = 0; n < NN; n++) begin
      checks++;
      if (int'(w_q[r][n]) != w[r][n]) failures++;
    end
    @(negedge clk);
    upd_en = 1;
    for (int r = 0; r < NI; r++) for (int n = 0; n < NN; n++) begin
      int d = int'($urandom_range(0, 31)) - 16;
      int wn = w[r][n] - d;
      upd_dw[r][n] = DW'(d);
      w[r][n] = (wn > 7) ? 7 : (wn < -8) ? -8 : wn;
    end
    @(negedge clk); upd_en = 0;
    for (int r = 0; r < NI; r++) for (int n = 0; n < NN; n++) begin
      checks++;
      if (int'(w_q[r][n]) != w[r][n]) failures++;
    end
    check_sums();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
