// tb_rram_crossbar -- self-checking test of the RRAM crossbar model.
// Loads random codes row by row, drives random signed multi-bit wordline
// values and compares every column sum with a sum computed here; checks the
// parallel write and the read-back; then programs a larger array
// stochastically and checks that the four levels occur with the expected
// Gaussian-bin frequencies (16 / 34 / 34 / 16 %) and are symmetric.
module automatic tb_rram_crossbar;
  localparam int ROWS = 8, COLS = 6, IB = 4;
  localparam int OB = IB + 2 + $clog2(ROWS) + 1;
  localparam int GR = 32, GC = 64;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [IB-1:0]        rd_in [ROWS];
  logic signed [OB-1:0] col_out [COLS];
  logic                 prog_en = 0, rand_en = 0, wr_all_en = 0;
  logic [$clog2(ROWS)-1:0] prog_row = 0;
  logic [1:0]           prog_data [COLS];
  logic [1:0]           wr_all_data [ROWS][COLS];
  logic [1:0]           cell_q [ROWS][COLS];
  int                   model [ROWS][COLS];

  rram_crossbar #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(2), .IN_BITS(IB), .IN_SIGNED(1'b1)) dut (
    .clk, .rd_in, .col_out, .prog_en, .prog_row, .prog_data, .rand_en,
    .wr_all_en, .wr_all_data, .cell_q);

  // Larger array for the stochastic programming statistics.
  logic [0:0]  g_in [GR];
  logic signed [1+2+$clog2(GR)+1-1:0] g_out [GC];
  logic        g_rand = 0;
  logic [1:0]  g_pd [GC];
  logic [1:0]  g_wd [GR][GC];
  logic [1:0]  g_q  [GR][GC];
  rram_crossbar #(.ROWS(GR), .COLS(GC)) dut_g (
    .clk, .rd_in(g_in), .col_out(g_out), .prog_en(1'b0), .prog_row('0), .prog_data(g_pd),
    .rand_en(g_rand), .wr_all_en(1'b0), .wr_all_data(g_wd), .cell_q(g_q));

  task automatic check_vmm();
    int x [ROWS];
    for (int r = 0; r < ROWS; r++) begin
      x[r] = int'($urandom_range(0, 15)) - 8;
      rd_in[r] = IB'(x[r]);
    end
    #1;
    for (int c = 0; c < COLS; c++) begin
      int s = 0;
      for (int r = 0; r < ROWS; r++) s += x[r] * model[r][c];
      checks++;
      if (int'(col_out[c]) != s) begin
        failures++;
        $display("VMM mismatch col %0d: got %0d exp %0d", c, col_out[c], s);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hist [4];
    int sum_code;
    for (int r = 0; r < GR; r++) g_in[r] = '0;
    for (int c = 0; c < GC; c++) g_pd[c] = '0;
    for (int r = 0; r < GR; r++) for (int c = 0; c < GC; c++) g_wd[r][c] = '0;
    for (int r = 0; r < ROWS; r++) rd_in[r] = '0;
    // row programming
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      prog_en = 1; prog_row = r[$clog2(ROWS)-1:0];
      for (int c = 0; c < COLS; c++) begin
        model[r][c] = $urandom_range(0, 3);
        prog_data[c] = 2'(model[r][c]);
      end
    end
    @(negedge clk); prog_en = 0;
    for (int k = 0; k < 20; k++) check_vmm();
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      checks++;
      if (int'(cell_q[r][c]) != model[r][c]) failures++;
    end
    // parallel write
    @(negedge clk);
    wr_all_en = 1;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      model[r][c] = $urandom_range(0, 3);
      wr_all_data[r][c] = 2'(model[r][c]);
    end
    @(negedge clk); wr_all_en = 0;
    for (int k = 0; k < 20; k++) check_vmm();
    // stochastic programming
    @(negedge clk); g_rand = 1;
    @(negedge clk); g_rand = 0;
    hist = '{0, 0, 0, 0};
    sum_code = 0;
    for (int r = 0; r < GR; r++) for (int c = 0; c < GC; c++) begin
      hist[g_q[r][c]]++;
      sum_code += int'(g_q[r][c]);
    end
    $display("stochastic levels: %0d %0d %0d %0d", hist[0], hist[1], hist[2], hist[3]);
    // 2048 cells: expected about 325 / 699 / 699 / 325
    checks++; if (hist[0] < 240 || hist[0] > 410) failures++;
    checks++; if (hist[3] < 240 || hist[3] > 410) failures++;
    checks++; if (hist[1] < 600 || hist[1] > 800) failures++;
    checks++; if (hist[2] < 600 || hist[2] > 800) failures++;
    // zero mean of the values 2k-3: sum of codes close to 1.5 * cells
    checks++; if (sum_code < 2900 || sum_code > 3250) failures++;
    // the column sum of the big array with all rows on equals the code sum
    for (int r = 0; r < GR; r++) g_in[r] = 1'b1;
    #1;
    begin
      int tot = 0;
      for (int c = 0; c < GC; c++) tot += int'(g_out[c]);
      checks++; if (tot != sum_code) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
