// tb_circ_buffer -- random writes and reads against a queue model, including
// the full buffer with a read and a write in the same cycle; also the exact
// pattern of the pipeline (write every cycle, read DEPTH cycles later).
module automatic tb_circ_buffer;
  localparam int W = 8, D = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q [$];
  int full_rw = 0;

  circ_buffer #(.W(W), .DEPTH(D)) dut (.clk, .rst_n, .wr_en, .wr_data, .rd_en, .rd_data, .count);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      @(negedge clk);
      rd_en = (q.size() > 0) && ($urandom_range(0, 2) != 0);
      wr_en = ((q.size() < D) || rd_en) && ($urandom_range(0, 2) != 0);
      if (k >= 400) begin   // pipeline pattern
        wr_en = 1;
        rd_en = (q.size() == D);
      end
      wr_data = W'($urandom);
      #1;
      checks++;
      if (int'(count) != q.size()) failures++;
      if (rd_en) begin
        checks++;
        if (rd_data != q[0]) begin
          failures++;
          $display("k %0d read %0h exp %0h", k, rd_data, q[0]);
        end
      end
      if (rd_en && wr_en && q.size() == D) full_rw++;
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    checks++;
    if (full_rw == 0) failures++;
    $display("full buffer read+write cycles: %0d", full_rw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
