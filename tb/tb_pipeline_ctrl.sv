// tb_pipeline_ctrl -- runs the schedule for the paper's two-layer, two-
// timestep example (B = 2) and for a second, larger configuration, and
// checks: the run length (L+T+T*B)*batches + L-1; the cycle of every item
// at every tap (issue time b*(L+T+T*B) + d*T + t); that the first F1 of
// each batch follows the previous batch's last B1 directly; and that the
// forward pass of a new batch overlaps the previous batch's backward pass
// of deeper layers (batch-level pipeline) for L >= 2.
module automatic tb_pipeline_ctrl;
  import sdfa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // configuration A: L=2, T=2, B=2 (Fig. of the two-layer example)
  localparam int LA = 2, TA = 2, BA = 2, NA = LA + TA + TA * BA;
  localparam int NTA = TA + 2 * LA;
  logic start_a = 0; logic [IDX_W-1:0] nb_a = 3;
  logic req_a, busy_a, done_a; logic [31:0] cyc_a;
  token_t tap_a [NTA];
  pipeline_ctrl #(.L(LA), .T(TA), .B(BA)) dut_a (
    .clk, .rst_n, .start(start_a), .num_batches(nb_a), .in_label(8'd0), .in_req(req_a),
    .tap(tap_a), .busy(busy_a), .done(done_a), .cycles(cyc_a));

  // configuration B: L=3, T=5, B=3
  localparam int LB = 3, TB = 5, BB = 3, NB = LB + TB + TB * BB;
  localparam int NTB = TB + 2 * LB;
  logic start_b = 0; logic [IDX_W-1:0] nb_b = 4;
  logic req_b, busy_b, done_b; logic [31:0] cyc_b;
  token_t tap_b [NTB];
  pipeline_ctrl #(.L(LB), .T(TB), .B(BB)) dut_b (
    .clk, .rst_n, .start(start_b), .num_batches(nb_b), .in_label(8'd0), .in_req(req_b),
    .tap(tap_b), .busy(busy_b), .done(done_b), .cycles(cyc_b));

  int cyc = -1;            // cycle number since the first issue
  int overlap_a = 0, overlap_b = 0;
  int seen_a = 0, seen_b = 0;
  bit running = 0;

  // At every cycle check each valid tap against the closed-form schedule.
  always @(negedge clk) if (running) begin
    cyc++;
    for (int j = 0; j < NTA; j++) if (tap_a[j].valid) begin
      int b_est, s;
      s = cyc - j;
      b_est = s / NA;
      checks++;
      if (s - b_est * NA != int'(tap_a[j].d) * TA + int'(tap_a[j].t)) begin
        failures++;
        $display("A: tap %0d at cycle %0d holds d%0d t%0d", j, cyc, tap_a[j].d, tap_a[j].t);
      end
      if (j == 0) seen_a++;
    end
    for (int j = 0; j < NTB; j++) if (tap_b[j].valid) begin
      int b_est, s;
      s = cyc - j;
      b_est = s / NB;
      checks++;
      if (s - b_est * NB != int'(tap_b[j].d) * TB + int'(tap_b[j].t)) begin
        failures++;
        $display("B: tap %0d at cycle %0d holds d%0d t%0d", j, cyc, tap_b[j].d, tap_b[j].t);
      end
      if (j == 0) seen_b++;
    end
    // batch-level overlap: F_1 of a new batch while an older item is in B_2
    if (tap_a[0].valid && tap_a[TA+LA+1].valid && tap_a[TA+LA+1].last_item) overlap_a++;
    if (tap_b[0].valid && tap_b[TB+LB+1].valid) overlap_b++;
    // F_1 of a batch's first item right after B_1 of the previous last item
    if (tap_a[0].valid && tap_a[0].t == 0 && tap_a[0].d == 0 && cyc > 0) begin
      checks++;
      if (!(tap_a[TA+LA+1].valid && tap_a[TA+LA+1].last_item)) failures++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start_a = 1; start_b = 1;
    @(posedge clk); #1;
    running = 1;
    start_a = 0; start_b = 0;
    fork
      begin @(posedge done_a); end
      begin @(posedge done_b); end
    join
    #1;
    $display("A: %0d cycles (expect %0d), B: %0d cycles (expect %0d)", cyc_a,
             NA * 3 + LA - 1, cyc_b, NB * 4 + LB - 1);
    checks++; if (int'(cyc_a) != NA * 3 + LA - 1) failures++;
    checks++; if (int'(cyc_b) != NB * 4 + LB - 1) failures++;
    checks++; if (seen_a != 3 * TA * BA) failures++;
    checks++; if (seen_b != 4 * TB * BB) failures++;
    checks++; if (overlap_a == 0) failures++;
    checks++; if (overlap_b == 0) failures++;
    $display("batch-level overlaps A %0d B %0d", overlap_a, overlap_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
