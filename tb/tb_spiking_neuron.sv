// tb_spiking_neuron -- drives random currents into a few IF and LIF neurons
// and compares spikes, surrogate masks and membranes every timestep with a
// model kept here (integrate, optional shift leak, fire at V >= Vth, reset
// to zero, clear at the first timestep of a sample, hold when disabled).
module automatic tb_spiking_neuron;
  localparam int N = 4, IW = 10, VW = 14;
  int checks = 0, failures = 0;
  int fires = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en = 0, first = 0, leak_en = 0;
  logic [4:0] leak_shift = 2;
  logic signed [IW-1:0] i_in [N];
  logic signed [VW-1:0] vth = 40;
  logic [N-1:0] spikes, mask;
  logic signed [VW-1:0] v_mem [N];
  int v [N];

  spiking_neuron #(.N(N), .I_W(IW), .V_W(VW)) dut (
    .clk, .rst_n, .en, .first, .i_in, .vth, .leak_en, .leak_shift, .spikes, .mask, .v_mem);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) begin i_in[n] = '0; v[n] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int step = 0; step < 400; step++) begin
      bit es [N], em [N];
      @(negedge clk);
      en = ($urandom_range(0, 7) != 0);
      first = (step % 10 == 0);
      leak_en = (step >= 200);
      for (int n = 0; n < N; n++) i_in[n] = IW'(int'($urandom_range(0, 30)) - 8);
      for (int n = 0; n < N; n++) begin
        int vp = first ? 0 : v[n];
        if (leak_en) vp = vp - (vp >>> leak_shift);
        vp = vp + int'(i_in[n]);
        es[n] = (vp >= 40);
        em[n] = (2 * vp > 40) && (2 * vp < 120);
        if (en) v[n] = es[n] ? 0 : vp;
      end
      @(posedge clk); #1;
      if (en) begin
        for (int n = 0; n < N; n++) begin
          checks++;
          if (spikes[n] != es[n] || mask[n] != em[n] || int'(v_mem[n]) != v[n]) begin
            failures++;
            $display("step %0d n %0d: spk %0b/%0b mask %0b/%0b v %0d/%0d", step, n,
                     spikes[n], es[n], mask[n], em[n], v_mem[n], v[n]);
          end
          fires += int'(es[n]);
        end
      end else begin
        for (int n = 0; n < N; n++) begin
          checks++;
          if (int'(v_mem[n]) != v[n]) failures++;
        end
      end
    end
    checks++;
    if (fires == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
