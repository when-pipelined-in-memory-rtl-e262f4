// spiking_neuron -- array of N integrate-and-fire neurons with optional leak.
//
// When en is high the array performs one timestep:
//     v'   = v_prev - (leak_en ? v_prev >>> leak_shift : 0) + i_in
//     fire = v' >= vth          (spike out)
//     v    = fire ? 0 : v'       (reset to zero after a spike)
//     mask = vth/2 < v' < 3*vth/2 (surrogate derivative f'(v'), 1 bit)
// v_prev is taken as 0 when first is high (first timestep of a new sample).
// spikes and mask are registered: they appear the cycle after en. The
// membrane is held when en is low. Leak off gives the IF neuron, leak on the
// LIF neuron. The fire/reset rule follows the paper's neuron equations; the
// shift-based leak, the rectangular surrogate window and the per-sample
// reset are this design's choices. Membranes saturate at V_W bits.
module spiking_neuron
  import sdfa_pkg::*;
#(
  parameter int unsigned N   = 256,
  parameter int unsigned I_W = 14,
  parameter int unsigned V_W = 20
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic                  first,
  input  logic signed [I_W-1:0] i_in [N],
  input  logic signed [V_W-1:0] vth,
  input  logic                  leak_en,
  input  logic [4:0]            leak_shift,
  output logic [N-1:0]          spikes,
  output logic [N-1:0]          mask,
  output logic signed [V_W-1:0] v_mem [N]
);

  logic signed [V_W-1:0] v_nxt  [N];
  logic [N-1:0]          fire_d, mask_d;

  always_comb begin
    for (int n = 0; n < N; n++) begin
      int vp, vq;
      vp = first ? 0 : int'(v_mem[n]);
      if (leak_en) vp = vp - (vp >>> leak_shift);
      vq = sat_signed(vp + int'(i_in[n]), V_W);
      fire_d[n] = (vq >= int'(vth));
      mask_d[n] = (2 * vq > int'(vth)) && (2 * vq < 3 * int'(vth));
      v_nxt[n]  = fire_d[n] ? '0 : V_W'(vq);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spikes <= '0;
      mask   <= '0;
      for (int n = 0; n < N; n++) v_mem[n] <= '0;
    end else if (en) begin
      spikes <= fire_d;
      mask   <= mask_d;
      v_mem  <= v_nxt;
    end
  end

endmodule
