// pipeline_ctrl -- timestep / data / batch three-level pipeline schedule.
//
// A run trains num_batches batches of B samples, each sample T timesteps.
// The controller issues one item (sample d, timestep t) per cycle, timestep
// fastest, so the B*T items of a batch enter back to back; this is the
// timestep-level and data-level pipeline. After the last item of a batch it
// idles T+L cycles and then starts the next batch: the next batch's first
// forward pass of layer 1 lands in the cycle right after the previous
// batch's last backward pass of layer 1 (and so on for every layer), which
// is the batch-level pipeline. A batch therefore takes L+T+T*B cycles and a
// run (L+T+T*B)*num_batches + L-1 cycles, the cycle count of the paper.
//
// Each item travels down a delay line; tap j holds the item that was issued
// j cycles ago (tap 0 is the item issued now). Stage timing:
//     F_l  forward pass of layer l   tap l-1
//     Err  output error of a sample  tap L      (on its last timestep)
//     B_l  backward pass of layer l  tap T+L+l-1
// in_req is high in every issue cycle; the host must present that item's
// input spikes and label in the same cycle (in_label is copied into the
// token). slot names the error-buffer slot of the sample (a global sample
// counter modulo EDEPTH). done rises for one cycle after the last item has
// left B_L, and cycles then holds the run's length in cycles.
// The stage offsets are read from the paper's two-layer timing diagram and
// generalised; the token format and the handshake are this design's.
module pipeline_ctrl
  import sdfa_pkg::*;
#(
  parameter int unsigned L      = 3,
  parameter int unsigned T      = 16,
  parameter int unsigned B      = 8,
  parameter int unsigned EDEPTH = (2 * T + L - 2) / T,
  parameter int unsigned NTAP   = T + 2 * L
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [IDX_W-1:0] num_batches,
  input  logic [LBL_W-1:0] in_label,
  output logic             in_req,
  output token_t           tap [NTAP],
  output logic             busy,
  output logic             done,
  output logic [31:0]      cycles
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_GAP, S_DRAIN} state_e;

  state_e           state;
  logic [IDX_W-1:0] t_q, d_q, b_q, slot_q, gap_q;
  logic [31:0]      cyc_q;
  token_t           dl [NTAP-1];
  token_t           tok;

  always_comb begin
    tok            = '0;
    tok.valid      = (state == S_ISSUE);
    tok.t          = t_q;
    tok.d          = d_q;
    tok.slot       = slot_q;
    tok.label      = in_label;
    tok.first_t    = (t_q == '0);
    tok.last_t     = (int'(t_q) == T - 1);
    tok.last_item  = (int'(t_q) == T - 1) && (int'(d_q) == B - 1);
    tok.last_batch = (b_q == num_batches - 1'b1);
  end

  assign in_req = tok.valid;

  always_comb begin
    tap[0] = tok;
    for (int j = 1; j < NTAP; j++) tap[j] = dl[j-1];
  end

  logic fin;   // final item of the run is in its last stage (B_L)
  assign fin = tap[NTAP-1].valid && tap[NTAP-1].last_item && tap[NTAP-1].last_batch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      t_q    <= '0;
      d_q    <= '0;
      b_q    <= '0;
      slot_q <= '0;
      gap_q  <= '0;
      cyc_q  <= '0;
      cycles <= '0;
      done   <= 1'b0;
      for (int j = 0; j < NTAP - 1; j++) dl[j] <= '0;
    end else begin
      dl[0] <= tok;
      for (int j = 1; j < NTAP - 1; j++) dl[j] <= dl[j-1];
      done <= 1'b0;
      if (state != S_IDLE) cyc_q <= cyc_q + 1;

      unique case (state)
        S_IDLE: begin
          if (start && num_batches != '0) begin
            state <= S_ISSUE;
            t_q   <= '0;
            d_q   <= '0;
            b_q   <= '0;
            cyc_q <= '0;
          end
        end
        S_ISSUE: begin
          if (tok.last_t)
            slot_q <= (int'(slot_q) == EDEPTH - 1) ? '0 : slot_q + 1'b1;
          if (int'(t_q) == T - 1) begin
            t_q <= '0;
            if (int'(d_q) == B - 1) begin
              d_q <= '0;
              if (tok.last_batch) begin
                state <= S_DRAIN;
              end else begin
                state <= S_GAP;
                gap_q <= IDX_W'(T + L - 1);
              end
            end else begin
              d_q <= d_q + 1'b1;
            end
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_GAP: begin
          if (gap_q == '0) begin
            state <= S_ISSUE;
            b_q   <= b_q + 1'b1;
          end else begin
            gap_q <= gap_q - 1'b1;
          end
        end
        S_DRAIN: begin
          if (fin) begin
            state  <= S_IDLE;
            done   <= 1'b1;
            cycles <= cyc_q + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy = (state != S_IDLE);
  end

  // A new batch may only start once the previous batch has cleared B_1.
  a_batch_gap: assert property (@(posedge clk) disable iff (!rst_n)
    tap[0].valid && tap[0].first_t && tap[0].d == '0 |->
      !(tap[T+L].valid && !tap[T+L].last_item));

endmodule
