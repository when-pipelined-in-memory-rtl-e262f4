// circ_buffer -- first-allocate-first-release ring buffer for one layer.
//
// Every pipeline item writes its entry in the cycle of its forward pass and
// reads it back in the cycle of its backward pass. Because SDFA releases
// entries in the order they were allocated, a plain ring with a write and a
// read pointer suffices, and every layer gets the same DEPTH (no per-layer
// circular buffers of different sizes). With the stage timing of
// pipeline_ctrl an entry lives T+L cycles, so DEPTH = T+L.
//
// Interface: wr_en/wr_data store at the clock edge; rd_data always shows the
// oldest entry (combinational), rd_en releases it at the clock edge. A read
// and a write in the same cycle are allowed even when the buffer is full.
// Assertions flag overflow and underflow.
module circ_buffer #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 19
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (wr_en) wr_ptr <= inc(wr_ptr);
      if (rd_en) rd_ptr <= inc(rd_ptr);
      count <= count + $bits(count)'(wr_en) - $bits(count)'(rd_en);
    end
  end

  always_ff @(posedge clk)
    if (wr_en) mem[wr_ptr] <= wr_data;

  assign rd_data = mem[rd_ptr];

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   !(wr_en && !rd_en && int'(count) == DEPTH));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(rd_en && count == '0));

endmodule
