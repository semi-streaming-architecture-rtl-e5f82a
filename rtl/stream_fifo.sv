// stream_fifo: synchronous first-in first-out buffer for a valid/ready stream.
//
// Holds the residual-shortcut activations between two residual additions:
// DEPTH words of W bits (default 8192 x 128 bits, i.e. 16-channel beats, enough
// for the largest projection output of MobileNetV2, 56x56x24 = 4704 beats).
// A word is written when in_valid && in_ready (in_ready = not full) and read
// when out_valid && out_ready (out_valid = not empty); both may happen in the
// same clock. out_data shows the oldest word combinationally from the storage
// array (first-word fall-through). `count` is the number of words held.
// The depth and width follow the source's memory table; the source uses a
// vendor stream FIFO here, this is a plain equivalent.
module stream_fifo #(
  parameter int W     = 128,
  parameter int DEPTH = 8192
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [W-1:0]           in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [W-1:0]           out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push, pop;

  always_comb begin
    in_ready  = (count != (AW+1)'(DEPTH));
    out_valid = (count != '0);
    out_data  = mem[rptr];
    push      = in_valid && in_ready;
    pop       = out_valid && out_ready;
  end

  always_ff @(posedge clk)
    if (push) mem[wptr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (push) wptr <= (int'(wptr) == DEPTH-1) ? '0 : wptr + AW'(1);
      if (pop)  rptr <= (int'(rptr) == DEPTH-1) ? '0 : rptr + AW'(1);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
