// add_engine: normalised addition of residual shortcuts, with its FIFO.
//
// Sits between the projection and expansion engines. With cfg.add_en the
// 16-channel input beat (IN1, from the projection engine) is added to the
// beat at the head of the residual FIFO (IN2, the input of the bottleneck
// block saved one loop earlier). The two operands have different
// quantisation scales, so each is first brought to a common scale:
//   A1 = (MULT1 * ((IN1 - a1z) << 20)) >> SHIFT1
//   A2 = (MULT2 * ((IN2 - a2z) << 20)) >> SHIFT2
//   OUT = clamp(((A1 + A2) * MULT3) >> SHIFT3 + oz)
// Without add_en the input beat passes through unchanged. With
// cfg.store_en the output beat is also pushed into the FIFO, so it can serve
// as the shortcut of the next block; add and store may be on together.
// Interface: valid/ready streams of 128-bit beats; cfg is static while
// traffic flows. `fifo_count` reports the FIFO fill.
// Timing: one beat per clock, output registered (one clock latency).
// The formula and the FIFO follow the source; A1/A2 are kept as 32-bit
// signed values and all shifts are arithmetic and truncating (the source
// gives no widths or rounding), and the FIFO is written with the ADD output.
module add_engine
  import ss_pkg::*;
#(
  parameter int FIFO_DEPTH = 8192
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  add_cfg_t                    cfg,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  beat_t                       in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output beat_t                       out_data,
  output logic [$clog2(FIFO_DEPTH):0] fifo_count
);
  function automatic logic signed [31:0] scale_in(input logic [7:0] x, input logic [7:0] z,
                                                  input logic [31:0] m, input logic [7:0] s);
    logic signed [63:0] d, prod;
    d    = 64'($signed({1'b0, x}) - $signed({1'b0, z})) <<< 20;
    prod = d * $signed({32'd0, m});
    return 32'(prod >>> s);
  endfunction

  function automatic logic [7:0] add_lane(input logic [7:0] x1, input logic [7:0] x2,
                                          input add_cfg_t k);
    logic signed [31:0] a1, a2;
    logic signed [32:0] sum;
    logic signed [65:0] prod, res;
    a1   = scale_in(x1, k.a1z, k.mult1, k.shift1);
    a2   = scale_in(x2, k.a2z, k.mult2, k.shift2);
    sum  = 33'(a1) + 33'(a2);
    prod = 66'(sum) * $signed({34'd0, k.mult3});
    res  = (prod >>> k.shift3) + $signed({58'd0, k.oz});
    if (res < $signed({58'd0, k.act_min}))      return k.act_min;
    else if (res > $signed({58'd0, k.act_max})) return k.act_max;
    else                                        return res[7:0];
  endfunction

  logic  f_in_ready, f_out_valid, f_out_ready, f_push;
  beat_t f_out_data, res;
  logic  fire, can_out;

  stream_fifo #(.W(BEAT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(f_push), .in_ready(f_in_ready), .in_data(res),
    .out_valid(f_out_valid), .out_ready(f_out_ready), .out_data(f_out_data),
    .count(fifo_count)
  );

  always_comb begin
    can_out  = !out_valid || out_ready;
    in_ready = can_out && (!cfg.add_en || f_out_valid) && (!cfg.store_en || f_in_ready);
    fire     = in_valid && in_ready;
    f_push   = fire && cfg.store_en;
    f_out_ready = fire && cfg.add_en;
    for (int l = 0; l < LANES; l++)
      res[8*l +: 8] = cfg.add_en ? add_lane(in_data[8*l +: 8], f_out_data[8*l +: 8], cfg)
                                 : in_data[8*l +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1;
        out_data  <= res;
      end
    end
  end
endmodule
