// c2d_engine: standard 3x3 convolution engine for the network's entry layer.
//
// Convolves a raster stream of 3-channel 8-bit pixels with NF=32 filters of
// 3x3x3 weights. The pixel stream goes through a two-line buffer
// (window3x3), and every window is multiplied with all 32 filters at once
// (27 x 32 multipliers, all loops flattened), so one output pixel leaves per
// window. For every filter ACC = bias + sum (a - az)*(w - wz), followed by
// the requantisation RES = (ACC*MULT)>>SHIFT + RES0 and the MIN/MAX clamp.
// Weights and biases live in registers (no memory), loaded through the
// parameter-write bus: mem = filter index 0..31, data[8k+7:8k] = weight of
// tap k = 3*(3*row+col)+channel, data[231:216] = the filter's 16-bit bias.
// The 32-channel result is split into two 16-channel beats: channels 0-15 on
// stream A (to the depthwise engine), 16-31 on stream B (to the activation
// buffer). A result is retired once both streams have taken it.
// Interface: `start` latches cfg and runs one frame; `busy` is high until the
// last result has gone. Timing: one scan position per clock, i.e. about one
// input pixel per clock; windows are registered inside window3x3 and results
// in the output register (two cycles from the last pixel of a window to
// output). Stride, padding, handshake and the register layout of the weights
// are this design's choice; filter count, kernel, register storage, 16-bit
// bias and the A/B split follow the source.
module c2d_engine
  import ss_pkg::*;
#(
  parameter int NF       = 32,    // filters
  parameter int NC       = 3,     // input channels
  parameter int MAX_COLS = 224    // widest input frame
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  c2d_cfg_t        cfg,
  output logic            busy,
  input  pwr_t            pwr,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [NC*8-1:0] in_data,
  output logic            out_a_valid,
  input  logic            out_a_ready,
  output beat_t           out_a_data,
  output logic            out_b_valid,
  input  logic            out_b_ready,
  output beat_t           out_b_data
);
  localparam int NK = 9 * NC;

  logic [7:0]         wgt  [NF][NK];
  logic signed [15:0] bias [NF];
  c2d_cfg_t           c;

  logic                 win_valid, win_ready, win_busy;
  logic [8:0][NC*8-1:0] win;
  logic [NC*8-1:0]      padv;

  always_comb for (int i = 0; i < NC; i++) padv[8*i +: 8] = cfg.az;

  window3x3 #(.CH_W(NC*8), .MAX_COLS(MAX_COLS)) u_win (
    .clk, .rst_n, .start,
    .rows(cfg.rows), .cols(cfg.cols), .stride2(cfg.stride2), .pad(padv),
    .busy(win_busy),
    .in_valid, .in_ready, .in_data,
    .out_valid(win_valid), .out_ready(win_ready), .out_win(win)
  );

  // parameter registers
  always_ff @(posedge clk) begin
    if (pwr.en && int'(pwr.mem) < NF) begin
      for (int k = 0; k < NK; k++) wgt[pwr.mem][k] <= pwr.data[8*k +: 8];
      bias[pwr.mem] <= pwr.data[8*NK +: 16];
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     c <= '0;
    else if (start) c <= cfg;

  // flattened multiply-accumulate, all filters in parallel
  logic signed [31:0] acc [NF];
  logic [NF*8-1:0]    res;
  always_comb begin
    for (int f = 0; f < NF; f++) begin
      acc[f] = 32'(bias[f]);
      for (int k = 0; k < NK; k++)
        acc[f] += 32'(($signed({1'b0, win[k/NC][8*(k%NC) +: 8]}) - $signed({1'b0, c.az}))
                    * ($signed({1'b0, wgt[f][k]}) - $signed({1'b0, c.wz})));
      res[8*f +: 8] = requantize(acc[f], c.rq);
    end
  end

  // output register shared by the two 16-channel streams
  logic ov, a_done, b_done, fire_a, fire_b, retire;
  always_comb begin
    out_a_valid = ov && !a_done;
    out_b_valid = ov && !b_done;
    fire_a      = out_a_valid && out_a_ready;
    fire_b      = out_b_valid && out_b_ready;
    retire      = ov && (a_done || fire_a) && (b_done || fire_b);
    win_ready   = !ov || retire;
    busy        = win_busy || ov;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ov <= 1'b0; a_done <= 1'b0; b_done <= 1'b0;
      out_a_data <= '0; out_b_data <= '0;
    end else begin
      if (retire) begin
        ov <= 1'b0; a_done <= 1'b0; b_done <= 1'b0;
      end else begin
        a_done <= a_done || fire_a;
        b_done <= b_done || fire_b;
      end
      if (win_valid && win_ready) begin
        ov         <= 1'b1;
        out_a_data <= res[0 +: BEAT_W];
        out_b_data <= res[BEAT_W +: BEAT_W];
      end
    end
  end
endmodule
