// dwc_engine: 3x3 depthwise convolution and whole-frame average pooling.
//
// Channels are processed in 16-channel passes: an n-channel layer arrives as
// n/16 complete raster frames of 16-channel beats (pass 0 first), and each
// frame goes through the two-line buffer (window3x3) to produce 3x3 windows.
// Per channel ACC = bias + sum over the 9 taps of (a - az)*(w - wz), then
// (ACC*MULT)>>SHIFT + RES0 and the MIN/MAX clamp; 16 channels x 9 taps are
// computed in one clock. Weights sit in 9 memories, one per kernel pixel
// (memory k holds tap k of every channel, 16 channels = 128 bits per word,
// word address = pass), and one 256-bit bias memory holds 16 16-bit biases
// per pass. Parameter writes: mem 0..8 = tap memories, mem 9 = bias.
// Pooling mode (cfg.pool) skips the window and the weight multiply: each
// pass accumulates (a - az) over all rows*cols pixels per channel, starting
// from the bias, and emits one beat scaled by MULT/SHIFT (MULT being the
// fixed-point 1/49 for a 7x7 frame).
// Interface: `start` latches cfg and runs npass passes; `busy` until the last
// beat has left; `pass` is the pass being processed (used to pick the source
// of the input stream). Streams are valid/ready, 128-bit beats. Timing: one
// scan position per clock (about one pixel per clock), outputs registered.
// The pass-major frame order, tap/weight/bias layouts and the pooling mode
// follow the source; padding, stride handling and the pooling bias are this
// design's choice.
module dwc_engine
  import ss_pkg::*;
#(
  parameter int MAX_COLS = 112,   // widest depthwise frame
  parameter int WDEPTH   = 512,   // weight memory depth (passes)
  parameter int BDEPTH   = 512    // bias memory depth (passes)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  dwc_cfg_t   cfg,
  output logic       busy,
  output logic [6:0] pass,
  input  pwr_t       pwr,
  input  logic       in_valid,
  output logic       in_ready,
  input  beat_t      in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output beat_t      out_data
);
  logic [BEAT_W-1:0]    wmem [9][WDEPTH];
  logic [LANES*16-1:0]  bmem [BDEPTH];

  always_ff @(posedge clk) begin
    if (pwr.en && pwr.mem < 5'd9 && int'(pwr.addr) < WDEPTH)
      wmem[pwr.mem][pwr.addr] <= pwr.data[BEAT_W-1:0];
    if (pwr.en && pwr.mem == 5'd9 && int'(pwr.addr) < BDEPTH)
      bmem[pwr.addr] <= pwr.data[LANES*16-1:0];
  end

  dwc_cfg_t c;
  logic     running, win_start, win_busy, win_valid, win_ready, win_in_ready;
  logic     win_started;
  logic [8:0][BEAT_W-1:0] win;
  logic [17:0] pcount;      // pooling: pixels accumulated in this pass
  logic [17:0] npix;
  logic signed [31:0] pacc [LANES];

  always_comb npix = 18'(c.rows) * 18'(c.cols);

  window3x3 #(.CH_W(BEAT_W), .MAX_COLS(MAX_COLS)) u_win (
    .clk, .rst_n, .start(win_start),
    .rows(c.rows), .cols(c.cols), .stride2(c.stride2), .pad({LANES{c.az}}),
    .busy(win_busy),
    .in_valid(in_valid && running && !c.pool), .in_ready(win_in_ready), .in_data,
    .out_valid(win_valid), .out_ready(win_ready), .out_win(win)
  );

  // convolution datapath
  logic [BEAT_W-1:0]   wk [9];
  logic [LANES*16-1:0] bw;
  beat_t               conv_res, pool_res;
  logic signed [31:0]  acc [LANES];
  always_comb begin
    for (int k = 0; k < 9; k++) wk[k] = wmem[k][pass];
    bw = bmem[pass];
    for (int l = 0; l < LANES; l++) begin
      acc[l] = 32'($signed(bw[16*l +: 16]));
      for (int k = 0; k < 9; k++)
        acc[l] += 32'(($signed({1'b0, win[k][8*l +: 8]}) - $signed({1'b0, c.az}))
                    * ($signed({1'b0, wk[k][8*l +: 8]}) - $signed({1'b0, c.wz})));
      conv_res[8*l +: 8] = requantize(acc[l], c.rq);
      pool_res[8*l +: 8] = requantize(pacc[l] + 32'($signed({1'b0, in_data[8*l +: 8]}))
                                      - 32'($signed({1'b0, c.az})), c.rq);
    end
  end

  logic can_out, pool_take, pool_last;
  always_comb begin
    can_out   = !out_valid || out_ready;
    pool_last = (pcount == npix - 18'd1);
    in_ready  = running && (c.pool ? (!pool_last || can_out) : win_in_ready);
    pool_take = running && c.pool && in_valid && in_ready;
    win_ready = can_out;
    busy      = running || out_valid;
    win_start = running && !c.pool && !win_started;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; running <= 1'b0; pass <= '0; win_started <= 1'b0;
      pcount <= '0; out_valid <= 1'b0; out_data <= '0;
      for (int l = 0; l < LANES; l++) pacc[l] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy) begin
        c <= cfg; running <= 1'b1; pass <= '0; win_started <= 1'b0; pcount <= '0;
        for (int l = 0; l < LANES; l++) pacc[l] <= 32'($signed(bmem[0][16*l +: 16]));
      end else if (running && !c.pool) begin
        if (win_start) win_started <= 1'b1;
        if (win_valid && win_ready) begin
          out_valid <= 1'b1;
          out_data  <= conv_res;
        end
        // a pass ends when the window generator has scanned the frame and
        // handed over its last window
        if (win_started && !win_start && !win_busy) begin
          win_started <= 1'b0;
          if (pass == c.npass - 7'd1) running <= 1'b0;
          else                        pass    <= pass + 7'd1;
        end
      end else if (pool_take) begin
        if (pool_last) begin
          out_valid <= 1'b1;
          out_data  <= pool_res;
          pcount    <= '0;
          for (int l = 0; l < LANES; l++) pacc[l] <= 32'($signed(bmem[pass + 7'd1][16*l +: 16]));
          if (pass == c.npass - 7'd1) running <= 1'b0;
          else                        pass    <= pass + 7'd1;
        end else begin
          pcount <= pcount + 18'd1;
          for (int l = 0; l < LANES; l++)
            pacc[l] <= pacc[l] + 32'($signed({1'b0, in_data[8*l +: 8]}))
                               - 32'($signed({1'b0, c.az}));
        end
      end
    end
  end
endmodule
