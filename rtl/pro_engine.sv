// pro_engine: projection pointwise (1x1) convolution, channels-filters-pixels order.
//
// For every pixel, for every 16-filter batch (FPASS = filters/16), the engine
// takes the pixel's APASS = channels/16 activation beats one per clock and
// multiplies each 16-channel beat with the matching 16 channels of the 16
// filters of the batch: a 16x16 multiply array, 256 MACs per clock. After
// the last channel batch the 16 accumulators are rescaled
// ((ACC*MULT)>>SHIFT + RES0, clamped) and leave as one 16-channel output
// beat. The output is therefore a pixel-major stream (pixel outer, filter
// batch inner), the order the following engines consume. The input stream
// must present each pixel's channel batches FPASS times in a row; the
// activation buffer's repeat read produces exactly that.
// Weights: 16 memories, memory f holds filter f of every batch, one word per
// (filter batch, channel batch), address fpass*APASS + apass, 16 weights =
// 128 bits. Bias: one 288-bit memory, 16 18-bit biases per filter batch.
// Parameter writes: mem 0..15 = filter memories, mem 16 = bias.
// Interface: `start` latches cfg and processes cfg.npix pixels; `busy` until
// the last beat has left. Valid/ready streams of 128-bit beats.
// Timing: initiation interval 1, one input beat per clock; an output beat is
// registered one clock after the last channel batch of a filter batch.
// The loop order, memory organisation and widths follow the source; the
// handshake and the register-based accumulators are this design's choice.
module pro_engine
  import ss_pkg::*;
#(
  parameter int WDEPTH = 1536,   // words per filter memory
  parameter int BDEPTH = 512     // bias memory depth (filter batches)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  pw_cfg_t  cfg,
  output logic     busy,
  input  pwr_t     pwr,
  input  logic     in_valid,
  output logic     in_ready,
  input  beat_t    in_data,
  output logic     out_valid,
  input  logic     out_ready,
  output beat_t    out_data
);
  logic [BEAT_W-1:0]   wmem [LANES][WDEPTH];
  logic [LANES*18-1:0] bmem [BDEPTH];

  always_ff @(posedge clk) begin
    if (pwr.en && pwr.mem < 5'd16 && int'(pwr.addr) < WDEPTH)
      wmem[pwr.mem[3:0]][pwr.addr] <= pwr.data[BEAT_W-1:0];
    if (pwr.en && pwr.mem == 5'd16 && int'(pwr.addr) < BDEPTH)
      bmem[pwr.addr] <= pwr.data[LANES*18-1:0];
  end

  pw_cfg_t            c;
  logic               running;
  logic [6:0]         a, f;
  logic [16:0]        p;
  logic [11:0]        waddr;
  logic signed [31:0] acc [LANES];

  logic               take, last_a, last_f, last_p, can_out;
  logic signed [31:0] nacc [LANES];
  beat_t              res;
  logic [LANES*18-1:0] bw;

  always_comb begin
    last_a   = (a == c.apass - 7'd1);
    last_f   = (f == c.fpass - 7'd1);
    last_p   = (p == c.npix - 17'd1);
    can_out  = !out_valid || out_ready;
    in_ready = running && (!last_a || can_out);
    take     = in_valid && in_ready;
    busy     = running || out_valid;
    bw       = bmem[f];
    for (int fl = 0; fl < LANES; fl++) begin
      nacc[fl] = (a == '0) ? 32'($signed(bw[18*fl +: 18])) : acc[fl];
      for (int l = 0; l < LANES; l++)
        nacc[fl] += 32'(($signed({1'b0, in_data[8*l +: 8]}) - $signed({1'b0, c.az}))
                      * ($signed({1'b0, wmem[fl][waddr][8*l +: 8]}) - $signed({1'b0, c.wz})));
      res[8*fl +: 8] = requantize(nacc[fl], c.rq);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; running <= 1'b0; a <= '0; f <= '0; p <= '0; waddr <= '0;
      out_valid <= 1'b0; out_data <= '0;
      for (int fl = 0; fl < LANES; fl++) acc[fl] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy) begin
        c <= cfg; running <= 1'b1; a <= '0; f <= '0; p <= '0; waddr <= '0;
      end else if (take) begin
        for (int fl = 0; fl < LANES; fl++) acc[fl] <= nacc[fl];
        if (last_a) begin
          out_valid <= 1'b1;
          out_data  <= res;
          a <= '0;
          if (last_f) begin
            f <= '0; waddr <= '0;
            if (last_p) running <= 1'b0;
            else        p <= p + 17'd1;
          end else begin
            f <= f + 7'd1; waddr <= waddr + 12'd1;
          end
        end else begin
          a <= a + 7'd1; waddr <= waddr + 12'd1;
        end
      end
    end
  end
endmodule
