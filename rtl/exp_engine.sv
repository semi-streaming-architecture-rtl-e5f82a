// exp_engine: expansion pointwise (1x1) convolution, filters-channels-pixels order.
//
// The input is a pixel stream that may be read only once: each pixel arrives
// as APASS = channels/16 beats. Every beat is held while the engine steps
// through all FPASS = filters/16 filter batches, one per clock, multiplying
// the 16 channels with the matching channel of 16 filters (256 MACs per
// clock). Partial sums of all filter batches are kept in an accumulator
// memory (FPASS words of 16 x 32 bits), initialised from the bias on the
// first channel batch. On the last channel batch each filter batch is
// rescaled ((ACC*MULT)>>SHIFT + RES0, clamped) and leaves as a 16-channel
// output beat, so the output is pixel-major like the input.
// Weights: 16 memories, memory l holds channel l of every channel batch,
// one word per (channel batch, filter batch) with the 16 filters' weights,
// address apass*FPASS + fpass. Bias: one 256-bit memory, 16 16-bit biases per
// filter batch. Parameter writes: mem 0..15 = channel memories, mem 16 = bias.
// Also used for the 1x1 convolution in front of the pooling layer.
// Interface: `start` latches cfg and processes cfg.npix pixels; `busy` until
// the last beat has left. Valid/ready streams of 128-bit beats.
// Timing: one filter batch per clock; an input beat is accepted on the clock
// of its last filter batch, so a pixel takes APASS*FPASS clocks. The
// accumulator memory depth (80, for the 1280-filter layer) and the
// asynchronous-read arrays are this design's choice; the loop order and memory
// organisation follow the source.
module exp_engine
  import ss_pkg::*;
#(
  parameter int WDEPTH = 2048,   // words per channel memory
  parameter int BDEPTH = 1024,   // bias memory depth
  parameter int ADEPTH = 80      // accumulator memory depth (max filters/16)
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
  logic [LANES*16-1:0] bmem [BDEPTH];
  logic [LANES*32-1:0] amem [ADEPTH];

  always_ff @(posedge clk) begin
    if (pwr.en && pwr.mem < 5'd16 && int'(pwr.addr) < WDEPTH)
      wmem[pwr.mem[3:0]][pwr.addr] <= pwr.data[BEAT_W-1:0];
    if (pwr.en && pwr.mem == 5'd16 && int'(pwr.addr) < BDEPTH)
      bmem[pwr.addr] <= pwr.data[LANES*16-1:0];
  end

  pw_cfg_t     c;
  logic        running;
  logic [6:0]  a, f;
  logic [16:0] p;
  logic [11:0] waddr;

  logic               step, last_a, last_f, last_p, can_out;
  logic signed [31:0] nacc [LANES];
  logic [LANES*32-1:0] aw, nacc_w;
  logic [LANES*16-1:0] bw;
  beat_t              res;

  always_comb begin
    last_a   = (a == c.apass - 7'd1);
    last_f   = (f == c.fpass - 7'd1);
    last_p   = (p == c.npix - 17'd1);
    can_out  = !out_valid || out_ready;
    step     = running && in_valid && (!last_a || can_out);
    in_ready = step && last_f;
    busy     = running || out_valid;
    aw       = amem[f];
    bw       = bmem[f];
    for (int fl = 0; fl < LANES; fl++) begin
      nacc[fl] = (a == '0) ? 32'($signed(bw[16*fl +: 16])) : $signed(aw[32*fl +: 32]);
      for (int l = 0; l < LANES; l++)
        nacc[fl] += 32'(($signed({1'b0, in_data[8*l +: 8]}) - $signed({1'b0, c.az}))
                      * ($signed({1'b0, wmem[l][waddr][8*fl +: 8]}) - $signed({1'b0, c.wz})));
      nacc_w[32*fl +: 32] = nacc[fl];
      res[8*fl +: 8]      = requantize(nacc[fl], c.rq);
    end
  end

  always_ff @(posedge clk)
    if (step && int'(f) < ADEPTH) amem[f] <= nacc_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; running <= 1'b0; a <= '0; f <= '0; p <= '0; waddr <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy) begin
        c <= cfg; running <= 1'b1; a <= '0; f <= '0; p <= '0; waddr <= '0;
      end else if (step) begin
        if (last_a) begin
          out_valid <= 1'b1;
          out_data  <= res;
        end
        if (last_f) begin
          f <= '0;
          if (last_a) begin
            a <= '0; waddr <= '0;
            if (last_p) running <= 1'b0;
            else        p <= p + 17'd1;
          end else begin
            a <= a + 7'd1; waddr <= waddr + 12'd1;
          end
        end else begin
          f <= f + 7'd1; waddr <= waddr + 12'd1;
        end
      end
    end
  end
endmodule
