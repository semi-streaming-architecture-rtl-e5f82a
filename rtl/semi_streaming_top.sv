// semi_streaming_top: five layer-specialised engines chained in a loop.
//
// MobileNetV2 is run by reusing five engines instead of one block per layer.
// The entry layer goes through the standard-convolution engine (C2D); every
// bottleneck block then loops through depthwise (DWC) -> projection (PRO) ->
// residual addition (ADD) -> expansion (EXP) -> back to DWC. PRO, ADD and EXP
// stream pixel-major data straight into each other. DWC needs whole frames
// of one 16-channel batch, so an activation buffer on each side of it
// reorders the data: buffer A (EXP -> DWC) and buffer B (DWC -> PRO). The
// C2D output is 32 channels: channels 0-15 stream directly into DWC pass 0,
// channels 16-31 are stored in buffer A and read for DWC pass 1.
//
//   in_* -> C2D -A-> DWC -> BUFF B -> PRO -> ADD(+FIFO) -> EXP -> BUFF A -> DWC
//               \-B-> BUFF A                    \-> out_* (final)
//   DWC -> out_* (pooling result)
//
// The host (a processor, or a sequencer) writes weights and biases through
// `pwr`/`pwr_eng`, sets the per-layer config records and `route`, pulses the
// start strobes and watches the busy flags. One "round" is DWC over buffer A
// (stage 1) followed by PRO-ADD-EXP over buffer B (stage 2). The input image
// arrives on in_* as a raster stream of 3x8-bit pixels; results leave on
// out_* as 16-channel beats. All streams are valid/ready.
// Following the source: the engine set, the loop, the buffers around DWC, the
// FIFO of ADD and the C2D A/B split. This design's own choices: the routing
// multiplexers, the register-level host interface and direct writing of the
// C2D B stream into buffer A (the source routes it through the data mover).
module semi_streaming_top
  import ss_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // parameter loading (from the data mover)
  input  pwr_t            pwr,
  input  engine_e         pwr_eng,
  // per-layer configuration and control (from the host)
  input  c2d_cfg_t        c2d_cfg,
  input  dwc_cfg_t        dwc_cfg,
  input  pw_cfg_t         pro_cfg,
  input  pw_cfg_t         exp_cfg,
  input  add_cfg_t        add_cfg,
  input  buf_cfg_t        bufa_wcfg,
  input  buf_cfg_t        bufa_rcfg,
  input  buf_cfg_t        bufb_wcfg,
  input  buf_cfg_t        bufb_rcfg,
  input  route_t          route,
  input  starts_t         start,
  output busy_t           busy,
  output logic [13:0]     fifo_count,
  // image input
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [23:0]     in_data,
  // result output
  output logic            out_valid,
  input  logic            out_ready,
  output beat_t           out_data
);
  pwr_t pwr_c2d, pwr_dwc, pwr_pro, pwr_exp;
  always_comb begin
    pwr_c2d = pwr; pwr_c2d.en = pwr.en && pwr_eng == ENG_C2D;
    pwr_dwc = pwr; pwr_dwc.en = pwr.en && pwr_eng == ENG_DWC;
    pwr_pro = pwr; pwr_pro.en = pwr.en && pwr_eng == ENG_PRO;
    pwr_exp = pwr; pwr_exp.en = pwr.en && pwr_eng == ENG_EXP;
  end

  // stream wires
  logic  ca_v, ca_r, cb_v, cb_r;  beat_t ca_d, cb_d;     // C2D A / B
  logic  di_v, di_r;              beat_t di_d;           // DWC in
  logic  do_v, do_r;              beat_t do_d;           // DWC out
  logic  aw_v, aw_r;              beat_t aw_d;           // buffer A write
  logic  ar_v, ar_r;              beat_t ar_d;           // buffer A read
  logic  bw_v, bw_r;                                     // buffer B write
  logic  br_v, br_r;              beat_t br_d;           // buffer B read
  logic  po_v, po_r;              beat_t po_d;           // PRO out
  logic  ao_v, ao_r;              beat_t ao_d;           // ADD out
  logic  ei_v, ei_r;                                     // EXP in
  logic  eo_v, eo_r;              beat_t eo_d;           // EXP out
  logic [6:0] dwc_pass;
  logic  dwc_src_c2d;

  c2d_engine u_c2d (
    .clk, .rst_n, .start(start.c2d), .cfg(c2d_cfg), .busy(busy.c2d), .pwr(pwr_c2d),
    .in_valid, .in_ready, .in_data,
    .out_a_valid(ca_v), .out_a_ready(ca_r), .out_a_data(ca_d),
    .out_b_valid(cb_v), .out_b_ready(cb_r), .out_b_data(cb_d)
  );

  // DWC input: C2D stream A for pass 0 of the entry round, buffer A otherwise
  always_comb begin
    dwc_src_c2d = route.dwc_from_c2d && dwc_pass == '0;
    di_v = dwc_src_c2d ? ca_v : ar_v;
    di_d = dwc_src_c2d ? ca_d : ar_d;
    ca_r = dwc_src_c2d && di_r;
    ar_r = !dwc_src_c2d && di_r;
  end

  dwc_engine u_dwc (
    .clk, .rst_n, .start(start.dwc), .cfg(dwc_cfg), .busy(busy.dwc), .pass(dwc_pass),
    .pwr(pwr_dwc),
    .in_valid(di_v), .in_ready(di_r), .in_data(di_d),
    .out_valid(do_v), .out_ready(do_r), .out_data(do_d)
  );

  // buffer A write: C2D stream B in the entry round, EXP output otherwise
  always_comb begin
    aw_v = route.bufa_from_c2d ? cb_v : eo_v;
    aw_d = route.bufa_from_c2d ? cb_d : eo_d;
    cb_r = route.bufa_from_c2d && aw_r;
    eo_r = !route.bufa_from_c2d && aw_r;
  end

  act_buffer u_bufa (
    .clk, .rst_n,
    .wr_start(start.bufa_wr), .wcfg(bufa_wcfg), .wr_busy(busy.bufa_wr),
    .in_valid(aw_v), .in_ready(aw_r), .in_data(aw_d),
    .rd_start(start.bufa_rd), .rcfg(bufa_rcfg), .rd_busy(busy.bufa_rd),
    .out_valid(ar_v), .out_ready(ar_r), .out_data(ar_d)
  );

  act_buffer u_bufb (
    .clk, .rst_n,
    .wr_start(start.bufb_wr), .wcfg(bufb_wcfg), .wr_busy(busy.bufb_wr),
    .in_valid(bw_v), .in_ready(bw_r), .in_data(do_d),
    .rd_start(start.bufb_rd), .rcfg(bufb_rcfg), .rd_busy(busy.bufb_rd),
    .out_valid(br_v), .out_ready(br_r), .out_data(br_d)
  );

  pro_engine u_pro (
    .clk, .rst_n, .start(start.pro), .cfg(pro_cfg), .busy(busy.pro), .pwr(pwr_pro),
    .in_valid(br_v), .in_ready(br_r), .in_data(br_d),
    .out_valid(po_v), .out_ready(po_r), .out_data(po_d)
  );

  logic [13:0] fcount;
  add_engine u_add (
    .clk, .rst_n, .cfg(add_cfg),
    .in_valid(po_v), .in_ready(po_r), .in_data(po_d),
    .out_valid(ao_v), .out_ready(ao_r), .out_data(ao_d),
    .fifo_count(fcount)
  );
  assign fifo_count = fcount;

  exp_engine u_exp (
    .clk, .rst_n, .start(start.exp_e), .cfg(exp_cfg), .busy(busy.exp_e), .pwr(pwr_exp),
    .in_valid(ei_v), .in_ready(ei_r), .in_data(ao_d),
    .out_valid(eo_v), .out_ready(eo_r), .out_data(eo_d)
  );

  // output routing
  always_comb begin
    bw_v      = !route.dwc_to_out && do_v;
    do_r      = route.dwc_to_out ? out_ready : bw_r;
    ei_v      = !route.add_to_out && ao_v;
    ao_r      = route.add_to_out ? out_ready : ei_r;
    out_valid = route.dwc_to_out ? do_v : (route.add_to_out && ao_v);
    out_data  = route.dwc_to_out ? do_d : ao_d;
  end
endmodule
