// tb_mnv2_tail: the last round of MobileNetV2 at its real sizes.
//
// Buffer A starts out holding the 7x7x960 expansion output of the last
// bottleneck block (written straight into its memory, as if left by the
// previous round). The design then runs, with every parameter of the top at
// its default:
//   stage 1  buffer A -> DWC 3x3 depthwise, 7x7x960 (60 passes) -> buffer B
//   stage 2  buffer B (each pixel read 20 times) -> PRO 960->320 -> ADD
//            (pass-through) -> EXP 320->1280 -> buffer A
//   stage 3  buffer A (pass-major) -> DWC 7x7 global average pooling,
//            80 passes -> output stream, one beat per 16 channels
// This uses the deepest weight memories of the network (PRO 1200 of 1536
// words, EXP 1600 of 2048 words and all 80 EXP accumulator words) and the
// largest DWC pass count. Weights are random; the 1280 pooled values, the
// whole 7x7x1280 tensor in buffer A and the clock counts of the three
// stages are compared with a layer-by-layer integer model. The layer sizes
// are MobileNetV2's; the quantisation constants are chosen here so that
// results spread over the 8-bit range. Pooling uses MULT/2^SHIFT = 1/49 and
// takes the output zero point of the expansion as its own, so it returns
// the plain channel average.
module tb_mnv2_tail;
  import ss_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  pwr_t pwr;
  engine_e pwr_eng;
  c2d_cfg_t c2d_cfg;
  dwc_cfg_t dwc_cfg;
  pw_cfg_t pro_cfg, exp_cfg;
  add_cfg_t add_cfg;
  buf_cfg_t bufa_wcfg, bufa_rcfg, bufb_wcfg, bufb_rcfg;
  route_t route;
  starts_t start;
  busy_t busy;
  logic [13:0] fifo_count;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [23:0] in_data;
  beat_t out_data;

  semi_streaming_top dut (.*);
  always #5 clk = ~clk;

  localparam int S = 7, NP = S * S, CD = 960, CP = 320, CE = 1280;
  localparam int DP = CD / 16, AP = CD / 16, FP = CP / 16, EA = CP / 16, EF = CE / 16;
  int checks = 0, failures = 0;

  int act [NP*CD];
  int dw_w [DP][9][16]; int dw_b [DP][16];
  int pro_w [CP][CD];   int pro_b [CP];
  int exp_w [CE][CP];   int exp_b [CE];
  int pool_b [EF][16];
  int t_dwc [NP*CD], t_pro [NP*CP], t_exp [NP*CE], t_pool [CE];
  int got_pool [CE];
  dwc_cfg_t dw1;   // the depthwise layer's settings, kept for the model
  int n_out = 0;

  function automatic rq_t mk_rq(int shift);
    rq_t q;
    q.mult = 32'h9000_0000 + ($urandom & 32'h0fff_ffff);
    q.shift = 8'(shift); q.oz = 8'($urandom_range(100, 150));
    q.act_min = 8'd0; q.act_max = 8'd255;
    return q;
  endfunction

  function automatic int rq(longint acc, rq_t q);
    return ref_rq(acc, longint'(q.mult), int'(q.shift), int'(q.oz), int'(q.act_min), int'(q.act_max));
  endfunction

  task automatic wr(engine_e e, int mem, int addr, logic [PWR_W-1:0] data);
    @(negedge clk);
    pwr.en = 1; pwr.mem = 5'(mem); pwr.addr = 12'(addr); pwr.data = data; pwr_eng = e;
    @(negedge clk);
    pwr.en = 0;
  endtask

  task automatic load_weights();
    logic [PWR_W-1:0] d;
    for (int p = 0; p < DP; p++) begin
      for (int k = 0; k < 9; k++) begin
        d = '0;
        for (int l = 0; l < 16; l++) begin dw_w[p][k][l] = $urandom_range(100, 156); d[8*l +: 8] = 8'(dw_w[p][k][l]); end
        wr(ENG_DWC, k, p, d);
      end
      d = '0;
      for (int l = 0; l < 16; l++) begin dw_b[p][l] = $urandom_range(0, 2000) - 1000; d[16*l +: 16] = 16'(dw_b[p][l]); end
      wr(ENG_DWC, 9, p, d);
    end
    for (int f = 0; f < CP; f++) begin
      pro_b[f] = $urandom_range(0, 40000) - 20000;
      for (int ch = 0; ch < CD; ch++) pro_w[f][ch] = $urandom_range(110, 146);
    end
    for (int fp = 0; fp < FP; fp++) begin
      for (int ap = 0; ap < AP; ap++)
        for (int fl = 0; fl < 16; fl++) begin
          d = '0;
          for (int l = 0; l < 16; l++) d[8*l +: 8] = 8'(pro_w[fp*16+fl][ap*16+l]);
          wr(ENG_PRO, fl, fp * AP + ap, d);
        end
      d = '0;
      for (int fl = 0; fl < 16; fl++) d[18*fl +: 18] = 18'(pro_b[fp*16+fl]);
      wr(ENG_PRO, 16, fp, d);
    end
    for (int f = 0; f < CE; f++) begin
      exp_b[f] = $urandom_range(0, 20000) - 10000;
      for (int ch = 0; ch < CP; ch++) exp_w[f][ch] = $urandom_range(110, 146);
    end
    for (int ap = 0; ap < EA; ap++)
      for (int fp = 0; fp < EF; fp++)
        for (int l = 0; l < 16; l++) begin
          d = '0;
          for (int fl = 0; fl < 16; fl++) d[8*fl +: 8] = 8'(exp_w[fp*16+fl][ap*16+l]);
          wr(ENG_EXP, l, ap * EF + fp, d);
        end
    for (int fp = 0; fp < EF; fp++) begin
      d = '0;
      for (int fl = 0; fl < 16; fl++) d[16*fl +: 16] = 16'(exp_b[fp*16+fl]);
      wr(ENG_EXP, 16, fp, d);
    end
  endtask

  // the pooling biases replace the depthwise biases once stage 1 is over
  task automatic load_pool_bias();
    logic [PWR_W-1:0] d;
    for (int p = 0; p < EF; p++) begin
      d = '0;
      for (int l = 0; l < 16; l++) begin pool_b[p][l] = $urandom_range(0, 100) - 50; d[16*l +: 16] = 16'(pool_b[p][l]); end
      wr(ENG_DWC, 9, p, d);
    end
  endtask

  function automatic void reference(rq_t pool_rq, logic [7:0] pool_az);
    for (int r = 0; r < S; r++) for (int c = 0; c < S; c++) for (int ch = 0; ch < CD; ch++) begin
      longint acc;
      acc = dw_b[ch/16][ch%16];
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        int y, x, a;
        y = r - 1 + i; x = c - 1 + j;
        a = (y < 0 || x < 0 || y >= S || x >= S) ? int'(dw1.az) : act[(y*S+x)*CD+ch];
        acc += longint'(a - int'(dw1.az)) * (dw_w[ch/16][3*i+j][ch%16] - int'(dw1.wz));
      end
      t_dwc[(r*S+c)*CD+ch] = rq(acc, dw1.rq);
    end
    for (int p = 0; p < NP; p++) for (int f = 0; f < CP; f++) begin
      longint acc;
      acc = pro_b[f];
      for (int ch = 0; ch < CD; ch++) acc += longint'(t_dwc[p*CD+ch] - int'(pro_cfg.az)) * (pro_w[f][ch] - int'(pro_cfg.wz));
      t_pro[p*CP+f] = rq(acc, pro_cfg.rq);
    end
    for (int p = 0; p < NP; p++) for (int f = 0; f < CE; f++) begin
      longint acc;
      acc = exp_b[f];
      for (int ch = 0; ch < CP; ch++) acc += longint'(t_pro[p*CP+ch] - int'(exp_cfg.az)) * (exp_w[f][ch] - int'(exp_cfg.wz));
      t_exp[p*CE+f] = rq(acc, exp_cfg.rq);
    end
    for (int ch = 0; ch < CE; ch++) begin
      longint acc;
      acc = pool_b[ch/16][ch%16];
      for (int p = 0; p < NP; p++) acc += t_exp[p*CE+ch] - int'(pool_az);
      t_pool[ch] = rq(acc, pool_rq);
    end
  endfunction

  function automatic buf_cfg_t bc(int npix, int nb, bit pm, int rep);
    buf_cfg_t b;
    b.npix = 17'(npix); b.nb = 7'(nb); b.pix_major = pm; b.rep = 7'(rep);
    return b;
  endfunction

  task automatic pulse(starts_t s);
    @(negedge clk); start = s; @(negedge clk); start = '0;
  endtask

  task automatic wait_idle(output int clocks);
    clocks = 2;
    while (busy != '0) begin @(negedge clk); clocks++; end
  endtask

  // the output stream: pooled beats, one per 16-channel pass
  always @(posedge clk)
    if (out_valid && out_ready) begin
      for (int l = 0; l < 16; l++)
        if (n_out < EF) got_pool[n_out*16+l] = int'(out_data[8*l +: 8]);
      n_out <= n_out + 1;
    end

  int stage1, stage2, stage3, n_clamped;
  initial begin
    starts_t s;
    rq_t pool_rq;
    logic [7:0] pool_az;
    pwr = '0; pwr_eng = ENG_C2D; start = '0; route = '0; in_valid = 0; in_data = 0; out_ready = 1;
    c2d_cfg = '0; dwc_cfg = '0; pro_cfg = '0; exp_cfg = '0; add_cfg = '0;
    bufa_wcfg = '0; bufa_rcfg = '0; bufb_wcfg = '0; bufb_rcfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    load_weights();

    // the previous round's result, pass-major in buffer A (address b*NP + p)
    for (int i = 0; i < NP * CD; i++) act[i] = $urandom_range(0, 255);
    for (int b = 0; b < DP; b++) for (int p = 0; p < NP; p++)
      for (int l = 0; l < 16; l++) dut.u_bufa.mem[b*NP+p][8*l +: 8] = 8'(act[p*CD+b*16+l]);

    dwc_cfg.rows = S; dwc_cfg.cols = S; dwc_cfg.npass = DP; dwc_cfg.az = 8'd110; dwc_cfg.wz = 8'd128;
    dwc_cfg.rq = mk_rq(35);
    dw1 = dwc_cfg;
    pro_cfg.npix = NP; pro_cfg.apass = AP; pro_cfg.fpass = FP; pro_cfg.az = 8'd100; pro_cfg.wz = 8'd128;
    pro_cfg.rq = mk_rq(40);
    exp_cfg.npix = NP; exp_cfg.apass = EA; exp_cfg.fpass = EF; exp_cfg.az = 8'd120; exp_cfg.wz = 8'd128;
    exp_cfg.rq = mk_rq(40);
    add_cfg = '0; add_cfg.act_max = 8'd255;   // pass-through, nothing stored

    // stage 1: depthwise 7x7x960, buffer A -> buffer B
    route = '0;
    bufa_rcfg = bc(NP, DP, 0, 1); bufb_wcfg = bc(NP, DP, 0, 1);
    s = '0; s.bufa_rd = 1; s.dwc = 1; s.bufb_wr = 1;
    pulse(s);
    wait_idle(stage1);

    // stage 2: buffer B -> PRO 960->320 -> ADD -> EXP 320->1280 -> buffer A
    bufb_rcfg = bc(NP, DP, 1, FP); bufa_wcfg = bc(NP, EF, 1, 1);
    s = '0; s.bufb_rd = 1; s.pro = 1; s.exp_e = 1; s.bufa_wr = 1;
    pulse(s);
    wait_idle(stage2);

    // stage 3: global average pooling, buffer A -> DWC -> output
    load_pool_bias();
    pool_az = exp_cfg.rq.oz;
    pool_rq.mult = 32'd2804876602;   // round(2^37 / 49)
    pool_rq.shift = 8'd37; pool_rq.oz = pool_az; pool_rq.act_min = 8'd0; pool_rq.act_max = 8'd255;
    dwc_cfg.pool = 1; dwc_cfg.npass = EF; dwc_cfg.az = pool_az; dwc_cfg.rq = pool_rq;
    route = '{dwc_from_c2d: 0, bufa_from_c2d: 0, dwc_to_out: 1, add_to_out: 0};
    bufa_rcfg = bc(NP, EF, 0, 1);
    s = '0; s.bufa_rd = 1; s.dwc = 1;
    pulse(s);
    wait_idle(stage3);
    repeat (4) @(negedge clk);

    reference(pool_rq, pool_az);
    for (int b = 0; b < DP; b++) for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) begin
      checks++;
      if (int'(dut.u_bufb.mem[b*NP+p][8*l +: 8]) != t_dwc[p*CD+b*16+l]) begin
        failures++;
        if (failures < 5) $display("dwc b%0d p%0d l%0d: got %0d expected %0d", b, p, l, dut.u_bufb.mem[b*NP+p][8*l +: 8], t_dwc[p*CD+b*16+l]);
      end
    end
    for (int b = 0; b < EF; b++) for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) begin
      int e;
      e = t_exp[p*CE+b*16+l];
      if (e == 0 || e == 255) n_clamped++;
      checks++;
      if (int'(dut.u_bufa.mem[b*NP+p][8*l +: 8]) != e) begin
        failures++;
        if (failures < 10) $display("exp b%0d p%0d l%0d: got %0d expected %0d", b, p, l, dut.u_bufa.mem[b*NP+p][8*l +: 8], e);
      end
    end
    checks++;
    if (n_out != EF) begin failures++; $display("pooled beats: %0d, expected %0d", n_out, EF); end
    for (int ch = 0; ch < CE; ch++) begin
      checks++;
      if (got_pool[ch] != t_pool[ch]) begin
        failures++;
        if (failures < 10) $display("pool ch %0d: got %0d expected %0d", ch, got_pool[ch], t_pool[ch]);
      end
    end
    $display("stage 1: %0d clocks (bound %0d), stage 2: %0d clocks (EXP bound %0d), stage 3: %0d clocks (bound %0d), clamped %0d of %0d",
             stage1, DP * (S+1) * (S+1), stage2, NP * EA * EF, stage3, EF * NP, n_clamped, NP * CE);
    checks++;
    if (stage1 > DP * ((S+1) * (S+1) + 4) + 20) begin failures++; $display("stage 1 too slow"); end
    checks++;
    if (stage2 > NP * EA * EF + 100) begin failures++; $display("stage 2 too slow"); end
    checks++;
    if (stage3 > EF * (NP + 4) + 20) begin failures++; $display("stage 3 too slow"); end
    checks++;
    if (n_clamped > NP * CE / 2) begin failures++; $display("model mostly clamped, test too weak"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
