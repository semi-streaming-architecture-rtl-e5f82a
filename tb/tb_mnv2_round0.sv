// tb_mnv2_round0: the first round of MobileNetV2 at its real sizes.
//
// A 224x224x3 image runs through the entry convolution (stride 2, 32
// filters, 112x112 output), the depthwise layer of the first bottleneck
// (112x112x32, pass 0 straight from C2D, pass 1 from buffer A), its
// projection 32->16, a pass-through ADD (the first block has no shortcut)
// and the expansion 16->96 of the second block into buffer A. Weights are
// random; every value of the 112x112x96 tensor left in buffer A is compared
// with a layer-by-layer integer model. The clock counts of the two stages
// are checked against the engine rates: stage 1 takes about one clock per
// scan position (225x225 for C2D, then 113x113 for DWC pass 1, plus up to two
// clocks per input row where the DWC window stalls C2D); stage 2 is bound by
// EXP at APASS*FPASS = 6 clocks per pixel.
// The layer sizes are those of MobileNetV2 (224x224 input, 32/16/96
// channels); the quantisation constants are chosen here so that results
// spread over the whole 8-bit range instead of coming from a trained model.
// All parameters of the top are at their defaults.
module tb_mnv2_round0;
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

  localparam int H = 224, HO = 112, NP = HO * HO, FE = 96;
  int checks = 0, failures = 0;

  int img [H*H*3];
  int c2d_w [32][27];  int c2d_b [32];
  int dw_w [2][9][16]; int dw_b [2][16];
  int pro_w [16][32];  int pro_b [16];
  int exp_w [FE][16];  int exp_b [FE];
  int t_c2d [NP*32], t_dwc [NP*32], t_pro [NP*16], t_exp [NP*FE];

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

  task automatic load_all();
    logic [PWR_W-1:0] d;
    for (int f = 0; f < 32; f++) begin
      d = '0;
      for (int k = 0; k < 27; k++) begin c2d_w[f][k] = $urandom_range(112, 144); d[8*k +: 8] = 8'(c2d_w[f][k]); end
      c2d_b[f] = $urandom_range(0, 4000) - 2000; d[216 +: 16] = 16'(c2d_b[f]);
      wr(ENG_C2D, f, 0, d);
    end
    for (int p = 0; p < 2; p++) begin
      for (int k = 0; k < 9; k++) begin
        d = '0;
        for (int l = 0; l < 16; l++) begin dw_w[p][k][l] = $urandom_range(100, 156); d[8*l +: 8] = 8'(dw_w[p][k][l]); end
        wr(ENG_DWC, k, p, d);
      end
      d = '0;
      for (int l = 0; l < 16; l++) begin dw_b[p][l] = $urandom_range(0, 2000) - 1000; d[16*l +: 16] = 16'(dw_b[p][l]); end
      wr(ENG_DWC, 9, p, d);
    end
    for (int f = 0; f < 16; f++) begin
      pro_b[f] = $urandom_range(0, 20000) - 10000;
      for (int ch = 0; ch < 32; ch++) pro_w[f][ch] = $urandom_range(110, 146);
    end
    for (int ap = 0; ap < 2; ap++)
      for (int fl = 0; fl < 16; fl++) begin
        d = '0;
        for (int l = 0; l < 16; l++) d[8*l +: 8] = 8'(pro_w[fl][ap*16+l]);
        wr(ENG_PRO, fl, ap, d);
      end
    d = '0;
    for (int fl = 0; fl < 16; fl++) d[18*fl +: 18] = 18'(pro_b[fl]);
    wr(ENG_PRO, 16, 0, d);
    for (int f = 0; f < FE; f++) begin
      exp_b[f] = $urandom_range(0, 10000) - 5000;
      for (int ch = 0; ch < 16; ch++) exp_w[f][ch] = $urandom_range(110, 146);
    end
    for (int fp = 0; fp < FE / 16; fp++) begin
      for (int l = 0; l < 16; l++) begin
        d = '0;
        for (int fl = 0; fl < 16; fl++) d[8*fl +: 8] = 8'(exp_w[fp*16+fl][l]);
        wr(ENG_EXP, l, fp, d);
      end
      d = '0;
      for (int fl = 0; fl < 16; fl++) d[16*fl +: 16] = 16'(exp_b[fp*16+fl]);
      wr(ENG_EXP, 16, fp, d);
    end
  endtask

  function automatic void reference();
    for (int orow = 0; orow < HO; orow++) for (int ocol = 0; ocol < HO; ocol++)
      for (int f = 0; f < 32; f++) begin
        longint acc;
        int cr, cc;
        acc = c2d_b[f]; cr = 2 * orow + 1; cc = 2 * ocol + 1;
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) for (int ch = 0; ch < 3; ch++) begin
          int y, x, a;
          y = cr - 1 + i; x = cc - 1 + j;
          a = (y >= H || x >= H) ? int'(c2d_cfg.az) : img[(y*H+x)*3+ch];
          acc += longint'(a - int'(c2d_cfg.az)) * (c2d_w[f][3*(3*i+j)+ch] - int'(c2d_cfg.wz));
        end
        t_c2d[(orow*HO+ocol)*32+f] = rq(acc, c2d_cfg.rq);
      end
    for (int r = 0; r < HO; r++) for (int c = 0; c < HO; c++) for (int ch = 0; ch < 32; ch++) begin
      longint acc;
      acc = dw_b[ch/16][ch%16];
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        int y, x, a;
        y = r - 1 + i; x = c - 1 + j;
        a = (y < 0 || x < 0 || y >= HO || x >= HO) ? int'(dwc_cfg.az) : t_c2d[(y*HO+x)*32+ch];
        acc += longint'(a - int'(dwc_cfg.az)) * (dw_w[ch/16][3*i+j][ch%16] - int'(dwc_cfg.wz));
      end
      t_dwc[(r*HO+c)*32+ch] = rq(acc, dwc_cfg.rq);
    end
    for (int p = 0; p < NP; p++) for (int f = 0; f < 16; f++) begin
      longint acc;
      acc = pro_b[f];
      for (int ch = 0; ch < 32; ch++) acc += longint'(t_dwc[p*32+ch] - int'(pro_cfg.az)) * (pro_w[f][ch] - int'(pro_cfg.wz));
      t_pro[p*16+f] = rq(acc, pro_cfg.rq);
    end
    for (int p = 0; p < NP; p++) for (int f = 0; f < FE; f++) begin
      longint acc;
      acc = exp_b[f];
      for (int ch = 0; ch < 16; ch++) acc += longint'(t_pro[p*16+ch] - int'(exp_cfg.az)) * (exp_w[f][ch] - int'(exp_cfg.wz));
      t_exp[p*FE+f] = rq(acc, exp_cfg.rq);
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

  int stage1, stage2, n_in_stall, n_clamped;
  initial begin
    starts_t s;
    pwr = '0; pwr_eng = ENG_C2D; start = '0; route = '0; in_valid = 0; in_data = 0; out_ready = 1;
    c2d_cfg = '0; dwc_cfg = '0; pro_cfg = '0; exp_cfg = '0; add_cfg = '0;
    bufa_wcfg = '0; bufa_rcfg = '0; bufb_wcfg = '0; bufb_rcfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    load_all();
    for (int i = 0; i < H * H * 3; i++) img[i] = $urandom_range(0, 255);
    c2d_cfg.rows = H; c2d_cfg.cols = H; c2d_cfg.stride2 = 1; c2d_cfg.az = 8'd90; c2d_cfg.wz = 8'd128;
    c2d_cfg.rq = mk_rq(36);
    dwc_cfg.rows = HO; dwc_cfg.cols = HO; dwc_cfg.npass = 2; dwc_cfg.az = 8'd110; dwc_cfg.wz = 8'd128;
    dwc_cfg.rq = mk_rq(35);
    pro_cfg.npix = NP; pro_cfg.apass = 2; pro_cfg.fpass = 1; pro_cfg.az = 8'd100; pro_cfg.wz = 8'd128;
    pro_cfg.rq = mk_rq(37);
    exp_cfg.npix = NP; exp_cfg.apass = 1; exp_cfg.fpass = FE / 16; exp_cfg.az = 8'd120; exp_cfg.wz = 8'd128;
    exp_cfg.rq = mk_rq(38);
    add_cfg = '0; add_cfg.act_max = 8'd255;   // pass-through, nothing stored

    // stage 1: C2D -> DWC, C2D stream B through buffer A
    route = '{dwc_from_c2d: 1, bufa_from_c2d: 1, dwc_to_out: 0, add_to_out: 0};
    bufa_wcfg = bc(NP, 1, 1, 1); bufa_rcfg = bc(NP, 1, 0, 1); bufb_wcfg = bc(NP, 2, 0, 1);
    s = '0; s.c2d = 1; s.dwc = 1; s.bufa_wr = 1; s.bufb_wr = 1;
    pulse(s);
    stage1 = 0;
    fork
      begin
        for (int i = 0; i < H * H; i++) begin
          in_valid = 1; in_data = {8'(img[i*3+2]), 8'(img[i*3+1]), 8'(img[i*3])};
          @(posedge clk);
          while (!in_ready) begin n_in_stall++; @(posedge clk); end
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        while (busy.c2d || busy.bufa_wr || stage1 < 2) begin @(negedge clk); stage1++; end
        s = '0; s.bufa_rd = 1; pulse(s);
        stage1 += 2;
        while (busy != '0) begin @(negedge clk); stage1++; end
      end
    join

    // stage 2: buffer B -> PRO -> ADD -> EXP -> buffer A
    route = '{dwc_from_c2d: 0, bufa_from_c2d: 0, dwc_to_out: 0, add_to_out: 0};
    bufb_rcfg = bc(NP, 2, 1, 1); bufa_wcfg = bc(NP, FE / 16, 1, 1);
    s = '0; s.bufb_rd = 1; s.pro = 1; s.exp_e = 1; s.bufa_wr = 1;
    pulse(s);
    stage2 = 2;
    while (busy != '0) begin @(negedge clk); stage2++; end

    reference();
    for (int b = 0; b < FE / 16; b++) for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) begin
      int e;
      e = t_exp[p*FE+b*16+l];
      if (e == 0 || e == 255) n_clamped++;
      checks++;
      if (int'(dut.u_bufa.mem[b*NP+p][8*l +: 8]) != e) failures++;
    end
    $display("stage 1: %0d clocks (C2D scan %0d + DWC pass %0d), stage 2: %0d clocks (EXP bound %0d), input stalls %0d, clamped %0d of %0d",
             stage1, (H+1)*(H+1), (HO+1)*(HO+1), stage2, NP * FE / 16, n_in_stall, n_clamped, NP * FE);
    checks++;
    if (stage1 > (H+1)*(H+1) + (HO+1)*(HO+1) + 2*(H+1) + 20) begin failures++; $display("stage 1 too slow"); end
    checks++;
    if (stage2 > NP * FE / 16 + 20) begin failures++; $display("stage 2 too slow"); end
    checks++;
    if (n_clamped > NP * FE / 2) begin failures++; $display("model mostly clamped, test too weak"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
