// tb_semi_streaming_top: end-to-end run of the engine loop on a small image.
//
// An 8x8x3 image goes through the entry convolution (stride 2, 32 filters),
// the depthwise engine (pass 0 straight from C2D stream A, pass 1 from
// buffer A, which C2D stream B filled), projection 32->16, a pass-through ADD
// that stores its output, expansion 16->32 into buffer A; then a second
// round (DWC from buffer A, projection, residual addition with the stored
// shortcut, expansion), a pooling pass of the depthwise engine sent to the
// output, and finally a projection whose residual sum goes straight to the
// output. Weights are reloaded before each stage, as the host does between
// rounds. Every result leaving the chip is compared with a layer-by-layer
// integer model; the run counts how often each routing and each mechanism
// (stream split, direct C2D->DWC, reorder, stall, store, add, pool, output
// switch) occurred and fails if one never did.
module tb_semi_streaming_top;
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

  int checks = 0, failures = 0;
  localparam int H = 8, HO = 4, NP = HO * HO;

  // ---------------- reference tensors, flat [pixel*ch + c] ----------------
  int img [H*H*3];
  int c2d_w [32][27];  int c2d_b [32];
  int dw_w [2][9][16]; int dw_b [2][16];
  int pro_w [16][32];  int pro_b [16];
  int exp_w [32][16];  int exp_b [32];
  int t_c2d [NP*32], t_dwc [NP*32], t_pro [NP*16], t_add [NP*16], t_exp [NP*32];
  int t_res [NP*16];   // residual held in the FIFO

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

  task automatic load_dwc();
    logic [PWR_W-1:0] d;
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
  endtask

  task automatic load_pro();
    logic [PWR_W-1:0] d;
    for (int f = 0; f < 16; f++) begin
      pro_b[f] = $urandom_range(0, 20000) - 10000;
      for (int ch = 0; ch < 32; ch++) pro_w[f][ch] = $urandom_range(110, 146);
    end
    for (int ap = 0; ap < 2; ap++)
      for (int fl = 0; fl < 16; fl++) begin
        d = '0;
        for (int l = 0; l < 16; l++) d[8*l +: 8] = 8'(pro_w[fl][ap*16+l]);
        wr(ENG_PRO, fl, ap, d);        // fpass 0: address 0*APASS + ap
      end
    d = '0;
    for (int fl = 0; fl < 16; fl++) d[18*fl +: 18] = 18'(pro_b[fl]);
    wr(ENG_PRO, 16, 0, d);
  endtask

  task automatic load_exp();
    logic [PWR_W-1:0] d;
    for (int f = 0; f < 32; f++) begin
      exp_b[f] = $urandom_range(0, 10000) - 5000;
      for (int ch = 0; ch < 16; ch++) exp_w[f][ch] = $urandom_range(110, 146);
    end
    for (int fp = 0; fp < 2; fp++)
      for (int l = 0; l < 16; l++) begin
        d = '0;
        for (int fl = 0; fl < 16; fl++) d[8*fl +: 8] = 8'(exp_w[fp*16+fl][l]);
        wr(ENG_EXP, l, fp, d);         // apass 0: address 0*FPASS + fp
      end
    for (int fp = 0; fp < 2; fp++) begin
      d = '0;
      for (int fl = 0; fl < 16; fl++) d[16*fl +: 16] = 16'(exp_b[fp*16+fl]);
      wr(ENG_EXP, 16, fp, d);
    end
  endtask

  // ---------------- reference layers ----------------
  function automatic void ref_c2d();
    for (int orow = 0; orow < HO; orow++) for (int ocol = 0; ocol < HO; ocol++)
      for (int f = 0; f < 32; f++) begin
        longint acc = c2d_b[f];
        int cr = 2 * orow + 1, cc = 2 * ocol + 1;
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) for (int ch = 0; ch < 3; ch++) begin
          int y = cr - 1 + i, x = cc - 1 + j;
          int a = (y >= H || x >= H) ? int'(c2d_cfg.az) : img[(y*H+x)*3+ch];
          acc += longint'(a - int'(c2d_cfg.az)) * (c2d_w[f][3*(3*i+j)+ch] - int'(c2d_cfg.wz));
        end
        t_c2d[(orow*HO+ocol)*32+f] = rq(acc, c2d_cfg.rq);
      end
  endfunction

  function automatic void ref_dwc(const ref int src [NP*32]);
    for (int r = 0; r < HO; r++) for (int c = 0; c < HO; c++) for (int ch = 0; ch < 32; ch++) begin
      longint acc = dw_b[ch/16][ch%16];
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        int y = r - 1 + i, x = c - 1 + j;
        int a = (y < 0 || x < 0 || y >= HO || x >= HO) ? int'(dwc_cfg.az) : src[(y*HO+x)*32+ch];
        acc += longint'(a - int'(dwc_cfg.az)) * (dw_w[ch/16][3*i+j][ch%16] - int'(dwc_cfg.wz));
      end
      t_dwc[(r*HO+c)*32+ch] = rq(acc, dwc_cfg.rq);
    end
  endfunction

  function automatic void ref_pro();
    for (int p = 0; p < NP; p++) for (int f = 0; f < 16; f++) begin
      longint acc = pro_b[f];
      for (int ch = 0; ch < 32; ch++) acc += longint'(t_dwc[p*32+ch] - int'(pro_cfg.az)) * (pro_w[f][ch] - int'(pro_cfg.wz));
      t_pro[p*16+f] = rq(acc, pro_cfg.rq);
    end
  endfunction

  function automatic void ref_add_layer();
    for (int i = 0; i < NP * 16; i++)
      t_add[i] = !add_cfg.add_en ? t_pro[i] :
        tb_ref_pkg::ref_add(t_pro[i], t_res[i], int'(add_cfg.a1z), int'(add_cfg.a2z),
                longint'(add_cfg.mult1), int'(add_cfg.shift1), longint'(add_cfg.mult2), int'(add_cfg.shift2),
                longint'(add_cfg.mult3), int'(add_cfg.shift3), int'(add_cfg.oz),
                int'(add_cfg.act_min), int'(add_cfg.act_max));
    if (add_cfg.store_en) t_res = t_add;
  endfunction

  function automatic void ref_exp();
    for (int p = 0; p < NP; p++) for (int f = 0; f < 32; f++) begin
      longint acc = exp_b[f];
      for (int ch = 0; ch < 16; ch++) acc += longint'(t_add[p*16+ch] - int'(exp_cfg.az)) * (exp_w[f][ch] - int'(exp_cfg.wz));
      t_exp[p*32+f] = rq(acc, exp_cfg.rq);
    end
  endfunction

  // ---------------- mechanism counters ----------------
  int n_c2d_a, n_c2d_b, n_bufa_rd_dwc, n_store, n_add, n_pass, n_stall, n_pool_out,
      n_add_out, n_exp_out, n_pro_rep;
  always @(posedge clk) if (rst_n) begin
    if (dut.ca_v && dut.ca_r) n_c2d_a++;
    if (dut.cb_v && dut.cb_r) n_c2d_b++;
    if (dut.ar_v && dut.ar_r) n_bufa_rd_dwc++;
    if (dut.u_add.f_push) n_store++;
    if (dut.u_add.f_out_ready) n_add++;
    if (dut.u_add.fire && !add_cfg.add_en) n_pass++;
    if ((dut.br_v && !dut.br_r) || (dut.ao_v && !dut.ao_r) || (dut.di_v && !dut.di_r)) n_stall++;
    if (route.dwc_to_out && out_valid && out_ready) n_pool_out++;
    if (route.add_to_out && out_valid && out_ready) n_add_out++;
    if (dut.eo_v && dut.eo_r) n_exp_out++;
    if (dut.br_v && dut.br_r) n_pro_rep++;
  end

  // ---------------- output checker ----------------
  int oq [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int l = 0; l < 16; l++) begin
      int e;
      checks++;
      e = (oq.size() == 0) ? -1 : oq.pop_front();
      if (int'(out_data[8*l +: 8]) != e) begin
        failures++;
        if (failures < 6) $display("output mismatch lane %0d got %0d expected %0d", l, out_data[8*l +: 8], e);
      end
    end
  end
  initial forever begin
    @(negedge clk);
    out_ready = ($urandom_range(0, 99) < 70);
  end

  task automatic pulse(starts_t s);
    @(negedge clk); start = s; @(negedge clk); start = '0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy != '0) @(negedge clk);
  endtask

  function automatic buf_cfg_t bc(int npix, int nb, bit pm, int rep);
    buf_cfg_t b;
    b.npix = 17'(npix); b.nb = 7'(nb); b.pix_major = pm; b.rep = 7'(rep);
    return b;
  endfunction

  // compare buffer contents with a reference tensor [pixel][32]
  task automatic check_buf_a(const ref int t [NP*32]);
    for (int b = 0; b < 2; b++) for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) begin
      checks++;
      if (int'(dut.u_bufa.mem[b*NP+p][8*l +: 8]) != t[p*32+b*16+l]) failures++;
    end
  endtask

  int stage_cycles;
  initial begin
    starts_t s;
    logic [PWR_W-1:0] d;
    pwr = '0; pwr_eng = ENG_C2D; start = '0; route = '0; in_valid = 0; in_data = 0;
    c2d_cfg = '0; dwc_cfg = '0; pro_cfg = '0; exp_cfg = '0; add_cfg = '0;
    bufa_wcfg = '0; bufa_rcfg = '0; bufb_wcfg = '0; bufb_rcfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---------- parameters of round 0 ----------
    for (int f = 0; f < 32; f++) begin
      d = '0;
      for (int k = 0; k < 27; k++) begin c2d_w[f][k] = $urandom_range(112, 144); d[8*k +: 8] = 8'(c2d_w[f][k]); end
      c2d_b[f] = $urandom_range(0, 4000) - 2000; d[216 +: 16] = 16'(c2d_b[f]);
      wr(ENG_C2D, f, 0, d);
    end
    load_dwc(); load_pro(); load_exp();
    for (int i = 0; i < H * H * 3; i++) img[i] = $urandom_range(0, 255);

    // ---------- round 0, stage 1: C2D -> DWC (pass 0 direct, pass 1 via buffer A) ----------
    c2d_cfg.rows = H; c2d_cfg.cols = H; c2d_cfg.stride2 = 1; c2d_cfg.az = 8'd90; c2d_cfg.wz = 8'd128;
    c2d_cfg.rq = mk_rq(36);
    dwc_cfg.rows = HO; dwc_cfg.cols = HO; dwc_cfg.stride2 = 0; dwc_cfg.pool = 0; dwc_cfg.npass = 2;
    dwc_cfg.az = 8'd110; dwc_cfg.wz = 8'd128; dwc_cfg.rq = mk_rq(35);
    route = '{dwc_from_c2d: 1, bufa_from_c2d: 1, dwc_to_out: 0, add_to_out: 0};
    bufa_wcfg = bc(NP, 1, 1, 1); bufa_rcfg = bc(NP, 1, 0, 1);
    bufb_wcfg = bc(NP, 2, 0, 1);
    s = '0; s.c2d = 1; s.dwc = 1; s.bufa_wr = 1; s.bufb_wr = 1;
    pulse(s);
    for (int i = 0; i < H * H; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = {8'(img[i*3+2]), 8'(img[i*3+1]), 8'(img[i*3])};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    while (busy.c2d || busy.bufa_wr) @(negedge clk);
    s = '0; s.bufa_rd = 1; pulse(s);
    wait_idle();
    ref_c2d(); ref_dwc(t_c2d);
    // buffer B must hold the DWC output, pass-major
    for (int b = 0; b < 2; b++) for (int p = 0; p < NP; p++) for (int l = 0; l < 16; l++) begin
      checks++;
      if (int'(dut.u_bufb.mem[b*NP+p][8*l +: 8]) != t_dwc[p*32+b*16+l]) failures++;
    end

    // ---------- round 0, stage 2: PRO -> ADD (pass, store) -> EXP -> buffer A ----------
    route = '{dwc_from_c2d: 0, bufa_from_c2d: 0, dwc_to_out: 0, add_to_out: 0};
    pro_cfg.npix = NP; pro_cfg.apass = 2; pro_cfg.fpass = 1; pro_cfg.az = 8'd100; pro_cfg.wz = 8'd128;
    pro_cfg.rq = mk_rq(37);
    exp_cfg.npix = NP; exp_cfg.apass = 1; exp_cfg.fpass = 2; exp_cfg.az = 8'd120; exp_cfg.wz = 8'd128;
    exp_cfg.rq = mk_rq(36);
    add_cfg = '0; add_cfg.add_en = 0; add_cfg.store_en = 1;
    add_cfg.a1z = 8'd120; add_cfg.a2z = 8'd125; add_cfg.mult1 = 32'hB000_0000; add_cfg.shift1 = 8'd32;
    add_cfg.mult2 = 32'hC000_0000; add_cfg.shift2 = 8'd32; add_cfg.mult3 = 32'hE000_0000; add_cfg.shift3 = 8'd52;
    add_cfg.oz = 8'd128; add_cfg.act_min = 8'd0; add_cfg.act_max = 8'd255;
    bufb_rcfg = bc(NP, 2, 1, 1); bufa_wcfg = bc(NP, 2, 1, 1);
    s = '0; s.bufb_rd = 1; s.pro = 1; s.exp_e = 1; s.bufa_wr = 1;
    pulse(s);
    stage_cycles = 0;
    @(negedge clk);
    while (busy != '0) begin @(negedge clk); stage_cycles++; end
    ref_pro(); ref_add_layer(); ref_exp();
    check_buf_a(t_exp);
    checks++;
    if (fifo_count != 14'(NP)) begin failures++; $display("fifo count %0d", fifo_count); end

    // ---------- round 1, stage 1: buffer A -> DWC -> buffer B ----------
    load_dwc();
    dwc_cfg.rq = mk_rq(35);
    bufa_rcfg = bc(NP, 2, 0, 1); bufb_wcfg = bc(NP, 2, 0, 1);
    s = '0; s.dwc = 1; s.bufa_rd = 1; s.bufb_wr = 1;
    pulse(s);
    wait_idle();
    ref_dwc(t_exp);

    // ---------- round 1, stage 2: PRO -> ADD (residual add, store) -> EXP ----------
    load_pro(); load_exp();
    pro_cfg.rq = mk_rq(37);
    add_cfg.add_en = 1; add_cfg.store_en = 1;
    s = '0; s.bufb_rd = 1; s.pro = 1; s.exp_e = 1; s.bufa_wr = 1;
    pulse(s);
    wait_idle();
    ref_pro(); ref_add_layer(); ref_exp();
    check_buf_a(t_exp);

    // ---------- pooling: buffer A -> DWC (pool) -> output ----------
    dwc_cfg.pool = 1; dwc_cfg.rq.mult = 32'h8000_0000; dwc_cfg.rq.shift = 8'd35;   // 1/16 for 4x4
    dwc_cfg.rq.oz = 8'd120;
    route = '{dwc_from_c2d: 0, bufa_from_c2d: 0, dwc_to_out: 1, add_to_out: 0};
    for (int ch = 0; ch < 32; ch++) begin
      longint acc;
      acc = dw_b[ch/16][ch%16];
      for (int p = 0; p < NP; p++) acc += t_exp[p*32+ch] - int'(dwc_cfg.az);
      oq.push_back(rq(acc, dwc_cfg.rq));
    end
    s = '0; s.dwc = 1; s.bufa_rd = 1;
    pulse(s);
    wait_idle();
    while (oq.size() != 0) @(negedge clk);

    // ---------- output of a residual sum: buffer B -> PRO -> ADD -> output ----------
    route = '{dwc_from_c2d: 0, bufa_from_c2d: 0, dwc_to_out: 0, add_to_out: 1};
    add_cfg.store_en = 0;
    ref_pro(); ref_add_layer();
    foreach (t_add[i]) oq.push_back(t_add[i]);
    s = '0; s.bufb_rd = 1; s.pro = 1;
    pulse(s);
    wait_idle();
    repeat (5) @(negedge clk);
    checks++;
    if (oq.size() != 0) begin failures++; $display("outputs missing: %0d", oq.size()); end
    checks++;
    if (fifo_count != 0) begin failures++; $display("fifo not drained: %0d", fifo_count); end

    // ---------- every mechanism must have happened ----------
    $display("mechanisms: c2dA=%0d c2dB=%0d bufA->dwc=%0d store=%0d add=%0d pass=%0d stall=%0d pool_out=%0d add_out=%0d exp_out=%0d pro_in=%0d stage2_cycles=%0d",
             n_c2d_a, n_c2d_b, n_bufa_rd_dwc, n_store, n_add, n_pass, n_stall, n_pool_out, n_add_out, n_exp_out, n_pro_rep, stage_cycles);
    checks += 10;
    if (n_c2d_a != NP) failures++;
    if (n_c2d_b != NP) failures++;
    if (n_bufa_rd_dwc == 0) failures++;
    if (n_store != 2 * NP) failures++;
    if (n_add != 2 * NP) failures++;
    if (n_pass == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_pool_out != 2) failures++;
    if (n_add_out != NP) failures++;
    if (n_exp_out != 4 * NP) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
