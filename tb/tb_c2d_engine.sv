// tb_c2d_engine: entry-layer convolution of random frames (stride 2 and 1)
// against a direct 3x3x3x32 convolution model, with independent stalls on the
// two output streams, plus the one-pixel-per-clock rate.
module tb_c2d_engine;
  import ss_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, in_valid, in_ready;
  logic out_a_valid, out_a_ready, out_b_valid, out_b_ready;
  logic [23:0] in_data;
  beat_t out_a_data, out_b_data;
  c2d_cfg_t cfg;
  pwr_t pwr;
  int checks = 0, failures = 0;
  int img [12][12][3];
  int wt [32][27];
  int bs [32];
  int qa [$], qb [$];

  c2d_engine dut (.*);
  always #5 clk = ~clk;

  task automatic load_params();
    for (int f = 0; f < 32; f++) begin
      @(negedge clk);
      pwr = '0; pwr.en = 1; pwr.mem = 5'(f);
      for (int k = 0; k < 27; k++) begin
        wt[f][k] = $urandom_range(112, 144);
        pwr.data[8*k +: 8] = 8'(wt[f][k]);
      end
      bs[f] = $urandom_range(0, 4000) - 2000;
      pwr.data[216 +: 16] = 16'(bs[f]);
    end
    @(negedge clk); pwr.en = 0;
  endtask

  task automatic run(int R, int C, bit s2, int pin, int pa, int pb, output int cycles);
    int t0, nexp;
    cfg.rows = 9'(R); cfg.cols = 9'(C); cfg.stride2 = s2;
    cfg.az = 8'($urandom_range(0, 255)); cfg.wz = 8'd128;
    cfg.rq.mult = 32'h9000_0000 + ($urandom & 32'h0fff_ffff); cfg.rq.shift = 8'd36;
    cfg.rq.oz = 8'($urandom); cfg.rq.act_min = 8'd0; cfg.rq.act_max = 8'd255;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int ch = 0; ch < 3; ch++)
      img[r][c][ch] = $urandom_range(0, 255);
    qa.delete(); qb.delete();
    for (int cr = 0; cr < R; cr++) for (int cc = 0; cc < C; cc++)
      if (!s2 || (cr % 2 == 1 && cc % 2 == 1))
        for (int f = 0; f < 32; f++) begin
          longint acc = bs[f];
          for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) for (int ch = 0; ch < 3; ch++) begin
            int y = cr - 1 + i, x = cc - 1 + j;
            int a = (y < 0 || x < 0 || y >= R || x >= C) ? int'(cfg.az) : img[y][x][ch];
            acc += longint'(a - int'(cfg.az)) * (wt[f][3*(3*i+j)+ch] - int'(cfg.wz));
          end
          if (f < 16) qa.push_back(ref_rq(acc, longint'(cfg.rq.mult), 36, int'(cfg.rq.oz), 0, 255));
          else        qb.push_back(ref_rq(acc, longint'(cfg.rq.mult), 36, int'(cfg.rq.oz), 0, 255));
        end
    nexp = qa.size();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    fork
      begin
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
          in_valid = 0;
          while ($urandom_range(0, 99) >= pin) @(negedge clk);
          in_valid = 1; in_data = {8'(img[r][c][2]), 8'(img[r][c][1]), 8'(img[r][c][0])};
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        while (busy || qa.size() == nexp) begin
          out_a_ready = ($urandom_range(0, 99) < pa);
          out_b_ready = ($urandom_range(0, 99) < pb);
          @(posedge clk);
          if (out_a_valid && out_a_ready)
            for (int l = 0; l < 16; l++) begin
              checks++;
              if (qa.size() == 0 || int'(out_a_data[8*l +: 8]) != qa.pop_front()) failures++;
            end
          if (out_b_valid && out_b_ready)
            for (int l = 0; l < 16; l++) begin
              checks++;
              if (qb.size() == 0 || int'(out_b_data[8*l +: 8]) != qb.pop_front()) failures++;
            end
          @(negedge clk);
        end
      end
    join
    cycles = ($time - t0) / 10;
    checks++;
    if (qa.size() != 0 || qb.size() != 0) begin
      failures++; $display("missing outputs %0d %0d", qa.size(), qb.size());
    end
  endtask

  int cyc;
  initial begin
    start = 0; in_valid = 0; in_data = 0; out_a_ready = 0; out_b_ready = 0; pwr = '0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    load_params();
    run(6, 6, 1, 70, 60, 80, cyc);
    run(5, 4, 0, 80, 90, 40, cyc);
    run(12, 12, 1, 100, 100, 100, cyc);
    checks++;   // pixel rate: 13x13 scan positions plus pipeline
    if (cyc > 13 * 13 + 4) begin failures++; $display("rate: %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
