// tb_dwc_engine: depthwise convolution over two 16-channel passes (stride 1
// and 2, random stalls) and whole-frame average pooling, against a direct
// per-channel model; also checks the pixel rate.
module tb_dwc_engine;
  import ss_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, in_valid, in_ready, out_valid, out_ready;
  logic [6:0] pass;
  beat_t in_data, out_data;
  dwc_cfg_t cfg;
  pwr_t pwr;
  int checks = 0, failures = 0;
  int img [3][10][10][16];
  int wt [3][9][16];
  int bs [3][16];
  int q [$];

  dwc_engine dut (.*);
  always #5 clk = ~clk;

  task automatic load_params(int np);
    for (int p = 0; p < np; p++) begin
      for (int k = 0; k < 9; k++) begin
        @(negedge clk);
        pwr = '0; pwr.en = 1; pwr.mem = 5'(k); pwr.addr = 12'(p);
        for (int l = 0; l < 16; l++) begin
          wt[p][k][l] = $urandom_range(100, 156);
          pwr.data[8*l +: 8] = 8'(wt[p][k][l]);
        end
      end
      @(negedge clk);
      pwr = '0; pwr.en = 1; pwr.mem = 5'd9; pwr.addr = 12'(p);
      for (int l = 0; l < 16; l++) begin
        bs[p][l] = $urandom_range(0, 2000) - 1000;
        pwr.data[16*l +: 16] = 16'(bs[p][l]);
      end
    end
    @(negedge clk); pwr.en = 0;
  endtask

  task automatic run(int R, int C, bit s2, bit pool, int np, int pin, int pout, output int cycles);
    int t0;
    cfg.rows = 9'(R); cfg.cols = 9'(C); cfg.stride2 = s2; cfg.pool = pool; cfg.npass = 7'(np);
    cfg.az = 8'($urandom_range(0, 255)); cfg.wz = 8'd128;
    if (pool) begin cfg.rq.mult = 32'hA72F_0539; cfg.rq.shift = 8'd37; end
    else begin cfg.rq.mult = 32'h9000_0000 + ($urandom & 32'h0fff_ffff); cfg.rq.shift = 8'd35; end
    cfg.rq.oz = 8'($urandom); cfg.rq.act_min = 8'd0; cfg.rq.act_max = 8'd255;
    q.delete();
    for (int p = 0; p < np; p++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) for (int l = 0; l < 16; l++)
        img[p][r][c][l] = $urandom_range(0, 255);
      if (pool) begin
        for (int l = 0; l < 16; l++) begin
          longint acc = bs[p][l];
          for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) acc += img[p][r][c][l] - int'(cfg.az);
          q.push_back(ref_rq(acc, longint'(cfg.rq.mult), int'(cfg.rq.shift), int'(cfg.rq.oz), 0, 255));
        end
      end else begin
        for (int cr = 0; cr < R; cr++) for (int cc = 0; cc < C; cc++)
          if (!s2 || (cr % 2 == 1 && cc % 2 == 1))
            for (int l = 0; l < 16; l++) begin
              longint acc = bs[p][l];
              for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
                int y = cr - 1 + i, x = cc - 1 + j;
                int a = (y < 0 || x < 0 || y >= R || x >= C) ? int'(cfg.az) : img[p][y][x][l];
                acc += longint'(a - int'(cfg.az)) * (wt[p][3*i+j][l] - int'(cfg.wz));
              end
              q.push_back(ref_rq(acc, longint'(cfg.rq.mult), int'(cfg.rq.shift), int'(cfg.rq.oz), 0, 255));
            end
      end
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    fork
      begin
        for (int p = 0; p < np; p++)
          for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
            in_valid = 0;
            while ($urandom_range(0, 99) >= pin) @(negedge clk);
            in_valid = 1;
            for (int l = 0; l < 16; l++) in_data[8*l +: 8] = 8'(img[p][r][c][l]);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            checks++;
            if (int'(pass) != p) failures++;
            @(negedge clk);
          end
        in_valid = 0;
      end
      begin
        @(negedge clk);
        while (busy) begin
          out_ready = ($urandom_range(0, 99) < pout);
          @(posedge clk);
          if (out_valid && out_ready)
            for (int l = 0; l < 16; l++) begin
              checks++;
              if (q.size() == 0 || int'(out_data[8*l +: 8]) != q.pop_front()) failures++;
            end
          @(negedge clk);
        end
      end
    join
    cycles = ($time - t0) / 10;
    checks++;
    if (q.size() != 0) begin failures++; $display("missing outputs %0d", q.size()); end
  endtask

  int cyc;
  initial begin
    start = 0; in_valid = 0; in_data = 0; out_ready = 0; pwr = '0; cfg = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    load_params(3);
    run(5, 6, 0, 0, 2, 70, 60, cyc);
    run(6, 6, 1, 0, 3, 80, 50, cyc);
    run(7, 7, 0, 1, 3, 60, 70, cyc);
    run(10, 10, 0, 0, 2, 100, 100, cyc);
    checks++;   // two passes of 11x11 scan positions, about one per clock
    if (cyc > 2 * (11 * 11 + 3) + 4) begin failures++; $display("rate: %0d cycles", cyc); end
    run(7, 7, 0, 1, 1, 100, 100, cyc);
    checks++;   // pooling consumes one pixel per clock
    if (cyc > 49 + 3) begin failures++; $display("pool rate: %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
