// tb_pro_engine: projection convolution with random weights, channel and
// filter batch counts, against a direct matrix-vector model; the input stream
// repeats each pixel's channel batches once per filter batch. Checks the
// initiation interval of one beat per clock.
module tb_pro_engine;
  import ss_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, in_valid, in_ready, out_valid, out_ready;
  beat_t in_data, out_data;
  pw_cfg_t cfg;
  pwr_t pwr;
  int checks = 0, failures = 0;
  int act [8][64];
  int wt [64][64];
  int bs [64];
  int q [$];

  pro_engine dut (.*);
  always #5 clk = ~clk;

  task automatic run(int P, int A, int F, int pin, int pout, output int cycles);
    int t0;
    cfg.npix = 17'(P); cfg.apass = 7'(A); cfg.fpass = 7'(F);
    cfg.az = 8'($urandom); cfg.wz = 8'd128;
    cfg.rq.mult = 32'h9000_0000 + ($urandom & 32'h0fff_ffff); cfg.rq.shift = 8'(36 + A / 2);
    cfg.rq.oz = 8'($urandom); cfg.rq.act_min = 8'd0; cfg.rq.act_max = 8'd255;
    for (int f = 0; f < 16 * F; f++) begin
      bs[f] = $urandom_range(0, 100000) - 50000;
      for (int ch = 0; ch < 16 * A; ch++) wt[f][ch] = $urandom_range(110, 146);
    end
    // weights: memory fl, address fp*A + ap, lane l = W[fp*16+fl][ap*16+l]
    for (int fp = 0; fp < F; fp++) begin
      for (int ap = 0; ap < A; ap++)
        for (int fl = 0; fl < 16; fl++) begin
          @(negedge clk);
          pwr = '0; pwr.en = 1; pwr.mem = 5'(fl); pwr.addr = 12'(fp * A + ap);
          for (int l = 0; l < 16; l++) pwr.data[8*l +: 8] = 8'(wt[fp*16+fl][ap*16+l]);
        end
      @(negedge clk);
      pwr = '0; pwr.en = 1; pwr.mem = 5'd16; pwr.addr = 12'(fp);
      for (int fl = 0; fl < 16; fl++) pwr.data[18*fl +: 18] = 18'(bs[fp*16+fl]);
    end
    @(negedge clk); pwr.en = 0;
    q.delete();
    for (int p = 0; p < P; p++) begin
      for (int ch = 0; ch < 16 * A; ch++) act[p][ch] = $urandom_range(0, 255);
      for (int f = 0; f < 16 * F; f++) begin
        longint acc = bs[f];
        for (int ch = 0; ch < 16 * A; ch++)
          acc += longint'(act[p][ch] - int'(cfg.az)) * (wt[f][ch] - 128);
        q.push_back(ref_rq(acc, longint'(cfg.rq.mult), int'(cfg.rq.shift), int'(cfg.rq.oz), 0, 255));
      end
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    fork
      begin
        for (int p = 0; p < P; p++) for (int fp = 0; fp < F; fp++) for (int ap = 0; ap < A; ap++) begin
          in_valid = 0;
          while ($urandom_range(0, 99) >= pin) @(negedge clk);
          in_valid = 1;
          for (int l = 0; l < 16; l++) in_data[8*l +: 8] = 8'(act[p][ap*16+l]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
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
    run(5, 3, 2, 70, 60, cyc);
    run(4, 1, 4, 80, 40, cyc);
    run(8, 4, 3, 100, 100, cyc);
    checks++;   // II = 1: P*F*A beats in as many clocks
    if (cyc > 8 * 4 * 3 + 3) begin failures++; $display("rate: %0d cycles", cyc); end
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
