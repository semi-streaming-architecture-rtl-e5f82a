// tb_act_buffer: pixel-major to pass-major and pass-major to pixel-major
// (with repetition) reordering, with random stalls, against address
// arithmetic done on the stored tensor; checks one beat per clock.
module tb_act_buffer;
  import ss_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_start, wr_busy, in_valid, in_ready, rd_start, rd_busy, out_valid, out_ready;
  buf_cfg_t wcfg, rcfg;
  beat_t in_data, out_data;
  int checks = 0, failures = 0;
  beat_t t [64][8];    // tensor [pixel][batch]
  beat_t q [$];

  act_buffer #(.DEPTH(512)) dut (.*);
  always #5 clk = ~clk;

  task automatic run(int P, int B, bit wpm, bit rpm, int rep, int pin, int pout, output int rcyc);
    int t0;
    for (int p = 0; p < P; p++) for (int b = 0; b < B; b++)
      t[p][b] = {$urandom, $urandom, $urandom, $urandom};
    wcfg = '0; wcfg.npix = 17'(P); wcfg.nb = 7'(B); wcfg.pix_major = wpm;
    rcfg = '0; rcfg.npix = 17'(P); rcfg.nb = 7'(B); rcfg.pix_major = rpm; rcfg.rep = 7'(rep);
    @(negedge clk); wr_start = 1; @(negedge clk); wr_start = 0;
    for (int i = 0; i < P * B; i++) begin
      int p = wpm ? i / B : i % P;
      int b = wpm ? i % B : i / P;
      in_valid = 0;
      while ($urandom_range(0, 99) >= pin) @(negedge clk);
      in_valid = 1; in_data = t[p][b];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (wr_busy) failures++;
    q.delete();
    if (rpm) begin
      for (int p = 0; p < P; p++) for (int r = 0; r < rep; r++) for (int b = 0; b < B; b++) q.push_back(t[p][b]);
    end else begin
      for (int b = 0; b < B; b++) for (int p = 0; p < P; p++) q.push_back(t[p][b]);
    end
    @(negedge clk); rd_start = 1; @(negedge clk); rd_start = 0;
    t0 = $time;
    while (rd_busy) begin
      out_ready = ($urandom_range(0, 99) < pout);
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q.pop_front()) failures++;
      end
      @(negedge clk);
    end
    rcyc = ($time - t0) / 10;
    checks++;
    if (q.size() != 0) begin failures++; $display("missing %0d", q.size()); end
  endtask

  int cyc;
  initial begin
    wr_start = 0; rd_start = 0; in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(20, 3, 1, 0, 1, 70, 60, cyc);   // EXP -> DWC direction
    run(17, 4, 0, 1, 3, 60, 70, cyc);   // DWC -> PRO direction, 3 filter batches
    run(30, 2, 1, 1, 1, 100, 50, cyc);
    run(25, 3, 0, 1, 2, 100, 100, cyc);
    checks++;
    if (cyc > 25 * 3 * 2 + 2) begin failures++; $display("rate %0d", cyc); end
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
