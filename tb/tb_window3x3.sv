// tb_window3x3: windows of random frames (stride 1 and 2, with random stalls on
// both sides) against windows cut directly from the stored frame, plus the
// scan-rate cycle count without stalls.
module tb_window3x3;
  localparam int MAXC = 16;
  logic clk = 0, rst_n = 0;
  logic start, stride2, busy, in_valid, in_ready, out_valid, out_ready;
  logic [8:0] rows, cols;
  logic [7:0] pad, in_data;
  logic [8:0][7:0] out_win;
  int checks = 0, failures = 0;
  int img [16][16];
  int exp_q [$];      // expected windows flattened, 9 entries each
  int nout;

  window3x3 #(.CH_W(8), .MAX_COLS(MAXC)) dut (.*);
  always #5 clk = ~clk;

  task automatic run(int R, int C, bit s2, int pin, int pout, output int cycles);
    int r, c, cr, cc, t0;
    rows = 9'(R); cols = 9'(C); stride2 = s2; pad = 8'($urandom);
    for (r = 0; r < R; r++) for (c = 0; c < C; c++) img[r][c] = $urandom_range(0, 255);
    exp_q.delete();
    for (cr = 0; cr < R; cr++) for (cc = 0; cc < C; cc++)
      if (!s2 || (cr % 2 == 1 && cc % 2 == 1))
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
          int y = cr - 1 + i, x = cc - 1 + j;
          exp_q.push_back((y < 0 || x < 0 || y >= R || x >= C) ? int'(pad) : img[y][x]);
        end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    fork
      begin : drive
        for (r = 0; r < R; r++) for (c = 0; c < C; c++) begin
          in_valid = 0;
          while ($urandom_range(0, 99) >= pin) @(negedge clk);
          in_valid = 1; in_data = 8'(img[r][c]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin : sink
        nout = 0;
        while (busy || nout == 0) begin
          out_ready = ($urandom_range(0, 99) < pout);
          @(posedge clk);
          if (out_valid && out_ready) begin
            for (int k = 0; k < 9; k++) begin
              checks++;
              if (exp_q.size() == 0 || int'(out_win[k]) != exp_q.pop_front()) failures++;
            end
            nout++;
          end
          @(negedge clk);
        end
      end
    join
    cycles = ($time - t0) / 10;
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing windows: %0d", exp_q.size() / 9); end
  endtask

  int cyc;
  initial begin
    start = 0; in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(5, 7, 0, 70, 70, cyc);
    run(6, 6, 1, 60, 50, cyc);
    run(3, 16, 0, 100, 30, cyc);
    run(8, 10, 1, 100, 100, cyc);
    // without stalls: one scan position per clock, (rows+1)*(cols+1) positions
    run(8, 12, 0, 100, 100, cyc);
    checks++;
    if (cyc > 9 * 13 + 4) begin failures++; $display("too slow: %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
