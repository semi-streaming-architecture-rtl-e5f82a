// tb_add_engine: a pass-through that fills the residual FIFO, two rounds of
// normalised addition (with and without storing the sum), and a plain pass,
// all with random stalls, against the reference residual-add formula.
module tb_add_engine;
  import ss_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  beat_t in_data, out_data;
  add_cfg_t cfg;
  logic [13:0] fifo_count;
  int checks = 0, failures = 0, adds = 0;
  int stored [$], nstore [$], q [$];

  add_engine dut (.*);
  always #5 clk = ~clk;

  task automatic run(bit add_en, bit store_en, int n, int pin, int pout);
    int x [16];
    cfg.add_en = add_en; cfg.store_en = store_en;
    q.delete(); nstore.delete();
    fork
      begin
        for (int i = 0; i < n; i++) begin
          in_valid = 0;
          while ($urandom_range(0, 99) >= pin) @(negedge clk);
          in_valid = 1;
          for (int l = 0; l < 16; l++) begin
            int e;
            x[l] = $urandom_range(0, 255);
            in_data[8*l +: 8] = 8'(x[l]);
            e = add_en ? ref_add(x[l], stored.pop_front(), int'(cfg.a1z), int'(cfg.a2z),
                                 longint'(cfg.mult1), int'(cfg.shift1), longint'(cfg.mult2),
                                 int'(cfg.shift2), longint'(cfg.mult3), int'(cfg.shift3),
                                 int'(cfg.oz), int'(cfg.act_min), int'(cfg.act_max))
                       : x[l];
            q.push_back(e);
            if (store_en) nstore.push_back(e);
          end
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        int got = 0;
        while (got < n) begin
          out_ready = ($urandom_range(0, 99) < pout);
          @(posedge clk);
          if (out_valid && out_ready) begin
            got++;
            if (add_en) adds++;
            for (int l = 0; l < 16; l++) begin
              checks++;
              if (q.size() == 0 || int'(out_data[8*l +: 8]) != q.pop_front()) failures++;
            end
          end
          @(negedge clk);
        end
        out_ready = 0;
      end
    join
    if (store_en) stored = nstore;
    checks++;
    if (int'(fifo_count) != stored.size() / 16) begin
      failures++; $display("fifo count %0d expected %0d", fifo_count, stored.size() / 16);
    end
  endtask

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    cfg = '0;
    cfg.a1z = 8'd120; cfg.a2z = 8'd130;
    cfg.mult1 = 32'hB000_0000; cfg.shift1 = 8'd32;
    cfg.mult2 = 32'hC800_0000; cfg.shift2 = 8'd32;
    cfg.mult3 = 32'hE000_0000; cfg.shift3 = 8'd52;
    cfg.oz = 8'd125; cfg.act_min = 8'd0; cfg.act_max = 8'd255;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    run(0, 1, 40, 70, 60);    // pass-through, store the block output
    run(1, 1, 40, 80, 50);    // add the shortcut, store the sum
    run(1, 0, 40, 60, 80);    // add, nothing stored
    run(0, 0, 20, 90, 90);    // plain pass-through
    checks++;
    if (adds != 80) failures++;
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
