// tb_stream_fifo: random push/pop traffic against a queue model, including full and empty.
module tb_stream_fifo;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0, fulls = 0, cyc = 0;
  logic push, pop;
  logic [31:0] q [$];

  stream_fifo #(.W(32), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // phases: mostly fill, then mostly drain
      in_valid  = ($urandom_range(0, 99) < ((cyc / 200) % 2 ? 30 : 80));
      out_ready = ($urandom_range(0, 99) < ((cyc / 200) % 2 ? 80 : 30));
      in_data   = $urandom;
      #1;
      checks++;
      if (int'(count) != q.size()) failures++;
      if (in_ready != (q.size() < DEPTH)) failures++;
      if (!in_ready) fulls++;
      if (out_valid) begin
        checks++;
        if (out_data != q[0]) failures++;
      end
      pop  = out_valid && out_ready;
      push = in_valid && in_ready;
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FIFO never became full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
