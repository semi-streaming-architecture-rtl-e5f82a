// tb_requant: random accumulators and scale settings against the reference rescaler.
module tb_requant;
  import ss_pkg::*;
  import tb_ref_pkg::*;
  logic signed [31:0] acc;
  rq_t rq;
  logic [7:0] out;
  int checks = 0, failures = 0;

  requant dut (.acc, .rq, .out);

  initial begin
    for (int i = 0; i < 2000; i++) begin
      acc = (i % 3 == 0) ? $signed($urandom) : $signed($urandom_range(0, 20000)) - 10000;
      rq.mult = $urandom | 32'h8000_0000;
      rq.shift = 8'($urandom_range(30, 45));
      rq.oz = 8'($urandom);
      rq.act_min = 8'($urandom_range(0, 60));
      rq.act_max = 8'($urandom_range(150, 255));
      #1;
      checks++;
      if (int'(out) != ref_rq(longint'(acc), longint'(rq.mult), int'(rq.shift), int'(rq.oz),
                              int'(rq.act_min), int'(rq.act_max))) begin
        failures++;
        if (failures < 5) $display("mismatch acc=%0d out=%0d", acc, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
