// tb_scaler: division by REG'' (paper examples 8/2 = 4 and 8/4 = 2, then random
// signed values), the Se5 bypass and the zero-divisor pass-through.
module tb_scaler;
  logic signed [31:0] din, dout;
  logic signed [15:0] reg2;
  logic bypass;
  int checks = 0, failures = 0;

  scaler dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    bypass = 0;
    din = 8; reg2 = 2; #1; check("8/2", dout, 4);
    din = 8; reg2 = 4; #1; check("8/4", dout, 2);
    for (int t = 0; t < 200; t++) begin
      din = $signed($urandom); reg2 = 16'($urandom_range(1, 300)); if ($urandom_range(0,1)) reg2 = -reg2;
      #1; check("random", dout, din / 32'(reg2));
    end
    reg2 = 0; din = 77; #1; check("zero divisor", dout, 77);
    bypass = 1; reg2 = 5; din = -123; #1; check("bypass", dout, -123);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
