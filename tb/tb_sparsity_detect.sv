// tb_sparsity_detect: checks SpEn against "sparsity on, monitor on, and the
// memory word or the REG value is zero", over random and zero operands.
module tb_sparsity_detect;
  logic [15:0] m, q;
  logic sp_act, mon_en, spen;
  int checks = 0, failures = 0;

  sparsity_detect dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      m = ($urandom_range(0, 3) == 0) ? 16'd0 : 16'($urandom);
      q = ($urandom_range(0, 3) == 0) ? 16'd0 : 16'($urandom);
      sp_act = 1'($urandom); mon_en = 1'($urandom);
      #1;
      checks++;
      if (spen !== (sp_act && mon_en && (m == 0 || q == 0))) begin
        failures++;
        $display("FAIL m=%h q=%h sp_act=%b mon_en=%b spen=%b", m, q, sp_act, mon_en, spen);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
