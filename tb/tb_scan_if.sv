// tb_scan_if: random words are shifted in on SI while SE is high and handed
// over by a rising UPD; the word must come out intact and stay pending until
// accepted.  A loaded result must come out on SO, most significant bit first.
module tb_scan_if;
  localparam int IW = 72, OW = 33;
  logic clk = 0, rst_n = 0;
  logic se, si, upd, so, inst_valid, inst_ready, out_load;
  logic [IW-1:0] inst, w;
  logic [OW-1:0] out_data, got;
  int checks = 0, failures = 0;

  scan_if #(.IW(IW), .OW(OW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    se = 0; si = 0; upd = 0; inst_ready = 0; out_load = 0; out_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      w = {$urandom, $urandom, $urandom};
      @(negedge clk); se = 1;
      for (int i = IW - 1; i >= 0; i--) begin si = w[i]; @(negedge clk); end
      se = 0;
      check("no valid before UPD", !inst_valid);
      upd = 1; @(negedge clk); upd = 0;
      check("valid after UPD", inst_valid);
      check("word", inst == w);
      repeat (3) @(negedge clk);
      check("pending held", inst_valid);
      inst_ready = 1; @(negedge clk); inst_ready = 0;
      check("accepted", !inst_valid);
      // result out
      out_data = OW'({$urandom, $urandom});
      out_load = 1; @(negedge clk); out_load = 0;
      se = 1;
      for (int i = OW - 1; i >= 0; i--) begin got[i] = so; @(negedge clk); end
      se = 0;
      check("scan out", got == out_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
