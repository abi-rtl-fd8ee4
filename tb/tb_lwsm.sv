// tb_lwsm: the light-weight softmax.  First the worked numbers of the circuit
// drawing: a running sum of 128 plus In1 = 0001_0101 gives UpdGcnt = 1001_0101,
// leading ones at bits 4 and 7, DIFF = 3, output 1 >> 3 (0x10 with 1.0 = 0x80).
// Then random vectors: a first pass builds the sum, a second pass reads each
// output against the finished sum; both are compared with the formula
// y = 2^(W-1) >> (msb(sum) - msb(x+1)) evaluated here.
module tb_lwsm;
  localparam int W = 8;
  logic clk = 0, rst_n = 0;
  logic signed [31:0] x;
  logic sm_acc, acc, clr;
  logic [W-1:0] y, gcnt;
  int checks = 0, failures = 0;

  lwsm #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic int msb(input int v);
    int p = -1;
    for (int i = 0; i < 32; i++) if (v & (1 << i)) p = i;
    return p;
  endfunction

  function automatic int model(input int in1, input int s);
    int d;
    if (in1 <= 0 || s <= 0) return 0;
    d = msb(s) - msb(in1);
    if (d < 0) d = 0;
    return (1 << (W - 1)) >> d;
  endfunction

  int xs [6];
  int sum, in1;
  initial begin
    x = 0; sm_acc = 0; acc = 0; clr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // drawing example
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    x = 127; sm_acc = 1; acc = 1; @(negedge clk); acc = 0;
    check("CurrGcnt", gcnt, 128);
    x = 20; #1;
    check("drawing: 1>>3", y, 8'h10);
    acc = 1; @(negedge clk); acc = 0;
    check("UpdGcnt 1001_0101", gcnt, 8'b1001_0101);
    // random vectors, two passes
    for (int t = 0; t < 40; t++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      sum = 0;
      for (int i = 0; i < 6; i++) begin
        xs[i] = $urandom_range(0, 40) - 2;
        in1 = (xs[i] + 1 < 0) ? 0 : xs[i] + 1;
        x = xs[i]; sm_acc = 1; acc = 1; #1;
        check("pass 1", y, model(in1, (sum + in1 > 255) ? 255 : sum + in1));
        @(negedge clk);
        sum = (sum + in1 > 255) ? 255 : sum + in1;
      end
      acc = 0; sm_acc = 0;
      check("sum", gcnt, sum);
      for (int i = 0; i < 6; i++) begin
        x = xs[i]; #1;
        in1 = (xs[i] + 1 < 0) ? 0 : xs[i] + 1;
        check("pass 2", y, model(in1, sum));
      end
      check("sum held", gcnt, sum);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
