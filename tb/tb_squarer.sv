// tb_squarer: exhaustive check of the dedicated squarer.
//
// Every one of the 2^IW operands (IW = 17, the width block 1 uses at QW = 16) is applied
// and y is compared with x*x computed in 64-bit integer arithmetic. A watchdog ends the
// run with a failure if the sweep does not complete.
module tb_squarer;

  localparam int unsigned IW = 17;

  logic clk = 1'b0;
  logic signed [IW-1:0]   x;
  logic        [2*IW-2:0] y;
  int checks = 0, failures = 0;

  squarer #(.IW(IW)) dut (.x(x), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat ((1 << IW) + 100) @(posedge clk);
    failures++;
    $display("watchdog: sweep did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint v, expv;
    for (longint k = -(64'sd1 <<< (IW-1)); k < (64'sd1 <<< (IW-1)); k++) begin
      x = IW'(k);
      @(posedge clk);
      v = k;
      expv = v * v;
      checks++;
      if (longint'(y) != expv) begin
        failures++;
        if (failures < 10) $display("x=%0d: y=%0d expected %0d", k, y, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
