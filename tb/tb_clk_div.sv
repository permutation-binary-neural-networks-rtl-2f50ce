// tb_clk_div - checks the step-rate enable.
//
// Two dividers run from one clock: DIV = 10 (100 MHz to 10 MHz, the
// prototype's setting) and DIV = 3. Over many periods the testbench counts
// clock cycles between ticks and checks that every tick is one cycle wide,
// that ticks come exactly every DIV cycles and that the first tick after
// power-up is the DIV-th cycle.
module tb_clk_div;
  int checks   = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic tick10, tick3;

  always #5 clk = ~clk;

  clk_div #(.DIV(10)) dut10 (.clk(clk), .tick(tick10));
  clk_div #(.DIV(3))  dut3  (.clk(clk), .tick(tick3));

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_gap(input int div, input int gap, input int idx);
    checks++;
    if (gap != div) begin
      failures++;
      if (failures < 10) $display("FAIL DIV=%0d tick %0d came %0d cycles after the previous", div, idx, gap);
    end
  endtask

  initial begin
    int last10, last3, n10, n3, cyc;
    last10 = 0; last3 = 0; n10 = 0; n3 = 0;
    // Cycle c is the interval ending at the c-th rising edge; the counters
    // start from their power-up value 0 in cycle 1.
    for (cyc = 1; cyc <= 2000; cyc++) begin
      #1;
      if (tick10) begin
        expect_gap(10, cyc - last10, n10);
        last10 = cyc; n10++;
      end
      if (tick3) begin
        expect_gap(3, cyc - last3, n3);
        last3 = cyc; n3++;
      end
      @(posedge clk);
    end
    checks++;
    if (n10 != 200 || n3 != 666) begin
      failures++;
      $display("FAIL tick counts %0d and %0d, expected 200 and 666", n10, n3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
