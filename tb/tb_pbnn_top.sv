// tb_pbnn_top - end-to-end test of the prototype at its default parameters
// (N = 6, CN6 = RN212, P126354, divide by 10).
//
// The testbench plays the operator and the logic analyser. It holds load or
// rst for a full step period as a push button would, lets the network run
// freely, and on every clock compares the six state lines with a reference
// model of the network equation. It checks that the state moves only on the
// clock after a tick, that ticks are 10 clocks apart, that a cleared state
// (all -1) is a fixed point of this network, and that the orbit reached from
// every one of the 64 loaded initial states has a period of at most 20, with
// 20 reached (the paper's measured period-20 orbit of this network). Each
// mechanism (load, clear, step, hold between ticks) is counted and must occur.
module tb_pbnn_top;
  localparam int unsigned N   = 6;
  localparam int unsigned DIV = 10;
  localparam int unsigned PID = 126354;

  int checks   = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic load = 1'b0, rst = 1'b0;
  logic [N:1] init = '0;
  logic [N:1] x;
  logic tick;

  always #5 clk = ~clk;  // 100 MHz

  pbnn_top dut (.clk(clk), .load(load), .rst(rst), .init(init), .x(x), .tick(tick));

  function automatic logic [N:1] ref_step(input logic [N:1] s);
    logic [N:1] h, o;
    for (int i = 1; i <= N; i++) begin
      int a;  // CN6: (wa, wb, wc) = (+1, +1, -1)
      a = (s[i == 1 ? N : i-1] ? 1 : -1) + (s[i] ? 1 : -1) - (s[i == N ? 1 : i+1] ? 1 : -1);
      h[i] = (a >= 0);
    end
    for (int k = 1; k <= N; k++) o[k] = h[(PID / (10 ** (N - k))) % 10];
    return o;
  endfunction

  // Reference model, updated at every clock edge from the values sampled there.
  logic [N:1] model;
  logic       model_valid = 1'b0;
  int n_load = 0, n_clear = 0, n_step = 0, n_hold = 0;
  int last_tick = -1, cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (tick) begin
      if (last_tick >= 0) begin
        checks++;
        if (cyc - last_tick != DIV) begin
          failures++;
          $display("FAIL ticks %0d clocks apart", cyc - last_tick);
        end
      end
      last_tick <= cyc;
      if (load)      begin model <= init;           model_valid <= 1'b1; n_load++;  end
      else if (rst)  begin model <= '0;             model_valid <= 1'b1; n_clear++; end
      else if (model_valid) begin model <= ref_step(model); n_step++; end
    end else if (model_valid) begin
      n_hold++;
    end
  end

  always @(negedge clk) begin
    if (model_valid) begin
      checks++;
      if (x !== model) begin
        failures++;
        if (failures < 10) $display("FAIL x=%b expected %b at %0t", x, model, $time);
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic press(input bit is_load, input logic [N:1] v);
    @(negedge clk);
    load = is_load; rst = !is_load; init = v;
    repeat (DIV) @(negedge clk);
    load = 1'b0; rst = 1'b0;
  endtask

  task automatic run_steps(input int n);
    repeat (n * DIV) @(negedge clk);
  endtask

  initial begin
    int pmax;
    pmax = 0;
    // Clear: all -1 must be a fixed point of CN6 with any permutation.
    press(1'b0, '0);
    run_steps(5);
    checks++;
    if (x !== '0) begin failures++; $display("FAIL cleared state left its fixed point: %b", x); end

    for (int c = 0; c < (1 << N); c++) begin
      logic [N:1] s0;
      int per;
      press(1'b1, N'(c));
      run_steps(64);          // every transient has ended
      s0 = x;
      per = 0;
      for (int t = 1; t <= 64 && per == 0; t++) begin
        run_steps(1);
        if (x == s0) per = t;
      end
      checks++;
      if (per == 0 || per > 20) begin
        failures++;
        $display("FAIL initial state %0d: period %0d", c, per);
      end
      if (per > pmax) pmax = per;
      if (c == 5) press(1'b0, '1);  // a clear in the middle of a run
    end
    checks++;
    if (pmax != 20) begin failures++; $display("FAIL longest period %0d, expected 20", pmax); end
    $display("longest period %0d; events: load=%0d clear=%0d step=%0d hold=%0d",
             pmax, n_load, n_clear, n_step, n_hold);
    checks++;
    if (n_load == 0 || n_clear == 0 || n_step == 0 || n_hold == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
