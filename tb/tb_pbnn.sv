// tb_pbnn - random and orbit checks of the PBNN state machine.
//
// Three networks with N = 6 and the rule CN6 (RN212) run side by side on the
// same stimulus: the permutation P126354 (default), P231465 and the identity
// (the plain SBNN). Part 1 drives random en, load, rst and init for many
// cycles and compares every state with a reference model that applies the
// neuron equation and the permutation x_k <= y_sigma(k) itself, including
// the load-over-rst priority and the hold when en is 0. Part 2 loads each of
// the 64 initial states, runs 64 steps to reach the orbit, then counts the
// steps until the state repeats; the longest such period must be the one the
// paper reports: 6 for the SBNN, 12 for P231465 and 20 for P126354.
module tb_pbnn;
  localparam int unsigned N = 6;
  localparam int unsigned NNET = 3;
  localparam int unsigned PIDS [NNET] = '{126354, 231465, 123456};
  localparam int unsigned PERIOD_MAX [NNET] = '{20, 12, 6};

  int checks   = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic en, load, rst;
  logic [N:1] init;
  logic [N:1] x [NNET];
  logic [N:1] y [NNET];

  always #5 clk = ~clk;

  for (genvar n = 0; n < NNET; n++) begin : g_net
    pbnn #(.N(N), .RN(8'd212), .PID(PIDS[n])) dut (
      .clk (clk), .en (en), .load (load), .rst (rst), .init (init),
      .x (x[n]), .y (y[n])
    );
  end

  // Reference: one step of the CN6 network (wa, wb, wc) = (+1, +1, -1).
  function automatic logic [N:1] ref_step(input logic [N:1] s, input int n);
    logic [N:1] h, o;
    for (int i = 1; i <= N; i++) begin
      int a;
      a = (s[i == 1 ? N : i-1] ? 1 : -1) + (s[i] ? 1 : -1) - (s[i == N ? 1 : i+1] ? 1 : -1);
      h[i] = (a >= 0);
    end
    for (int k = 1; k <= N; k++) begin
      int d;
      d = (PIDS[n] / (10 ** (N - k))) % 10;  // k-th digit of the identifier
      o[k] = h[d];
    end
    return o;
  endfunction

  task automatic check(input string what, input logic [N:1] got, input logic [N:1] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: x=%b expected %b at %0t", what, got, exp, $time);
    end
  endtask

  // One enabled clock edge with the given controls.
  task automatic cycle(input logic e, input logic l, input logic r, input logic [N:1] v);
    en = e; load = l; rst = r; init = v;
    @(posedge clk);
    #1;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N:1] model [NNET];
  int n_load, n_rst, n_step, n_hold;

  initial begin
    n_load = 0; n_rst = 0; n_step = 0; n_hold = 0;
    en = 1'b0; load = 1'b0; rst = 1'b0; init = '0;
    @(negedge clk);
    cycle(1'b1, 1'b0, 1'b1, 6'b101010);  // clear to a known state
    for (int n = 0; n < NNET; n++) begin
      model[n] = '0;
      check("clear", x[n], model[n]);
    end

    // Part 1: random control.
    for (int t = 0; t < 5000; t++) begin
      logic e, l, r;
      logic [N:1] v;
      e = ($urandom_range(0, 3) != 0);
      l = ($urandom_range(0, 15) == 0);
      r = ($urandom_range(0, 15) == 0);
      v = N'($urandom);
      for (int n = 0; n < NNET; n++) begin
        if (e) begin
          if (l)      model[n] = v;
          else if (r) model[n] = '0;
          else        model[n] = ref_step(model[n], n);
        end
      end
      if (!e) n_hold++; else if (l) n_load++; else if (r) n_rst++; else n_step++;
      cycle(e, l, r, v);
      for (int n = 0; n < NNET; n++) check("random", x[n], model[n]);
    end

    // Part 2: longest period over all 64 initial states.
    begin
      int pmax [NNET];
      logic [N:1] ref_state [NNET];
      int per [NNET];
      for (int n = 0; n < NNET; n++) pmax[n] = 0;
      for (int c = 0; c < (1 << N); c++) begin
        cycle(1'b1, 1'b1, 1'b0, N'(c));
        repeat (64) cycle(1'b1, 1'b0, 1'b0, '0);
        for (int n = 0; n < NNET; n++) begin
          ref_state[n] = x[n];
          per[n] = 0;
        end
        for (int t = 1; t <= 64; t++) begin
          cycle(1'b1, 1'b0, 1'b0, '0);
          for (int n = 0; n < NNET; n++)
            if (per[n] == 0 && x[n] == ref_state[n]) per[n] = t;
        end
        for (int n = 0; n < NNET; n++) if (per[n] > pmax[n]) pmax[n] = per[n];
      end
      for (int n = 0; n < NNET; n++) begin
        checks++;
        if (pmax[n] != PERIOD_MAX[n]) begin
          failures++;
          $display("FAIL network %0d: longest period %0d, expected %0d", n, pmax[n], PERIOD_MAX[n]);
        end else begin
          $display("network %0d: longest period %0d", n, pmax[n]);
        end
      end
    end

    $display("events: load=%0d clear=%0d step=%0d hold=%0d", n_load, n_rst, n_step, n_hold);
    checks++;
    if (n_load == 0 || n_rst == 0 || n_step == 0 || n_hold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
