// tb_sbnn - exhaustive check of the local binary connection.
//
// Eight sbnn instances with N = 6 carry the rule numbers the paper lists for
// CN0..CN7 (23, 43, 77, 142, 113, 178, 212, 232). For every one of the 64
// states each output bit is compared with a reference written from the
// neuron equation itself, y_i = sgn(wa*x_{i-1} + wb*x_i + wc*x_{i+1}) on a
// ring, not from the rule table. A ninth instance with N = 9 (CN6) covers a
// different ring length over all 512 states, and pbnn_pkg::cn_to_rn() is
// checked against the listed rule numbers.
module tb_sbnn;
  import pbnn_pkg::*;

  localparam int unsigned N  = 6;
  localparam int unsigned N9 = 9;
  localparam int unsigned RN_LIST [8] = '{23, 43, 77, 142, 113, 178, 212, 232};

  int checks   = 0;
  int failures = 0;

  logic [N:1]  x6;
  logic [N:1]  y6 [8];
  logic [N9:1] x9;
  logic [N9:1] y9;

  for (genvar c = 0; c < 8; c++) begin : g_cn
    sbnn #(.N(N), .RN(8'(RN_LIST[c]))) dut (.x(x6), .y(y6[c]));
  end
  sbnn #(.N(N9), .RN(8'd212)) dut9 (.x(x9), .y(y9));

  // Reference neuron: cn bit 2 = wa, bit 1 = wb, bit 0 = wc (+1 when set).
  function automatic logic ref_cell(input int cn, input logic l, input logic m, input logic r);
    int s;
    s  = (((cn >> 2) & 1) != 0 ? 1 : -1) * (l ? 1 : -1);
    s += (((cn >> 1) & 1) != 0 ? 1 : -1) * (m ? 1 : -1);
    s += ((cn & 1) != 0 ? 1 : -1) * (r ? 1 : -1);
    return s >= 0;
  endfunction

  initial begin : watchdog
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++) begin
      checks++;
      if (cn_to_rn(3'(c)) != 8'(RN_LIST[c])) begin
        failures++;
        $display("FAIL cn_to_rn(%0d) = %0d, expected %0d", c, cn_to_rn(3'(c)), RN_LIST[c]);
      end
    end
    for (int v = 0; v < (1 << N); v++) begin
      for (int i = 1; i <= N; i++) x6[i] = v[i-1];
      #1;
      for (int c = 0; c < 8; c++) begin
        for (int i = 1; i <= N; i++) begin
          logic e;
          e = ref_cell(c, x6[i == 1 ? N : i-1], x6[i], x6[i == N ? 1 : i+1]);
          checks++;
          if (y6[c][i] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL CN%0d x=%b cell %0d: y=%b expected %b", c, x6, i, y6[c][i], e);
          end
        end
      end
    end
    for (int v = 0; v < (1 << N9); v++) begin
      for (int i = 1; i <= N9; i++) x9[i] = v[i-1];
      #1;
      for (int i = 1; i <= N9; i++) begin
        logic e;
        e = ref_cell(6, x9[i == 1 ? N9 : i-1], x9[i], x9[i == N9 ? 1 : i+1]);
        checks++;
        if (y9[i] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL N=9 x=%b cell %0d: y=%b expected %b", x9, i, y9[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
