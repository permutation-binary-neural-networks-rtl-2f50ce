// tb_feature_quantities - reproduces the paper's classification of the
// 6-cell networks with the RTL as the map generator.
//
// Feature quantities. For a network, f maps each of the 2^N = 64 states to
// the next one. Among its periodic orbits the MBPO is the one with the
// longest period, ties broken by the larger basin. alpha = period / 64 and
// beta = (states whose trajectory ends on the MBPO) / 64; only the
// numerators are compared below.
//
// Part 1 builds 17 pbnn instances: the eight SBNNs CN0..CN7 (identity
// permutation), the eight PBNNs of the paper's table (CN0 P513246 ... CN7
// P651324) and its Example 2 (CN6 P231465). The map f of each is read from
// the hardware: load state c, take one step, read x. alpha and beta are then
// computed and compared with the values the paper lists.
// Part 2 is the brute-force survey: the local map f1 of every CN is read from
// eight sbnn instances, each of the 720 permutations is applied to it, and
// the number of distinct (alpha, beta) points per CN is compared with the
// paper's counts 19, 79, 49, 78, 79, 53, 78, 26.
module tb_feature_quantities;
  localparam int unsigned N  = 6;
  localparam int unsigned NS = 1 << N;
  localparam int unsigned NNET = 17;
  localparam int unsigned RN_OF_CN [8] = '{23, 43, 77, 142, 113, 178, 212, 232};
  //                                      SBNN CN0..CN7, PBNN CN0..CN7, Example 2
  localparam int unsigned NET_CN  [NNET] = '{0, 1, 2, 3, 4, 5, 6, 7,
                                            0, 1, 2, 3, 4, 5, 6, 7, 6};
  localparam int unsigned NET_PID [NNET] = '{123456, 123456, 123456, 123456,
                                            123456, 123456, 123456, 123456,
                                            513246, 413625, 524361, 315462,
                                            254136, 461253, 126354, 651324, 231465};
  localparam int unsigned EXP_P   [NNET] = '{2, 6, 2, 6, 6, 2, 6, 2,
                                            8, 20, 10, 20, 20, 10, 20, 8, 12};
  localparam int unsigned EXP_B   [NNET] = '{32, 12, 2, 12, 12, 32, 12, 2,
                                            20, 62, 36, 62, 62, 62, 62, 20, 40};
  localparam int unsigned EXP_POINTS [8] = '{19, 79, 49, 78, 79, 53, 78, 26};

  int checks   = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic en = 1'b0, load = 1'b0;
  logic [N:1] init = '0;
  logic [N:1] x [NNET];
  logic [N:1] y [NNET];
  logic [N:1] f1x;
  logic [N:1] f1y [8];

  always #5 clk = ~clk;

  for (genvar n = 0; n < NNET; n++) begin : g_net
    pbnn #(.N(N), .RN(8'(RN_OF_CN[NET_CN[n]])), .PID(NET_PID[n])) dut (
      .clk (clk), .en (en), .load (load), .rst (1'b0), .init (init),
      .x (x[n]), .y (y[n])
    );
  end

  for (genvar c = 0; c < 8; c++) begin : g_f1
    sbnn #(.N(N), .RN(8'(RN_OF_CN[c]))) u_f1 (.x(f1x), .y(f1y[c]));
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // MBPO of a map over NS states: returns period and basin size.
  task automatic mbpo(input int f [NS], output int period, output int basin);
    int cyc_id [NS];      // smallest state on the orbit a state ends on
    int cyc_len [NS];     // period of that orbit, indexed by its id
    int cyc_cnt [NS];     // basin size, indexed by orbit id
    for (int s = 0; s < NS; s++) begin cyc_len[s] = 0; cyc_cnt[s] = 0; end
    for (int s = 0; s < NS; s++) begin
      int p, m, len;
      p = s;
      for (int t = 0; t < NS; t++) p = f[p];   // now on the orbit
      m = p; len = 0;
      do begin
        if (p < m) m = p;
        p = f[p]; len++;
      end while (p != m && len <= NS);
      // walk once more to be sure m is the orbit minimum
      p = f[m]; len = 1;
      while (p != m) begin if (p < m) m = p; p = f[p]; len++; end
      cyc_id[s] = m;
      cyc_len[m] = len;
      cyc_cnt[m]++;
    end
    period = 0; basin = 0;
    for (int m = 0; m < NS; m++) begin
      if (cyc_cnt[m] == 0) continue;
      if (cyc_len[m] > period || (cyc_len[m] == period && cyc_cnt[m] > basin)) begin
        period = cyc_len[m];
        basin  = cyc_cnt[m];
      end
    end
  endtask

  function automatic int idx(input logic [N:1] v);
    int r;
    r = 0;
    for (int i = 1; i <= N; i++) if (v[i]) r += 1 << (i - 1);
    return r;
  endfunction

  function automatic logic [N:1] vec(input int c);
    logic [N:1] v;
    for (int i = 1; i <= N; i++) v[i] = c[i-1];
    return v;
  endfunction

  int fmap [NNET][NS];
  int f1   [8][NS];

  initial begin
    // ---- Part 1: the listed networks, maps read from pbnn ----
    @(negedge clk);
    for (int c = 0; c < NS; c++) begin
      en = 1'b1; load = 1'b1; init = vec(c);
      @(negedge clk);
      load = 1'b0;
      @(negedge clk);
      for (int n = 0; n < NNET; n++) fmap[n][c] = idx(x[n]);
    end
    en = 1'b0;
    for (int n = 0; n < NNET; n++) begin
      int p, b;
      mbpo(fmap[n], p, b);
      checks++;
      if (p != EXP_P[n] || b != EXP_B[n]) begin
        failures++;
        $display("FAIL CN%0d P%0d: alpha=%0d/64 beta=%0d/64, paper %0d/64 %0d/64",
                 NET_CN[n], NET_PID[n], p, b, EXP_P[n], EXP_B[n]);
      end else begin
        $display("CN%0d P%0d: alpha=%0d/64 beta=%0d/64", NET_CN[n], NET_PID[n], p, b);
      end
    end

    // ---- Part 2: all 8 x 720 networks, f1 read from sbnn ----
    for (int c = 0; c < NS; c++) begin
      f1x = vec(c);
      #1;
      for (int k = 0; k < 8; k++) f1[k][c] = idx(f1y[k]);
    end
    for (int k = 0; k < 8; k++) begin
      bit seen_pt [int];
      int nperm;
      nperm = 0;
      seen_pt.delete();
      for (int code = 0; code < 46656; code++) begin   // all 6-digit words over 1..6
        int sg [1:N];
        bit [N:1] used;
        bit ok;
        int r, f [NS], p, b;
        r = code; used = '0; ok = 1'b1;
        for (int j = 1; j <= N; j++) begin
          sg[j] = r % N + 1; r = r / N;
          if (used[sg[j]]) ok = 1'b0;
          used[sg[j]] = 1'b1;
        end
        if (!ok) continue;
        nperm++;
        // Cmap f = f2(f1(x)): x_k <= y_sigma(k)
        for (int c = 0; c < NS; c++) begin
          logic [N:1] yv, xv;
          yv = vec(f1[k][c]);
          for (int j = 1; j <= N; j++) xv[j] = yv[sg[j]];
          f[c] = idx(xv);
        end
        mbpo(f, p, b);
        seen_pt[p * 256 + b] = 1'b1;
      end
      checks++;
      if (nperm != 720 || seen_pt.num() != EXP_POINTS[k]) begin
        failures++;
        $display("FAIL CN%0d: %0d permutations give %0d feature points, paper %0d",
                 k, nperm, seen_pt.num(), EXP_POINTS[k]);
      end else begin
        $display("CN%0d: 720 permutations give %0d feature points", k, seen_pt.num());
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
