// pbnn - permutation binary neural network: state register, local binary
// connection and global permutation connection.
//
// One step computes x^{t+1}_k = y^t_{sigma(k)} with y^t = sbnn(x^t): the
// hidden vector from the sbnn block is routed through the permutation sigma
// and stored back into the N-bit state register. The permutation is given
// as the permutation identifier written as a decimal number, PID = sigma(1)
// sigma(2) ... sigma(N) digit by digit, so P126354 is PID = 126354 and
// sigma(3) = 6. This limits N to 9. The permutation is pure wiring. The
// identity (PID = 123456 for N = 6) turns the network into the plain SBNN,
// a ring cellular automaton.
//
// Interface and timing: all inputs are sampled at the rising edge of clk in a
// cycle where en is 1; in other cycles the state holds. In an enabled cycle,
// load = 1 copies init into x (initial condition), otherwise rst = 1 clears x
// to all -1 (all zeros), otherwise the network takes one step. load thus has
// priority over rst, as in the paper's listing. x is the registered state and
// changes one cycle after the enabled edge; y is the combinational hidden
// state of the current x.
//
// Follows the paper: the update rule, the load/clear/step priority, the
// default N = 6, CN6 (RN212) and P126354 of its hardware example. This
// design's own choices: the clock enable en (the paper clocks the network
// from a divided clock instead), the name init for the paper's input i, the
// decimal identifier in place of the paper's integer array, the hidden-state
// output y and the elaboration-time check that PID is a permutation.
module pbnn #(
  parameter int unsigned     N            = 6,
  parameter pbnn_pkg::rule_t RN           = 8'd212,
  parameter int unsigned     PID          = 126354  // permutation identifier P126354
) (
  input  logic       clk,
  input  logic       en,
  input  logic       load,
  input  logic       rst,
  input  logic [N:1] init,
  output logic [N:1] x,
  output logic [N:1] y
);

  // sigma(k): digit k of PID, counted from the left.
  function automatic int unsigned sigma(input int unsigned k);
    int unsigned p;
    p = PID;
    for (int unsigned d = k; d < N; d++) p = p / 10;
    return p % 10;
  endfunction

  // True when PID has N digits that map {1..N} onto {1..N} one to one.
  function automatic bit pid_is_permutation();
    bit [9:0] seen;
    int unsigned s;
    seen = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      s = sigma(k);
      if (s < 1 || s > N) return 1'b0;
      if (seen[s]) return 1'b0;
      seen[s] = 1'b1;
    end
    return 1'b1;
  endfunction

  if (N < 3 || N > 9) begin : g_bad_n
    $error("pbnn: N must be 3..9 for a one-digit-per-cell identifier, got %0d", N);
  end else if (!pid_is_permutation()) begin : g_bad_pid
    $error("pbnn: PID %0d is not a permutation of 1..%0d", PID, N);
  end

  logic [N:1] x_next;

  // Local binary connection: x^t -> y^t.
  sbnn #(.N(N), .RN(RN)) u_sbnn (
    .x (x),
    .y (y)
  );

  // Global permutation connection: y^t -> x^{t+1}.
  for (genvar k = 1; k <= N; k++) begin : g_perm
    localparam int unsigned S = sigma(k);
    assign x_next[k] = y[S];
  end

  always_ff @(posedge clk) begin
    if (en) begin
      if (load)     x <= init;      // initial condition
      else if (rst) x <= '0;        // all cells -1
      else          x <= x_next;    // one step of the network
    end
  end

endmodule
