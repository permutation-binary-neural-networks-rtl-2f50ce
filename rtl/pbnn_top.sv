// pbnn_top - FPGA prototype of the permutation binary neural network.
//
// The board's 100 MHz clock drives everything. clk_div makes a one-cycle
// enable every DIV = 10 clocks, so the network advances at 10 MHz, the rate
// at which the prototype's periodic orbits are recorded. pbnn holds the
// N = 6 state bits and takes one step per enable: hidden layer by the local
// rule RN, then the permutation with identifier PID. The state lines x[1..N] are the
// outputs a logic analyser records; they carry the binary periodic orbit.
//
// Interface and timing: load, rst and init are sampled only at enabled
// edges, so a button must be held for at least DIV clocks to be seen; they
// are expected to be synchronous to clk (the board-side synchroniser for
// push buttons is not part of this design). With load = 1 the state takes
// init, with rst = 1 it is cleared to all -1, otherwise it steps. The new
// state appears one clock after the enabled edge and then holds for DIV
// clocks. tick shows the enable so a recorder can sample once per step.
//
// Follows the paper: N = 6, CN6 (RN212), P126354 (its measured period-20
// orbit), 10 MHz step rate from 100 MHz. The plain SBNN of the paper's first
// measurement is the same top with PID = 123456. This design's own
// choices: the clock enable in place of a divided clock, and the tick output.
module pbnn_top #(
  parameter int unsigned     N            = 6,
  parameter pbnn_pkg::rule_t RN           = 8'd212,
  parameter int unsigned     PID          = 126354,  // permutation P126354
  parameter int unsigned     DIV          = 10
) (
  input  logic       clk,   // board clock, 100 MHz
  input  logic       load,  // load init as the initial condition
  input  logic       rst,   // clear the state to all -1
  input  logic [N:1] init,  // initial condition
  output logic [N:1] x,     // network state, one line per cell
  output logic       tick   // one-cycle pulse at each network step
);

  clk_div #(.DIV(DIV)) u_clk_div (
    .clk  (clk),
    .tick (tick)
  );

  logic [N:1] y_unused;  // hidden layer, internal to the network

  pbnn #(.N(N), .RN(RN), .PID(PID)) u_pbnn (
    .clk  (clk),
    .en   (tick),
    .load (load),
    .rst  (rst),
    .init (init),
    .x    (x),
    .y    (y_unused)
  );

endmodule
