// sbnn - local binary connection of a PBNN (the "simple binary neural
// network", input layer to hidden layer).
//
// N cells sit on a ring. Cell j looks at its left neighbour x[j-1], itself
// x[j] and its right neighbour x[j+1], with x[0] = x[N] and x[N+1] = x[1],
// and outputs y[j] = sgn(wa*x[j-1] + wb*x[j] + wc*x[j+1]). As in the
// paper's Verilog, the signum neuron is not built from adders: it is written
// as the 3-input Boolean function given by the rule number RN, a sum of eight
// minterms each enabled by one bit of RN (bit k for the pattern k =
// {x[j-1], x[j], x[j+1]}). Any of the 256 elementary cellular automaton rules
// can therefore be set through RN; the eight PBNN connections are the rules
// pbnn_pkg::cn_to_rn() returns (CN6 = RN212 is the default).
//
// The ring wrap-around is this design's explicit choice: the paper's listing
// indexes x[j-1] and x[j+1] without wrapping, while its equations define the
// ring. Encoding: logic 1 is +1, logic 0 is -1. Bit order: x[1] is cell 1.
//
// Interface: x is the current state, y the hidden state. Purely
// combinational, no clock; one level of 3-input logic per cell.
module sbnn #(
  parameter int unsigned       N  = 6,
  parameter pbnn_pkg::rule_t   RN = 8'd212
) (
  input  logic [N:1] x,
  output logic [N:1] y
);

  if (N < 3) begin : g_bad_n
    $error("sbnn: the ring needs N >= 3 cells, got %0d", N);
  end

  for (genvar j = 1; j <= N; j++) begin : g_cell
    localparam int unsigned L = (j == 1) ? N : j - 1;  // left neighbour on the ring
    localparam int unsigned R = (j == N) ? 1 : j + 1;  // right neighbour on the ring

    logic [7:0] rule;  // minterm k, gated by RN[k]

    assign rule[0] = RN[0] & (~x[L] & ~x[j] & ~x[R]);
    assign rule[1] = RN[1] & (~x[L] & ~x[j] &  x[R]);
    assign rule[2] = RN[2] & (~x[L] &  x[j] & ~x[R]);
    assign rule[3] = RN[3] & (~x[L] &  x[j] &  x[R]);
    assign rule[4] = RN[4] & ( x[L] & ~x[j] & ~x[R]);
    assign rule[5] = RN[5] & ( x[L] & ~x[j] &  x[R]);
    assign rule[6] = RN[6] & ( x[L] &  x[j] & ~x[R]);
    assign rule[7] = RN[7] & ( x[L] &  x[j] &  x[R]);

    assign y[j] = |rule;
  end

endmodule
