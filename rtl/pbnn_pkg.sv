// pbnn_pkg - shared constants and helpers for the permutation binary neural
// network (PBNN).
//
// A PBNN cell holds a binary state in {-1,+1}. In hardware +1 is logic 1 and
// -1 is logic 0. The local connection of every cell is given by three binary
// weights (wa, wb, wc) in {-1,+1}; the connection number CN packs them as
// CN = 4*[wa=+1] + 2*[wb=+1] + [wc=+1], so CN0 = (-1,-1,-1) ... CN7 = (+1,+1,+1).
// Each CN is the same Boolean function as one elementary cellular automaton
// rule number RN. Bit k of RN is the cell's next value when the neighbourhood
// (x[i-1], x[i], x[i+1]) read as a 3-bit number with x[i-1] as MSB equals k.
// cn_to_rn() derives the rule from the weights with the signum of the weighted
// sum; the eight results are the rule numbers the paper lists (23, 43, 77, 142,
// 113, 178, 212, 232). Everything here is evaluated at elaboration time.
package pbnn_pkg;

  // Width of a rule number: one output bit per 3-input neighbourhood pattern.
  localparam int unsigned RULE_BITS = 8;
  typedef logic [RULE_BITS-1:0] rule_t;

  // Connection numbers of the eight local binary connections.
  typedef enum logic [2:0] {
    CN0 = 3'd0, CN1 = 3'd1, CN2 = 3'd2, CN3 = 3'd3,
    CN4 = 3'd4, CN5 = 3'd5, CN6 = 3'd6, CN7 = 3'd7
  } cn_e;

  // Weight (+1 or -1) of bit b of a connection number: b=2 is wa, 1 is wb, 0 is wc.
  function automatic int weight(input logic [2:0] cn, input logic [1:0] b);
    return cn[b] ? 1 : -1;
  endfunction

  // Rule number of the SBNN with connection number cn:
  // bit k = 1 when sgn(wa*xa + wb*xb + wc*xc) = +1 for the pattern k = {xa,xb,xc}.
  // The weighted sum is odd, so it is never 0 and sgn is never ambiguous.
  function automatic rule_t cn_to_rn(input logic [2:0] cn);
    rule_t rn;
    int    s;
    logic [2:0] k3;
    for (int k = 0; k < RULE_BITS; k++) begin
      k3 = 3'(k);
      s  = 0;
      for (int b = 0; b < 3; b++) s += weight(cn, 2'(b)) * (k3[b] ? 1 : -1);
      rn[k] = (s >= 0);
    end
    return rn;
  endfunction

endpackage
