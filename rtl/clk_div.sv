// clk_div - step-rate divider for the PBNN prototype.
//
// The prototype's board runs at 100 MHz while the network is stepped at
// 10 MHz so that its waveforms are easy to record. The paper states only
// that the clock is divided; here the division is done as a clock enable,
// not as a second clock: a counter wraps every DIV cycles of clk and tick is
// 1 for exactly one clk cycle per wrap, so everything stays on one clock.
//
// Interface and timing: tick is 1 in each cycle in which the counter holds
// DIV-1, one cycle in every DIV; after power-up (counter at 0) the first tick
// is the DIV-th cycle, so an enabled register first moves on the DIV-th edge. The counter has no reset input: it starts at 0 from its
// power-up value and, should it ever hold a value outside 0..DIV-1, it wraps
// on the next edge, so tick runs freely even while the network is held in
// reset. The power-up value is a declaration initialiser, which FPGA
// configuration honours; lint tools note it next to the always_ff that
// writes the counter, which is intended. DIV = 1 makes tick constant 1.
module clk_div #(
  parameter int unsigned DIV = 10  // 100 MHz / 10 MHz
) (
  input  logic clk,
  output logic tick
);

  localparam int unsigned W = (DIV > 1) ? $clog2(DIV) : 1;

  if (DIV < 1) begin : g_bad_div
    $error("clk_div: DIV must be at least 1");
  end

  logic [W-1:0] cnt = '0;

  always_ff @(posedge clk) begin
    if (cnt >= W'(DIV - 1)) cnt <= '0;
    else                    cnt <= cnt + 1'b1;
  end

  assign tick = (cnt == W'(DIV - 1));

  if (DIV > 1) begin : g_check
    // Two ticks are never adjacent when dividing.
    a_tick_single : assert property (@(posedge clk) tick |=> !tick);
  end

endmodule
