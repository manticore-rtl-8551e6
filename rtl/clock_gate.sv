// clock_gate: derives the compute clock from the control clock.
//
// Manticore stalls its whole grid by stopping the clock of the cores and the
// NoC rather than by routing a stall wire to hundreds of cores (on the FPGA
// this is a global clock buffer with a clock enable). The two clocks thus
// have the same frequency and phase; the compute clock just skips the edges
// for which `en` was low. This block is the usual glitch-free gate: `en` is
// captured by a latch that is open while clk is low, and the latch output is
// ANDed with clk, so `en` only needs to settle before the rising edge it is
// meant to suppress. The latch is intended (it is the clock gate).
//
// Timing: an edge of clk at time t appears on gclk iff en was high just
// before t.
module clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);

  logic en_l;

  always_latch begin
    if (!clk) en_l = en;
  end

  assign gclk = clk & en_l;

endmodule
