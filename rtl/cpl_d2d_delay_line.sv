// cpl_d2d_delay_line: behavioural model of the forwarded-clock delay line.
//
// Behavioural model, not synthesizable logic: in silicon this is a chain
// of delay cells whose taps are chosen by a binary tree of multiplexers,
// and the delay of a cell depends on the process corner. Here the chain is
// NTAPS taps, each TAP_DELAY time units later than the one before, and
// sel_i picks tap sel_i (tap 0 is the undelayed input). The D2D transmitter
// programs it to a quarter of the clock period (90 degrees) and inverts
// the result to obtain the 270-degree forwarded clock. The paper gives the
// structure (a configurable, fully digital mux-tree delay line); the
// number of taps and the cell delay are this model's choice.
module cpl_d2d_delay_line #(
  parameter int unsigned NTAPS     = 16,
  parameter int unsigned TAP_DELAY = 1,
  parameter int unsigned SEL_W     = $clog2(NTAPS)
) (
  input  logic             clk_i,
  input  logic [SEL_W-1:0] sel_i,
  output logic             clk_o
);
  logic [NTAPS-1:0] tap;

  assign tap[0] = clk_i;
  for (genvar i = 1; i < NTAPS; i++) begin : g_cell
    assign #(TAP_DELAY) tap[i] = tap[i-1];
  end

  // the multiplexer tree
  assign clk_o = tap[sel_i];
endmodule
