// cpl_d2d_phy_tx: transmit half of one D2D PHY channel (DDR, source
// synchronous).
//
// A channel flit of 2*LN bits arrives with tx_valid_i in the clk_i domain.
// Stage 1 registers flit and valid. The valid drives the enable of a clock
// gate cell (a latch transparent while clk_i is low, ANDed with clk_i), so
// the gated clock pulses in the cycle after the enable was registered;
// stage 2 registers the flit again so that it is on the wires in exactly
// that cycle. The LN output lanes are driven through a clock multiplexer:
// bits [LN-1:0] while clk_i is high, bits [2*LN-1:LN] while it is low, so
// a whole flit leaves in one cycle. The gated clock goes through the
// configurable delay line set to 90 degrees and an inverter, giving the
// forwarded clock tx_clk_o shifted by 270 degrees: its falling edge lies in
// the middle of the first half-cycle and its rising edge in the middle of
// the second. With no valid flit the forwarded clock rests high.
//
// Timing: a flit presented at rising edge n is on the lanes during cycle
// n+2 (one cycle of input register, one cycle for the clock gate).
// Structure, the clock gate, the 270-degree shift and the one-cycle
// clock-gate latency follow the paper; which half goes first is this
// design's choice. The enable latch and the clock gating are intended
// (they form the clock gate cell): the latch and gated-clock warnings a
// lint tool prints for this file stand for that reason.
module cpl_d2d_phy_tx #(
  parameter int unsigned LN        = 8,
  parameter int unsigned NTAPS     = 16,
  parameter int unsigned TAP_DELAY = 1,
  parameter int unsigned SEL_W     = $clog2(NTAPS)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic [2*LN-1:0] tx_data_i,
  input  logic            tx_valid_i,
  input  logic [SEL_W-1:0] dly_sel_i,
  output logic [LN-1:0]   tx_data_o,
  output logic            tx_clk_o
);
  logic [2*LN-1:0] flit_q, wire_q;
  logic            valid_q, en_latch, gclk, gclk_dly;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      flit_q  <= '0;
      valid_q <= 1'b0;
      wire_q  <= '0;
    end else begin
      flit_q  <= tx_data_i;
      valid_q <= tx_valid_i;
      wire_q  <= flit_q;
    end
  end

  // clock gate cell
  always_latch begin
    if (!rst_ni)     en_latch = 1'b0;
    else if (!clk_i) en_latch = valid_q;
  end
  assign gclk = clk_i & en_latch;

  // clock multiplexer for DDR
  assign tx_data_o = clk_i ? wire_q[LN-1:0] : wire_q[2*LN-1:LN];

  cpl_d2d_delay_line #(.NTAPS(NTAPS), .TAP_DELAY(TAP_DELAY)) i_dly (
    .clk_i (gclk),
    .sel_i (dly_sel_i),
    .clk_o (gclk_dly)
  );
  assign tx_clk_o = ~gclk_dly;
endmodule
