// cpl_d2d_chan_router: channel router of the D2D link.
//
// Transmit: the THETA = 2*CH*LN-bit flit of the data link layer is split
// combinationally into CH channel flits of 2*LN bits; channel c carries
// bits [c*2*LN +: 2*LN]. All channels share the flit's valid.
//
// Receive: each channel's PHY delivers its flits through its own clock
// domain crossing FIFO, and the channels may be skewed against each
// other. A flit is re-assembled only when every channel has one waiting;
// then all channel FIFOs are popped in the same cycle. This is how the
// channels are aligned at the receiving end.
//
// The split is combinational and costs no cycle, as in the paper. The bit
// order across channels is this design's choice. With CH = 1 the module
// reduces to wires, matching the paper's remark that the router is then
// left out of the hardware.
module cpl_d2d_chan_router #(
  parameter int unsigned CH    = 8,
  parameter int unsigned LN    = 8,
  parameter int unsigned THETA = 2 * CH * LN
) (
  // transmit
  input  logic [THETA-1:0]    tx_flit_i,
  input  logic                tx_flit_valid_i,
  output logic [CH-1:0][2*LN-1:0] tx_ch_data_o,
  output logic [CH-1:0]       tx_ch_valid_o,
  // receive
  input  logic [CH-1:0][2*LN-1:0] rx_ch_data_i,
  input  logic [CH-1:0]       rx_ch_valid_i,
  output logic [CH-1:0]       rx_ch_pop_o,
  output logic [THETA-1:0]    rx_flit_o,
  output logic                rx_flit_valid_o
);
  assign tx_ch_data_o    = tx_flit_i;
  assign tx_ch_valid_o   = {CH{tx_flit_valid_i}};
  assign rx_flit_o       = rx_ch_data_i;
  assign rx_flit_valid_o = &rx_ch_valid_i;
  assign rx_ch_pop_o     = {CH{rx_flit_valid_o}};
endmodule
