// cpl_d2d_link: complete die-to-die link, an AXI4 bridge across a chiplet
// boundary.
//
// Three layers are stacked. The network layer turns the duplex AXI4
// frontend (s_axi_*: local requests to the far die; m_axi_*: far requests
// replayed here) into a packet stream with credit-based flow control. The
// data link layer cuts packets into THETA = 2*CH*LN-bit flits and holds the
// receive credit FIFO of CRD packets. The channel router spreads a flit over
// CH channels, and every channel has a DDR PHY with LN lanes and a
// forwarded clock in each direction, so the link uses
// Nwrs = CH * 2 * (LN + 1) wires. One flit, i.e. THETA bits, crosses per
// clock cycle in each direction.
//
// Defaults are the paper's main configuration (CH = 8, LN = 8, CRD = 128).
// With the 4-bit AXI IDs of this design a packet is 95 bits, so one flit of
// 128 bits carries one packet. The paper's demonstrator used CH = 1,
// CRD = 8, where a packet takes six flits.
//
// Latency from an AXI beat accepted on s_axi to the same beat leaving
// m_axi of the far link (no board delay): 1 cycle network register,
// 2 cycles PHY transmit, 2-3 cycles CDC, then the far FIFO. dly_sel_i sets
// the forwarded-clock delay line of all channels to a quarter period.
module cpl_d2d_link
  import cpl_pkg::*;
#(
  parameter int unsigned CH        = 8,
  parameter int unsigned LN        = 8,
  parameter int unsigned CRD       = 128,
  parameter int unsigned NTAPS     = 16,
  parameter int unsigned TAP_DELAY = 1,
  parameter int unsigned CRD_W     = crd_bits(CRD),
  parameter int unsigned SEL_W     = $clog2(NTAPS)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  axi_req_t              s_axi_req_i,
  output axi_rsp_t              s_axi_rsp_o,
  output axi_req_t              m_axi_req_o,
  input  axi_rsp_t              m_axi_rsp_i,
  input  logic [SEL_W-1:0]      dly_sel_i,
  // wires across the chiplet boundary
  output logic [CH-1:0]         tx_clk_o,
  output logic [CH-1:0][LN-1:0] tx_data_o,
  input  logic [CH-1:0]         rx_clk_i,
  input  logic [CH-1:0][LN-1:0] rx_data_i,
  // status
  output logic [CRD_W-1:0]      tx_credits_o,
  output logic                  crd_stall_o,
  output logic [CRD_W-1:0]      rx_fifo_count_o
);
  localparam int unsigned PKT_W = d2d_pkt_bits(CRD);
  localparam int unsigned THETA = 2 * CH * LN;

  logic [PKT_W-1:0] tx_pkt, rx_pkt;
  logic tx_pkt_valid, tx_pkt_ready, rx_pkt_valid, rx_pkt_ready;
  logic rx_crd_valid;
  logic [CRD_W-1:0] rx_crd;
  logic [THETA-1:0] tx_flit, rx_flit;
  logic tx_flit_valid, rx_flit_valid;
  logic [CH-1:0][2*LN-1:0] tx_ch_data, rx_ch_data;
  logic [CH-1:0] tx_ch_valid, rx_ch_valid, rx_ch_pop;

  cpl_d2d_network #(.CRD(CRD)) i_network (
    .clk_i, .rst_ni,
    .s_axi_req_i, .s_axi_rsp_o, .m_axi_req_o, .m_axi_rsp_i,
    .tx_pkt_o       (tx_pkt),
    .tx_pkt_valid_o (tx_pkt_valid),
    .tx_pkt_ready_i (tx_pkt_ready),
    .rx_pkt_i       (rx_pkt),
    .rx_pkt_valid_i (rx_pkt_valid),
    .rx_pkt_ready_o (rx_pkt_ready),
    .rx_crd_valid_i (rx_crd_valid),
    .rx_crd_i       (rx_crd),
    .tx_credits_o,
    .crd_stall_o
  );

  cpl_d2d_data_link #(.CH(CH), .LN(LN), .CRD(CRD)) i_data_link (
    .clk_i, .rst_ni,
    .tx_pkt_i        (tx_pkt),
    .tx_pkt_valid_i  (tx_pkt_valid),
    .tx_pkt_ready_o  (tx_pkt_ready),
    .rx_pkt_o        (rx_pkt),
    .rx_pkt_valid_o  (rx_pkt_valid),
    .rx_pkt_ready_i  (rx_pkt_ready),
    .rx_crd_valid_o  (rx_crd_valid),
    .rx_crd_o        (rx_crd),
    .tx_flit_o       (tx_flit),
    .tx_flit_valid_o (tx_flit_valid),
    .rx_flit_i       (rx_flit),
    .rx_flit_valid_i (rx_flit_valid),
    .fifo_count_o    (rx_fifo_count_o)
  );

  cpl_d2d_chan_router #(.CH(CH), .LN(LN)) i_router (
    .tx_flit_i       (tx_flit),
    .tx_flit_valid_i (tx_flit_valid),
    .tx_ch_data_o    (tx_ch_data),
    .tx_ch_valid_o   (tx_ch_valid),
    .rx_ch_data_i    (rx_ch_data),
    .rx_ch_valid_i   (rx_ch_valid),
    .rx_ch_pop_o     (rx_ch_pop),
    .rx_flit_o       (rx_flit),
    .rx_flit_valid_o (rx_flit_valid)
  );

  for (genvar c = 0; c < CH; c++) begin : g_phy
    cpl_d2d_phy_tx #(.LN(LN), .NTAPS(NTAPS), .TAP_DELAY(TAP_DELAY)) i_tx (
      .clk_i, .rst_ni,
      .tx_data_i  (tx_ch_data[c]),
      .tx_valid_i (tx_ch_valid[c]),
      .dly_sel_i,
      .tx_data_o  (tx_data_o[c]),
      .tx_clk_o   (tx_clk_o[c])
    );
    cpl_d2d_phy_rx #(.LN(LN)) i_rx (
      .clk_i, .rst_ni,
      .rx_clk_i   (rx_clk_i[c]),
      .rx_data_i  (rx_data_i[c]),
      .rx_data_o  (rx_ch_data[c]),
      .rx_valid_o (rx_ch_valid[c]),
      .rx_pop_i   (rx_ch_pop[c])
    );
  end
endmodule
