// cpl_d2d_data_link: data link layer of the D2D link.
//
// Transmit: a packet of PKT_W bits from the network layer is cut into
// NCHUNK = ceil(PKT_W / THETA) flits of THETA = 2*CH*LN bits, the number of
// bits all channels move in one clock cycle with DDR signalling. Chunk k
// holds packet bits [k*THETA +: THETA] (zero padded). Flits are taken
// straight from the held input, one per cycle, so splitting adds no
// latency; the packet is acknowledged with its last flit. The PHY has no
// back-pressure, so a flit is sent in every cycle tx_pkt_valid_i is high.
//
// Receive: flits are collected until NCHUNK have arrived. The returned
// credit field of the completed packet is handed to the network layer at
// once (rx_crd_*); a packet that carries a beat or a B response is then
// stored in the flow-control credit FIFO, which the network layer drains.
// The FIFO holds CRD packets, the capacity the paper gives as
// CRD * (size(packet)/THETA) entries of THETA bits. Credit-only packets
// are dropped after their credits are taken, since they were sent without
// a credit. The far side never sends more credit-consuming packets than
// CRD, so the FIFO cannot overflow; an assertion checks it.
module cpl_d2d_data_link
  import cpl_pkg::*;
#(
  parameter int unsigned CH     = 8,
  parameter int unsigned LN     = 8,
  parameter int unsigned CRD    = 128,
  parameter int unsigned CRD_W  = crd_bits(CRD),
  parameter int unsigned PKT_W  = d2d_pkt_bits(CRD),
  parameter int unsigned THETA  = 2 * CH * LN,
  parameter int unsigned NCHUNK = (PKT_W + THETA - 1) / THETA
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // from / to the network layer
  input  logic [PKT_W-1:0] tx_pkt_i,
  input  logic             tx_pkt_valid_i,
  output logic             tx_pkt_ready_o,
  output logic [PKT_W-1:0] rx_pkt_o,
  output logic             rx_pkt_valid_o,
  input  logic             rx_pkt_ready_i,
  output logic             rx_crd_valid_o,
  output logic [CRD_W-1:0] rx_crd_o,
  // from / to the channel router
  output logic [THETA-1:0] tx_flit_o,
  output logic             tx_flit_valid_o,
  input  logic [THETA-1:0] rx_flit_i,
  input  logic             rx_flit_valid_i,
  // status
  output logic [$clog2(CRD+1)-1:0] fifo_count_o
);
  localparam int unsigned FULL_W = NCHUNK * THETA;
  localparam int unsigned IDX_W  = (NCHUNK > 1) ? $clog2(NCHUNK) : 1;

  // ------------------------------------------------------------- transmit
  logic [FULL_W-1:0] tx_full;
  logic [IDX_W-1:0]  tx_idx_q;
  logic              tx_last;

  assign tx_full         = FULL_W'(tx_pkt_i);
  assign tx_last         = (tx_idx_q == IDX_W'(NCHUNK - 1));
  assign tx_flit_o       = tx_full[tx_idx_q*THETA +: THETA];
  assign tx_flit_valid_o = tx_pkt_valid_i;
  assign tx_pkt_ready_o  = tx_pkt_valid_i && tx_last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)             tx_idx_q <= '0;
    else if (tx_pkt_valid_i) tx_idx_q <= tx_last ? '0 : tx_idx_q + 1'b1;
  end

  // -------------------------------------------------------------- receive
  logic [FULL_W-1:0] rx_asm_q, rx_asm_d;
  logic [IDX_W-1:0]  rx_idx_q;
  logic              rx_done;
  logic [PKT_W-1:0]  rx_pkt;

  always_comb begin
    rx_asm_d = rx_asm_q;
    rx_asm_d[rx_idx_q*THETA +: THETA] = rx_flit_i;
  end

  assign rx_done = rx_flit_valid_i && (rx_idx_q == IDX_W'(NCHUNK - 1));
  assign rx_pkt  = rx_asm_d[PKT_W-1:0];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_asm_q <= '0;
      rx_idx_q <= '0;
    end else if (rx_flit_valid_i) begin
      rx_asm_q <= rx_asm_d;
      rx_idx_q <= rx_done ? '0 : rx_idx_q + 1'b1;
    end
  end

  // packet fields: {hdr, payload, b_valid, b, crd}
  logic rx_hdr_nonzero, rx_b_valid, rx_uses_crd;
  assign rx_hdr_nonzero = (rx_pkt[PKT_W-1 -: D2D_HDR_W] != '0);
  assign rx_b_valid     = rx_pkt[CRD_W + B_W];
  assign rx_uses_crd    = rx_hdr_nonzero || rx_b_valid;
  assign rx_crd_o       = rx_pkt[CRD_W-1:0];
  assign rx_crd_valid_o = rx_done;

  logic fifo_ready;
  cpl_fifo #(.WIDTH(PKT_W), .DEPTH(CRD)) i_crd_fifo (
    .clk_i, .rst_ni,
    .wdata_i (rx_pkt),
    .push_i  (rx_done && rx_uses_crd),
    .ready_o (fifo_ready),
    .rdata_o (rx_pkt_o),
    .valid_o (rx_pkt_valid_o),
    .pop_i   (rx_pkt_ready_i),
    .count_o (fifo_count_o)
  );

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   rx_done && rx_uses_crd |-> fifo_ready)
    else $error("credit FIFO overflow");
endmodule
