// cpl_d2d_network: network layer of the die-to-die (D2D) link.
//
// The link is duplex at the AXI4 level. On its subordinate side (s_axi_*)
// a local manager issues AW/W/AR that travel to the other die and gets
// back B/R; on its manager side (m_axi_*) requests that arrive from the
// other die are replayed towards a local subordinate, whose B/R are sent
// back. All five channel kinds of both sides share one packet stream per
// direction.
//
// Transmit: every cycle in which the output register is free, one packet
// is formed. A packet carries one beat of one channel (header AW, W, AR or
// R), the local subordinate's pending B response piggybacked in its own
// field, and the number of receive-FIFO slots freed since the last packet
// (returned credits). Control channels (AW, AR) take priority over data
// channels (W, R); inside each pair a round-robin pointer alternates. A
// packet that carries a beat or a B occupies one slot of the far receive
// FIFO and needs one credit; with no credit left the layer stops sending
// such packets, which back-pressures the AXI frontend. When there is
// nothing else to send but freed slots to report, a header-0 packet with
// only credits is sent; it needs no credit, so credit return can never
// deadlock. The AXI-to-packet conversion costs one cycle (output register).
//
// Receive: packets leave the data link layer's credit FIFO in order. The
// beat is handed to the AXI channel its header names and the piggybacked
// B to the local manager; the packet is popped once both are taken, and
// each pop is one credit owed to the far side. Credits sent by the far
// side arrive on rx_crd_* as soon as a packet is received.
//
// Following the paper, only one write and one read per direction are in
// flight at a time (no outstanding transactions), control channels have
// priority and the pairs are round-robin, B is optional in every packet
// and the header is 4 bits wide. W beats are only sent after their AW, so
// the in-order receive FIFO can never hold a W ahead of the AW it needs.
// The header values and field order are this design's choice.
module cpl_d2d_network
  import cpl_pkg::*;
#(
  parameter int unsigned CRD   = 128,
  parameter int unsigned CRD_W = crd_bits(CRD),
  parameter int unsigned PKT_W = d2d_pkt_bits(CRD)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // local manager -> remote
  input  axi_req_t         s_axi_req_i,
  output axi_rsp_t         s_axi_rsp_o,
  // remote manager -> local subordinate
  output axi_req_t         m_axi_req_o,
  input  axi_rsp_t         m_axi_rsp_i,
  // packets towards the data link layer
  output logic [PKT_W-1:0] tx_pkt_o,
  output logic             tx_pkt_valid_o,
  input  logic             tx_pkt_ready_i,
  // packets from the data link layer's credit FIFO
  input  logic [PKT_W-1:0] rx_pkt_i,
  input  logic             rx_pkt_valid_i,
  output logic             rx_pkt_ready_o,
  // credits returned by the far side, extracted on arrival
  input  logic             rx_crd_valid_i,
  input  logic [CRD_W-1:0] rx_crd_i,
  // status
  output logic [CRD_W-1:0] tx_credits_o,
  output logic             crd_stall_o     // a beat waits for credits
);

  localparam int unsigned PW = D2D_PAYLOAD_W;

  typedef struct packed {
    logic [D2D_HDR_W-1:0] hdr;
    logic [PW-1:0]        payload;
    logic                 b_valid;
    axi_b_t               b;
    logic [CRD_W-1:0]     crd;
  } pkt_t;

  // the synthesized widths must agree with the data link layer
  initial assert (PKT_W == $bits(pkt_t))
    else $error("PKT_W %0d does not match packet struct %0d", PKT_W, $bits(pkt_t));

  // ------------------------------------------------------------- transmit
  logic [CRD_W-1:0] tx_crd_q, crd_ret_q;
  logic             wr_busy_q, rd_busy_q, w_open_q;
  logic             rr_ctrl_q, rr_data_q;
  pkt_t             out_q;
  logic             out_valid_q;

  logic load;
  logic can_aw, can_ar, can_w, can_r, can_b, has_crd;
  logic sel_aw, sel_ar, sel_w, sel_r, sel_b_only, sel_crd_only;
  pkt_t nxt;

  assign load    = !out_valid_q || tx_pkt_ready_i;
  assign has_crd = (tx_crd_q != '0);
  assign can_aw  = s_axi_req_i.aw_valid && !wr_busy_q;
  assign can_ar  = s_axi_req_i.ar_valid && !rd_busy_q;
  assign can_w   = s_axi_req_i.w_valid && w_open_q;
  assign can_r   = m_axi_rsp_i.r_valid;
  assign can_b   = m_axi_rsp_i.b_valid;

  always_comb begin
    sel_aw = 1'b0; sel_ar = 1'b0; sel_w = 1'b0; sel_r = 1'b0;
    sel_b_only = 1'b0; sel_crd_only = 1'b0;
    if (load) begin
      if (has_crd && (can_aw || can_ar)) begin
        if (can_aw && can_ar) begin
          sel_aw = !rr_ctrl_q;
          sel_ar = rr_ctrl_q;
        end else begin
          sel_aw = can_aw;
          sel_ar = can_ar;
        end
      end else if (has_crd && (can_w || can_r)) begin
        if (can_w && can_r) begin
          sel_w = !rr_data_q;
          sel_r = rr_data_q;
        end else begin
          sel_w = can_w;
          sel_r = can_r;
        end
      end else if (has_crd && can_b) begin
        sel_b_only = 1'b1;
      end else if (crd_ret_q != '0) begin
        sel_crd_only = 1'b1;
      end
    end
  end

  logic any_sel, send_b, pkt_uses_crd;
  assign send_b       = load && has_crd && can_b && !sel_crd_only;
  assign any_sel      = sel_aw || sel_ar || sel_w || sel_r || sel_b_only || sel_crd_only;
  assign pkt_uses_crd = sel_aw || sel_ar || sel_w || sel_r || sel_b_only;

  always_comb begin
    nxt         = '0;
    nxt.hdr     = HDR_NONE;
    if (sel_aw) begin nxt.hdr = HDR_AW; nxt.payload = PW'(s_axi_req_i.aw); end
    if (sel_ar) begin nxt.hdr = HDR_AR; nxt.payload = PW'(s_axi_req_i.ar); end
    if (sel_w)  begin nxt.hdr = HDR_W;  nxt.payload = PW'(s_axi_req_i.w);  end
    if (sel_r)  begin nxt.hdr = HDR_R;  nxt.payload = PW'(m_axi_rsp_i.r);  end
    nxt.b_valid = send_b;
    nxt.b       = send_b ? m_axi_rsp_i.b : '0;
    nxt.crd     = crd_ret_q;
  end

  // receive-side pops feed the credit return counter
  logic rx_pop;
  logic [CRD_W-1:0] crd_ret_d, tx_crd_d;
  always_comb begin
    crd_ret_d = crd_ret_q;
    if (any_sel) crd_ret_d = '0;
    if (rx_pop)  crd_ret_d = crd_ret_d + 1'b1;
    tx_crd_d = tx_crd_q;
    if (pkt_uses_crd)   tx_crd_d = tx_crd_d - 1'b1;
    if (rx_crd_valid_i) tx_crd_d = tx_crd_d + rx_crd_i;
  end

  // write response towards the local manager, freed by B or last R
  logic s_b_fire, s_r_last_fire;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tx_crd_q    <= CRD_W'(CRD);
      crd_ret_q   <= '0;
      wr_busy_q   <= 1'b0;
      rd_busy_q   <= 1'b0;
      w_open_q    <= 1'b0;
      rr_ctrl_q   <= 1'b0;
      rr_data_q   <= 1'b0;
      out_q       <= '0;
      out_valid_q <= 1'b0;
    end else begin
      tx_crd_q  <= tx_crd_d;
      crd_ret_q <= crd_ret_d;
      if (load) begin
        out_valid_q <= any_sel;
        if (any_sel) out_q <= nxt;
      end
      if (sel_aw || sel_ar) rr_ctrl_q <= sel_aw;
      if (sel_w  || sel_r)  rr_data_q <= sel_w;
      if (sel_aw) begin wr_busy_q <= 1'b1; w_open_q <= 1'b1; end
      if (sel_w && s_axi_req_i.w.last) w_open_q <= 1'b0;
      if (s_b_fire) wr_busy_q <= 1'b0;
      if (sel_ar) rd_busy_q <= 1'b1;
      if (s_r_last_fire) rd_busy_q <= 1'b0;
    end
  end

  assign tx_pkt_o       = out_q;
  assign tx_pkt_valid_o = out_valid_q;
  assign tx_credits_o   = tx_crd_q;
  assign crd_stall_o    = !has_crd && (can_aw || can_ar || can_w || can_r || can_b);

  // -------------------------------------------------------------- receive
  pkt_t head;
  assign head = pkt_t'(rx_pkt_i);

  logic   pl_done_q, b_done_q;
  axi_b_t b_hold_q;
  logic   b_hold_valid_q;

  logic head_aw, head_w, head_ar, head_r, head_none;
  assign head_aw   = rx_pkt_valid_i && (head.hdr == HDR_AW);
  assign head_w    = rx_pkt_valid_i && (head.hdr == HDR_W);
  assign head_ar   = rx_pkt_valid_i && (head.hdr == HDR_AR);
  assign head_r    = rx_pkt_valid_i && (head.hdr == HDR_R);
  assign head_none = rx_pkt_valid_i && (head.hdr == HDR_NONE);

  always_comb begin
    m_axi_req_o          = '0;
    m_axi_req_o.aw       = axi_ax_t'(head.payload[AX_W-1:0]);
    m_axi_req_o.ar       = axi_ax_t'(head.payload[AX_W-1:0]);
    m_axi_req_o.w        = axi_w_t'(head.payload[W_W-1:0]);
    m_axi_req_o.aw_valid = head_aw && !pl_done_q;
    m_axi_req_o.ar_valid = head_ar && !pl_done_q;
    m_axi_req_o.w_valid  = head_w && !pl_done_q;
    // responses for the far side are taken when they are packed
    m_axi_req_o.b_ready  = send_b;
    m_axi_req_o.r_ready  = sel_r;
  end

  always_comb begin
    s_axi_rsp_o          = '0;
    s_axi_rsp_o.aw_ready = sel_aw;
    s_axi_rsp_o.ar_ready = sel_ar;
    s_axi_rsp_o.w_ready  = sel_w;
    s_axi_rsp_o.r        = axi_r_t'(head.payload[R_W-1:0]);
    s_axi_rsp_o.r_valid  = head_r && !pl_done_q;
    s_axi_rsp_o.b        = b_hold_q;
    s_axi_rsp_o.b_valid  = b_hold_valid_q;
  end

  assign s_b_fire      = b_hold_valid_q && s_axi_req_i.b_ready;
  assign s_r_last_fire = s_axi_rsp_o.r_valid && s_axi_req_i.r_ready && s_axi_rsp_o.r.last;

  logic pl_fire, pl_ok, b_take, b_ok;
  assign pl_fire = (m_axi_req_o.aw_valid && m_axi_rsp_i.aw_ready) ||
                   (m_axi_req_o.ar_valid && m_axi_rsp_i.ar_ready) ||
                   (m_axi_req_o.w_valid  && m_axi_rsp_i.w_ready)  ||
                   (s_axi_rsp_o.r_valid  && s_axi_req_i.r_ready);
  assign pl_ok   = head_none || pl_done_q || pl_fire;
  assign b_take  = rx_pkt_valid_i && head.b_valid && !b_done_q &&
                   (!b_hold_valid_q || s_axi_req_i.b_ready);
  assign b_ok    = !head.b_valid || b_done_q || b_take;
  assign rx_pop  = rx_pkt_valid_i && pl_ok && b_ok;
  assign rx_pkt_ready_o = rx_pop;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pl_done_q      <= 1'b0;
      b_done_q       <= 1'b0;
      b_hold_q       <= '0;
      b_hold_valid_q <= 1'b0;
    end else begin
      if (s_b_fire) b_hold_valid_q <= 1'b0;
      if (b_take) begin
        b_hold_q       <= head.b;
        b_hold_valid_q <= 1'b1;
      end
      if (rx_pop) begin
        pl_done_q <= 1'b0;
        b_done_q  <= 1'b0;
      end else begin
        if (pl_fire) pl_done_q <= 1'b1;
        if (b_take)  b_done_q  <= 1'b1;
      end
    end
  end

  // ----------------------------------------------------------- assertions
  assert property (@(posedge clk_i) disable iff (!rst_ni) tx_crd_q <= CRD_W'(CRD))
    else $error("credit counter above CRD");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   tx_pkt_valid_o && !tx_pkt_ready_i |=> tx_pkt_valid_o && $stable(tx_pkt_o))
    else $error("packet changed while stalled");

endmodule
