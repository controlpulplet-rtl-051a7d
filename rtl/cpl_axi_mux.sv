// cpl_axi_mux: two-to-one AXI4 arbiter in front of the outgoing port.
//
// The system DMA (manager 0) and the core's AXI bridge (manager 1) share
// the single outgoing AXI4 port towards the controlled system. Writes and
// reads are arbitrated independently, round-robin. An AW handshake locks
// the write path to its manager until that manager's B handshake; W beats
// and B are routed to the owner. An AR handshake locks the read path until
// the last R beat. One write and one read are thus in flight at a time,
// which matches the D2D link behind it; IDs pass unchanged. The paper
// shows this arbitration point but not its policy; round-robin and the
// locking are this design's choice.
module cpl_axi_mux
  import cpl_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t m_req_i [2],
  output axi_rsp_t m_rsp_o [2],
  output axi_req_t s_req_o,
  input  axi_rsp_t s_rsp_i
);
  logic w_lock_q, r_lock_q, w_own_q, r_own_q, w_rr_q, r_rr_q;
  logic w_sel, r_sel;

  always_comb begin
    if (m_req_i[0].aw_valid && m_req_i[1].aw_valid) w_sel = w_rr_q;
    else                                            w_sel = m_req_i[1].aw_valid;
    if (w_lock_q) w_sel = w_own_q;
    if (m_req_i[0].ar_valid && m_req_i[1].ar_valid) r_sel = r_rr_q;
    else                                            r_sel = m_req_i[1].ar_valid;
    if (r_lock_q) r_sel = r_own_q;
  end

  always_comb begin
    s_req_o          = '0;
    s_req_o.aw       = m_req_i[w_sel].aw;
    s_req_o.aw_valid = !w_lock_q && m_req_i[w_sel].aw_valid;
    s_req_o.w        = m_req_i[w_own_q].w;
    s_req_o.w_valid  = w_lock_q && m_req_i[w_own_q].w_valid;
    s_req_o.b_ready  = w_lock_q && m_req_i[w_own_q].b_ready;
    s_req_o.ar       = m_req_i[r_sel].ar;
    s_req_o.ar_valid = !r_lock_q && m_req_i[r_sel].ar_valid;
    s_req_o.r_ready  = r_lock_q && m_req_i[r_own_q].r_ready;
    for (int m = 0; m < 2; m++) begin
      m_rsp_o[m]          = '0;
      m_rsp_o[m].b        = s_rsp_i.b;
      m_rsp_o[m].r        = s_rsp_i.r;
      m_rsp_o[m].aw_ready = !w_lock_q && (w_sel == m[0]) && s_rsp_i.aw_ready;
      m_rsp_o[m].w_ready  = w_lock_q && (w_own_q == m[0]) && s_rsp_i.w_ready;
      m_rsp_o[m].b_valid  = w_lock_q && (w_own_q == m[0]) && s_rsp_i.b_valid;
      m_rsp_o[m].ar_ready = !r_lock_q && (r_sel == m[0]) && s_rsp_i.ar_ready;
      m_rsp_o[m].r_valid  = r_lock_q && (r_own_q == m[0]) && s_rsp_i.r_valid;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_lock_q <= 1'b0; r_lock_q <= 1'b0;
      w_own_q  <= 1'b0; r_own_q  <= 1'b0;
      w_rr_q   <= 1'b0; r_rr_q   <= 1'b0;
    end else begin
      if (s_req_o.aw_valid && s_rsp_i.aw_ready) begin
        w_lock_q <= 1'b1;
        w_own_q  <= w_sel;
        w_rr_q   <= !w_sel;
      end
      if (s_req_o.b_ready && s_rsp_i.b_valid) w_lock_q <= 1'b0;
      if (s_req_o.ar_valid && s_rsp_i.ar_ready) begin
        r_lock_q <= 1'b1;
        r_own_q  <= r_sel;
        r_rr_q   <= !r_sel;
      end
      if (s_req_o.r_ready && s_rsp_i.r_valid && s_rsp_i.r.last) r_lock_q <= 1'b0;
    end
  end
endmodule
