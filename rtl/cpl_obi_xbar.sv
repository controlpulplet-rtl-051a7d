// cpl_obi_xbar: 32-bit OBI crossbar of the manager domain.
//
// NM managers reach NS subordinates. Subordinate s is selected when
// (addr & RULE_MASK[s]) == RULE_BASE[s]; a mask that includes low address
// bits expresses word interleaving across memory banks. An address that
// matches no rule is granted at once and answered with zero data.
// Each subordinate has a round-robin arbiter over the managers requesting
// it; a grant from the subordinate is passed back to the chosen manager in
// the same cycle. The id of every granted manager is queued per
// subordinate (subordinates answer in order) and the response is routed
// back through a register, so a single-cycle memory behind the crossbar
// answers two cycles after the request: the constant 2-cycle access
// latency of the paper's interconnect. A manager may keep several
// requests open towards one subordinate but must wait for its responses
// before turning to another, which keeps responses in order.
module cpl_obi_xbar
  import cpl_pkg::*;
#(
  parameter int unsigned NM = 2,
  parameter int unsigned NS = 2,
  parameter logic [NS-1:0][31:0] RULE_BASE = '{32'h1000_0000, 32'h0000_0000},
  parameter logic [NS-1:0][31:0] RULE_MASK = '{32'hF000_0000, 32'hF000_0000},
  parameter int unsigned MW = (NM > 1) ? $clog2(NM) : 1,
  parameter int unsigned SW = $clog2(NS + 1)
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t m_req_i [NM],
  output obi_rsp_t m_rsp_o [NM],
  output obi_req_t s_req_o [NS],
  input  obi_rsp_t s_rsp_i [NS]
);
  localparam int unsigned ERR = NS;   // index of the internal error target

  // ---------------------------------------------------- decode
  logic [SW-1:0] tgt [NM];
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      tgt[m] = SW'(ERR);
      for (int s = NS - 1; s >= 0; s--)
        if ((m_req_i[m].addr & RULE_MASK[s]) == RULE_BASE[s]) tgt[m] = SW'(s);
    end
  end

  // per-manager ordering guard
  logic [SW-1:0] last_tgt_q [NM];
  logic [2:0]    outst_q    [NM];
  logic [NM-1:0] m_ok;
  for (genvar m = 0; m < NM; m++) begin : g_guard
    assign m_ok[m] = m_req_i[m].req && ((outst_q[m] == 0) || (last_tgt_q[m] == tgt[m])) &&
                     (outst_q[m] != 3'd7);
  end

  // ---------------------------------------------------- arbitration
  logic [MW-1:0] rr_q   [NS+1];
  logic [MW-1:0] sel    [NS+1];
  logic          any    [NS+1];
  logic          q_rdy  [NS+1];
  logic [MW-1:0] q_head [NS+1];
  logic          q_vld  [NS+1];
  logic          s_gnt  [NS+1];
  logic          s_rv   [NS+1];
  logic [31:0]   s_rd   [NS+1];

  always_comb begin
    for (int s = 0; s <= NS; s++) begin
      any[s] = 1'b0;
      sel[s] = '0;
      for (int k = 0; k < NM; k++) begin
        int m;
        m = (int'(rr_q[s]) + k) % NM;
        if (!any[s] && m_ok[m] && tgt[m] == SW'(s)) begin
          any[s] = 1'b1;
          sel[s] = MW'(m);
        end
      end
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_sub
    assign s_req_o[s] = (any[s] && q_rdy[s]) ? m_req_i[sel[s]] : '0;
    assign s_gnt[s]   = any[s] && q_rdy[s] && s_rsp_i[s].gnt;
    assign s_rv[s]    = s_rsp_i[s].rvalid;
    assign s_rd[s]    = s_rsp_i[s].rdata;
  end
  // error target: always grants, answers next cycle
  logic err_rv_q;
  assign s_gnt[ERR] = any[ERR] && q_rdy[ERR];
  assign s_rv[ERR]  = err_rv_q;
  assign s_rd[ERR]  = '0;

  for (genvar s = 0; s <= NS; s++) begin : g_q
    cpl_fifo #(.WIDTH(MW), .DEPTH(4)) i_idq (
      .clk_i, .rst_ni,
      .wdata_i (sel[s]), .push_i (s_gnt[s]), .ready_o (q_rdy[s]),
      .rdata_o (q_head[s]), .valid_o (q_vld[s]), .pop_i (s_rv[s] && q_vld[s]),
      .count_o ()
    );
  end

  // ---------------------------------------------------- responses
  logic [NM-1:0] gnt_m, rv_m_d;
  logic [31:0]   rd_m_d [NM];
  always_comb begin
    for (int m = 0; m < NM; m++) begin
      gnt_m[m]  = 1'b0;
      rv_m_d[m] = 1'b0;
      rd_m_d[m] = '0;
      for (int s = 0; s <= NS; s++) begin
        if (s_gnt[s] && sel[s] == MW'(m)) gnt_m[m] = 1'b1;
        if (s_rv[s] && q_vld[s] && q_head[s] == MW'(m)) begin
          rv_m_d[m] = 1'b1;
          rd_m_d[m] = s_rd[s];
        end
      end
    end
  end

  logic [NM-1:0] rv_m_q;
  logic [31:0]   rd_m_q [NM];
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      err_rv_q <= 1'b0;
      rv_m_q   <= '0;
      for (int m = 0; m < NM; m++) begin
        rd_m_q[m]     <= '0;
        outst_q[m]    <= '0;
        last_tgt_q[m] <= '0;
      end
      for (int s = 0; s <= NS; s++) rr_q[s] <= '0;
    end else begin
      err_rv_q <= s_gnt[ERR];
      rv_m_q   <= rv_m_d;
      for (int m = 0; m < NM; m++) begin
        rd_m_q[m]  <= rd_m_d[m];
        outst_q[m] <= outst_q[m] + 3'(gnt_m[m]) - 3'(rv_m_d[m]);
        if (gnt_m[m]) last_tgt_q[m] <= tgt[m];
      end
      for (int s = 0; s <= NS; s++)
        if (s_gnt[s]) rr_q[s] <= MW'((int'(sel[s]) + 1) % NM);
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_rsp
    assign m_rsp_o[m] = '{gnt: gnt_m[m], rvalid: rv_m_q[m], rdata: rd_m_q[m]};
  end
endmodule
