// cpl_obi2axi: bridge from the 32-bit OBI bus to the 64-bit AXI4 bus.
//
// Lets the core reach the controlled system. Each OBI request is granted
// when the bridge is idle and becomes one single-beat AXI transaction of
// 4 bytes (len 0, size 2, INCR). A write sends AW and W together, with the
// 32-bit data and byte enables placed in the 64-bit lane chosen by
// addr[2]; the B response finishes it. A read sends AR and takes the
// 32-bit half of the R beat picked by addr[2]. The OBI response (rvalid,
// and rdata for reads) is raised in the cycle after B or R arrives. One
// request is in flight at a time. The paper names OBI-to-AXI adapters but
// not their inner workings; this single-beat scheme is this design's
// choice.
module cpl_obi2axi
  import cpl_pkg::*;
#(
  parameter logic [AXI_IW-1:0] AXI_ID = '0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o,
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i
);
  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_RESP} state_e;
  state_e      st_q;
  obi_req_t    r_q;
  logic        aw_done_q, w_done_q, rv_q;
  logic [31:0] rdata_q;

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.aw       = '{id: AXI_ID, addr: r_q.addr, len: 8'd0, size: 3'd2, burst: BURST_INCR};
    axi_req_o.ar       = axi_req_o.aw;
    axi_req_o.w.data   = {r_q.wdata, r_q.wdata};
    axi_req_o.w.strb   = r_q.addr[2] ? {r_q.be, 4'b0} : {4'b0, r_q.be};
    axi_req_o.w.last   = 1'b1;
    axi_req_o.aw_valid = (st_q == S_ADDR) && r_q.we && !aw_done_q;
    axi_req_o.w_valid  = (st_q == S_ADDR) && r_q.we && !w_done_q;
    axi_req_o.ar_valid = (st_q == S_ADDR) && !r_q.we;
    axi_req_o.b_ready  = (st_q == S_RESP) && r_q.we;
    axi_req_o.r_ready  = (st_q == S_RESP) && !r_q.we;
  end

  assign obi_rsp_o = '{gnt: (st_q == S_IDLE) && obi_req_i.req, rvalid: rv_q, rdata: rdata_q};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q      <= S_IDLE;
      r_q       <= '0;
      aw_done_q <= 1'b0;
      w_done_q  <= 1'b0;
      rv_q      <= 1'b0;
      rdata_q   <= '0;
    end else begin
      rv_q <= 1'b0;
      unique case (st_q)
        S_IDLE: if (obi_req_i.req) begin
          r_q       <= obi_req_i;
          aw_done_q <= 1'b0;
          w_done_q  <= 1'b0;
          st_q      <= S_ADDR;
        end
        S_ADDR: begin
          if (r_q.we) begin
            if (axi_req_o.aw_valid && axi_rsp_i.aw_ready) aw_done_q <= 1'b1;
            if (axi_req_o.w_valid && axi_rsp_i.w_ready)   w_done_q  <= 1'b1;
            if ((aw_done_q || axi_rsp_i.aw_ready) && (w_done_q || axi_rsp_i.w_ready))
              st_q <= S_RESP;
          end else if (axi_rsp_i.ar_ready) begin
            st_q <= S_RESP;
          end
        end
        S_RESP: begin
          if (r_q.we && axi_rsp_i.b_valid) begin
            rv_q    <= 1'b1;
            rdata_q <= '0;
            st_q    <= S_IDLE;
          end else if (!r_q.we && axi_rsp_i.r_valid) begin
            rv_q    <= 1'b1;
            rdata_q <= r_q.addr[2] ? axi_rsp_i.r.data[63:32] : axi_rsp_i.r.data[31:0];
            st_q    <= S_IDLE;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
