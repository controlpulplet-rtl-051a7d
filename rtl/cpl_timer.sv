// cpl_timer: 32-bit system timer, the tick source of the real-time OS.
//
// The counter advances by one every PRESC+1 clock cycles while enabled.
// When it reaches the compare value it raises irq_o for one cycle and
// restarts from zero, so the interrupt period is (CMP+1)*(PRESC+1) cycles.
// Register map (OBI words): 0x0 CTRL (bit 0 enable), 0x4 COUNT (writable),
// 0x8 CMP, 0xC PRESC. Requests are granted at once and answered one cycle
// later. The 32-bit width is the paper's; the compare-and-restart
// behaviour and the prescaler are this design's choice.
module cpl_timer
  import cpl_pkg::*;
#(
  parameter int unsigned WIDTH = 32
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o,
  output logic     irq_o
);
  logic             en_q, rvalid_q;
  logic [WIDTH-1:0] cnt_q, cmp_q, presc_q, pcnt_q;
  logic [31:0]      rdata_q;
  logic             tick, match;

  assign tick  = en_q && (pcnt_q == presc_q);
  assign match = tick && (cnt_q == cmp_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q     <= 1'b0;
      cnt_q    <= '0;
      cmp_q    <= '1;
      presc_q  <= '0;
      pcnt_q   <= '0;
      irq_o    <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      irq_o <= match;
      if (en_q) pcnt_q <= tick ? '0 : pcnt_q + 1'b1;
      if (tick) cnt_q <= match ? '0 : cnt_q + 1'b1;
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req && obi_req_i.we) begin
        unique case (obi_req_i.addr[3:2])
          2'd0: begin en_q <= obi_req_i.wdata[0]; pcnt_q <= '0; end
          2'd1: cnt_q   <= WIDTH'(obi_req_i.wdata);
          2'd2: cmp_q   <= WIDTH'(obi_req_i.wdata);
          2'd3: presc_q <= WIDTH'(obi_req_i.wdata);
        endcase
      end
      if (obi_req_i.req && !obi_req_i.we) begin
        unique case (obi_req_i.addr[3:2])
          2'd0: rdata_q <= {31'd0, en_q};
          2'd1: rdata_q <= 32'(cnt_q);
          2'd2: rdata_q <= 32'(cmp_q);
          2'd3: rdata_q <= 32'(presc_q);
        endcase
      end
    end
  end

  assign obi_rsp_o = '{gnt: obi_req_i.req, rvalid: rvalid_q, rdata: rdata_q};
endmodule
