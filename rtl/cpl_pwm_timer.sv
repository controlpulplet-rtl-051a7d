// cpl_pwm_timer: PWM timer for periodic actuation (e.g. motor control).
//
// While enabled, a counter runs from 0 to PERIOD-1 and wraps; pwm_o is high
// while the counter is below DUTY, so the duty cycle is DUTY/PERIOD. At
// each wrap irq_o pulses for one cycle. New PERIOD and DUTY values take
// effect at the next wrap, so a pulse is never cut short. Register map
// (OBI words): 0x0 CTRL (bit 0 enable), 0x4 PERIOD, 0x8 DUTY, 0xC COUNT
// (read only). The paper only names a PWM timer; everything else here is
// this design's choice.
module cpl_pwm_timer
  import cpl_pkg::*;
#(
  parameter int unsigned WIDTH = 32
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o,
  output logic     pwm_o,
  output logic     irq_o
);
  logic             en_q, rvalid_q;
  logic [WIDTH-1:0] cnt_q, period_q, duty_q, period_sh_q, duty_sh_q;
  logic [31:0]      rdata_q;
  logic             wrap;

  assign wrap = en_q && (cnt_q >= period_q - 1'b1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      en_q        <= 1'b0;
      cnt_q       <= '0;
      period_q    <= WIDTH'(1);
      duty_q      <= '0;
      period_sh_q <= WIDTH'(1);
      duty_sh_q   <= '0;
      pwm_o       <= 1'b0;
      irq_o       <= 1'b0;
      rvalid_q    <= 1'b0;
      rdata_q     <= '0;
    end else begin
      irq_o <= wrap;
      pwm_o <= en_q && (cnt_q < duty_q);
      if (en_q) cnt_q <= wrap ? '0 : cnt_q + 1'b1;
      if (wrap || !en_q) begin
        period_q <= period_sh_q;
        duty_q   <= duty_sh_q;
      end
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req && obi_req_i.we) begin
        unique case (obi_req_i.addr[3:2])
          2'd0: begin en_q <= obi_req_i.wdata[0]; cnt_q <= '0; end
          2'd1: period_sh_q <= WIDTH'(obi_req_i.wdata);
          2'd2: duty_sh_q   <= WIDTH'(obi_req_i.wdata);
          default: ;
        endcase
      end
      if (obi_req_i.req && !obi_req_i.we) begin
        unique case (obi_req_i.addr[3:2])
          2'd0: rdata_q <= {31'd0, en_q};
          2'd1: rdata_q <= 32'(period_sh_q);
          2'd2: rdata_q <= 32'(duty_sh_q);
          2'd3: rdata_q <= 32'(cnt_q);
        endcase
      end
    end
  end

  assign obi_rsp_o = '{gnt: obi_req_i.req, rvalid: rvalid_q, rdata: rdata_q};
endmodule
