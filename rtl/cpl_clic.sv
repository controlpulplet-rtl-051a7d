// cpl_clic: core-local interrupt controller (RISC-V CLIC style).
//
// NUM_IRQ input lines. Every line i has one 32-bit control word at byte
// offset 4*i, laid out like the RISC-V CLIC draft's clicint registers:
//   bits  [0]     ip    pending
//   bits  [8]     ie    enable
//   bits [16]     shv   selective hardware vectoring for this line
//   bits [18:17]  trig  0 = level, 1 = rising edge
//   bits [31:24]  ctl   interrupt level (priority)
// A level-triggered line's pending bit follows the input; an edge-triggered
// line's pending bit is set by a rising edge, cleared when the core takes
// the interrupt or by software. Each cycle the controller picks, among the
// pending and enabled lines, the one with the highest level (equal levels:
// the highest line number wins) and, if that level is above the core's
// threshold, presents id, level and SHV bit to the core one cycle later
// (registered). The core acknowledges with irq_ack_i and the id it takes.
//
// The 128 lines, level-based prioritisation, vectoring and SHV are the
// paper's; the register layout, tie rule and edge detection follow the
// RISC-V CLIC draft and are this design's choice.
module cpl_clic
  import cpl_pkg::*;
#(
  parameter int unsigned NUM_IRQ = 128,
  parameter int unsigned ID_W    = $clog2(NUM_IRQ)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  obi_req_t           obi_req_i,
  output obi_rsp_t           obi_rsp_o,
  input  logic [NUM_IRQ-1:0] irq_i,
  input  logic [7:0]         thresh_i,
  output logic               irq_valid_o,
  output logic [ID_W-1:0]    irq_id_o,
  output logic [7:0]         irq_level_o,
  output logic               irq_shv_o,
  input  logic               irq_ack_i,
  input  logic [ID_W-1:0]    irq_ack_id_i
);
  logic [NUM_IRQ-1:0] ip_q, ie_q, shv_q, edge_q, irq_prev_q;
  logic [7:0]         ctl_q [NUM_IRQ];
  logic               rvalid_q;
  logic [31:0]        rdata_q;
  logic [ID_W-1:0]    ridx;

  assign ridx = obi_req_i.addr[2 +: ID_W];

  // effective pending bits
  logic [NUM_IRQ-1:0] pend;
  for (genvar i = 0; i < NUM_IRQ; i++) begin : g_pend
    assign pend[i] = edge_q[i] ? ip_q[i] : irq_i[i];
  end

  // priority selection
  logic            best_valid;
  logic [ID_W-1:0] best_id;
  logic [7:0]      best_lvl;
  always_comb begin
    best_valid = 1'b0;
    best_id    = '0;
    best_lvl   = '0;
    for (int i = 0; i < NUM_IRQ; i++) begin
      if (pend[i] && ie_q[i] && (!best_valid || ctl_q[i] >= best_lvl)) begin
        best_valid = 1'b1;
        best_id    = ID_W'(i);
        best_lvl   = ctl_q[i];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ip_q        <= '0;
      ie_q        <= '0;
      shv_q       <= '0;
      edge_q      <= '0;
      irq_prev_q  <= '0;
      rvalid_q    <= 1'b0;
      rdata_q     <= '0;
      irq_valid_o <= 1'b0;
      irq_id_o    <= '0;
      irq_level_o <= '0;
      irq_shv_o   <= 1'b0;
      for (int i = 0; i < NUM_IRQ; i++) ctl_q[i] <= '0;
    end else begin
      irq_prev_q <= irq_i;
      for (int i = 0; i < NUM_IRQ; i++)
        if (irq_i[i] && !irq_prev_q[i]) ip_q[i] <= 1'b1;
      if (irq_ack_i) ip_q[irq_ack_id_i] <= 1'b0;
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        if (obi_req_i.we) begin
          if (obi_req_i.be[0]) ip_q[ridx]   <= obi_req_i.wdata[0];
          if (obi_req_i.be[1]) ie_q[ridx]   <= obi_req_i.wdata[8];
          if (obi_req_i.be[2]) begin
            shv_q[ridx]  <= obi_req_i.wdata[16];
            edge_q[ridx] <= (obi_req_i.wdata[18:17] == 2'b01);
          end
          if (obi_req_i.be[3]) ctl_q[ridx]  <= obi_req_i.wdata[31:24];
        end else begin
          rdata_q <= {ctl_q[ridx], 5'd0, 1'b0, edge_q[ridx], shv_q[ridx],
                      7'd0, ie_q[ridx], 7'd0, pend[ridx]};
        end
      end
      irq_valid_o <= best_valid && (best_lvl > thresh_i) && !irq_ack_i;
      irq_id_o    <= best_id;
      irq_level_o <= best_lvl;
      irq_shv_o   <= shv_q[best_id];
    end
  end

  assign obi_rsp_o = '{gnt: obi_req_i.req, rvalid: rvalid_q, rdata: rdata_q};
endmodule
