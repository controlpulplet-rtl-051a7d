// tb_d2d_sweep_point: one measurement point of the D2D throughput sweep.
//
// A near and a far D2D link (CH = 8, LN = 8, CRD credits) face each other
// across wires delayed by TDELTA_CYC clock cycles (a chain of short delay
// stages, so the forwarded clocks pass unchanged). A behavioural AXI manager drives the
// near link and a behavioural AXI memory with TMEM cycles of latency sits
// behind the far link. The point writes, then reads back, INCR bursts of
// 1, 2, 4, ... 256 beats of 8 bytes (8 B to 2 KiB) and reports, per burst
// size, the cycles from address to B (write) and from address to last R
// beat (read). Every read beat is compared with the word written.
module tb_d2d_sweep_point
  import cpl_pkg::*;
#(
  parameter int unsigned CRD        = 128,
  parameter int unsigned TDELTA_CYC = 0,
  parameter int unsigned TMEM       = 1
) (
  output logic done_o,
  output int   wr_cycles_o [9],
  output int   rd_cycles_o [9],
  output int   bad_words_o
);
  localparam int unsigned CH = 8, LN = 8;
  localparam int unsigned CRD_W = crd_bits(CRD);
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so asynchronous resets fire
  always #10 clk = ~clk;

  axi_req_t a_s_req, a_m_req, b_s_req, b_m_req;
  axi_rsp_t a_s_rsp, a_m_rsp, b_s_rsp, b_m_rsp;
  logic [CH-1:0] a2b_clk, b2a_clk, a2b_clk_d, b2a_clk_d;
  logic [CH-1:0][LN-1:0] a2b_dat, b2a_dat, a2b_dat_d, b2a_dat_d;
  logic [CRD_W-1:0] a_crd, b_crd, a_cnt, b_cnt;
  logic a_stall, b_stall;

  // wire flight time: 20 time units per cycle plus 2 units of skew, built
  // from stages of 5 units so that no clock or data pulse (10 units) is
  // shorter than one stage's delay
  localparam int unsigned NST = 4 * TDELTA_CYC;
  localparam int unsigned FLIGHT = 20 * TDELTA_CYC + 2;
  logic [NST:0][CH-1:0] a2b_clk_s, b2a_clk_s;
  logic [NST:0][CH-1:0][LN-1:0] a2b_dat_s, b2a_dat_s;
  assign a2b_clk_s[0] = a2b_clk;
  assign a2b_dat_s[0] = a2b_dat;
  assign b2a_clk_s[0] = b2a_clk;
  assign b2a_dat_s[0] = b2a_dat;
  for (genvar i = 0; i < NST; i++) begin : g_wire
    assign #(5) a2b_clk_s[i+1] = a2b_clk_s[i];
    assign #(5) a2b_dat_s[i+1] = a2b_dat_s[i];
    assign #(5) b2a_clk_s[i+1] = b2a_clk_s[i];
    assign #(5) b2a_dat_s[i+1] = b2a_dat_s[i];
  end
  // the stages start with arbitrary values: the receivers see idle wires
  // (clock high, data low) until the transmitters' idle state has crossed
  logic wires_up = 1'b0;
  initial #(FLIGHT + 40) wires_up = 1'b1;
  logic [CH-1:0] a2b_clk_e, b2a_clk_e;
  logic [CH-1:0][LN-1:0] a2b_dat_e, b2a_dat_e;
  assign #(2) a2b_clk_e = a2b_clk_s[NST];
  assign #(2) a2b_dat_e = a2b_dat_s[NST];
  assign #(2) b2a_clk_e = b2a_clk_s[NST];
  assign #(2) b2a_dat_e = b2a_dat_s[NST];
  assign a2b_clk_d = wires_up ? a2b_clk_e : '1;
  assign a2b_dat_d = wires_up ? a2b_dat_e : '0;
  assign b2a_clk_d = wires_up ? b2a_clk_e : '1;
  assign b2a_dat_d = wires_up ? b2a_dat_e : '0;

  cpl_d2d_link #(.CH(CH), .LN(LN), .CRD(CRD)) i_near (
    .clk_i(clk), .rst_ni(rst_n),
    .s_axi_req_i(a_s_req), .s_axi_rsp_o(a_s_rsp),
    .m_axi_req_o(a_m_req), .m_axi_rsp_i(a_m_rsp),
    .dly_sel_i(4'd5),
    .tx_clk_o(a2b_clk), .tx_data_o(a2b_dat),
    .rx_clk_i(b2a_clk_d), .rx_data_i(b2a_dat_d),
    .tx_credits_o(a_crd), .crd_stall_o(a_stall), .rx_fifo_count_o(a_cnt));

  cpl_d2d_link #(.CH(CH), .LN(LN), .CRD(CRD)) i_far (
    .clk_i(clk), .rst_ni(rst_n),
    .s_axi_req_i(b_s_req), .s_axi_rsp_o(b_s_rsp),
    .m_axi_req_o(b_m_req), .m_axi_rsp_i(b_m_rsp),
    .dly_sel_i(4'd5),
    .tx_clk_o(b2a_clk), .tx_data_o(b2a_dat),
    .rx_clk_i(a2b_clk_d), .rx_data_i(a2b_dat_d),
    .tx_credits_o(b_crd), .crd_stall_o(b_stall), .rx_fifo_count_o(b_cnt));

  assign b_s_req = '0;
  assign a_m_rsp = '0;

  tb_axi_master i_mst (.clk_i(clk), .req_o(a_s_req), .rsp_i(a_s_rsp));
  tb_axi_mem #(.TMEM(TMEM)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(b_m_req), .rsp_o(b_m_rsp));

  initial begin
    logic [63:0] exp [256];
    int unsigned len, addr;
    done_o = 1'b0;
    bad_words_o = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5 + 2 * TDELTA_CYC) @(posedge clk);
    for (int k = 0; k < 9; k++) begin
      len  = (1 << k) - 1;
      addr = 32'h8000_0000 + k * 32'h1000;
      for (int i = 0; i <= int'(len); i++) begin
        exp[i] = {$urandom, $urandom};
        i_mst.wdata[i] = exp[i];
      end
      i_mst.write_burst(addr, len);
      wr_cycles_o[k] = int'(i_mst.last_cycles);
      i_mst.read_burst(addr, len);
      rd_cycles_o[k] = int'(i_mst.last_cycles);
      for (int i = 0; i <= int'(len); i++)
        if (i_mst.rdata[i] != exp[i]) bad_words_o++;
    end
    repeat (50 + 2 * TDELTA_CYC) @(posedge clk);
    if (a_crd != CRD_W'(CRD) || b_crd != CRD_W'(CRD)) bad_words_o++;
    done_o = 1'b1;
  end
endmodule
