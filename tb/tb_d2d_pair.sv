// tb_d2d_pair: one near/far pair of D2D links with an AXI manager and a
// far AXI memory, running a fixed test sequence and reporting counts.
//
// Clock period 20 time units; the delay line is set to 5 taps of 1 unit,
// a quarter period, which gives the 270-degree forwarded clock. Checks:
// every read-back beat equals the beat written; the far memory holds the
// written data; the first write address appears at the far manager port
// within 8 cycles plus one per extra flit of a packet; for the wide configuration a 256-beat write keeps at
// least 80 % of the cycles busy with W beats; the credit back-pressure happened
// (the near manager holds off R beats for 300 cycles on the 256-beat read).
module tb_d2d_pair
  import cpl_pkg::*;
#(
  parameter int unsigned CH     = 8,
  parameter int unsigned LN     = 8,
  parameter int unsigned CRD    = 128,
  parameter int unsigned TMEM   = 1,
  parameter int unsigned NBURST = 4,
  parameter int unsigned TDELTA = 2,
  parameter string       NAME   = "pair"
) (
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  localparam int unsigned CRD_W = crd_bits(CRD);
  localparam int unsigned NCHUNK = (d2d_pkt_bits(CRD) + 2*CH*LN - 1) / (2*CH*LN);
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so asynchronous resets fire
  always #10 clk = ~clk;

  axi_req_t a_s_req, a_m_req, b_s_req, b_m_req;
  axi_rsp_t a_s_rsp, a_m_rsp, b_s_rsp, b_m_rsp;
  logic [CH-1:0] a2b_clk, b2a_clk, a2b_clk_d, b2a_clk_d;
  logic [CH-1:0][LN-1:0] a2b_dat, b2a_dat, a2b_dat_d, b2a_dat_d;
  logic [CRD_W-1:0] a_crd, b_crd, a_cnt, b_cnt;
  logic a_stall, b_stall;

  assign #(TDELTA) a2b_clk_d = a2b_clk;
  assign #(TDELTA) a2b_dat_d = a2b_dat;
  assign #(TDELTA) b2a_clk_d = b2a_clk;
  assign #(TDELTA) b2a_dat_d = b2a_dat;

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

  assign b_s_req = '0;     // far side issues no requests of its own
  assign a_m_rsp = '0;     // near side receives none

  tb_axi_master i_mst (.clk_i(clk), .req_o(a_s_req), .rsp_i(a_s_rsp));
  tb_axi_mem #(.TMEM(TMEM)) i_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(b_m_req), .rsp_o(b_m_rsp));

  int stall_cycles = 0, w_beats = 0;
  longint unsigned far_aw_cycle = 0;
  logic far_aw_seen = 1'b0;
  always @(posedge clk) begin
    if (a_stall || b_stall) stall_cycles++;
    if (b_m_req.aw_valid && !far_aw_seen) begin
      far_aw_seen  <= 1'b1;
      far_aw_cycle <= i_mst.cycle;
    end
  end

  int checks = 0, failures = 0;
  assign checks_o   = checks;
  assign failures_o = failures;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("[%s] FAIL: %s", NAME, what);
    end
  endtask

  initial begin
    logic [63:0] exp [256];
    int unsigned len, addr;
    done_o = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    for (int b = 0; b < int'(NBURST); b++) begin
      len  = (b == 0) ? 0 : (b == 1) ? 255 : $urandom_range(1, 31);
      addr = 32'h8000_0000 + b * 32'h1000;
      for (int i = 0; i <= int'(len); i++) begin
        exp[i] = {$urandom, $urandom};
        i_mst.wdata[i] = exp[i];
      end
      i_mst.write_burst(addr, len);
      check(i_mst.last_resp == 2'b00, "write response OKAY");
      if (b == 0)
        check(far_aw_seen && (far_aw_cycle - i_mst.aw_cycle) <= 8 + NCHUNK - 1,
              $sformatf("AW latency %0d cycles", far_aw_cycle - i_mst.aw_cycle));
      if (b == 1 && CRD >= 128) begin
        // 256 W beats plus AW and the B round trip
        $display("[%s] 256-beat write took %0d cycles", NAME, i_mst.last_cycles);
        check(i_mst.last_cycles * 80 <= 257 * 100 + 40 * 100, "write burst utilisation");
      end
      for (int i = 0; i <= int'(len); i++)
        check(i_mem.rd(29'(addr / 8 + i)) == exp[i], $sformatf("far memory word %0d", i));
      i_mst.r_hold = (b == 1) ? 300 : 0;   // far side must run out of credits
      i_mst.read_burst(addr, len);
      if (b == 1) $display("[%s] 256-beat read took %0d cycles", NAME, i_mst.last_cycles);
      for (int i = 0; i <= int'(len); i++)
        check(i_mst.rdata[i] == exp[i], $sformatf("read beat %0d", i));
    end
    // credits must all have come back
    repeat (50) @(posedge clk);
    check(a_crd == CRD_W'(CRD) && b_crd == CRD_W'(CRD), "all credits returned");
    check(stall_cycles > 0, "credit back-pressure occurred");
    $display("[%s] credit stall cycles %0d", NAME, stall_cycles);
    done_o = 1'b1;
  end
endmodule
