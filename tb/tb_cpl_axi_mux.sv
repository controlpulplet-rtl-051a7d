// tb_cpl_axi_mux: self-checking testbench of the two-to-one AXI arbiter.
//
// Two behavioural managers (standing in for the DMA and the core bridge)
// issue write and read bursts at the same time, with different lengths,
// into one behavioural memory. Checks: all data lands where each manager
// wrote it and reads return the right data to the right manager, B and R
// never reach the wrong manager, both managers make progress under
// contention (round-robin: they alternate when both wait), and at most one
// write and one read are in flight downstream.
module tb_cpl_axi_mux;
  import cpl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  axi_req_t m_req [2];
  axi_rsp_t m_rsp [2];
  axi_req_t s_req;
  axi_rsp_t s_rsp;

  `define CHECK(cond, msg) \
    begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end end

  always #5 clk = ~clk;
  tb_axi_master i_m0 (.clk_i (clk), .req_o (m_req[0]), .rsp_i (m_rsp[0]));
  tb_axi_master i_m1 (.clk_i (clk), .req_o (m_req[1]), .rsp_i (m_rsp[1]));
  cpl_axi_mux dut (.clk_i (clk), .rst_ni (rst_n), .m_req_i (m_req), .m_rsp_o (m_rsp),
                   .s_req_o (s_req), .s_rsp_i (s_rsp));
  tb_axi_mem #(.TMEM (2)) i_mem (.clk_i (clk), .rst_ni (rst_n), .req_i (s_req), .rsp_o (s_rsp));

  // protocol monitor: routing and in-flight limits
  int wr_infl = 0, rd_infl = 0, bad = 0, order_w [$], order_r [$];
  always @(posedge clk) begin
    for (int m = 0; m < 2; m++) begin
      if (m_rsp[m].b_valid && m_rsp[m].b.id != 4'(m + 1)) bad++;
      if (m_rsp[m].r_valid && m_rsp[m].r.id != 4'(m + 5)) bad++;
      if (m_req[m].aw_valid && m_rsp[m].aw_ready) order_w.push_back(m);
      if (m_req[m].ar_valid && m_rsp[m].ar_ready) order_r.push_back(m);
    end
    if (s_req.aw_valid && s_rsp.aw_ready) wr_infl++;
    if (s_req.b_ready && s_rsp.b_valid) wr_infl--;
    if (s_req.ar_valid && s_rsp.ar_ready) rd_infl++;
    if (s_req.r_ready && s_rsp.r_valid && s_rsp.r.last) rd_infl--;
    if (wr_infl > 1 || rd_infl > 1) bad++;
  end

  task automatic mgr(int m);
    for (int k = 0; k < 6; k++) begin
      int len;
      logic [31:0] a;
      len = (m == 0) ? 15 + k : 3 + k;
      a   = 32'h8000_0000 + m * 32'h1_0000 + k * 32'h400;
      for (int i = 0; i <= len; i++)
        if (m == 0) i_m0.wdata[i] = {32'(m), 32'(k * 1000 + i)};
        else        i_m1.wdata[i] = {32'(m), 32'(k * 1000 + i)};
      if (m == 0) i_m0.write_burst(a, len, 4'd1); else i_m1.write_burst(a, len, 4'd2);
      if (m == 0) i_m0.read_burst(a, len, 4'd5);  else i_m1.read_burst(a, len, 4'd6);
      for (int i = 0; i <= len; i++) begin
        logic [63:0] got;
        got = (m == 0) ? i_m0.rdata[i] : i_m1.rdata[i];
        if (got !== {32'(m), 32'(k * 1000 + i)}) bad_data++;
      end
    end
  endtask
  int bad_data = 0;

  int alternations;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    fork
      mgr(0);
      mgr(1);
    join
    `CHECK(bad_data == 0, $sformatf("read data returned to each manager (%0d bad)", bad_data))
    `CHECK(bad == 0, $sformatf("responses routed to their owner, one write/read in flight (%0d errors)", bad))
    `CHECK(order_w.size() == 12 && order_r.size() == 12, "all 24 bursts granted")
    alternations = 0;
    for (int i = 1; i < order_w.size(); i++) if (order_w[i] != order_w[i-1]) alternations++;
    `CHECK(alternations >= 6, $sformatf("both managers served under contention (%0d alternations)", alternations))
    for (int m = 0; m < 2; m++)
      for (int i = 0; i <= 15; i++)
        `CHECK(i_mem.rd(29'((32'h8000_0000 + m * 32'h1_0000) >> 3) + 29'(i)) == {32'(m), 32'(i)} || i > (m == 0 ? 15 : 3),
               $sformatf("memory content manager %0d beat %0d", m, i))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
