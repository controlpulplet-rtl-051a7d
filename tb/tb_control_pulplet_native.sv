// tb_control_pulplet_native: the controller chiplet with its bypass network
// set to the native AXI ports (USE_D2D = 0), for packages that wire the
// controlled chip's AXI bus directly.
//
// A behavioural AXI memory sits on the outgoing port and a behavioural AXI
// manager on the incoming port. Checks: a remote burst write into L2 and
// its read-back, core loads/stores and a DMA transfer reaching the memory
// through the native port, the D2D wires staying silent, and the
// forwarded clocks idle. Also measures the core's round trip to the
// controlled chip without the link.
module tb_control_pulplet_native;
  import cpl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  always #10 clk = ~clk;

  obi_req_t obi_req = '0, idle_req = '0;
  obi_rsp_t obi_rsp, instr_rsp, shadow_rsp;
  logic       irq_valid, irq_shv;
  logic [6:0] irq_id;
  logic [7:0] irq_level, crd;
  axi_req_t   m_axi_req, s_axi_req;
  axi_rsp_t   m_axi_rsp, s_axi_rsp;
  logic [7:0] tx_clk;
  logic [7:0][7:0] tx_dat;
  logic pwm, stall, busy;
  logic [63:0] mbox_irq;

  control_pulplet #(.USE_D2D (1'b0)) dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_instr_req_i (idle_req), .core_instr_rsp_o (instr_rsp),
    .core_data_req_i (obi_req), .core_data_rsp_o (obi_rsp),
    .core_shadow_req_i (idle_req), .core_shadow_rsp_o (shadow_rsp),
    .irq_valid_o (irq_valid), .irq_id_o (irq_id), .irq_level_o (irq_level), .irq_shv_o (irq_shv),
    .irq_ack_i (1'b0), .irq_ack_id_i (7'd0), .irq_thresh_i (8'd0), .ext_irq_i (32'd0),
    .m_axi_req_o (m_axi_req), .m_axi_rsp_i (m_axi_rsp), .s_axi_req_i (s_axi_req), .s_axi_rsp_o (s_axi_rsp),
    .d2d_dly_sel_i (4'd5), .d2d_tx_clk_o (tx_clk), .d2d_tx_data_o (tx_dat),
    .d2d_rx_clk_i (8'd0), .d2d_rx_data_i ('0),
    .pwm_o (pwm), .d2d_tx_credits_o (crd), .d2d_crd_stall_o (stall),
    .dma_busy_o (busy), .mbox_irq_o (mbox_irq)
  );
  tb_axi_master i_host (.clk_i (clk), .req_o (s_axi_req), .rsp_i (s_axi_rsp));
  tb_axi_mem #(.TMEM (4)) i_sys (.clk_i (clk), .rst_ni (rst_n), .req_i (m_axi_req), .rsp_o (m_axi_rsp));

// `CHECK(cond, msg) counts a check and reports a failure.
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end end

task automatic obi_write(input logic [31:0] addr, input logic [31:0] data,
                         input logic [3:0] be = 4'hF);
  obi_req.req   = 1'b1;
  obi_req.addr  = addr;
  obi_req.we    = 1'b1;
  obi_req.be    = be;
  obi_req.wdata = data;
  do @(posedge clk); while (!obi_rsp.gnt);
  #1 obi_req = '0;
  while (!obi_rsp.rvalid) @(posedge clk);
  @(posedge clk); #1;
endtask

task automatic obi_read(input logic [31:0] addr, output logic [31:0] data);
  obi_req.req   = 1'b1;
  obi_req.addr  = addr;
  obi_req.we    = 1'b0;
  obi_req.be    = 4'hF;
  obi_req.wdata = '0;
  do @(posedge clk); while (!obi_rsp.gnt);
  #1 obi_req = '0;
  while (!obi_rsp.rvalid) @(posedge clk);
  data = obi_rsp.rdata;
  @(posedge clk); #1;
endtask

  int wire_activity = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (tx_clk != 0 || tx_dat != '0) wire_activity++;
  end

  logic [31:0] d;
  int errs, t0;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (3) @(posedge clk); #1;
    for (int i = 0; i < 32; i++) i_host.wdata[i] = {32'h5000_0000 + 2*i + 1, 32'h5000_0000 + 2*i};
    i_host.write_burst(L2_BASE + 32'h400, 31);
    `CHECK(i_host.last_resp == 2'b00, "native remote write OKAY")
    i_host.read_burst(L2_BASE + 32'h400, 31);
    errs = 0;
    for (int i = 0; i < 32; i++) if (i_host.rdata[i] !== i_host.wdata[i]) errs++;
    `CHECK(errs == 0, "native remote read-back of L2")
    obi_read(L2_BASE + 32'h404, d);
    `CHECK(d == 32'h5000_0001, "core sees the remote write")
    obi_write(EXT_BASE + 32'h10, 32'h1234_ABCD);
    t0 = cyc;
    obi_read(EXT_BASE + 32'h10, d);
    $display("core read round trip through the native port: %0d cycles", cyc - t0);
    `CHECK(d == 32'h1234_ABCD, "core load/store through the native port")
    // one-shot DMA L2 -> external
    obi_write(DMA_BASE + 32'h00, L2_BASE + 32'h400);
    obi_write(DMA_BASE + 32'h04, 32'h8800_0000);
    obi_write(DMA_BASE + 32'h08, 32'd256);
    obi_write(DMA_BASE + 32'h2C, 32'h5);
    @(posedge clk);
    while (busy) @(posedge clk);
    #1;
    errs = 0;
    for (int i = 0; i < 32; i++) if (i_sys.rd(29'((32'h8800_0000 >> 3) + i)) !== i_host.wdata[i]) errs++;
    `CHECK(errs == 0, "DMA through the native port")
    `CHECK(wire_activity == 0 && crd == 0 && !stall, "D2D wires silent in native mode")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
