// tb_control_pulplet: end-to-end testbench of the controller chiplet at its
// default parameters (D2D link with 8 channels of 8 lanes and 128 credits,
// 512 KiB L2, 64 mailboxes, 128 interrupt lines).
//
// Test bench set-up: the chiplet's D2D wires are cross-connected, with a
// flight delay, to a second D2D link that stands for the controlled chip's
// side. Behind that far link sit a behavioural AXI memory (the controlled
// chip's sensor and actuator registers) and a behavioural AXI manager (the
// controlled chip's own processor, which boots and talks to the
// controller). The core is not part of the design: the testbench drives
// its instruction, data and shadow OBI ports and acts as its interrupt
// handler (acknowledging whatever the interrupt controller presents).
//
// Sequence: L2 access latency; remote firmware load into L2 over the link
// and instruction fetch of it; mailbox message + doorbell from the far
// side raising the core's interrupt; timer and PWM interrupts and PWM duty;
// core loads/stores to the controlled chip through the link; a periodic
// DMA gather of 500 sensor registers of 8 bytes every 125 000 cycles
// (250 us at 500 MHz) as in the power-management case study, with the core
// issuing external accesses concurrently; a DMA scatter crossing a 4 KiB
// page; a periodic DMA whose period is too short (overruns); a far read of
// 2 KiB that the far manager accepts only after 2500 cycles, so that the link runs out
// of credits; an external interrupt line. Each mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_control_pulplet;
  import cpl_pkg::*;
  localparam int unsigned CH = 8, LN = 8, CRD = 128;
  localparam int unsigned T_SHORT = 125000;      // 250 us at 500 MHz
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  always #10 clk = ~clk;

  // core ports
  obi_req_t obi_req = '0, instr_req = '0, shadow_req = '0;
  obi_rsp_t obi_rsp, instr_rsp, shadow_rsp;
  logic       irq_valid, irq_shv, irq_ack = 1'b0;
  logic [6:0] irq_id, irq_ack_id = '0;
  logic [7:0] irq_level;
  logic [31:0] ext_irq = '0;
  axi_req_t   m_axi_req, s_axi_req = '0;
  axi_rsp_t   m_axi_rsp = '0, s_axi_rsp;
  logic [CH-1:0] n2f_clk, f2n_clk, n2f_clk_d, f2n_clk_d;
  logic [CH-1:0][LN-1:0] n2f_dat, f2n_dat, n2f_dat_d, f2n_dat_d;
  logic pwm, near_stall, dma_busy;
  logic [7:0] near_crd;
  logic [63:0] mbox_irq;

  assign #(2) n2f_clk_d = n2f_clk;
  assign #(2) n2f_dat_d = n2f_dat;
  assign #(2) f2n_clk_d = f2n_clk;
  assign #(2) f2n_dat_d = f2n_dat;

  control_pulplet dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_instr_req_i (instr_req), .core_instr_rsp_o (instr_rsp),
    .core_data_req_i (obi_req), .core_data_rsp_o (obi_rsp),
    .core_shadow_req_i (shadow_req), .core_shadow_rsp_o (shadow_rsp),
    .irq_valid_o (irq_valid), .irq_id_o (irq_id), .irq_level_o (irq_level), .irq_shv_o (irq_shv),
    .irq_ack_i (irq_ack), .irq_ack_id_i (irq_ack_id), .irq_thresh_i (8'd0), .ext_irq_i (ext_irq),
    .m_axi_req_o (m_axi_req), .m_axi_rsp_i (m_axi_rsp), .s_axi_req_i (s_axi_req), .s_axi_rsp_o (s_axi_rsp),
    .d2d_dly_sel_i (4'd5), .d2d_tx_clk_o (n2f_clk), .d2d_tx_data_o (n2f_dat),
    .d2d_rx_clk_i (f2n_clk_d), .d2d_rx_data_i (f2n_dat_d),
    .pwm_o (pwm), .d2d_tx_credits_o (near_crd), .d2d_crd_stall_o (near_stall),
    .dma_busy_o (dma_busy), .mbox_irq_o (mbox_irq)
  );

  // far side: the controlled chip
  axi_req_t f_s_req, f_m_req;
  axi_rsp_t f_s_rsp, f_m_rsp;
  logic [7:0] far_crd, far_cnt;
  logic far_stall;
  cpl_d2d_link #(.CH (CH), .LN (LN), .CRD (CRD)) i_far (
    .clk_i (clk), .rst_ni (rst_n),
    .s_axi_req_i (f_s_req), .s_axi_rsp_o (f_s_rsp), .m_axi_req_o (f_m_req), .m_axi_rsp_i (f_m_rsp),
    .dly_sel_i (4'd5), .tx_clk_o (f2n_clk), .tx_data_o (f2n_dat), .rx_clk_i (n2f_clk_d), .rx_data_i (n2f_dat_d),
    .tx_credits_o (far_crd), .crd_stall_o (far_stall), .rx_fifo_count_o (far_cnt)
  );
  tb_axi_master i_host (.clk_i (clk), .req_o (f_s_req), .rsp_i (f_s_rsp));
  tb_axi_mem #(.TMEM (4)) i_sys (.clk_i (clk), .rst_ni (rst_n), .req_i (f_m_req), .rsp_o (f_m_rsp));

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

  // ------------------------------------------------------------ counters
  typedef enum int {
    M_REMOTE_L2, M_IFETCH, M_SHADOW, M_MBOX_IRQ, M_TIMER_IRQ, M_PWM_IRQ, M_PWM_HIGH, M_DMA_IRQ,
    M_DMA_LAUNCH, M_DMA_OVERRUN, M_AXI_CONTENTION, M_BURST_SPLIT, M_CRD_STALL, M_CORE_EXT,
    M_EXT_IRQ, M_D2D_FLITS, M_NUM
  } mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"remote write into L2 over the link", "instruction fetch from L2",
    "shadow-port access", "mailbox doorbell interrupt", "timer interrupt", "PWM period interrupt",
    "PWM high cycles", "DMA done interrupt", "periodic DMA launch", "DMA overrun",
    "AXI arbitration contention (DMA and core)", "DMA job split at a 4 KiB page",
    "D2D credit stall", "core access to the controlled chip", "external interrupt line",
    "flits sent on the D2D link (bypass set to D2D)"};

  int cyc = 0;
  int last_launch = -1, launch_gap_bad = 0, launch_gap = 0;
  logic dma_job_split_q = 1'b0;
  always @(posedge clk) begin
    cyc++;
    if (near_stall) mech[M_CRD_STALL]++;
    if (pwm) mech[M_PWM_HIGH]++;
    if (dut.g_d2d.i_link.tx_flit_valid) mech[M_D2D_FLITS]++;
    // one manager waits because the other one owns the outgoing read or write path
    if ((dut.i_axi_mux.m_req_i[1].ar_valid && dut.i_axi_mux.r_lock_q && !dut.i_axi_mux.r_own_q) ||
        (dut.i_axi_mux.m_req_i[0].ar_valid && dut.i_axi_mux.r_lock_q &&  dut.i_axi_mux.r_own_q) ||
        (dut.i_axi_mux.m_req_i[1].aw_valid && dut.i_axi_mux.w_lock_q && !dut.i_axi_mux.w_own_q) ||
        (dut.i_axi_mux.m_req_i[0].aw_valid && dut.i_axi_mux.w_lock_q &&  dut.i_axi_mux.w_own_q))
      mech[M_AXI_CONTENTION]++;
    if (dut.i_midend.launch_o) begin
      mech[M_DMA_LAUNCH]++;
      if (last_launch >= 0) launch_gap = cyc - last_launch;
      last_launch = cyc;
    end
    // a job's first burst shorter than the job means the back-end split it
    if (dut.i_dma.job_valid_i && dut.i_dma.job_ready_o) dma_job_split_q <= 1'b1;
    if (dma_job_split_q && (dut.i_dma.axi_req_o.ar_valid || dut.i_dma.axi_req_o.aw_valid)) begin
      axi_ax_t ax;
      ax = dut.i_dma.axi_req_o.ar_valid ? dut.i_dma.axi_req_o.ar : dut.i_dma.axi_req_o.aw;
      if ((32'(ax.len) + 1) * 8 < dut.i_dma.job_len_i && ((ax.addr + (32'(ax.len) + 1) * 8) % 4096 == 0))
        mech[M_BURST_SPLIT]++;
      dma_job_split_q <= 1'b0;
    end
  end

  // interrupt handler: acknowledge what is presented, count per line
  int irq_seen [128];
  always @(posedge clk) begin
    irq_ack <= 1'b0;
    if (irq_valid && !irq_ack) begin
      irq_ack    <= 1'b1;
      irq_ack_id <= irq_id;
      irq_seen[irq_id]++;
    end
  end

  // ------------------------------------------------------------ helpers
  task automatic clic_cfg(int line, logic [7:0] lvl, logic edge_trig);
    obi_write(CLIC_BASE + 4*line, {lvl, 5'd0, edge_trig ? 2'b01 : 2'b00, 1'b1, 7'd0, 1'b1, 8'd0});
  endtask

  task automatic port_read(ref obi_req_t rq, ref obi_rsp_t rs, input logic [31:0] a, output logic [31:0] d);
    rq = '{req: 1'b1, addr: a, we: 1'b0, be: 4'hF, wdata: '0};
    do @(posedge clk); while (!rs.gnt);
    #1 rq = '0;
    while (!rs.rvalid) @(posedge clk);
    d = rs.rdata;
    #1;
  endtask

  function automatic logic [63:0] sensor(int per, int i);
    return {32'(per), 32'hA000_0000 + 32'(i)};
  endfunction

  logic [31:0] d;
  int errs, t0, lat;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (5) @(posedge clk); #1;

    // ---- 1. L2 access latency from the core data port
    obi_write(L2_BASE + 32'h7_F000, 32'hCAFE_0001);
    obi_req = '{req: 1'b1, addr: L2_BASE + 32'h7_F000, we: 1'b0, be: 4'hF, wdata: '0};
    t0 = cyc;
    do @(posedge clk); while (!obi_rsp.gnt);
    #1 obi_req = '0;
    while (!obi_rsp.rvalid) @(posedge clk);
    lat = cyc - t0;
    `CHECK(obi_rsp.rdata == 32'hCAFE_0001, "top of L2 written and read by the core")
    `CHECK(lat == 2, $sformatf("core L2 access latency 2 cycles (got %0d)", lat))
    #1;

    // ---- interrupt controller set-up
    clic_cfg(5, 8'h80, 1'b0);           // mailbox 5, level
    clic_cfg(64, 8'h40, 1'b1);          // timer 0, edge
    clic_cfg(66, 8'h30, 1'b1);          // PWM, edge
    clic_cfg(67, 8'h60, 1'b1);          // DMA done, edge
    clic_cfg(68, 8'h20, 1'b0);          // external line 0, level

    // ---- 2. remote firmware load into L2 and instruction fetch
    for (int i = 0; i < 64; i++) i_host.wdata[i] = {32'h0000_1000 + 2*i + 1, 32'h0000_1000 + 2*i};
    i_host.write_burst(L2_BASE, 63);
    `CHECK(i_host.last_resp == 2'b00, "remote L2 write answered OKAY")
    mech[M_REMOTE_L2]++;
    i_host.read_burst(L2_BASE, 63);
    errs = 0;
    for (int i = 0; i < 64; i++) if (i_host.rdata[i] !== i_host.wdata[i]) errs++;
    `CHECK(errs == 0, "remote read-back of the firmware image")
    errs = 0;
    for (int i = 0; i < 16; i++) begin
      port_read(instr_req, instr_rsp, L2_BASE + 4*i, d);
      if (d !== 32'h0000_1000 + i) errs++;
      mech[M_IFETCH]++;
    end
    `CHECK(errs == 0, "instruction fetch returns the loaded image")
    shadow_req = '{req: 1'b1, addr: L2_BASE + 32'h100, we: 1'b0, be: 4'hF, wdata: '0};
    port_read(shadow_req, shadow_rsp, L2_BASE + 32'h100, d);
    `CHECK(d == 32'h0000_1040, "shadow port reads L2")
    mech[M_SHADOW]++;

    // ---- 3. mailbox from the far side
    for (int i = 0; i < 4; i++) i_host.wdata[i] = {32'hBB00_0000 + 2*i + 1, 32'hBB00_0000 + 2*i};
    i_host.write_burst(MBOX_BASE + 5*64, 3);
    i_host.wdata[0] = 64'h1;
    i_host.write_burst(MBOX_BASE + 5*64 + 32, 0);
    t0 = cyc;
    while (!(irq_valid && irq_id == 7'd5) && cyc - t0 < 200) @(posedge clk);
    `CHECK(irq_valid && irq_id == 7'd5 && irq_level == 8'h80 && irq_shv, "doorbell raises mailbox interrupt 5")
    if (irq_valid && irq_id == 7'd5) mech[M_MBOX_IRQ]++;
    #1;
    errs = 0;
    for (int i = 0; i < 8; i++) begin
      obi_read(MBOX_BASE + 5*64 + 4*i, d);
      if (d !== 32'hBB00_0000 + i) errs++;
    end
    `CHECK(errs == 0, "core reads the mailbox message")
    obi_write(MBOX_BASE + 5*64 + 32, 32'h0);
    repeat (4) @(posedge clk); #1;
    `CHECK(!mbox_irq[5], "doorbell cleared by the core")

    // ---- 4. timer and PWM
    obi_write(TIMER0_BASE + 32'h8, 32'd999);
    obi_write(TIMER0_BASE + 32'h0, 32'h1);
    obi_write(PWM_BASE + 32'h4, 32'd100);
    obi_write(PWM_BASE + 32'h8, 32'd25);
    obi_write(PWM_BASE + 32'h0, 32'h1);
    mech[M_PWM_HIGH] = 0;
    t0 = cyc;
    repeat (5000) @(posedge clk); #1;
    mech[M_TIMER_IRQ] = irq_seen[64];
    mech[M_PWM_IRQ]   = irq_seen[66];
    `CHECK(irq_seen[64] >= 4 && irq_seen[64] <= 6, $sformatf("timer period 1000 cycles: %0d interrupts in 5000", irq_seen[64]))
    `CHECK(mech[M_PWM_HIGH] >= 1225 && mech[M_PWM_HIGH] <= 1275, $sformatf("PWM duty 25%% (%0d high of 5000)", mech[M_PWM_HIGH]))
    obi_write(TIMER0_BASE + 32'h0, 32'h0);
    obi_write(PWM_BASE + 32'h0, 32'h0);

    // ---- 5. core loads and stores to the controlled chip
    for (int i = 0; i < 8; i++) obi_write(EXT_BASE + 32'h2000 + 4*i, 32'hD0D0_0000 + i);
    errs = 0;
    for (int i = 0; i < 8; i++) begin
      obi_read(EXT_BASE + 32'h2000 + 4*i, d);
      if (d !== 32'hD0D0_0000 + i) errs++;
      mech[M_CORE_EXT]++;
    end
    `CHECK(errs == 0, "core read-back through the link")
    `CHECK(i_sys.rd(29'((EXT_BASE + 32'h2000) >> 3)) == {32'hD0D0_0001, 32'hD0D0_0000}, "core store landed in the controlled chip")

    // ---- 6. periodic sensor gather: 10 banks x 50 registers of 8 bytes, every T_SHORT cycles
    for (int b = 0; b < 10; b++) for (int r = 0; r < 50; r++)
      i_sys.mem[29'(((32'h9000_0000 + b * 32'h1000) >> 3) + r)] = sensor(0, b * 50 + r);
    obi_write(DMA_BASE + 32'h00, 32'h9000_0000);
    obi_write(DMA_BASE + 32'h04, L2_BASE + 32'h1_0000);
    obi_write(DMA_BASE + 32'h08, 32'd400);
    obi_write(DMA_BASE + 32'h0C, 32'd10);
    obi_write(DMA_BASE + 32'h10, 32'h1000);
    obi_write(DMA_BASE + 32'h14, 32'd400);
    obi_write(DMA_BASE + 32'h18, 32'd1);
    obi_write(DMA_BASE + 32'h24, T_SHORT);
    obi_write(DMA_BASE + 32'h28, 32'd3);
    last_launch = -1;
    obi_write(DMA_BASE + 32'h2C, 32'h9);      // start, periodic, external -> L2
    for (int p = 0; p < 3; p++) begin
      int base_irq;
      base_irq = irq_seen[67];
      // the core keeps using the link while the DMA runs
      for (int i = 0; i < 4; i++) obi_read(EXT_BASE + 32'h2000 + 4*i, d);
      t0 = cyc;
      while (irq_seen[67] == base_irq && cyc - t0 < T_SHORT) @(posedge clk);
      #1;
      $display("sensor gather %0d finished %0d cycles after launch", p, cyc - last_launch);
      `CHECK(cyc - last_launch < T_SHORT, "gather of 500 registers fits in one period")
      errs = 0;
      for (int i = 0; i < 500; i++) begin
        logic [63:0] exp;
        exp = sensor(p, i);
        port_read(shadow_req, shadow_rsp, L2_BASE + 32'h1_0000 + 8*i, d);
        if (d !== exp[31:0]) errs++;
        port_read(shadow_req, shadow_rsp, L2_BASE + 32'h1_0000 + 8*i + 4, d);
        if (d !== exp[63:32]) errs++;
      end
      `CHECK(errs == 0, $sformatf("period %0d: 500 sensor values in L2 (%0d bad words)", p, errs))
      if (p > 0) `CHECK(launch_gap == T_SHORT, $sformatf("launch period %0d cycles (got %0d)", T_SHORT, launch_gap))
      for (int b = 0; b < 10; b++) for (int r = 0; r < 50; r++)
        i_sys.mem[29'(((32'h9000_0000 + b * 32'h1000) >> 3) + r)] = sensor(p + 1, b * 50 + r);
    end
    mech[M_DMA_IRQ] = irq_seen[67];
    `CHECK(mech[M_DMA_LAUNCH] == 3, $sformatf("3 periodic launches (got %0d)", mech[M_DMA_LAUNCH]))
    repeat (T_SHORT + 100) @(posedge clk); #1;
    `CHECK(mech[M_DMA_LAUNCH] == 3, "no launch after the last period")

    // ---- 7. actuator scatter: L2 -> controlled chip, 2112 bytes crossing a page
    obi_write(DMA_BASE + 32'h00, L2_BASE + 32'h1_0000);
    obi_write(DMA_BASE + 32'h04, 32'h9100_0F00);
    obi_write(DMA_BASE + 32'h08, 32'd2112);
    obi_write(DMA_BASE + 32'h0C, 32'd1);
    t0 = irq_seen[67];
    obi_write(DMA_BASE + 32'h2C, 32'h5);      // start, one shot, L2 -> external
    while (irq_seen[67] == t0) @(posedge clk);
    #1;
    errs = 0;
    for (int i = 0; i < 264; i++) begin
      logic [63:0] exp;
      exp = (i < 500) ? sensor(2, i) : 64'h0;
      if (i_sys.rd(29'((32'h9100_0F00 >> 3) + i)) !== exp) errs++;
    end
    `CHECK(errs == 0, $sformatf("scatter data in the controlled chip (%0d bad)", errs))

    // ---- 8. overrun: 2 KiB every 300 cycles
    obi_write(DMA_BASE + 32'h00, 32'h9000_0000);
    obi_write(DMA_BASE + 32'h04, L2_BASE + 32'h2_0000);
    obi_write(DMA_BASE + 32'h08, 32'd2048);
    obi_write(DMA_BASE + 32'h24, 32'd300);
    obi_write(DMA_BASE + 32'h28, 32'd6);
    obi_write(DMA_BASE + 32'h2C, 32'h9);
    repeat (3000) @(posedge clk);
    while (dma_busy) @(posedge clk);
    #1;
    obi_read(DMA_BASE + 32'h30, d);
    mech[M_DMA_OVERRUN] = d[15:8];
    `CHECK(d[15:8] > 0, "overruns reported in STATUS")

    // ---- 9. far read of 2 KiB accepted late: credits run out
    i_host.r_hold = 2500;
    i_host.read_burst(L2_BASE + 32'h1_0000, 255);
    i_host.r_hold = 0;
    errs = 0;
    for (int i = 0; i < 256; i++) if (i_host.rdata[i] !== sensor(2, i)) errs++;
    `CHECK(errs == 0, "2 KiB far read data")

    // ---- 10. external interrupt line
    t0 = irq_seen[68];
    ext_irq[0] = 1'b1;
    repeat (10) @(posedge clk);
    ext_irq[0] = 1'b0;
    mech[M_EXT_IRQ] = irq_seen[68] - t0;

    // ---- unmapped address
    obi_read(32'h3000_0000, d);
    `CHECK(d == 32'h0, "unmapped address reads zero")

    repeat (200) @(posedge clk); #1;
    `CHECK(near_crd == 8'(CRD) && far_crd == 8'(CRD), "all credits returned at the end")
    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-45s : %0d", mech_name[m], mech[m]);
      `CHECK(mech[m] > 0, $sformatf("mechanism happened: %s", mech_name[m]))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // stall watchdog: no test phase waits more than about T_SHORT cycles
  // without a response on the core data or shadow port
  int quiet = 0;
  always @(posedge clk) begin
    quiet = (obi_rsp.rvalid || shadow_rsp.rvalid) ? 0 : quiet + 1;
    if (quiet == 150000) begin
      $display("watchdog: no core port response for %0d cycles", quiet);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
      $finish;
    end
  end
  initial begin
    #40000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
