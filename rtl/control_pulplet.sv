// control_pulplet: top level of the real-time controller chiplet.
//
// What it is: the manager domain of a power/thermal controller meant to
// sit next to the controlled chip in a 2.5D package. The core itself is not
// part of this RTL; its three OBI ports (instruction fetch, data, and the
// shadow port used for context save) and its interrupt interface are top
// level ports, so any RV32 core with a CLIC interface can be attached.
//
// How it works:
//  * A 32-bit OBI crossbar (cpl_obi_xbar, 2-cycle access latency) links
//    five managers - core instruction, core data, core shadow, the
//    incoming AXI bridge and the system DMA - to the L2 scratchpad
//    (NB word-interleaved banks, 512 KiB in all), the 64 doorbell
//    mailboxes, two 32-bit timers, the PWM timer, the DMA configuration
//    registers (real-time mid-end), the CLIC registers and the outgoing
//    AXI bridge (addresses from 0x8000_0000).
//  * The outgoing AXI traffic of the core bridge and of the DMA is
//    arbitrated by cpl_axi_mux onto one 64-bit AXI4 port.
//  * Bypass network: a static choice (parameter USE_D2D) sends that port
//    either to the native AXI pins (m_axi_*) or into the D2D link, and
//    takes incoming requests from either the native s_axi_* pins or the D2D
//    link, into the AXI-to-OBI bridge. The unused side is tied off: in the
//    default D2D configuration the native m_axi_*/s_axi_* outputs are
//    constant zero and the native inputs are unread (and with USE_D2D=0
//    the D2D wires are), which lint reports as constant outputs and
//    unused inputs. That is the bypass itself, not a missing function.
//  * The CLIC (128 lines) receives: lines 0..63 mailbox doorbells, 64/65
//    timer 0/1, 66 PWM period, 67 DMA job done, 68..99 the ext_irq_i pins.
//
// Interface: clock and active-low asynchronous reset; OBI core ports;
// CLIC request (irq_valid_o/id/level/shv) with acknowledge and threshold
// inputs; native AXI manager and subordinate ports; D2D wires (CH
// forwarded clocks and CH x LN data wires per direction) and the delay
// line tap select; PWM output; status outputs for observation.
//
// Paper vs this design: block set, widths, counts (64 x 32 B mailboxes,
// 128 CLIC lines, 512 KiB L2, 64-bit AXI, CH=8/LN=8/CRD=128 D2D) follow the
// paper. The address map, the interrupt line assignment, the bank count
// and the use of register arrays for memories are this design's choices.
// The I/O DMA with its peripherals (GPIO, UART, I2C, SPI), the
// accelerator cluster, the FLL and the pad frame are not modelled; their
// interrupts enter through ext_irq_i.
module control_pulplet
  import cpl_pkg::*;
#(
  parameter bit          USE_D2D   = 1'b1,
  parameter int unsigned CH        = 8,
  parameter int unsigned LN        = 8,
  parameter int unsigned CRD       = 128,
  parameter int unsigned NTAPS     = 16,
  parameter int unsigned TAP_DELAY = 1,
  parameter int unsigned NUM_MBOX  = 64,
  parameter int unsigned NUM_IRQ   = 128,
  parameter int unsigned L2_BYTES  = 512 * 1024,
  parameter int unsigned NB        = 4,
  parameter int unsigned NUM_EXT   = 32,
  parameter int unsigned CRD_W     = crd_bits(CRD),
  parameter int unsigned SEL_W     = $clog2(NTAPS),
  parameter int unsigned ID_W      = $clog2(NUM_IRQ)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // core ports
  input  obi_req_t              core_instr_req_i,
  output obi_rsp_t              core_instr_rsp_o,
  input  obi_req_t              core_data_req_i,
  output obi_rsp_t              core_data_rsp_o,
  input  obi_req_t              core_shadow_req_i,
  output obi_rsp_t              core_shadow_rsp_o,
  // interrupt interface to the core
  output logic                  irq_valid_o,
  output logic [ID_W-1:0]       irq_id_o,
  output logic [7:0]            irq_level_o,
  output logic                  irq_shv_o,
  input  logic                  irq_ack_i,
  input  logic [ID_W-1:0]       irq_ack_id_i,
  input  logic [7:0]            irq_thresh_i,
  input  logic [NUM_EXT-1:0]    ext_irq_i,
  // native AXI4 ports (used when USE_D2D = 0)
  output axi_req_t              m_axi_req_o,
  input  axi_rsp_t              m_axi_rsp_i,
  input  axi_req_t              s_axi_req_i,
  output axi_rsp_t              s_axi_rsp_o,
  // D2D wires (used when USE_D2D = 1)
  input  logic [SEL_W-1:0]      d2d_dly_sel_i,
  output logic [CH-1:0]         d2d_tx_clk_o,
  output logic [CH-1:0][LN-1:0] d2d_tx_data_o,
  input  logic [CH-1:0]         d2d_rx_clk_i,
  input  logic [CH-1:0][LN-1:0] d2d_rx_data_i,
  // other outputs
  output logic                  pwm_o,
  output logic [CRD_W-1:0]      d2d_tx_credits_o,
  output logic                  d2d_crd_stall_o,
  output logic                  dma_busy_o,
  output logic [NUM_MBOX-1:0]   mbox_irq_o
);
  // ------------------------------------------------------------ address map
  localparam int unsigned NM     = 5;
  localparam int unsigned BB     = $clog2(NB);
  localparam int unsigned S_MBOX = NB;
  localparam int unsigned S_TMR0 = NB + 1;
  localparam int unsigned S_TMR1 = NB + 2;
  localparam int unsigned S_PWM  = NB + 3;
  localparam int unsigned S_DMA  = NB + 4;
  localparam int unsigned S_CLIC = NB + 5;
  localparam int unsigned S_EXT  = NB + 6;
  localparam int unsigned NS     = NB + 7;

  function automatic logic [NS-1:0][31:0] rule_base();
    logic [NS-1:0][31:0] r;
    for (int b = 0; b < NB; b++) r[b] = L2_BASE | (32'(b) << 2);
    r[S_MBOX] = MBOX_BASE;
    r[S_TMR0] = TIMER0_BASE;
    r[S_TMR1] = TIMER1_BASE;
    r[S_PWM]  = PWM_BASE;
    r[S_DMA]  = DMA_BASE;
    r[S_CLIC] = CLIC_BASE;
    r[S_EXT]  = EXT_BASE;
    return r;
  endfunction

  function automatic logic [NS-1:0][31:0] rule_mask();
    logic [NS-1:0][31:0] r;
    for (int b = 0; b < NB; b++) r[b] = ~(L2_BYTES - 1) | ((NB - 1) << 2);
    for (int s = NB; s < NS - 1; s++) r[s] = 32'hFFFF_F000;
    r[S_EXT] = 32'h8000_0000;
    return r;
  endfunction

  // ------------------------------------------------------------ OBI fabric
  obi_req_t m_req [NM];
  obi_rsp_t m_rsp [NM];
  obi_req_t s_req [NS];
  obi_rsp_t s_rsp [NS];

  assign m_req[0] = core_instr_req_i;
  assign m_req[1] = core_data_req_i;
  assign m_req[2] = core_shadow_req_i;
  assign core_instr_rsp_o  = m_rsp[0];
  assign core_data_rsp_o   = m_rsp[1];
  assign core_shadow_rsp_o = m_rsp[2];

  cpl_obi_xbar #(
    .NM (NM), .NS (NS), .RULE_BASE (rule_base()), .RULE_MASK (rule_mask())
  ) i_xbar (
    .clk_i, .rst_ni, .m_req_i (m_req), .m_rsp_o (m_rsp), .s_req_o (s_req), .s_rsp_i (s_rsp)
  );

  // ------------------------------------------------------------ L2
  for (genvar b = 0; b < NB; b++) begin : g_l2
    cpl_l2_bank #(.WORDS (L2_BYTES / 4 / NB), .BANK_BITS (BB)) i_bank (
      .clk_i, .rst_ni, .obi_req_i (s_req[b]), .obi_rsp_o (s_rsp[b])
    );
  end

  // ------------------------------------------------------------ peripherals
  logic tmr0_irq, tmr1_irq, pwm_irq;

  cpl_mailbox #(.NUM_MBOX (NUM_MBOX), .MBOX_BYTES (32)) i_mbox (
    .clk_i, .rst_ni, .obi_req_i (s_req[S_MBOX]), .obi_rsp_o (s_rsp[S_MBOX]), .irq_o (mbox_irq_o)
  );
  cpl_timer i_tmr0 (
    .clk_i, .rst_ni, .obi_req_i (s_req[S_TMR0]), .obi_rsp_o (s_rsp[S_TMR0]), .irq_o (tmr0_irq)
  );
  cpl_timer i_tmr1 (
    .clk_i, .rst_ni, .obi_req_i (s_req[S_TMR1]), .obi_rsp_o (s_rsp[S_TMR1]), .irq_o (tmr1_irq)
  );
  cpl_pwm_timer i_pwm (
    .clk_i, .rst_ni, .obi_req_i (s_req[S_PWM]), .obi_rsp_o (s_rsp[S_PWM]),
    .pwm_o, .irq_o (pwm_irq)
  );

  // ------------------------------------------------------------ system DMA
  logic [31:0] job_src, job_dst, job_len;
  logic        job_dir, job_valid, job_ready, job_done, dma_launch, dma_irq;
  axi_req_t    dma_axi_req;
  axi_rsp_t    dma_axi_rsp;

  cpl_rt_midend i_midend (
    .clk_i, .rst_ni, .obi_req_i (s_req[S_DMA]), .obi_rsp_o (s_rsp[S_DMA]),
    .job_src_o (job_src), .job_dst_o (job_dst), .job_len_o (job_len), .job_dir_o (job_dir),
    .job_valid_o (job_valid), .job_ready_i (job_ready), .job_done_i (job_done),
    .launch_o (dma_launch), .done_irq_o (dma_irq)
  );
  cpl_dma_backend i_dma (
    .clk_i, .rst_ni,
    .job_src_i (job_src), .job_dst_i (job_dst), .job_len_i (job_len), .job_dir_i (job_dir),
    .job_valid_i (job_valid), .job_ready_o (job_ready), .job_done_o (job_done),
    .axi_req_o (dma_axi_req), .axi_rsp_i (dma_axi_rsp),
    .obi_req_o (m_req[4]), .obi_rsp_i (m_rsp[4]), .busy_o (dma_busy_o)
  );

  // ------------------------------------------------------------ CLIC
  logic [NUM_IRQ-1:0] irq_lines;
  always_comb begin
    irq_lines                        = '0;
    irq_lines[NUM_MBOX-1:0]          = mbox_irq_o;
    irq_lines[NUM_MBOX]              = tmr0_irq;
    irq_lines[NUM_MBOX+1]            = tmr1_irq;
    irq_lines[NUM_MBOX+2]            = pwm_irq;
    irq_lines[NUM_MBOX+3]            = dma_irq;
    irq_lines[NUM_MBOX+4 +: NUM_EXT] = ext_irq_i;
  end

  cpl_clic #(.NUM_IRQ (NUM_IRQ)) i_clic (
    .clk_i, .rst_ni, .obi_req_i (s_req[S_CLIC]), .obi_rsp_o (s_rsp[S_CLIC]),
    .irq_i (irq_lines), .thresh_i (irq_thresh_i),
    .irq_valid_o, .irq_id_o, .irq_level_o, .irq_shv_o, .irq_ack_i, .irq_ack_id_i
  );

  // ------------------------------------------------------------ AXI side
  axi_req_t core_axi_req, out_req, in_req;
  axi_rsp_t core_axi_rsp, out_rsp, in_rsp;
  axi_req_t mux_m_req [2];
  axi_rsp_t mux_m_rsp [2];

  cpl_obi2axi #(.AXI_ID (4'd1)) i_obi2axi (
    .clk_i, .rst_ni, .obi_req_i (s_req[S_EXT]), .obi_rsp_o (s_rsp[S_EXT]),
    .axi_req_o (core_axi_req), .axi_rsp_i (core_axi_rsp)
  );

  assign mux_m_req[0] = dma_axi_req;
  assign mux_m_req[1] = core_axi_req;
  assign dma_axi_rsp  = mux_m_rsp[0];
  assign core_axi_rsp = mux_m_rsp[1];

  cpl_axi_mux i_axi_mux (
    .clk_i, .rst_ni, .m_req_i (mux_m_req), .m_rsp_o (mux_m_rsp), .s_req_o (out_req), .s_rsp_i (out_rsp)
  );

  cpl_axi2obi i_axi2obi (
    .clk_i, .rst_ni, .axi_req_i (in_req), .axi_rsp_o (in_rsp),
    .obi_req_o (m_req[3]), .obi_rsp_i (m_rsp[3])
  );

  // ------------------------------------------------------------ bypass network
  if (USE_D2D) begin : g_d2d
    cpl_d2d_link #(
      .CH (CH), .LN (LN), .CRD (CRD), .NTAPS (NTAPS), .TAP_DELAY (TAP_DELAY)
    ) i_link (
      .clk_i, .rst_ni,
      .s_axi_req_i (out_req), .s_axi_rsp_o (out_rsp),
      .m_axi_req_o (in_req),  .m_axi_rsp_i (in_rsp),
      .dly_sel_i (d2d_dly_sel_i),
      .tx_clk_o (d2d_tx_clk_o), .tx_data_o (d2d_tx_data_o),
      .rx_clk_i (d2d_rx_clk_i), .rx_data_i (d2d_rx_data_i),
      .tx_credits_o (d2d_tx_credits_o), .crd_stall_o (d2d_crd_stall_o),
      .rx_fifo_count_o ()
    );
    assign m_axi_req_o = '0;
    assign s_axi_rsp_o = '0;
  end else begin : g_native
    assign m_axi_req_o      = out_req;
    assign out_rsp          = m_axi_rsp_i;
    assign in_req           = s_axi_req_i;
    assign s_axi_rsp_o      = in_rsp;
    assign d2d_tx_clk_o     = '0;
    assign d2d_tx_data_o    = '0;
    assign d2d_tx_credits_o = '0;
    assign d2d_crd_stall_o  = 1'b0;
  end

  initial begin
    assert (NUM_MBOX + 4 + NUM_EXT <= NUM_IRQ) else $fatal(1, "too many interrupt sources");
    assert (L2_BYTES <= 32'h0100_0000)          else $fatal(1, "L2 overlaps other regions");
  end
endmodule
