// tb_cpl_obi_xbar: self-checking testbench of the OBI crossbar and the L2
// banks behind it.
//
// Three managers reach four word-interleaved L2 banks (cpl_l2_bank), one
// slow peripheral-like subordinate that grants randomly and answers after a
// random delay, and an unmapped hole. Each manager runs random reads and
// byte-enable writes against a reference memory, with its own address
// windows so results are deterministic. Checks: every read returns the
// reference data, the hole reads zero and does not hang, a lone access to
// L2 completes in 2 cycles (request to response), consecutive words land
// in consecutive banks, every manager finishes (no starvation), and a
// manager never sees a response it did not ask for.
module tb_cpl_obi_xbar;
  import cpl_pkg::*;
  localparam int NM = 3, NB = 4, NS = NB + 1;
  localparam logic [NS-1:0][31:0] BASE = {32'h1A10_0000, 32'h1C00_000C, 32'h1C00_0008, 32'h1C00_0004, 32'h1C00_0000};
  localparam logic [NS-1:0][31:0] MASK = {32'hFFFF_F000, 32'hFFF8_000C, 32'hFFF8_000C, 32'hFFF8_000C, 32'hFFF8_000C};
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  obi_req_t m_req [NM];
  obi_rsp_t m_rsp [NM];
  obi_req_t s_req [NS];
  obi_rsp_t s_rsp [NS];

  `define CHECK(cond, msg) \
    begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end end

  always #5 clk = ~clk;
  cpl_obi_xbar #(.NM (NM), .NS (NS), .RULE_BASE (BASE), .RULE_MASK (MASK)) dut (
    .clk_i (clk), .rst_ni (rst_n), .m_req_i (m_req), .m_rsp_o (m_rsp), .s_req_o (s_req), .s_rsp_i (s_rsp)
  );
  for (genvar b = 0; b < NB; b++) begin : g_bank
    cpl_l2_bank #(.WORDS (32768), .BANK_BITS (2)) i_bank (
      .clk_i (clk), .rst_ni (rst_n), .obi_req_i (s_req[b]), .obi_rsp_o (s_rsp[b]));
  end

  // slow subordinate: random grant, in-order answers 1..4 cycles later
  logic [31:0] slow_mem [1024];
  logic        slow_gnt;
  int          slow_q [$];
  int          slow_t [$];
  logic        slow_rv;
  logic [31:0] slow_rd;
  int          cyc = 0;
  always_ff @(posedge clk) slow_gnt <= ($urandom_range(0, 2) == 0);
  assign s_rsp[NB] = '{gnt: s_req[NB].req && slow_gnt, rvalid: slow_rv, rdata: slow_rd};
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin slow_rv <= 1'b0; slow_rd <= '0; end
    else begin
      cyc++;
      slow_rv <= 1'b0;
      if (slow_q.size() > 0 && slow_t[0] <= cyc) begin
        slow_rv <= 1'b1;
        slow_rd <= (slow_q[0] < 0) ? 32'h0 : slow_mem[slow_q[0]];
        void'(slow_q.pop_front());
        void'(slow_t.pop_front());
      end
      if (s_req[NB].req && slow_gnt) begin
        int idx;
        idx = int'(s_req[NB].addr[11:2]);
        if (s_req[NB].we) begin
          for (int b = 0; b < 4; b++) if (s_req[NB].be[b]) slow_mem[idx][b*8 +: 8] = s_req[NB].wdata[b*8 +: 8];
          slow_q.push_back(-1);
        end else slow_q.push_back(idx);
        slow_t.push_back(cyc + $urandom_range(1, 4) + ((slow_t.size() > 0) ? (slow_t[$] - cyc) : 0));
      end
    end
  end

  // bank usage counters
  int bank_hits [NB];
  always @(posedge clk) for (int b = 0; b < NB; b++) if (s_req[b].req && s_rsp[b].gnt) bank_hits[b]++;

  // unsolicited-response monitor
  int pend [NM], unsol = 0;
  always @(posedge clk) for (int m = 0; m < NM; m++) begin
    if (m_rsp[m].rvalid) begin if (pend[m] == 0) unsol++; else pend[m]--; end
    if (m_req[m].req && m_rsp[m].gnt) pend[m]++;
  end

  task automatic acc(int m, logic [31:0] a, logic we, logic [3:0] be, logic [31:0] wd, output logic [31:0] rd,
                     output int lat);
    int t0;
    m_req[m] = '{req: 1'b1, addr: a, we: we, be: be, wdata: wd};
    t0 = cyc;
    do @(posedge clk); while (!m_rsp[m].gnt);
    #1 m_req[m] = '0;
    while (!m_rsp[m].rvalid) @(posedge clk);
    rd  = m_rsp[m].rdata;
    lat = cyc - t0;
    #1;
  endtask

  int bad_data [NM], done_ops [NM];
  task automatic mgr(int m);
    logic [31:0] ref_l2 [64];
    logic [31:0] ref_sl [16];
    logic [31:0] rd;
    int lat;
    for (int i = 0; i < 64; i++) ref_l2[i] = '0;
    for (int i = 0; i < 64; i++) begin
      acc(m, 32'h1C00_0000 + m * 32'h1000 + 4*i, 1'b1, 4'hF, 32'(m * 32'h0100_0000 + i), rd, lat);
      ref_l2[i] = 32'(m * 32'h0100_0000 + i);
    end
    for (int i = 0; i < 16; i++) begin
      acc(m, 32'h1A10_0000 + m * 64 + 4*i, 1'b1, 4'hF, 32'hF000_0000 + m * 256 + i, rd, lat);
      ref_sl[i] = 32'hF000_0000 + m * 256 + i;
    end
    for (int k = 0; k < 300; k++) begin
      int i, sel;
      logic [3:0] be;
      logic [31:0] wd;
      sel = $urandom_range(0, 9);
      be  = 4'($urandom_range(1, 15));
      wd  = $urandom;
      if (sel < 6) begin
        i = $urandom_range(0, 63);
        if ($urandom_range(0, 1)) begin
          acc(m, 32'h1C00_0000 + m * 32'h1000 + 4*i, 1'b1, be, wd, rd, lat);
          for (int b = 0; b < 4; b++) if (be[b]) ref_l2[i][b*8 +: 8] = wd[b*8 +: 8];
        end else begin
          acc(m, 32'h1C00_0000 + m * 32'h1000 + 4*i, 1'b0, 4'hF, 0, rd, lat);
          if (rd !== ref_l2[i]) bad_data[m]++;
        end
      end else if (sel < 9) begin
        i = $urandom_range(0, 15);
        acc(m, 32'h1A10_0000 + m * 64 + 4*i, 1'b0, 4'hF, 0, rd, lat);
        if (rd !== ref_sl[i]) bad_data[m]++;
      end else begin
        acc(m, 32'h3000_0000 + 4 * $urandom_range(0, 100), 1'b0, 4'hF, 0, rd, lat);
        if (rd !== 32'h0) bad_data[m]++;
      end
      done_ops[m]++;
    end
  endtask

  logic [31:0] rd;
  int lat;
  initial begin
    for (int m = 0; m < NM; m++) m_req[m] = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // lone access latency
    acc(0, 32'h1C00_0100, 1'b1, 4'hF, 32'h1234_5678, rd, lat);
    acc(0, 32'h1C00_0100, 1'b0, 4'hF, 0, rd, lat);
    `CHECK(rd == 32'h1234_5678, "lone L2 read back")
    `CHECK(lat == 2, $sformatf("L2 access latency 2 cycles (got %0d)", lat))
    for (int b = 0; b < NB; b++) bank_hits[b] = 0;
    for (int i = 0; i < 8; i++) acc(1, 32'h1C00_2000 + 4*i, 1'b1, 4'hF, i, rd, lat);
    `CHECK(bank_hits[0] == 2 && bank_hits[1] == 2 && bank_hits[2] == 2 && bank_hits[3] == 2,
           "consecutive words interleaved over the 4 banks")
    fork
      mgr(0); mgr(1); mgr(2);
    join
    for (int m = 0; m < NM; m++) begin
      `CHECK(bad_data[m] == 0, $sformatf("manager %0d data (%0d bad)", m, bad_data[m]))
      `CHECK(done_ops[m] == 300, $sformatf("manager %0d completed all accesses", m))
    end
    `CHECK(unsol == 0, "no unsolicited responses")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
