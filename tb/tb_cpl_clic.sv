// tb_cpl_clic: self-checking testbench of the 128-line interrupt controller.
//
// Configures every line with a random level (priority), enable and SHV bit
// through the register port and reads one back. Then drives random
// level-triggered input patterns and thresholds and compares, one cycle
// later, the presented id/level/SHV against a reference model (highest
// level wins, ties to the highest id, level must exceed the threshold):
// this also checks the one-cycle request latency. Finally switches a line
// to rising-edge mode and checks that a pulse is latched as pending, that
// the core's acknowledge clears it, and that software can clear it.
module tb_cpl_clic;
  import cpl_pkg::*;
  localparam int N = 128;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  obi_req_t obi_req = '0;
  obi_rsp_t obi_rsp;
  logic [N-1:0] irq = '0;
  logic [7:0]   thresh = '0;
  logic         v, shv, ack = 1'b0;
  logic [6:0]   id, ack_id = '0;
  logic [7:0]   lvl;

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

  always #5 clk = ~clk;
  cpl_clic #(.NUM_IRQ (N)) dut (
    .clk_i (clk), .rst_ni (rst_n), .obi_req_i (obi_req), .obi_rsp_o (obi_rsp),
    .irq_i (irq), .thresh_i (thresh), .irq_valid_o (v), .irq_id_o (id),
    .irq_level_o (lvl), .irq_shv_o (shv), .irq_ack_i (ack), .irq_ack_id_i (ack_id)
  );

  logic [7:0] m_lvl [N];
  logic       m_ie  [N];
  logic       m_shv [N];

  logic [31:0] d;
  int mism = 0, seen_valid = 0;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      m_lvl[i] = 8'($urandom_range(0, 15) * 16);
      m_ie[i]  = ($urandom_range(0, 3) != 0);
      m_shv[i] = $urandom_range(0, 1);
      obi_write(CLIC_BASE + 4*i, {m_lvl[i], 5'd0, 2'b00, m_shv[i], 7'd0, m_ie[i], 8'd0});
    end
    obi_read(CLIC_BASE + 4*17, d);
    `CHECK(d[31:24] == m_lvl[17] && d[8] == m_ie[17] && d[16] == m_shv[17], "control word read back")
    for (int t = 0; t < 400; t++) begin
      logic       ev;
      logic [6:0] eid;
      logic [7:0] el;
      for (int w = 0; w < N; w += 32) irq[w +: 32] = $urandom & $urandom & $urandom;
      thresh = 8'($urandom_range(0, 200));
      ev = 1'b0; eid = '0; el = '0;
      for (int i = 0; i < N; i++)
        if (irq[i] && m_ie[i] && (!ev || m_lvl[i] >= el)) begin ev = 1'b1; eid = 7'(i); el = m_lvl[i]; end
      ev = ev && (el > thresh);
      @(posedge clk); #1;
      if (v !== ev || (ev && (id !== eid || lvl !== el || shv !== m_shv[eid]))) begin
        mism++;
        if (mism < 5) $display("mismatch: got %0b %0d %0d exp %0b %0d %0d", v, id, lvl, ev, eid, el);
      end
      if (ev) seen_valid++;
    end
    checks++; if (mism != 0) begin failures++; $display("FAIL %0d arbitration mismatches", mism); end
    `CHECK(seen_valid > 50, "arbitration exercised with valid requests")
    // edge-triggered line
    irq = '0; thresh = 8'd0;
    obi_write(CLIC_BASE + 4*100, {8'hF0, 5'd0, 2'b01, 1'b1, 7'd0, 1'b1, 8'd0});
    repeat (2) @(posedge clk); #1;
    `CHECK(!v, "edge line idle before a pulse")
    irq[100] = 1'b1; @(posedge clk); #1; irq[100] = 1'b0;
    repeat (2) @(posedge clk); #1;
    `CHECK(v && id == 7'd100 && lvl == 8'hF0 && shv, "edge pulse latched as pending")
    ack = 1'b1; ack_id = 7'd100; @(posedge clk); #1; ack = 1'b0;
    repeat (2) @(posedge clk); #1;
    `CHECK(!v, "acknowledge clears the edge pending bit")
    irq[100] = 1'b1; @(posedge clk); #1; irq[100] = 1'b0;
    repeat (2) @(posedge clk); #1;
    `CHECK(v, "second pulse pending again")
    obi_write(CLIC_BASE + 4*100, 32'h0, 4'b0001);
    repeat (2) @(posedge clk); #1;
    `CHECK(!v, "software clears the pending bit")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
