// tb_cpl_mailbox: self-checking testbench of the mailbox unit.
//
// Writes a distinct 32-byte message into every one of the 64 mailboxes,
// rings a subset of doorbells and checks: the message reads back (with a
// partial byte-enable write on one word), exactly the rung mailboxes raise
// their interrupt line, clearing a doorbell drops its line, unmapped
// offsets read zero, and every request is answered one cycle after grant.
module tb_cpl_mailbox;
  import cpl_pkg::*;
  localparam int NUM_MBOX = 64;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  obi_req_t obi_req = '0;
  obi_rsp_t obi_rsp;
  logic [NUM_MBOX-1:0] irq;

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
  cpl_mailbox #(.NUM_MBOX (NUM_MBOX), .MBOX_BYTES (32)) dut (
    .clk_i (clk), .rst_ni (rst_n), .obi_req_i (obi_req), .obi_rsp_o (obi_rsp), .irq_o (irq)
  );

  function automatic logic [31:0] msg(int m, int w);
    return 32'hA500_0000 ^ (m << 8) ^ w ^ (m * 32'h0101_0000);
  endfunction

  // latency: response exactly one cycle after the granted request
  int lat_bad = 0;
  logic req_d;
  always @(posedge clk) begin
    req_d <= obi_req.req && obi_rsp.gnt;
    if (rst_n && (obi_rsp.rvalid != req_d)) lat_bad++;
  end

  logic [NUM_MBOX-1:0] rung;
  logic [31:0] d;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    `CHECK(irq == '0, "no interrupt after reset")
    for (int m = 0; m < NUM_MBOX; m++)
      for (int w = 0; w < 8; w++) obi_write(MBOX_BASE + m*64 + w*4, msg(m, w));
    obi_write(MBOX_BASE + 5*64 + 4, 32'h0000_BEEF, 4'b0011);   // partial write
    for (int m = 0; m < NUM_MBOX; m++)
      for (int w = 0; w < 8; w++) begin
        logic [31:0] exp;
        exp = msg(m, w);
        if (m == 5 && w == 1) exp[15:0] = 16'hBEEF;
        obi_read(MBOX_BASE + m*64 + w*4, d);
        `CHECK(d == exp, $sformatf("mailbox %0d word %0d read back", m, w))
      end
    `CHECK(irq == '0, "no interrupt before a doorbell")
    rung = '0;
    for (int m = 0; m < NUM_MBOX; m += 3) begin
      obi_write(MBOX_BASE + m*64 + 32, 32'h1);
      rung[m] = 1'b1;
      `CHECK(irq == rung, $sformatf("doorbell %0d raises exactly its line", m))
    end
    obi_read(MBOX_BASE + 3*64 + 32, d);
    `CHECK(d[0] == 1'b1, "doorbell reads back as set")
    obi_write(MBOX_BASE + 3*64 + 32, 32'h0);
    rung[3] = 1'b0;
    `CHECK(irq == rung, "clearing a doorbell drops its line")
    obi_read(MBOX_BASE + 7*64 + 48, d);
    `CHECK(d == 32'h0, "unmapped offset reads zero")
    `CHECK(lat_bad == 0, "every response one cycle after grant")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
