// tb_cpl_timer: self-checking testbench of the 32-bit system timer.
//
// Programs CMP and PRESC, enables the timer and measures the distance
// between interrupt pulses, which must equal (CMP+1)*(PRESC+1) cycles, and
// that each pulse lasts one cycle. Also checks register read-back, that a
// disabled timer neither counts nor interrupts, and a second setting.
module tb_cpl_timer;
  import cpl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  obi_req_t obi_req = '0;
  obi_rsp_t obi_rsp;
  logic irq;

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
  cpl_timer dut (.clk_i (clk), .rst_ni (rst_n), .obi_req_i (obi_req), .obi_rsp_o (obi_rsp), .irq_o (irq));

  int cyc = 0, last_irq = -1, n_irq = 0, period_seen = 0, wide = 0;
  always @(posedge clk) begin
    cyc++;
    if (irq) begin
      if (last_irq >= 0) period_seen = cyc - last_irq;
      if (last_irq == cyc - 1) wide++;
      last_irq = cyc;
      n_irq++;
    end
  end

  task automatic measure(int cmp, int presc);
    int p0;
    obi_write(32'h0, 32'h0);
    obi_write(32'h4, 32'h0);
    obi_write(32'h8, cmp);
    obi_write(32'hC, presc);
    obi_write(32'h0, 32'h1);
    n_irq = 0;
    last_irq = -1;
    while (n_irq < 4) @(posedge clk);
    #1;
    `CHECK(period_seen == (cmp + 1) * (presc + 1),
           $sformatf("period %0d for CMP=%0d PRESC=%0d (got %0d)", (cmp+1)*(presc+1), cmp, presc, period_seen))
  endtask

  logic [31:0] d;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    obi_write(32'h8, 32'd1234);
    obi_read(32'h8, d);
    `CHECK(d == 32'd1234, "CMP read back")
    obi_write(32'hC, 32'd0);
    obi_write(32'h8, 32'd3);
    n_irq = 0;
    repeat (50) @(posedge clk);
    obi_read(32'h4, d);
    `CHECK(d == 0 && n_irq == 0, "disabled timer does not count or interrupt")
    measure(9, 1);
    measure(99, 0);
    measure(4, 3);
    `CHECK(wide == 0, "interrupt pulses last one cycle")
    obi_write(32'h0, 32'h0);
    obi_read(32'h4, d);
    `CHECK(d == 32'h0, "count cleared when disabled and reset")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
