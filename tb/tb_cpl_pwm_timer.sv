// tb_cpl_pwm_timer: self-checking testbench of the PWM timer.
//
// For several PERIOD/DUTY settings, counts the high cycles of pwm_o over
// whole periods and the distance between period interrupts: high time per
// period must equal DUTY and the interrupt period must equal PERIOD. Also
// checks that a disabled timer keeps pwm_o low.
module tb_cpl_pwm_timer;
  import cpl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  obi_req_t obi_req = '0;
  obi_rsp_t obi_rsp;
  logic pwm, irq;

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
  cpl_pwm_timer dut (.clk_i (clk), .rst_ni (rst_n), .obi_req_i (obi_req), .obi_rsp_o (obi_rsp),
                     .pwm_o (pwm), .irq_o (irq));

  int cyc = 0, last_irq = -1, period_seen = 0, n_irq = 0, high = 0, high_seen = 0;
  always @(posedge clk) begin
    cyc++;
    if (pwm) high++;
    if (irq) begin
      if (last_irq >= 0) begin
        period_seen = cyc - last_irq;
        high_seen   = high;
      end
      high = 0;
      last_irq = cyc;
      n_irq++;
    end
  end

  task automatic run(int period, int duty);
    obi_write(32'h0, 32'h0);
    obi_write(32'h4, period);
    obi_write(32'h8, duty);
    obi_write(32'h0, 32'h1);
    n_irq = 0;
    last_irq = -1;
    while (n_irq < 4) @(posedge clk);
    #1;
    `CHECK(period_seen == period, $sformatf("PWM period %0d (got %0d)", period, period_seen))
    `CHECK(high_seen == duty, $sformatf("PWM high time %0d of %0d (got %0d)", duty, period, high_seen))
  endtask

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    high = 0;
    repeat (40) @(posedge clk);
    `CHECK(high == 0 && n_irq == 0, "disabled PWM stays low")
    run(20, 5);
    run(37, 30);
    run(10, 0);
    run(16, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
