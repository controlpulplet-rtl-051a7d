// tb_cpl_rt_midend: self-checking testbench of the real-time DMA mid-end.
//
// A behavioural back-end accepts one job at a time and reports it done
// BK_LAT cycles later; every accepted job is checked against the expected
// nested-loop address sequence. Scenarios:
//  1. one-shot 3-D transfer (3 x 2 runs with strides): 6 jobs with the
//     right src/dst/len/dir, one done interrupt, first job offered one
//     cycle after the launch;
//  2. periodic transfer, PERIOD=200, NPERIODS=5: exactly 5 launches,
//     200 cycles apart, then silence;
//  3. periodic transfer with PERIOD shorter than the transfer: launches
//     that fall due while busy are skipped and counted as overruns, read
//     back from STATUS; STOP ends the sequence.
module tb_cpl_rt_midend;
  import cpl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  obi_req_t obi_req = '0;
  obi_rsp_t obi_rsp;
  logic [31:0] jsrc, jdst, jlen;
  logic        jdir, jvalid, jready, jdone, launch, irq;

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
  cpl_rt_midend dut (
    .clk_i (clk), .rst_ni (rst_n), .obi_req_i (obi_req), .obi_rsp_o (obi_rsp),
    .job_src_o (jsrc), .job_dst_o (jdst), .job_len_o (jlen), .job_dir_o (jdir),
    .job_valid_o (jvalid), .job_ready_i (jready), .job_done_i (jdone),
    .launch_o (launch), .done_irq_o (irq)
  );

  // behavioural back-end
  int bk_lat = 10, bk_cnt = 0;
  logic bk_busy;
  assign jready = !bk_busy;
  int cyc = 0, n_jobs = 0, n_irq = 0, n_launch = 0, last_launch = -1, launch_gap = 0;
  int first_job_delay = -1;
  logic [31:0] js [64], jd [64], jl [64];
  logic        jdr [64];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bk_busy <= 1'b0; jdone <= 1'b0; bk_cnt <= 0;
    end else begin
      jdone <= 1'b0;
      if (jvalid && jready) begin
        bk_busy <= 1'b1; bk_cnt <= bk_lat;
        if (n_jobs < 64) begin js[n_jobs] <= jsrc; jd[n_jobs] <= jdst; jl[n_jobs] <= jlen; jdr[n_jobs] <= jdir; end
        n_jobs <= n_jobs + 1;
      end else if (bk_busy) begin
        if (bk_cnt <= 1) begin bk_busy <= 1'b0; jdone <= 1'b1; end
        bk_cnt <= bk_cnt - 1;
      end
    end
  end
  always @(posedge clk) begin
    cyc++;
    if (jvalid && jready && first_job_delay < 0 && last_launch >= 0) first_job_delay = cyc - last_launch;
    if (irq) n_irq++;
    if (launch) begin
      if (last_launch >= 0) launch_gap = cyc - last_launch;
      last_launch = cyc;
      n_launch++;
    end
  end

  task automatic prog_dma(int src, int dst, int len, int r2, int s2, int d2, int r3, int s3, int d3,
                         int period, int nper);
    obi_write(DMA_BASE + 32'h00, src);  obi_write(DMA_BASE + 32'h04, dst);
    obi_write(DMA_BASE + 32'h08, len);  obi_write(DMA_BASE + 32'h0C, r2);
    obi_write(DMA_BASE + 32'h10, s2);   obi_write(DMA_BASE + 32'h14, d2);
    obi_write(DMA_BASE + 32'h18, r3);   obi_write(DMA_BASE + 32'h1C, s3);
    obi_write(DMA_BASE + 32'h20, d3);   obi_write(DMA_BASE + 32'h24, period);
    obi_write(DMA_BASE + 32'h28, nper);
  endtask

  task automatic clear_stats();
    n_jobs = 0; n_irq = 0; n_launch = 0; last_launch = -1; launch_gap = 0; first_job_delay = -1;
  endtask

  logic [31:0] d;
  int gap_bad;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // 1. one-shot 3-D
    prog_dma(32'h8000_0000, 32'h1C00_1000, 64, 3, 32'h100, 32'h40, 2, 32'h1000, 32'h400, 0, 0);
    obi_read(DMA_BASE + 32'h10, d);
    `CHECK(d == 32'h100, "stride register read back")
    clear_stats();
    obi_write(DMA_BASE + 32'h2C, 32'h1);
    repeat (200) @(posedge clk); #1;
    `CHECK(n_jobs == 6, $sformatf("one-shot 3-D transfer gives 6 jobs (got %0d)", n_jobs))
    for (int j3 = 0; j3 < 2; j3++)
      for (int j2 = 0; j2 < 3; j2++) begin
        int j;
        j = j3 * 3 + j2;
        `CHECK(js[j] == 32'h8000_0000 + j3*32'h1000 + j2*32'h100 && jd[j] == 32'h1C00_1000 + j3*32'h400 + j2*32'h40
               && jl[j] == 64 && jdr[j] == 1'b0, $sformatf("job %0d addresses", j))
      end
    `CHECK(n_irq == 1 && n_launch == 1, "one launch, one done interrupt")
    `CHECK(first_job_delay == 1, $sformatf("first job one cycle after launch (got %0d)", first_job_delay))
    // 2. periodic, 5 periods
    prog_dma(32'h1C00_0000, 32'h8000_0100, 32, 1, 0, 0, 1, 0, 0, 200, 5);
    clear_stats();
    gap_bad = 0;
    obi_write(DMA_BASE + 32'h2C, 32'hD);          // start, dir 1, periodic
    fork
      begin
        int prev;
        prev = 0;
        repeat (1500) begin
          @(posedge clk); #1;
          if (n_launch != prev) begin
            if (n_launch > 1 && launch_gap != 200) gap_bad++;
            prev = n_launch;
          end
        end
      end
    join
    `CHECK(n_launch == 5, $sformatf("NPERIODS=5 gives 5 launches (got %0d)", n_launch))
    `CHECK(gap_bad == 0, "launches exactly PERIOD=200 cycles apart")
    `CHECK(n_jobs == 5 && n_irq == 5 && jdr[0] == 1'b1, "one job and one interrupt per period")
    // 3. overrun: transfer of 4 jobs x 30 cycles, period 50
    bk_lat = 30;
    prog_dma(32'h1C00_0000, 32'h8000_0000, 8, 4, 8, 8, 1, 0, 0, 50, 0);
    clear_stats();
    obi_write(DMA_BASE + 32'h2C, 32'h9);
    repeat (1000) @(posedge clk);
    obi_read(DMA_BASE + 32'h30, d);
    `CHECK(d[15:8] > 0, $sformatf("overruns counted (got %0d)", d[15:8]))
    `CHECK(n_launch > 3 && d[31:16] >= 16'(n_launch + 6), "launch counter accumulates")
    `CHECK(launch_gap > 50 && launch_gap % 50 == 0,
           $sformatf("busy launches skipped, next launch on the period grid (gap %0d)", launch_gap))
    obi_write(DMA_BASE + 32'h2C, 32'h2);           // stop
    repeat (300) @(posedge clk);
    clear_stats();
    repeat (500) @(posedge clk); #1;
    `CHECK(n_launch == 0, "no launch after stop")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
