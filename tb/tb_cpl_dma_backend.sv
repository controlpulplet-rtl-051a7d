// tb_cpl_dma_backend: self-checking testbench of the system DMA back-end.
//
// The AXI side is a behavioural memory (tb_axi_mem), the OBI side a
// behavioural word memory that grants with random stalls and answers one
// cycle after the grant. Jobs in both directions are run, including one
// whose source crosses a 4 KiB boundary and one long enough to need
// several maximum-length bursts. Checks: the destination holds the source
// data, every AXI burst has at most 256 beats and stays within one 4 KiB
// page, job_ready/busy/done behave (one done pulse per job), and the
// bytes requested on AXI equal the job length.
module tb_cpl_dma_backend;
  import cpl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  logic [31:0] jsrc = '0, jdst = '0, jlen = '0;
  logic        jdir = 1'b0, jvalid = 1'b0, jready, jdone, busy;
  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  obi_req_t o_req;
  obi_rsp_t o_rsp;

  `define CHECK(cond, msg) \
    begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end end

  always #5 clk = ~clk;
  cpl_dma_backend dut (
    .clk_i (clk), .rst_ni (rst_n),
    .job_src_i (jsrc), .job_dst_i (jdst), .job_len_i (jlen), .job_dir_i (jdir),
    .job_valid_i (jvalid), .job_ready_o (jready), .job_done_o (jdone),
    .axi_req_o (axi_req), .axi_rsp_i (axi_rsp), .obi_req_o (o_req), .obi_rsp_i (o_rsp),
    .busy_o (busy)
  );
  tb_axi_mem #(.TMEM (3)) i_mem (.clk_i (clk), .rst_ni (rst_n), .req_i (axi_req), .rsp_o (axi_rsp));

  // OBI word memory with random grant stalls
  logic [31:0] omem [logic [29:0]];
  logic        o_gnt, o_rv;
  logic [31:0] o_rd;
  always_ff @(posedge clk) o_gnt <= ($urandom_range(0, 3) != 0);
  assign o_rsp = '{gnt: o_req.req && o_gnt, rvalid: o_rv, rdata: o_rd};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin o_rv <= 1'b0; o_rd <= '0; end
    else begin
      o_rv <= o_req.req && o_gnt;
      if (o_req.req && o_gnt) begin
        if (o_req.we) omem[o_req.addr[31:2]] = o_req.wdata;
        else          o_rd <= omem.exists(o_req.addr[31:2]) ? omem[o_req.addr[31:2]] : 32'h0;
      end
    end
  end

  // burst monitor
  int bursts = 0, bad_bursts = 0, axi_bytes = 0, n_done = 0, max_len = 0;
  always @(posedge clk) begin
    if (axi_req.ar_valid && axi_rsp.ar_ready || axi_req.aw_valid && axi_rsp.aw_ready) begin
      axi_ax_t ax;
      ax = axi_req.ar_valid ? axi_req.ar : axi_req.aw;
      bursts++;
      axi_bytes += (ax.len + 1) * 8;
      if (ax.len > max_len) max_len = ax.len;
      if ((ax.addr >> 12) != ((ax.addr + (ax.len + 1) * 8 - 1) >> 12)) bad_bursts++;
    end
    if (jdone) n_done++;
  end

  task automatic run_job(logic [31:0] s, logic [31:0] d, logic [31:0] l, logic dir);
    int t0;
    while (!jready) @(posedge clk);
    #1;
    `CHECK(!busy, "idle back-end is not busy")
    jsrc = s; jdst = d; jlen = l; jdir = dir; jvalid = 1'b1;
    @(posedge clk); #1 jvalid = 1'b0;
    `CHECK(busy && !jready, "busy while a job runs")
    t0 = n_done;
    while (n_done == t0) @(posedge clk);
    #1;
  endtask

  int errs;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // fill both memories with patterns
    for (int i = 0; i < 2048; i++) i_mem.mem[29'((32'h8000_0000 >> 3) + i)] = {32'hE000_0000 + i, 32'hD000_0000 + i};
    for (int i = 0; i < 2048; i++) omem[30'((32'h1C00_4000 >> 2) + i)] = 32'hC000_0000 + i;
    // 1. external -> internal, crossing a 4 KiB page (src 0x8000_0F80, 2112 bytes)
    bursts = 0; axi_bytes = 0;
    run_job(32'h8000_0F80, 32'h1C00_8000, 2112, 1'b0);
    errs = 0;
    for (int i = 0; i < 2112 / 8; i++) begin
      logic [63:0] exp;
      exp = i_mem.rd(29'((32'h8000_0F80 >> 3) + i));
      if (omem[30'((32'h1C00_8000 >> 2) + 2*i)] !== exp[31:0] ||
          omem[30'((32'h1C00_8000 >> 2) + 2*i + 1)] !== exp[63:32]) errs++;
    end
    `CHECK(errs == 0, $sformatf("ext->int data (%0d bad beats)", errs))
    `CHECK(bursts >= 2 && axi_bytes == 2112, $sformatf("ext->int bursts %0d bytes %0d", bursts, axi_bytes))
    // 2. internal -> external, 4 KiB + 64 B = 520 beats: two 256-beat bursts and one of 8
    bursts = 0; axi_bytes = 0;
    for (int i = 0; i < 1040; i++) omem[30'((32'h1C00_4000 >> 2) + i)] = 32'hC000_0000 + i;
    run_job(32'h1C00_4000, 32'h8010_0000, 4160, 1'b1);
    errs = 0;
    for (int i = 0; i < 4160 / 8; i++)
      if (i_mem.rd(29'((32'h8010_0000 >> 3) + i)) !== {32'hC000_0000 + 2*i + 1, 32'hC000_0000 + 2*i}) errs++;
    `CHECK(errs == 0, $sformatf("int->ext data (%0d bad beats)", errs))
    `CHECK(bursts == 3 && max_len == 255 && axi_bytes == 4160,
           $sformatf("int->ext split into 256 + 256 + 8 beats (bursts %0d max len %0d)", bursts, max_len))
    // 3. short jobs back to back
    for (int k = 0; k < 6; k++) run_job(32'h1C00_4000 + 64*k, 32'h8020_0000 + 128*k, 8 * (k + 1), 1'b1);
    errs = 0;
    for (int k = 0; k < 6; k++)
      for (int i = 0; i <= k; i++)
        if (i_mem.rd(29'(((32'h8020_0000 + 128*k) >> 3) + i)) !==
            {omem[30'(((32'h1C00_4000 + 64*k) >> 2) + 2*i + 1)], omem[30'(((32'h1C00_4000 + 64*k) >> 2) + 2*i)]}) errs++;
    `CHECK(errs == 0, "short jobs data")
    `CHECK(bad_bursts == 0, "no burst crosses a 4 KiB page")
    `CHECK(n_done == 8, $sformatf("one done pulse per job (got %0d)", n_done))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
