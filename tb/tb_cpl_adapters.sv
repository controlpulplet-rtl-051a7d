// tb_cpl_adapters: self-checking testbench of the OBI<->AXI bridges.
//
// Chain A: an OBI driver -> cpl_obi2axi -> cpl_axi2obi -> OBI word memory.
// 32-bit accesses with random byte enables to both halves of the 64-bit
// lane must read back through the round trip; the AXI transactions in the
// middle must be single-beat, 4-byte, with the strobes in the right lane.
// Chain B: a behavioural AXI manager -> cpl_axi2obi -> OBI word memory.
// Bursts of 64-bit beats (1 to 32 beats) are written and read back and the
// memory contents are compared word by word.
module tb_cpl_adapters;
  import cpl_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  int checks = 0, failures = 0;
  obi_req_t obi_req = '0;
  obi_rsp_t obi_rsp;
  axi_req_t a_req, b_req;
  axi_rsp_t a_rsp, b_rsp;
  obi_req_t ma_req, mb_req;
  obi_rsp_t ma_rsp, mb_rsp;

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
  cpl_obi2axi #(.AXI_ID (4'd3)) i_o2a (.clk_i (clk), .rst_ni (rst_n), .obi_req_i (obi_req), .obi_rsp_o (obi_rsp),
                                      .axi_req_o (a_req), .axi_rsp_i (a_rsp));
  cpl_axi2obi i_a2o_a (.clk_i (clk), .rst_ni (rst_n), .axi_req_i (a_req), .axi_rsp_o (a_rsp),
                       .obi_req_o (ma_req), .obi_rsp_i (ma_rsp));
  tb_axi_master i_mst (.clk_i (clk), .req_o (b_req), .rsp_i (b_rsp));
  cpl_axi2obi i_a2o_b (.clk_i (clk), .rst_ni (rst_n), .axi_req_i (b_req), .axi_rsp_o (b_rsp),
                       .obi_req_o (mb_req), .obi_rsp_i (mb_rsp));

  // two OBI word memories (grant always, answer next cycle)
  logic [31:0] mem_a [logic [29:0]];
  logic [31:0] mem_b [logic [29:0]];
  logic rv_a, rv_b;
  logic [31:0] rd_a, rd_b;
  assign ma_rsp = '{gnt: ma_req.req, rvalid: rv_a, rdata: rd_a};
  assign mb_rsp = '{gnt: mb_req.req, rvalid: rv_b, rdata: rd_b};
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rv_a <= 0; rv_b <= 0; rd_a <= 0; rd_b <= 0; end
    else begin
      rv_a <= ma_req.req;
      rv_b <= mb_req.req;
      if (ma_req.req) begin
        if (ma_req.we) begin
          logic [31:0] w;
          w = mem_a.exists(ma_req.addr[31:2]) ? mem_a[ma_req.addr[31:2]] : 32'h0;
          for (int b = 0; b < 4; b++) if (ma_req.be[b]) w[b*8 +: 8] = ma_req.wdata[b*8 +: 8];
          mem_a[ma_req.addr[31:2]] = w;
        end else rd_a <= mem_a.exists(ma_req.addr[31:2]) ? mem_a[ma_req.addr[31:2]] : 32'h0;
      end
      if (mb_req.req) begin
        if (mb_req.we) begin
          logic [31:0] w;
          w = mem_b.exists(mb_req.addr[31:2]) ? mem_b[mb_req.addr[31:2]] : 32'h0;
          for (int b = 0; b < 4; b++) if (mb_req.be[b]) w[b*8 +: 8] = mb_req.wdata[b*8 +: 8];
          mem_b[mb_req.addr[31:2]] = w;
        end else rd_b <= mem_b.exists(mb_req.addr[31:2]) ? mem_b[mb_req.addr[31:2]] : 32'h0;
      end
    end
  end

  // AXI shape monitor on chain A
  int shape_bad = 0;
  always @(posedge clk) begin
    if (a_req.aw_valid && a_rsp.aw_ready && (a_req.aw.len != 0 || a_req.aw.size != 2 || a_req.aw.id != 3)) shape_bad++;
    if (a_req.ar_valid && a_rsp.ar_ready && (a_req.ar.len != 0 || a_req.ar.size != 2)) shape_bad++;
    if (a_req.w_valid && a_rsp.w_ready && ((a_req.aw.addr[2] ? a_req.w.strb[3:0] : a_req.w.strb[7:4]) != 0)) shape_bad++;
  end

  logic [31:0] refm [64];
  logic [31:0] d;
  int errs;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // chain A
    for (int i = 0; i < 64; i++) begin
      refm[i] = 32'h5A5A_0000 + i;
      obi_write(32'h8000_0000 + 4*i, refm[i]);
    end
    for (int k = 0; k < 200; k++) begin
      int i;
      logic [3:0] be;
      logic [31:0] w;
      i = $urandom_range(0, 63);
      be = 4'($urandom_range(1, 15));
      w = $urandom;
      if ($urandom_range(0, 1)) begin
        obi_write(32'h8000_0000 + 4*i, w, be);
        for (int b = 0; b < 4; b++) if (be[b]) refm[i][b*8 +: 8] = w[b*8 +: 8];
      end
    end
    errs = 0;
    for (int i = 0; i < 64; i++) begin
      obi_read(32'h8000_0000 + 4*i, d);
      if (d !== refm[i]) errs++;
    end
    `CHECK(errs == 0, $sformatf("OBI->AXI->OBI round trip (%0d bad words)", errs))
    `CHECK(shape_bad == 0, "single-beat 4-byte AXI transactions, strobes in the right lane")
    // chain B
    errs = 0;
    for (int k = 0; k < 8; k++) begin
      int len;
      logic [31:0] base;
      len = (k * 5) % 32;
      base = 32'h1C00_0000 + k * 32'h400;
      for (int i = 0; i <= len; i++) i_mst.wdata[i] = {32'h8800_0000 + k * 256 + i, 32'h7700_0000 + k * 256 + i};
      i_mst.write_burst(base, len);
      `CHECK(i_mst.last_resp == 2'b00, "burst write answered OKAY")
      for (int i = 0; i <= len; i++)
        if (mem_b[30'((base >> 2) + 2*i)] !== 32'h7700_0000 + k * 256 + i ||
            mem_b[30'((base >> 2) + 2*i + 1)] !== 32'h8800_0000 + k * 256 + i) errs++;
      i_mst.read_burst(base, len);
      for (int i = 0; i <= len; i++)
        if (i_mst.rdata[i] !== {32'h8800_0000 + k * 256 + i, 32'h7700_0000 + k * 256 + i}) errs++;
    end
    `CHECK(errs == 0, $sformatf("AXI burst -> OBI words and back (%0d errors)", errs))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #2000000 $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
endmodule
