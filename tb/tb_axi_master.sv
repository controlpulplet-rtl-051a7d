// tb_axi_master: behavioural AXI4 manager for testbenches.
//
// Offers two blocking tasks: write_burst sends an AW, then len+1 W beats
// taken from wdata, and waits for B; read_burst sends an AR and collects
// len+1 R beats into rdata, accepting none for the first r_hold cycles. Beats are given as 64-bit words, all strobes
// set, INCR bursts of 8-byte beats. The task counts the cycles the whole
// transaction took in last_cycles and records the cycle at which the
// address was accepted in aw_cycle / ar_cycle.
module tb_axi_master
  import cpl_pkg::*;
(
  input  logic     clk_i,
  output axi_req_t req_o,
  input  axi_rsp_t rsp_i
);
  logic [63:0] wdata [256];
  logic [63:0] rdata [256];
  int unsigned last_cycles;
  longint unsigned cycle = 0;
  longint unsigned aw_cycle, ar_cycle;
  logic [1:0] last_resp;
  int unsigned r_hold = 0;   // cycles to wait before accepting R beats

  always @(posedge clk_i) cycle <= cycle + 1;

  initial req_o = '0;

  task automatic write_burst(input logic [31:0] addr, input int unsigned len,
                             input logic [3:0] id = 4'd1);
    longint unsigned t0 = cycle;
    req_o.aw       <= '{id: id, addr: addr, len: 8'(len), size: 3'd3, burst: BURST_INCR};
    req_o.aw_valid <= 1'b1;
    do @(posedge clk_i); while (!rsp_i.aw_ready);
    aw_cycle = cycle;
    req_o.aw_valid <= 1'b0;
    for (int i = 0; i <= int'(len); i++) begin
      req_o.w       <= '{data: wdata[i], strb: '1, last: (i == int'(len))};
      req_o.w_valid <= 1'b1;
      do @(posedge clk_i); while (!rsp_i.w_ready);
    end
    req_o.w_valid <= 1'b0;
    req_o.b_ready <= 1'b1;
    do @(posedge clk_i); while (!rsp_i.b_valid);
    last_resp = rsp_i.b.resp;
    req_o.b_ready <= 1'b0;
    last_cycles = int'(cycle - t0);
  endtask

  task automatic read_burst(input logic [31:0] addr, input int unsigned len,
                            input logic [3:0] id = 4'd2);
    longint unsigned t0 = cycle;
    int i = 0;
    req_o.ar       <= '{id: id, addr: addr, len: 8'(len), size: 3'd3, burst: BURST_INCR};
    req_o.ar_valid <= 1'b1;
    do @(posedge clk_i); while (!rsp_i.ar_ready);
    ar_cycle = cycle;
    req_o.ar_valid <= 1'b0;
    repeat (r_hold) @(posedge clk_i);
    req_o.r_ready  <= 1'b1;
    forever begin
      @(posedge clk_i);
      if (rsp_i.r_valid) begin
        rdata[i] = rsp_i.r.data;
        i++;
        if (rsp_i.r.last) break;
      end
    end
    req_o.r_ready <= 1'b0;
    last_cycles = int'(cycle - t0);
  endtask
endmodule
