// tb_axi_mem: behavioural AXI4 subordinate memory for testbenches.
//
// Models the memory controller behind the far end of the D2D link (the
// storage of the controlled system's sensors and actuators). It serves one
// write burst and one read burst at a time, INCR bursts of 64-bit beats,
// and waits TMEM cycles before a B response or the first R beat. Storage
// is a sparse array of 64-bit words indexed by addr[31:3]; testbenches may
// read and write it directly through mem.
module tb_axi_mem
  import cpl_pkg::*;
#(
  parameter int unsigned TMEM = 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);
  logic [63:0] mem [logic [28:0]];
  int unsigned n_writes = 0, n_reads = 0;

  logic aw_ready, w_ready, b_valid, ar_ready, r_valid;
  axi_b_t b;
  axi_r_t r;

  always_comb begin
    rsp_o          = '0;
    rsp_o.aw_ready = aw_ready;
    rsp_o.w_ready  = w_ready;
    rsp_o.b_valid  = b_valid;
    rsp_o.b        = b;
    rsp_o.ar_ready = ar_ready;
    rsp_o.r_valid  = r_valid;
    rsp_o.r        = r;
  end

  function automatic logic [63:0] rd(logic [28:0] a);
    return mem.exists(a) ? mem[a] : 64'h0;
  endfunction

  // write channel
  initial begin
    axi_ax_t aw;
    logic [28:0] wa;
    logic [63:0] old;
    aw_ready = 1'b0; w_ready = 1'b0; b_valid = 1'b0; b = '0;
    @(posedge clk_i iff rst_ni);
    forever begin
      aw_ready <= 1'b1;
      do @(posedge clk_i); while (!req_i.aw_valid);
      aw = req_i.aw;
      aw_ready <= 1'b0;
      w_ready  <= 1'b1;
      wa = aw.addr[31:3];
      forever begin
        @(posedge clk_i);
        if (req_i.w_valid) begin
          old = rd(wa);
          for (int i = 0; i < 8; i++)
            if (req_i.w.strb[i]) old[i*8 +: 8] = req_i.w.data[i*8 +: 8];
          mem[wa] = old;
          wa++;
          if (req_i.w.last) break;
        end
      end
      w_ready <= 1'b0;
      repeat (TMEM) @(posedge clk_i);
      b_valid <= 1'b1;
      b       <= '{id: aw.id, resp: 2'b00};
      do @(posedge clk_i); while (!req_i.b_ready);
      b_valid <= 1'b0;
      n_writes++;
    end
  end

  // read channel
  initial begin
    axi_ax_t ar;
    logic [28:0] ra;
    ar_ready = 1'b0; r_valid = 1'b0; r = '0;
    @(posedge clk_i iff rst_ni);
    forever begin
      ar_ready <= 1'b1;
      do @(posedge clk_i); while (!req_i.ar_valid);
      ar = req_i.ar;
      ar_ready <= 1'b0;
      ra = ar.addr[31:3];
      repeat (TMEM) @(posedge clk_i);
      for (int i = 0; i <= int'(ar.len); i++) begin
        r_valid <= 1'b1;
        r       <= '{id: ar.id, data: rd(ra), resp: 2'b00, last: (i == int'(ar.len))};
        do @(posedge clk_i); while (!req_i.r_ready);
        ra++;
      end
      r_valid <= 1'b0;
      n_reads++;
    end
  end
endmodule
