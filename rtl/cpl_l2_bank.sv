// cpl_l2_bank: one bank of the L2 scratchpad memory.
//
// A single-port memory of WORDS 32-bit words with byte enables behind an
// OBI subordinate port: every request is granted at once, a read returns
// its word in the next cycle, a write also answers in the next cycle. The
// banks of the L2 are word interleaved by the crossbar, so the bank drops
// the BANK_BITS address bits above the byte offset that chose it and uses
// the bits above them as its word index. In silicon a bank is an SRAM
// macro; here it is a register array, which synthesis tools map to memory.
// The L2 size (512 KiB in all, four banks of 128 KiB by default) is the
// paper's total; the bank count is this design's choice.
module cpl_l2_bank
  import cpl_pkg::*;
#(
  parameter int unsigned WORDS     = 32768,
  parameter int unsigned BANK_BITS = 2,
  parameter int unsigned IDX_W     = $clog2(WORDS)
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  obi_req_t obi_req_i,
  output obi_rsp_t obi_rsp_o
);
  logic [31:0]      mem_q [WORDS];
  logic [IDX_W-1:0] idx;
  logic             rvalid_q;
  logic [31:0]      rdata_q;

  assign idx = obi_req_i.addr[2 + BANK_BITS +: IDX_W];

  always_ff @(posedge clk_i) begin
    if (obi_req_i.req) begin
      if (obi_req_i.we) begin
        for (int b = 0; b < 4; b++)
          if (obi_req_i.be[b]) mem_q[idx][b*8 +: 8] <= obi_req_i.wdata[b*8 +: 8];
      end else begin
        rdata_q <= mem_q[idx];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_q <= 1'b0;
    else         rvalid_q <= obi_req_i.req;
  end

  assign obi_rsp_o = '{gnt: obi_req_i.req, rvalid: rvalid_q, rdata: rdata_q};
endmodule
