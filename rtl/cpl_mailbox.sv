// cpl_mailbox: doorbell-based mailbox unit.
//
// NUM_MBOX mailboxes, each with MBOX_BYTES of message storage and a
// doorbell. The controlled system (through the AXI subordinate port) or the
// core writes a message into a mailbox and then rings its doorbell; every
// mailbox drives its own interrupt line, which stays high while the
// doorbell is set, so the core's interrupt controller sees one line per
// mailbox. The receiver clears the doorbell after reading the message.
//
// Register map (OBI, 32-bit words), mailbox i at byte offset i*64:
//   +0x00 .. +0x1C  message words 0..7 (byte enables honoured)
//   +0x20           doorbell: bit 0 set rings, writing 0 clears
// Other offsets read as zero. Requests are granted at once and answered in
// the next cycle. The count of 64 mailboxes of 32 bytes and the
// one-line-per-mailbox interrupts are the paper's; the register layout is
// this design's choice.
module cpl_mailbox
  import cpl_pkg::*;
#(
  parameter int unsigned NUM_MBOX   = 64,
  parameter int unsigned MBOX_BYTES = 32
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  obi_req_t            obi_req_i,
  output obi_rsp_t            obi_rsp_o,
  output logic [NUM_MBOX-1:0] irq_o
);
  localparam int unsigned WORDS = MBOX_BYTES / 4;
  localparam int unsigned MB_W  = $clog2(NUM_MBOX);
  localparam int unsigned WD_W  = $clog2(WORDS);

  logic [31:0]         msg_q [NUM_MBOX * WORDS];
  logic [NUM_MBOX-1:0] db_q;
  logic                rvalid_q;
  logic [31:0]         rdata_q;

  logic [MB_W-1:0] mb;
  logic [3:0]      wd;
  logic            is_msg, is_db;
  logic [31:0]     bemask;

  assign mb     = obi_req_i.addr[6 +: MB_W];
  assign wd     = obi_req_i.addr[5:2];
  assign is_msg = (wd < 4'(WORDS));
  assign is_db  = (wd == 4'(WORDS));
  for (genvar b = 0; b < 4; b++) begin : g_be
    assign bemask[b*8 +: 8] = {8{obi_req_i.be[b]}};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      db_q     <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req) begin
        rdata_q <= '0;
        if (obi_req_i.we) begin
          if (is_db) db_q[mb] <= obi_req_i.wdata[0];
        end else begin
          if (is_msg) rdata_q <= msg_q[{mb, wd[WD_W-1:0]}];
          if (is_db)  rdata_q <= {31'd0, db_q[mb]};
        end
      end
    end
  end

  always_ff @(posedge clk_i) begin
    if (obi_req_i.req && obi_req_i.we && is_msg)
      msg_q[{mb, wd[WD_W-1:0]}] <= (msg_q[{mb, wd[WD_W-1:0]}] & ~bemask) |
                                   (obi_req_i.wdata & bemask);
  end

  assign obi_rsp_o = '{gnt: obi_req_i.req, rvalid: rvalid_q, rdata: rdata_q};
  assign irq_o     = db_q;
endmodule
