// cpl_pkg: types and constants shared by the controller's modules.
//
// The system speaks two bus protocols. Inside the manager domain a 32-bit
// OBI (open bus interface) bus with a request/grant phase and a response
// phase one cycle later links the core, the L2 scratchpad and the
// peripherals. Towards the controlled system a 64-bit AXI4 bus with 32-bit
// addresses is used; its five channels are carried here as packed structs,
// bundled into a request struct (manager to subordinate: AW, W, AR, and the
// B/R ready bits) and a response struct (subordinate to manager: the
// AW/W/AR ready bits, B, R). The 64-bit data and 32-bit address widths are
// the paper's; the 4-bit AXI ID and the subset of AXI fields kept (no
// cache/prot/qos/region/user) are choices of this design.
//
// The D2D packet format is also defined here: a 4-bit header naming the
// AXI channel carried, a payload as wide as the widest AXI channel, an
// optional piggybacked B response, and a returned-credit field.
package cpl_pkg;

  // ---------------------------------------------------------------- AXI4
  localparam int unsigned AXI_AW  = 32;
  localparam int unsigned AXI_DW  = 64;
  localparam int unsigned AXI_IW  = 4;
  localparam int unsigned AXI_SW  = AXI_DW / 8;

  typedef logic [AXI_AW-1:0] axi_addr_t;
  typedef logic [AXI_DW-1:0] axi_data_t;
  typedef logic [AXI_SW-1:0] axi_strb_t;
  typedef logic [AXI_IW-1:0] axi_id_t;

  typedef enum logic [1:0] {
    BURST_FIXED = 2'b00,
    BURST_INCR  = 2'b01,
    BURST_WRAP  = 2'b10
  } axi_burst_e;

  typedef struct packed {
    axi_id_t    id;
    axi_addr_t  addr;
    logic [7:0] len;
    logic [2:0] size;
    axi_burst_e burst;
  } axi_ax_t;                 // AW and AR share this layout

  typedef struct packed {
    axi_data_t data;
    axi_strb_t strb;
    logic      last;
  } axi_w_t;

  typedef struct packed {
    axi_id_t    id;
    logic [1:0] resp;
  } axi_b_t;

  typedef struct packed {
    axi_id_t    id;
    axi_data_t  data;
    logic [1:0] resp;
    logic       last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    axi_b_t b;
    logic   b_valid;
    logic   ar_ready;
    axi_r_t r;
    logic   r_valid;
  } axi_rsp_t;

  // ----------------------------------------------------------------- OBI
  typedef struct packed {
    logic        req;
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } obi_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } obi_rsp_t;

  // ------------------------------------------------------- D2D packets
  localparam int unsigned D2D_HDR_W = 4;

  typedef enum logic [D2D_HDR_W-1:0] {
    HDR_NONE = 4'd0,          // credit-only / B-only packet
    HDR_AW   = 4'd1,
    HDR_W    = 4'd2,
    HDR_AR   = 4'd3,
    HDR_R    = 4'd4
  } d2d_hdr_e;

  localparam int unsigned AX_W = $bits(axi_ax_t);
  localparam int unsigned W_W  = $bits(axi_w_t);
  localparam int unsigned R_W  = $bits(axi_r_t);
  localparam int unsigned B_W  = $bits(axi_b_t);

  function automatic int unsigned max2(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

  // payload = widest of the AW, W, AR, R channels (B travels on its own field)
  localparam int unsigned D2D_PAYLOAD_W = max2(max2(AX_W, W_W), R_W);

  // number of bits of the credit field for a given credit count
  function automatic int unsigned crd_bits(int unsigned crd);
    return $clog2(crd + 1);
  endfunction

  // whole packet width for a given credit count
  function automatic int unsigned d2d_pkt_bits(int unsigned crd);
    return D2D_HDR_W + D2D_PAYLOAD_W + 1 + B_W + crd_bits(crd);
  endfunction

  // ---------------------------------------------------- address map
  // Every OBI subordinate is selected by (addr & mask) == base.
  localparam logic [31:0] L2_BASE     = 32'h1C00_0000;
  localparam logic [31:0] PERIPH_BASE = 32'h1A10_0000;
  localparam logic [31:0] MBOX_BASE   = 32'h1A10_0000;  // 4 KiB
  localparam logic [31:0] TIMER0_BASE = 32'h1A10_B000;
  localparam logic [31:0] TIMER1_BASE = 32'h1A10_C000;
  localparam logic [31:0] PWM_BASE    = 32'h1A10_D000;
  localparam logic [31:0] DMA_BASE    = 32'h1A10_E000;
  localparam logic [31:0] CLIC_BASE   = 32'h1A20_0000;  // 4 KiB
  localparam logic [31:0] EXT_BASE    = 32'h8000_0000;  // controlled system

endpackage
