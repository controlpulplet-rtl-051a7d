// cpl_d2d_phy_rx: receive half of one D2D PHY channel.
//
// The far transmitter forwards its clock rx_clk_i next to the LN data
// lanes; the clock only toggles while flits are sent and rests high. The
// lanes are sampled on the falling edge of rx_clk_i (first half of the
// flit, bits [LN-1:0]) and again on the rising edge (second half); at the
// rising edge both halves are written as one 2*LN-bit flit into a small
// asynchronous FIFO. The FIFO's write pointer is Gray coded and passed to
// the clk_i domain through a 2-stage flip-flop synchroniser, where the
// reader sees a flit as soon as the synchronised pointer differs from its
// own. There is no full flag on the write side: the forwarded clock does
// not run when idle, so the read pointer could not be brought back; the
// link's credit flow control and the channel router, which pops every
// cycle once all channels hold a flit, keep the FIFO far from full.
//
// Timing: a flit is visible on rx_data_o two to three clk_i cycles after
// the rising edge of rx_clk_i that wrote it. DDR sampling on both edges
// and the FIFO CDC with 2-stage synchronisers follow the paper; the FIFO
// depth is this design's choice.
module cpl_d2d_phy_rx #(
  parameter int unsigned LN    = 8,
  parameter int unsigned DEPTH = 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            rx_clk_i,
  input  logic [LN-1:0]   rx_data_i,
  output logic [2*LN-1:0] rx_data_o,
  output logic            rx_valid_o,
  input  logic            rx_pop_i
);
  localparam int unsigned AW = $clog2(DEPTH);

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // --------------------------------------------------- received clock side
  logic [LN-1:0]   lo_q;
  logic [2*LN-1:0] mem_q [DEPTH];
  logic [AW:0]     wbin_q, wgray_q;

  always_ff @(negedge rx_clk_i or negedge rst_ni) begin
    if (!rst_ni) lo_q <= '0;
    else         lo_q <= rx_data_i;
  end

  always_ff @(posedge rx_clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wbin_q  <= '0;
      wgray_q <= '0;
    end else begin
      wbin_q  <= wbin_q + 1'b1;
      wgray_q <= bin2gray(wbin_q + 1'b1);
    end
  end

  always_ff @(posedge rx_clk_i) begin
    mem_q[wbin_q[AW-1:0]] <= {rx_data_i, lo_q};
  end

  // -------------------------------------------------------- clk_i side
  logic [AW:0] wgray_s1_q, wgray_s2_q, rbin_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wgray_s1_q <= '0;
      wgray_s2_q <= '0;
      rbin_q     <= '0;
    end else begin
      wgray_s1_q <= wgray_q;
      wgray_s2_q <= wgray_s1_q;
      if (rx_pop_i && rx_valid_o) rbin_q <= rbin_q + 1'b1;
    end
  end

  assign rx_valid_o = (bin2gray(rbin_q) != wgray_s2_q);
  assign rx_data_o  = mem_q[rbin_q[AW-1:0]];
endmodule
