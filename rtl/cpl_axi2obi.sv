// cpl_axi2obi: bridge from the 64-bit AXI4 bus to the 32-bit OBI bus.
//
// Lets the controlled system (through the native AXI port or through the
// D2D link) read and write the controller's memory map, e.g. to load the
// firmware into L2 or to ring a mailbox doorbell. Writes and reads are
// served one transaction at a time, a pending write before a pending read.
// Every AXI beat is split into OBI word accesses: for 8-byte beats the low
// and the high word (a write word whose byte strobes are all zero is
// skipped), for beats of 4 bytes or less only the word chosen by addr[2].
// Each OBI access waits for its response before the next is issued. After
// the last W beat B is sent with OKAY; read beats are sent as soon as both
// words have returned. Beat addresses follow INCR bursts; FIXED bursts
// keep the address. The paper names the AXI-to-OBI adapters; the word
// splitting and the serialisation are this design's choice.
module cpl_axi2obi
  import cpl_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_req_i,
  output axi_rsp_t axi_rsp_o,
  output obi_req_t obi_req_o,
  input  obi_rsp_t obi_rsp_i
);
  typedef enum logic [2:0] {S_IDLE, S_WDATA, S_WACC, S_B, S_RACC, S_R} state_e;
  state_e      st_q;
  axi_ax_t     ax_q;
  logic [7:0]  beat_q;
  logic [31:0] addr_q;
  axi_w_t      w_q;
  logic        hi_q;        // working on the high word of the beat
  logic        wait_q;      // OBI request granted, response pending
  logic [63:0] rbuf_q;
  logic        wide;

  assign wide = (ax_q.size == 3'd3);

  // first word of a beat and whether a word is needed
  logic        word_hi, word_need, word_last;
  always_comb begin
    word_hi   = wide ? hi_q : addr_q[2];
    word_need = 1'b1;
    if (st_q == S_WACC) word_need = |(word_hi ? w_q.strb[7:4] : w_q.strb[3:0]);
    word_last = !wide || hi_q;
  end

  always_comb begin
    obi_req_o       = '0;
    obi_req_o.req   = (st_q inside {S_WACC, S_RACC}) && !wait_q && word_need;
    obi_req_o.addr  = {addr_q[31:3], word_hi, 2'b00};
    obi_req_o.we    = (st_q == S_WACC);
    obi_req_o.be    = word_hi ? w_q.strb[7:4] : w_q.strb[3:0];
    obi_req_o.wdata = word_hi ? w_q.data[63:32] : w_q.data[31:0];
    if (st_q == S_RACC) obi_req_o.be = 4'hF;
  end

  always_comb begin
    axi_rsp_o          = '0;
    axi_rsp_o.aw_ready = (st_q == S_IDLE);
    axi_rsp_o.ar_ready = (st_q == S_IDLE) && !axi_req_i.aw_valid;
    axi_rsp_o.w_ready  = (st_q == S_WDATA);
    axi_rsp_o.b_valid  = (st_q == S_B);
    axi_rsp_o.b        = '{id: ax_q.id, resp: 2'b00};
    axi_rsp_o.r_valid  = (st_q == S_R);
    axi_rsp_o.r        = '{id: ax_q.id, data: rbuf_q, resp: 2'b00, last: (beat_q == ax_q.len)};
  end

  function automatic logic [31:0] next_addr(logic [31:0] a, axi_ax_t ax);
    if (ax.burst == BURST_FIXED) return a;
    return (a & ~((32'd1 << ax.size) - 1)) + (32'd1 << ax.size);
  endfunction

  // the current word is finished: response received, or not needed
  logic word_fin;
  assign word_fin = (wait_q && obi_rsp_i.rvalid) || (!wait_q && !word_need);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q   <= S_IDLE;
      ax_q   <= '0;
      beat_q <= '0;
      addr_q <= '0;
      w_q    <= '0;
      hi_q   <= 1'b0;
      wait_q <= 1'b0;
      rbuf_q <= '0;
    end else begin
      if (obi_req_o.req && obi_rsp_i.gnt) wait_q <= 1'b1;
      if (wait_q && obi_rsp_i.rvalid)     wait_q <= 1'b0;
      unique case (st_q)
        S_IDLE: begin
          hi_q   <= 1'b0;
          beat_q <= '0;
          if (axi_req_i.aw_valid) begin
            ax_q   <= axi_req_i.aw;
            addr_q <= axi_req_i.aw.addr;
            st_q   <= S_WDATA;
          end else if (axi_req_i.ar_valid) begin
            ax_q   <= axi_req_i.ar;
            addr_q <= axi_req_i.ar.addr;
            rbuf_q <= '0;
            st_q   <= S_RACC;
          end
        end
        S_WDATA: if (axi_req_i.w_valid) begin
          w_q  <= axi_req_i.w;
          hi_q <= 1'b0;
          st_q <= S_WACC;
        end
        S_WACC: if (word_fin) begin
          if (!word_last) hi_q <= 1'b1;
          else begin
            hi_q   <= 1'b0;
            addr_q <= next_addr(addr_q, ax_q);
            if (w_q.last) st_q <= S_B;
            else begin
              beat_q <= beat_q + 8'd1;
              st_q   <= S_WDATA;
            end
          end
        end
        S_B: if (axi_req_i.b_ready) st_q <= S_IDLE;
        S_RACC: if (word_fin) begin
          if (word_hi) rbuf_q[63:32] <= obi_rsp_i.rdata;
          else         rbuf_q[31:0]  <= obi_rsp_i.rdata;
          if (!word_last) hi_q <= 1'b1;
          else            st_q <= S_R;
        end
        S_R: if (axi_req_i.r_ready) begin
          hi_q   <= 1'b0;
          addr_q <= next_addr(addr_q, ax_q);
          if (beat_q == ax_q.len) st_q <= S_IDLE;
          else begin
            beat_q <= beat_q + 8'd1;
            st_q   <= S_RACC;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
