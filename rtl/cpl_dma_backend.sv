// cpl_dma_backend: data mover of the 64-bit system DMA.
//
// Executes one 1-D job at a time: LEN bytes from SRC to DST in one of two
// directions. Direction 0 reads the controlled system through the 64-bit
// AXI4 manager port (sensor readout) and writes the words into the 32-bit
// OBI memory side (L2); direction 1 reads OBI and writes AXI (actuator
// dispatch). A producer and a consumer run concurrently around a 64-bit
// FIFO of BUF_DEPTH entries:
//   AXI read  : AR bursts of up to 256 beats of 8 bytes, never crossing a
//               4 KiB boundary; R beats are pushed while the FIFO has room.
//   OBI write : each entry becomes two 32-bit writes, low word first.
//   OBI read  : two 32-bit reads fill one entry.
//   AXI write : AW burst (same splitting rule), W beats from the FIFO with
//               WLAST on the final beat, then B.
// OBI accesses are issued one at a time (request, grant, response) and AXI
// bursts one at a time. job_done_o pulses when all data has been written
// and acknowledged. Addresses and lengths must be multiples of 8 bytes.
//
// The 64-bit AXI data width, the AXI burst support and the pairing with a
// 32-bit memory side follow the paper; the paper's DMA allows several
// outstanding bursts, this back-end keeps one in flight, and the buffer
// depth is this design's choice.
module cpl_dma_backend
  import cpl_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [31:0] job_src_i,
  input  logic [31:0] job_dst_i,
  input  logic [31:0] job_len_i,
  input  logic        job_dir_i,
  input  logic        job_valid_i,
  output logic        job_ready_o,
  output logic        job_done_o,
  output axi_req_t    axi_req_o,
  input  axi_rsp_t    axi_rsp_i,
  output obi_req_t    obi_req_o,
  input  obi_rsp_t    obi_rsp_i,
  output logic        busy_o
);
  // largest burst from addr with rem bytes left: 256 beats, 4 KiB boundary
  function automatic logic [8:0] burst_beats(logic [31:0] addr, logic [31:0] rem);
    logic [9:0]  to_4k;
    logic [31:0] beats;
    to_4k = 10'((13'h1000 - {1'b0, addr[11:0]}) >> 3);
    beats = rem >> 3;
    if (beats > 32'd256)        beats = 32'd256;
    if (beats > 32'(to_4k))     beats = 32'(to_4k);
    return beats[8:0];
  endfunction

  typedef enum logic [1:0] {P_IDLE, P_ADDR, P_DATA, P_DONE} p_state_e;
  typedef enum logic [1:0] {C_IDLE, C_ADDR, C_DATA, C_RESP} c_state_e;

  p_state_e    p_q;
  c_state_e    c_q;
  logic        active_q, dir_q;
  logic [31:0] p_addr_q, p_rem_q, c_addr_q, c_rem_q;
  logic [8:0]  p_beats_q, c_beats_q, c_cnt_q;
  // OBI word sequencing
  logic        o_hi_q, o_wait_q;
  logic [31:0] o_lo_q;

  // FIFO
  logic [63:0] f_wdata, f_rdata;
  logic        f_push, f_ready, f_valid, f_pop, f_full_rdy;
  logic [$clog2(BUF_DEPTH+1)-1:0] f_count;

  cpl_fifo #(.WIDTH(64), .DEPTH(BUF_DEPTH)) i_buf (
    .clk_i, .rst_ni,
    .wdata_i (f_wdata), .push_i (f_push), .ready_o (f_full_rdy),
    .rdata_o (f_rdata), .valid_o (f_valid), .pop_i (f_pop),
    .count_o (f_count)
  );
  // space is judged on the fill level alone (not on a pop in the same
  // cycle) so that no combinational path runs from the consumer's
  // handshake to the producer's ready signals
  assign f_ready = (f_count != BUF_DEPTH[$bits(f_count)-1:0]);

  assign job_ready_o = !active_q;
  assign busy_o      = active_q;

  // ------------------------------------------------------ combinational
  logic c_done_now;
  always_comb begin
    axi_req_o = '0;
    obi_req_o = '0;
    f_push    = 1'b0;
    f_pop     = 1'b0;
    f_wdata   = '0;
    // producer
    if (!dir_q) begin
      axi_req_o.ar       = '{id: '0, addr: p_addr_q, len: 8'(p_beats_q - 1'b1),
                             size: 3'd3, burst: BURST_INCR};
      axi_req_o.ar_valid = (p_q == P_ADDR);
      axi_req_o.r_ready  = (p_q == P_DATA) && f_ready;
      f_push             = (p_q == P_DATA) && axi_rsp_i.r_valid && f_ready;
      f_wdata            = axi_rsp_i.r.data;
    end else begin
      // OBI read of two words per entry
      obi_req_o.req  = (p_q == P_DATA) && !o_wait_q && f_ready;
      obi_req_o.addr = p_addr_q;
      obi_req_o.we   = 1'b0;
      obi_req_o.be   = 4'hF;
      f_push         = (p_q == P_DATA) && o_wait_q && obi_rsp_i.rvalid && o_hi_q;
      f_wdata        = {obi_rsp_i.rdata, o_lo_q};
    end
    // consumer
    if (!dir_q) begin
      obi_req_o.req   = (c_q == C_DATA) && f_valid && !o_wait_q;
      obi_req_o.addr  = c_addr_q;
      obi_req_o.we    = 1'b1;
      obi_req_o.be    = 4'hF;
      obi_req_o.wdata = o_hi_q ? f_rdata[63:32] : f_rdata[31:0];
      f_pop           = (c_q == C_DATA) && o_wait_q && obi_rsp_i.rvalid && o_hi_q;
    end else begin
      axi_req_o.aw       = '{id: '0, addr: c_addr_q, len: 8'(c_beats_q - 1'b1),
                             size: 3'd3, burst: BURST_INCR};
      axi_req_o.aw_valid = (c_q == C_ADDR);
      axi_req_o.w        = '{data: f_rdata, strb: '1, last: (c_cnt_q == c_beats_q - 1'b1)};
      axi_req_o.w_valid  = (c_q == C_DATA) && f_valid;
      axi_req_o.b_ready  = (c_q == C_RESP);
      f_pop              = (c_q == C_DATA) && f_valid && axi_rsp_i.w_ready;
    end
  end

  assign c_done_now = !dir_q ? (f_pop && c_rem_q == 32'd8)
                             : ((c_q == C_RESP) && axi_rsp_i.b_valid &&
                                c_rem_q == 32'({c_beats_q, 3'b000}));

  // -------------------------------------------------------- sequential
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      p_q <= P_IDLE; c_q <= C_IDLE;
      active_q <= 1'b0; dir_q <= 1'b0;
      p_addr_q <= '0; p_rem_q <= '0; c_addr_q <= '0; c_rem_q <= '0;
      p_beats_q <= '0; c_beats_q <= '0; c_cnt_q <= '0;
      o_hi_q <= 1'b0; o_wait_q <= 1'b0; o_lo_q <= '0;
      job_done_o <= 1'b0;
    end else begin
      job_done_o <= 1'b0;
      if (!active_q) begin
        if (job_valid_i) begin
          active_q <= 1'b1;
          dir_q    <= job_dir_i;
          p_addr_q <= job_src_i;  p_rem_q <= job_len_i;
          c_addr_q <= job_dst_i;  c_rem_q <= job_len_i;
          p_beats_q <= burst_beats(job_src_i, job_len_i);
          c_beats_q <= burst_beats(job_dst_i, job_len_i);
          p_q <= job_dir_i ? P_DATA : P_ADDR;
          c_q <= job_dir_i ? C_ADDR : C_DATA;
          c_cnt_q <= '0;
          o_hi_q <= 1'b0; o_wait_q <= 1'b0;
          if (job_len_i == 0) begin
            active_q   <= 1'b0;
            job_done_o <= 1'b1;
            p_q <= P_IDLE; c_q <= C_IDLE;
          end
        end
      end else begin
        // ------------------------------------------------ producer
        if (!dir_q) begin
          unique case (p_q)
            P_ADDR: if (axi_rsp_i.ar_ready) p_q <= P_DATA;
            P_DATA: if (f_push) begin
              p_addr_q <= p_addr_q + 32'd8;
              p_rem_q  <= p_rem_q - 32'd8;
              if (axi_rsp_i.r.last) begin
                if (p_rem_q == 32'd8) p_q <= P_DONE;
                else begin
                  p_q       <= P_ADDR;
                  p_beats_q <= burst_beats(p_addr_q + 32'd8, p_rem_q - 32'd8);
                end
              end
            end
            default: ;
          endcase
        end else begin
          if (p_q == P_DATA) begin
            if (obi_req_o.req && obi_rsp_i.gnt) o_wait_q <= 1'b1;
            if (o_wait_q && obi_rsp_i.rvalid) begin
              o_wait_q <= 1'b0;
              o_hi_q   <= !o_hi_q;
              if (!o_hi_q) o_lo_q <= obi_rsp_i.rdata;
              p_addr_q <= p_addr_q + 32'd4;
              if (o_hi_q) begin
                p_rem_q <= p_rem_q - 32'd8;
                if (p_rem_q == 32'd8) p_q <= P_DONE;
              end
            end
          end
        end
        // ------------------------------------------------ consumer
        if (!dir_q) begin
          if (c_q == C_DATA) begin
            if (obi_req_o.req && obi_rsp_i.gnt) o_wait_q <= 1'b1;
            if (o_wait_q && obi_rsp_i.rvalid) begin
              o_wait_q <= 1'b0;
              o_hi_q   <= !o_hi_q;
              c_addr_q <= c_addr_q + 32'd4;
              if (o_hi_q) c_rem_q <= c_rem_q - 32'd8;
            end
          end
        end else begin
          unique case (c_q)
            C_ADDR: if (axi_rsp_i.aw_ready) begin c_q <= C_DATA; c_cnt_q <= '0; end
            C_DATA: if (f_pop) begin
              c_cnt_q <= c_cnt_q + 1'b1;
              if (c_cnt_q == c_beats_q - 1'b1) c_q <= C_RESP;
            end
            C_RESP: if (axi_rsp_i.b_valid) begin
              c_addr_q  <= c_addr_q + 32'({c_beats_q, 3'b000});
              c_rem_q   <= c_rem_q - 32'({c_beats_q, 3'b000});
              c_beats_q <= burst_beats(c_addr_q + 32'({c_beats_q, 3'b000}),
                                       c_rem_q - 32'({c_beats_q, 3'b000}));
              c_q       <= C_ADDR;
            end
            default: ;
          endcase
        end
        if (c_done_now) begin
          active_q   <= 1'b0;
          job_done_o <= 1'b1;
          p_q <= P_IDLE;
          c_q <= C_IDLE;
        end
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   job_valid_i && job_ready_o |-> (job_src_i[2:0] == 0 && job_dst_i[2:0] == 0 &&
                                                   job_len_i[2:0] == 0))
    else $error("DMA job not 8-byte aligned");
endmodule
