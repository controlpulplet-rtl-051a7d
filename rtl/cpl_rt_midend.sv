// cpl_rt_midend: real-time mid-end of the system DMA.
//
// Software programs a three-dimensional transfer once: a contiguous inner
// run of LEN bytes, repeated REPS2 times with source/destination strides
// S2/D2, the whole plane repeated REPS3 times with strides S3/D3. With the
// periodic bit set, a period counter relaunches the complete transfer every
// PERIOD cycles, NPERIODS launches in all counting the first (0 = until
// stopped), with no further core
// action: this is what removes the periodic DMA programming and the
// context switch it costs from the core. The nested loop counter flattens
// each launch into REPS2*REPS3 one-dimensional jobs {src, dst, len, dir}
// handed to the back-end over a valid/ready port. A launch that falls due
// while the previous one is still running is counted as an overrun and
// skipped. done_irq_o pulses when the last job of a launch has completed.
//
// Register map (OBI words, offset from the DMA base):
//   0x00 SRC   0x04 DST   0x08 LEN (bytes)
//   0x0C REPS2 0x10 S2    0x14 D2
//   0x18 REPS3 0x1C S3    0x20 D3
//   0x24 PERIOD (cycles)  0x28 NPERIODS
//   0x2C CTRL: bit 0 start (self clearing), bit 1 stop, bit 2 direction
//              (0 external -> internal, 1 internal -> external),
//              bit 3 periodic
//   0x30 STATUS (read): bit 0 busy, [15:8] overruns, [31:16] launches
// Zero repetition counts are treated as one. The mid-end's role (period,
// shape and stride programmed by software; loop flattening; period counter)
// is the paper's; the number of dimensions and the register map are this
// design's choice. Timing: the first job of a launch is offered in the
// cycle after the launch.
module cpl_rt_midend
  import cpl_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  obi_req_t    obi_req_i,
  output obi_rsp_t    obi_rsp_o,
  // 1-D jobs to the back-end
  output logic [31:0] job_src_o,
  output logic [31:0] job_dst_o,
  output logic [31:0] job_len_o,
  output logic        job_dir_o,
  output logic        job_valid_o,
  input  logic        job_ready_i,
  input  logic        job_done_i,
  // events
  output logic        launch_o,
  output logic        done_irq_o
);
  logic [31:0] src_q, dst_q, len_q, reps2_q, s2_q, d2_q, reps3_q, s3_q, d3_q;
  logic [31:0] period_q, nper_q;
  logic        dir_q, periodic_q, armed_q;
  logic [31:0] pcnt_q, per_done_q;
  logic [7:0]  overrun_q;
  logic [15:0] launches_q;

  // nested loop state
  logic        busy_q;
  logic [31:0] i2_q, i3_q, a2s_q, a2d_q, a3s_q, a3d_q;
  logic [31:0] jobs_left_q;
  logic        issuing_q;

  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic        start_w, stop_w, due, launch;

  logic [31:0] reps2, reps3;
  assign reps2 = (reps2_q == 0) ? 32'd1 : reps2_q;
  assign reps3 = (reps3_q == 0) ? 32'd1 : reps3_q;

  assign start_w = obi_req_i.req && obi_req_i.we && (obi_req_i.addr[7:2] == 6'd11) &&
                   obi_req_i.wdata[0];
  assign stop_w  = obi_req_i.req && obi_req_i.we && (obi_req_i.addr[7:2] == 6'd11) &&
                   obi_req_i.wdata[1];
  assign due     = armed_q && periodic_q && (pcnt_q == period_q - 1);
  assign launch  = (start_w || due) && !busy_q;
  assign launch_o = launch;

  assign job_src_o   = a2s_q;
  assign job_dst_o   = a2d_q;
  assign job_len_o   = len_q;
  assign job_dir_o   = dir_q;
  assign job_valid_o = issuing_q;

  logic job_fire, last_inner, last_outer;
  assign job_fire   = job_valid_o && job_ready_i;
  assign last_inner = (i2_q == reps2 - 1);
  assign last_outer = (i3_q == reps3 - 1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      {src_q, dst_q, len_q, reps2_q, s2_q, d2_q, reps3_q, s3_q, d3_q} <= '0;
      period_q   <= 32'd1;
      nper_q     <= '0;
      dir_q      <= 1'b0;
      periodic_q <= 1'b0;
      armed_q    <= 1'b0;
      pcnt_q     <= '0;
      per_done_q <= '0;
      overrun_q  <= '0;
      launches_q <= '0;
      busy_q     <= 1'b0;
      issuing_q  <= 1'b0;
      {i2_q, i3_q, a2s_q, a2d_q, a3s_q, a3d_q} <= '0;
      jobs_left_q <= '0;
      done_irq_o <= 1'b0;
      rvalid_q   <= 1'b0;
      rdata_q    <= '0;
    end else begin
      done_irq_o <= 1'b0;
      // ---------------------------------------------------- registers
      rvalid_q <= obi_req_i.req;
      if (obi_req_i.req && obi_req_i.we) begin
        unique case (obi_req_i.addr[7:2])
          6'd0:  src_q    <= obi_req_i.wdata;
          6'd1:  dst_q    <= obi_req_i.wdata;
          6'd2:  len_q    <= obi_req_i.wdata;
          6'd3:  reps2_q  <= obi_req_i.wdata;
          6'd4:  s2_q     <= obi_req_i.wdata;
          6'd5:  d2_q     <= obi_req_i.wdata;
          6'd6:  reps3_q  <= obi_req_i.wdata;
          6'd7:  s3_q     <= obi_req_i.wdata;
          6'd8:  d3_q     <= obi_req_i.wdata;
          6'd9:  period_q <= obi_req_i.wdata;
          6'd10: nper_q   <= obi_req_i.wdata;
          6'd11: begin
            dir_q      <= obi_req_i.wdata[2];
            periodic_q <= obi_req_i.wdata[3];
            if (obi_req_i.wdata[0]) begin
              armed_q    <= (nper_q != 32'd1);   // the start is period 1
              pcnt_q     <= '0;
              per_done_q <= 32'd1;
            end
          end
          default: ;
        endcase
      end
      if (obi_req_i.req && !obi_req_i.we) begin
        unique case (obi_req_i.addr[7:2])
          6'd0:  rdata_q <= src_q;
          6'd1:  rdata_q <= dst_q;
          6'd2:  rdata_q <= len_q;
          6'd3:  rdata_q <= reps2_q;
          6'd4:  rdata_q <= s2_q;
          6'd5:  rdata_q <= d2_q;
          6'd6:  rdata_q <= reps3_q;
          6'd7:  rdata_q <= s3_q;
          6'd8:  rdata_q <= d3_q;
          6'd9:  rdata_q <= period_q;
          6'd10: rdata_q <= nper_q;
          6'd11: rdata_q <= {28'd0, periodic_q, dir_q, 1'b0, armed_q};
          6'd12: rdata_q <= {launches_q, overrun_q, 7'd0, busy_q};
          default: rdata_q <= '0;
        endcase
      end

      // ------------------------------------------------ period counter
      if (armed_q && periodic_q && !start_w)
        pcnt_q <= (pcnt_q == period_q - 1) ? '0 : pcnt_q + 1;
      if (due && busy_q) overrun_q <= overrun_q + 1'b1;
      if (due) begin
        per_done_q <= per_done_q + 1;
        if (nper_q != 0 && per_done_q + 1 >= nper_q) armed_q <= 1'b0;
      end
      if (start_w && !obi_req_i.wdata[3]) armed_q <= 1'b0;  // one-shot
      if (stop_w) armed_q <= 1'b0;

      // ---------------------------------------------- nested loop counter
      if (launch) begin
        busy_q      <= 1'b1;
        issuing_q   <= 1'b1;
        launches_q  <= launches_q + 1'b1;
        i2_q        <= '0;
        i3_q        <= '0;
        a2s_q       <= src_q;
        a2d_q       <= dst_q;
        a3s_q       <= src_q;
        a3d_q       <= dst_q;
        jobs_left_q <= reps2 * reps3;
      end else if (job_fire) begin
        if (!last_inner) begin
          i2_q  <= i2_q + 1;
          a2s_q <= a2s_q + s2_q;
          a2d_q <= a2d_q + d2_q;
        end else begin
          i2_q  <= '0;
          i3_q  <= i3_q + 1;
          a2s_q <= a3s_q + s3_q;
          a2d_q <= a3d_q + d3_q;
          a3s_q <= a3s_q + s3_q;
          a3d_q <= a3d_q + d3_q;
          if (last_outer) issuing_q <= 1'b0;
        end
      end
      if (busy_q && job_done_i) begin
        jobs_left_q <= jobs_left_q - 1;
        if (jobs_left_q == 1) begin
          busy_q     <= 1'b0;
          done_irq_o <= 1'b1;
        end
      end
    end
  end

  assign obi_rsp_o = '{gnt: obi_req_i.req, rvalid: rvalid_q, rdata: rdata_q};
endmodule
