// pixel_sub_avg -- image preprocessing module: frame subtraction and
// groupwise averaging with the running sum kept in DRAM.
//
// An experiment is G groups of N frames; frames alternate "control" and
// "excited", so each pair (frame 2k-1, frame 2k) gives one difference frame,
// and result k is the average of difference k over all G groups. Only one
// frame of raw pixels and one frame of running sum are held on chip; the N/2
// running sums live in DRAM and are streamed in and out in bursts.
//
// Per frame (frame i of group g, both counted from 0 here) the controller
// does:
//   i even (1st, 3rd, ... frame): store the frame in prvFrame.
//   i odd, pair p = i/2:
//     g > 0   : burst-read running sum p from DRAM into sumFrame   (PH_READ)
//     always  : stream the frame through Sub/Add, sum -> sumFrame    (PH_PROC)
//               (group 0 adds to zero instead of sumFrame)
//     g < G-1 : burst-write sumFrame back to DRAM as running sum p  (PH_WRITE)
//     g = G-1 : divide by G and emit the result frame
// The odd/even choice is the "arbitrator" of the dataflow; Sub/Add/Div are in
// subavg_alu. With spread = 1 every difference is divided before it is added
// (the overflow-safe variant) and the last group emits the sum directly.
//
// Verification mode (verify = 1) is the optional development variant: every
// frame of groups 0 .. G-1 is passed to the output unchanged, group G-1 writes
// its sum back like a middle group, and an extra group G follows. In it, each
// even frame is again passed through (the host discards it) and each odd
// frame is replaced by result p, computed from the sum read back from DRAM
// with the difference forced to zero. The output thus holds (G+1) * N frames.
// The sequence, the counters and the DRAM/BRAM split follow the paper. The
// DRAM layout (running sum p at base + p * frame bytes, reused by every
// group), the zero start in group 0, starting the DRAM read as soon as the
// previous frame is finished and the run-time configuration are choices
// made here, as is the exact form of verification mode (the paper only says
// that averages come in an extra group, interleaved with raw frames).
//
// Interface: cfg_load latches the run-time settings (groups G, frames per
// group N, offset, spread, verify, DRAM base) and restarts at frame 0 of group 0;
// cfg_ready rises once 2^32/G has been computed (about 35 cycles). Input beats
// come with their beat number and an end-of-frame flag; result beats leave
// on a valid/ready port. Timing: PH_PROC takes one beat per cycle (plus one
// pipeline cycle) unless the result port stalls; PH_READ and PH_WRITE each
// take FRAME_BEATS cycles plus the memory latency.
module pixel_sub_avg
  import denoise_pkg::*;
#(
  parameter int unsigned FRAME_BEATS = 2560,
  parameter int unsigned BURST_LEN   = 256,
  localparam int unsigned BW = (FRAME_BEATS > 1) ? $clog2(FRAME_BEATS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // control data
  input  logic          cfg_load,
  input  logic [15:0]   cfg_groups,
  input  logic [15:0]   cfg_frames,
  input  pix_t          cfg_offset,
  input  logic          cfg_spread,
  input  logic          cfg_verify,
  input  addr_t         cfg_base,
  output logic          cfg_ready,
  // input beats from input_digest
  input  logic          in_valid,
  output logic          in_ready,
  input  beat_t         in_beat,
  input  logic [BW-1:0] in_idx,
  input  logic          in_eof,
  // result beats to send_output
  output logic          res_valid,
  input  logic          res_ready,
  output beat_t         res_beat,
  // AXI4 master to the DRAM memory controller
  output logic          ar_valid,
  input  logic          ar_ready,
  output axi_ax_t       ar,
  input  logic          r_valid,
  output logic          r_ready,
  input  axi_r_t        r,
  output logic          aw_valid,
  input  logic          aw_ready,
  output axi_ax_t       aw,
  output logic          w_valid,
  input  logic          w_ready,
  output axi_w_t        w,
  input  logic          b_valid,
  output logic          b_ready,
  input  logic [1:0]    b_resp,
  // status
  output phase_e        phase,
  output logic [15:0]   frame_idx,
  output logic [15:0]   group_idx,
  output logic          frame_done,
  output logic          axi_err
);

  localparam int unsigned FRAME_BYTES = FRAME_BEATS * BEAT_BYTES;

  // latched configuration
  logic [15:0] G, N;
  pix_t        offset;
  logic        spread;
  logic        verify;
  addr_t       base;

  logic        odd_frame;    // 2nd, 4th, ... frame of the group (subtract)
  logic        first_group;
  logic        last_group;   // last group of the experiment (G in verify mode)
  logic        extra_group;  // verify mode: the added group G
  logic        emit;         // this frame produces an output frame
  logic        pass_raw;     // ... and that frame is the input frame itself
  addr_t       pair_addr;

  assign odd_frame   = frame_idx[0];
  assign first_group = (group_idx == 16'd0);
  assign last_group  = (group_idx == G - 16'd1 + 16'(verify));
  assign extra_group = verify && last_group;
  assign emit        = verify || (last_group && odd_frame);
  assign pass_raw    = verify && !(last_group && odd_frame);
  assign pair_addr   = base + addr_t'(32'(frame_idx >> 1) * FRAME_BYTES);

  // reciprocal of G
  logic        rc_done;
  logic [32:0] recip;
  recip_gen u_recip (
    .clk, .rst_n, .start(cfg_load), .g_in(cfg_groups),
    .busy(), .done(rc_done), .recip
  );

  // buffers
  logic          prv_we, prv_re, sum_we, sum_re;
  logic [BW-1:0] prv_waddr, prv_raddr, sum_waddr, sum_raddr;
  beat_t         prv_wdata, prv_rdata, sum_wdata, sum_rdata;

  frame_bram #(.DEPTH(FRAME_BEATS), .WIDTH(BEAT_W)) u_prv (
    .clk, .we(prv_we), .waddr(prv_waddr), .wdata(prv_wdata),
    .re(prv_re), .raddr(prv_raddr), .rdata(prv_rdata)
  );
  frame_bram #(.DEPTH(FRAME_BEATS), .WIDTH(BEAT_W)) u_sum (
    .clk, .we(sum_we), .waddr(sum_waddr), .wdata(sum_wdata),
    .re(sum_re), .raddr(sum_raddr), .rdata(sum_rdata)
  );

  // DRAM movers
  logic          rd_start, rd_done, rd_err;
  logic          wr_start, wr_done, wr_err;
  logic          rd_we;
  logic [BW-1:0] rd_waddr;
  beat_t         rd_wdata;
  logic          wr_re;
  logic [BW-1:0] wr_raddr;

  axi_burst_reader #(.FRAME_BEATS(FRAME_BEATS), .BURST_LEN(BURST_LEN)) u_rd (
    .clk, .rst_n, .start(rd_start), .base(pair_addr),
    .busy(), .done(rd_done), .err(rd_err),
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .buf_we(rd_we), .buf_waddr(rd_waddr), .buf_wdata(rd_wdata)
  );
  axi_burst_writer #(.FRAME_BEATS(FRAME_BEATS), .BURST_LEN(BURST_LEN)) u_wr (
    .clk, .rst_n, .start(wr_start), .base(pair_addr),
    .busy(), .done(wr_done), .err(wr_err),
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w,
    .b_valid, .b_ready, .b_resp,
    .buf_re(wr_re), .buf_raddr(wr_raddr), .buf_rdata(sum_rdata)
  );

  assign axi_err = rd_err | wr_err;

  // processing pipeline: stage 1 holds the accepted beat while the buffers
  // are read
  logic          s1_valid, s1_eof, s1_adv;
  beat_t         s1_val;
  logic [BW-1:0] s1_idx;
  beat_t         alu_sum, alu_res, sum_in, alu_val;
  pix_t          alu_off;
  logic          in_fire, use_s1;

  // in the extra group the difference is forced to zero (val = prv, no
  // offset), so the ALU only divides the sum read back from DRAM
  assign sum_in  = first_group ? '0 : sum_rdata;
  assign alu_val = extra_group ? prv_rdata : s1_val;
  assign alu_off = extra_group ? '0 : offset;

  subavg_alu u_alu (
    .val(alu_val), .prv(prv_rdata), .sum_in, .offset(alu_off), .recip, .spread,
    .sum_out(alu_sum), .result(alu_res)
  );

  // beats go through stage 1 if they are subtracted or sent on
  assign use_s1   = odd_frame || verify;
  assign s1_adv   = s1_valid && (!emit || !res_valid || res_ready);
  assign in_ready = (phase == PH_PROC) && cfg_ready &&
                    (!use_s1 || !s1_valid || s1_adv) &&
                    !(s1_valid && s1_eof);
  assign in_fire  = in_valid && in_ready;

  always_comb begin
    prv_we    = in_fire && !odd_frame;
    prv_waddr = in_idx;
    prv_wdata = in_beat;
    prv_re    = in_fire && odd_frame;
    prv_raddr = in_idx;
    if (phase == PH_READ) begin
      sum_we    = rd_we;
      sum_waddr = rd_waddr;
      sum_wdata = rd_wdata;
    end else begin
      sum_we    = s1_adv && odd_frame;
      sum_waddr = s1_idx;
      sum_wdata = alu_sum;
    end
    if (phase == PH_WRITE) begin
      sum_re    = wr_re;
      sum_raddr = wr_raddr;
    end else begin
      sum_re    = in_fire && odd_frame;
      sum_raddr = in_idx;
    end
  end

  // frame sequencing
  logic frame_end;   // last beat of this frame's processing is done
  assign frame_end = (in_fire && !use_s1 && in_eof) || (s1_adv && s1_eof);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase      <= PH_IDLE;
      cfg_ready  <= 1'b0;
      G          <= 16'd1;
      N          <= 16'd2;
      offset     <= '0;
      spread     <= 1'b0;
      verify     <= 1'b0;
      base       <= '0;
      frame_idx  <= '0;
      group_idx  <= '0;
      rd_start   <= 1'b0;
      wr_start   <= 1'b0;
      frame_done <= 1'b0;
      s1_valid   <= 1'b0;
      s1_eof     <= 1'b0;
      s1_val     <= '0;
      s1_idx     <= '0;
      res_valid  <= 1'b0;
      res_beat   <= '0;
    end else begin
      rd_start   <= 1'b0;
      wr_start   <= 1'b0;
      frame_done <= 1'b0;

      if (res_valid && res_ready) res_valid <= 1'b0;

      // stage 1
      if (in_fire && use_s1) begin
        s1_valid <= 1'b1;
        s1_val   <= in_beat;
        s1_idx   <= in_idx;
        s1_eof   <= in_eof;
      end else if (s1_adv) begin
        s1_valid <= 1'b0;
      end
      if (s1_adv && emit) begin
        res_valid <= 1'b1;
        res_beat  <= pass_raw ? s1_val : alu_res;
      end

      if (cfg_load) begin
        G         <= (cfg_groups == 16'd0) ? 16'd1 : cfg_groups;
        N         <= cfg_frames;
        offset    <= cfg_offset;
        spread    <= cfg_spread;
        verify    <= cfg_verify;
        base      <= cfg_base;
        frame_idx <= '0;
        group_idx <= '0;
        cfg_ready <= 1'b0;
        s1_valid  <= 1'b0;
        res_valid <= 1'b0;
        phase     <= PH_RECIP;
      end else begin
        unique case (phase)
          PH_RECIP: if (rc_done) begin
            cfg_ready <= 1'b1;
            phase     <= PH_IDLE;
          end
          PH_IDLE: if (cfg_ready) begin
            if (odd_frame && !first_group) begin
              rd_start <= 1'b1;
              phase    <= PH_READ;
            end else begin
              phase <= PH_PROC;
            end
          end
          PH_READ: if (rd_done) phase <= PH_PROC;
          PH_PROC: if (frame_end) begin
            if (odd_frame && !last_group) begin
              wr_start <= 1'b1;
              phase    <= PH_WRITE;
            end else begin
              phase      <= PH_IDLE;
              frame_done <= 1'b1;
              frame_idx  <= (frame_idx == N - 16'd1) ? '0 : frame_idx + 16'd1;
              if (frame_idx == N - 16'd1)
                group_idx <= last_group ? '0 : group_idx + 16'd1;
            end
          end
          PH_WRITE: if (wr_done) begin
            phase      <= PH_IDLE;
            frame_done <= 1'b1;
            frame_idx  <= (frame_idx == N - 16'd1) ? '0 : frame_idx + 16'd1;
            if (frame_idx == N - 16'd1)
              group_idx <= last_group ? '0 : group_idx + 16'd1;
          end
          default: phase <= PH_IDLE;
        endcase
      end
    end
  end

endmodule
