// denoise_env -- end-to-end test environment for denoise_top.
//
// Instantiates the kernel next to a behavioural DRAM (axi_mem_model), feeds
// it whole experiments (G groups of N frames of pseudo-random 12-bit pixels),
// and checks every result pixel against a reference computed here from the
// same pixel formula, with the kernel's modulo-2^16 arithmetic:
//   end division : res = (sum_g (even - odd + offset)) / G
//   spread       : res =  sum_g ((even - odd + offset) / G)
// It also counts how often each mechanism happened (DRAM read and write
// phases, result frames, output back-pressure, input gaps, AXI stalls,
// spread mode, 16-bit overflow of the end-division sum, verification mode)
// and fails a run list in which one never happened.
//
// In verification-mode runs the driver sends G+1 groups, and the monitor
// expects every input frame back, except that the odd frames of the extra
// group are replaced by the results.
//
// FULL = 0: small frames (IMG_H x IMG_W), random stalls on every interface,
//   several configurations.
// FULL = 1: the top at its default parameters, no stalls, the reference
//   experiments: G = 8, N = 1000 with end division, and G = 10 and G = 5,
//   N = 1000 with spread division; per-frame cycle counts are checked against
//   the kernel's loop latencies (2570 cycles for a frame without DRAM
//   traffic, 7721 for one with both a burst read and a burst write) and
//   against the 57 us camera frame period at a 2 ns clock (28500 cycles).
//   A fourth run is the G = 2, N = 4 verification-mode acquisition whose
//   output frames the reference system displays.
module denoise_env
  import denoise_pkg::*;
#(
  parameter bit          FULL      = 1'b0,
  parameter int unsigned IMG_H     = 2,
  parameter int unsigned IMG_W     = 32,
  parameter int unsigned BURST_LEN = 4
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   finished
);

  localparam int unsigned FB = FULL ? (80 * 256 / PPB) : (IMG_H * IMG_W / PPB);
  localparam int unsigned FULL_FB = 2560;
  localparam int unsigned MEM_BEATS = FULL ? (500 * FULL_FB + 16) : 4096;
  localparam bit          STALL = !FULL;
  localparam int          NRUNS = FULL ? 4 : 7;

  typedef struct { int g; int n; bit spread; int offset; bit verify; } run_t;
  run_t runs [7];
  initial begin
    if (FULL) begin
      runs[0] = '{8, 1000, 1'b0, 4096, 1'b0};   // main experiment
      runs[1] = '{10, 1000, 1'b1, 4096, 1'b0};  // spread division
      runs[2] = '{5, 1000, 1'b1, 4096, 1'b0};   // spread division
      runs[3] = '{2, 4, 1'b0, 4096, 1'b1};      // verification mode
    end
    else begin
      runs[0] = '{3, 4, 1'b0, 4096, 1'b0};
      runs[1] = '{3, 6, 1'b1, 4096, 1'b0};
      runs[2] = '{10, 4, 1'b0, 8192, 1'b0};   // sum passes 16 bits: wraps
      runs[3] = '{10, 4, 1'b1, 8192, 1'b0};   // spread division stays bounded
      runs[4] = '{1, 2, 1'b0, 4096, 1'b0};    // single group: no DRAM traffic
      runs[5] = '{2, 4, 1'b0, 4096, 1'b1};    // verification mode
      runs[6] = '{3, 6, 1'b1, 4096, 1'b1};    // verification mode, spread
    end
  end

  logic        rst_n;
  logic        cfg_load, cfg_spread, cfg_verify, clr_err;
  logic [15:0] cfg_groups, cfg_frames;
  pix_t        cfg_offset;
  addr_t       cfg_base;
  logic        s_valid, s_ready, m_valid, m_ready;
  pix_stream_t s_data, m_data;
  logic        ar_valid, ar_ready, r_valid, r_ready;
  logic        aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  axi_ax_t     ar, aw;
  axi_r_t      r;
  axi_w_t      w;
  logic [1:0]  b_resp;
  logic        cfg_ready, frame_done, len_err, axi_err;
  phase_e      phase;
  logic [15:0] frame_idx, group_idx;
  logic [31:0] frames_sent;
  longint      rd_beats, wr_beats, rd_bursts, wr_bursts, bad_bursts;

  if (FULL) begin : g_dut
    denoise_top dut (.*);
  end else begin : g_dut
    denoise_top #(.IMG_H(IMG_H), .IMG_W(IMG_W), .BURST_LEN(BURST_LEN)) dut (.*);
  end

  axi_mem_model #(.DEPTH_BEATS(MEM_BEATS), .RD_LAT(4), .WR_LAT(2), .STALL(STALL)) u_mem (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w,
    .b_valid, .b_ready, .b_resp,
    .rd_beats, .wr_beats, .rd_bursts, .wr_bursts, .bad_bursts
  );

  // pseudo-random 12-bit pixel of run r, group g, frame i, pixel j
  function automatic pix_t pix(int rn, int g, int i, int j);
    logic [31:0] x;
    x = 32'(rn) * 32'd7919 + 32'(g) * 32'd104729 + 32'(i) * 32'd1299709 +
        32'(j) * 32'd15485863 + 32'h9e3779b9;
    x = x ^ (x >> 13);
    x = x * 32'h5bd1e995;
    x = x ^ (x >> 15);
    return pix_t'(x[11:0]);
  endfunction

  // reference result pixel j of pair p; flags a wrap of the 16-bit sum
  function automatic pix_t ref_pix(int rn, run_t c, int p, int j, output bit wrapped);
    pix_t s, d;
    int   full_sum;
    s = 0; full_sum = 0;
    for (int g = 0; g < c.g; g++) begin
      d = pix(rn, g, 2*p+1, j) + pix_t'(c.offset) - pix(rn, g, 2*p, j);
      if (c.spread) s = s + pix_t'(d / pix_t'(c.g));
      else          s = s + d;
      full_sum += int'(d);
    end
    wrapped = !c.spread && (full_sum > 65535);
    return c.spread ? s : pix_t'(s / pix_t'(c.g));
  endfunction

  // mechanism counters
  int n_read_ph, n_write_ph, n_res_frames, n_out_stall, n_in_gap, n_spread;
  int n_wrap, n_axi_stall, n_single_group, n_verify, n_raw_frames;

  // driver state
  int  cur_run;
  bit  drive_on;
  int  dg, di, db;
  // monitor state
  int  op, ob;

  always_comb begin
    s_data.sof  = (db == 0);
    s_data.eof  = (db == FB - 1);
    for (int k = 0; k < PPB; k++)
      s_data.data[k] = pix(cur_run, dg, di, db * PPB + k);
  end

  // input driver: frames back to back, with random gaps when STALL
  bit gap;
  always @(posedge clk) gap <= STALL && ($urandom_range(0, 5) == 0);
  assign s_valid = drive_on && !gap;
  bit m_hold;
  always @(posedge clk) m_hold <= STALL && ($urandom_range(0, 3) == 0);
  assign m_ready = !m_hold;

  always @(posedge clk) begin
    if (drive_on && gap) n_in_gap <= n_in_gap + 1;
    if (m_valid && !m_ready) n_out_stall <= n_out_stall + 1;
    if ((ar_valid && !ar_ready) || (w_valid && !w_ready) || (aw_valid && !aw_ready))
      n_axi_stall <= n_axi_stall + 1;
    if (s_valid && s_ready) begin
      if (db == FB - 1) begin
        db <= 0;
        if (di == runs[cur_run].n - 1) begin
          di <= 0;
          if (dg == runs[cur_run].g - 1 + int'(runs[cur_run].verify)) drive_on <= 1'b0;
          dg <= dg + 1;
        end else di <= di + 1;
      end else db <= db + 1;
    end
  end

  // output monitor; op counts result frames, or every output frame in
  // verification mode
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready && cur_run < NRUNS) begin
      bit ok, wr, raw;
      int og, oi;
      og  = runs[cur_run].verify ? op / runs[cur_run].n : 0;
      oi  = runs[cur_run].verify ? op % runs[cur_run].n : 2 * op + 1;
      raw = runs[cur_run].verify && (og < runs[cur_run].g || oi % 2 == 0);
      ok = (m_data.sof == (ob == 0)) && (m_data.eof == (ob == FB - 1));
      for (int k = 0; k < PPB; k++) begin
        pix_t e;
        wr = 1'b0;
        if (raw) e = pix(cur_run, og, oi, ob * PPB + k);
        else     e = ref_pix(cur_run, runs[cur_run], oi / 2, ob * PPB + k, wr);
        if (wr) n_wrap <= n_wrap + 1;
        if (m_data.data[k] != e) begin
          ok = 1'b0;
          if (failures < 10)
            $display("MISMATCH run %0d pair %0d pixel %0d: got %0d exp %0d",
                     cur_run, op, ob * PPB + k, m_data.data[k], e);
        end
      end
      checks <= checks + 1;
      if (!ok) failures <= failures + 1;
      if (ob == FB - 1) begin
        ob <= 0; op <= op + 1;
        if (raw) n_raw_frames <= n_raw_frames + 1;
        else     n_res_frames <= n_res_frames + 1;
      end else ob <= ob + 1;
    end
  end

  // per-frame cycle counts (FULL only: no stalls there)
  longint t_frame, max_odd, max_first, max_mid, max_last;
  int     tf_i, tf_g;
  always @(posedge clk) begin
    t_frame <= t_frame + 1;
    if (phase == PH_READ && $past(phase) != PH_READ) n_read_ph <= n_read_ph + 1;
    if (phase == PH_WRITE && $past(phase) != PH_WRITE) n_write_ph <= n_write_ph + 1;
    if (frame_done) begin
      longint t;
      t = t_frame + 1;
      if (tf_i % 2 == 0)               begin if (t > max_odd)   max_odd   <= t; end
      else if (tf_g == 0)              begin if (t > max_first) max_first <= t; end
      else if (tf_g == runs[cur_run].g - 1) begin if (t > max_last) max_last <= t; end
      else                             begin if (t > max_mid)   max_mid   <= t; end
      t_frame <= 0;
      tf_i <= int'(frame_idx);
      tf_g <= int'(group_idx);
    end
  end

  task automatic check(bit cond, string what);
    checks = checks + 1;
    if (!cond) begin
      failures = failures + 1;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    n_read_ph = 0; n_write_ph = 0; n_res_frames = 0; n_out_stall = 0;
    n_in_gap = 0; n_spread = 0; n_wrap = 0; n_axi_stall = 0; n_single_group = 0;
    n_verify = 0; n_raw_frames = 0;
    drive_on = 0; dg = 0; di = 0; db = 0; op = 0; ob = 0; cur_run = 0;
    cfg_load = 0; cfg_spread = 0; cfg_verify = 0; clr_err = 0; cfg_groups = 0; cfg_frames = 0;
    cfg_offset = 0; cfg_base = 32'h0001_0000 * (FULL ? 1 : 0);
    t_frame = 0; max_odd = 0; max_first = 0; max_mid = 0; max_last = 0;
    tf_i = 0; tf_g = 0;
    rst_n = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int rn = 0; rn < NRUNS; rn++) begin
      int sent0, rd0, wr0, nout, ngrp;
      sent0 = int'(frames_sent);
      rd0 = int'(rd_beats); wr0 = int'(wr_beats);
      cur_run = rn;
      cfg_groups = 16'(runs[rn].g); cfg_frames = 16'(runs[rn].n);
      cfg_offset = pix_t'(runs[rn].offset); cfg_spread = runs[rn].spread;
      cfg_verify = runs[rn].verify;
      // output frames, and groups that write a running sum (read: the same
      // number, shifted by one group)
      nout = runs[rn].verify ? (runs[rn].g + 1) * runs[rn].n : runs[rn].n / 2;
      ngrp = runs[rn].verify ? runs[rn].g : runs[rn].g - 1;
      cfg_load = 1;
      @(posedge clk);
      cfg_load = 0;
      wait (cfg_ready);
      @(posedge clk);
      t_frame = 0; tf_i = 0; tf_g = 0;
      dg = 0; di = 0; db = 0; op = 0; ob = 0;
      drive_on = 1;
      wait (!drive_on);
      wait (int'(frames_sent) == sent0 + nout);
      repeat (20) @(posedge clk);
      if (runs[rn].spread) n_spread++;
      if (runs[rn].g == 1) n_single_group++;
      if (runs[rn].verify) n_verify++;
      check(op == nout, "output frame count");
      // DRAM volume: each pair's sum is written in groups 0..G-2 and read in
      // 1..G-1 (verification mode: written in 0..G-1, read in 1..G)
      check(int'(wr_beats) - wr0 == ngrp * (runs[rn].n / 2) * FB, "DRAM write volume");
      check(int'(rd_beats) - rd0 == ngrp * (runs[rn].n / 2) * FB, "DRAM read volume");
      $display("run %0d: G=%0d N=%0d spread=%0d verify=%0d  frames out=%0d  DRAM beats rd=%0d wr=%0d",
               rn, runs[rn].g, runs[rn].n, runs[rn].spread, runs[rn].verify, int'(frames_sent) - sent0,
               int'(rd_beats) - rd0, int'(wr_beats) - wr0);
    end
    check(!len_err, "no framing error");
    check(!axi_err, "no AXI error");
    check(bad_bursts == 0, "AXI bursts well formed");
    if (FULL) begin
      $display("cycles per frame: odd %0d, even/first group %0d, even/middle %0d, even/last %0d",
               max_odd, max_first, max_mid, max_last);
      check(max_odd <= 2570, "odd frame within 2570 cycles");
      check(max_mid <= 7721, "read+process+write frame within 7721 cycles");
      check(max_first <= 7721 && max_last <= 7721, "other even frames within 7721 cycles");
      check(max_mid <= 28500, "frame time below 57 us at 2 ns");
    end else begin
      check(n_out_stall > 0, "output back-pressure exercised");
      check(n_in_gap > 0, "input gaps exercised");
      check(n_axi_stall > 0, "AXI stalls exercised");
      check(n_wrap > 0, "16-bit sum wrap exercised");
      check(n_spread > 0, "spread division exercised");
      check(n_single_group > 0, "single-group run exercised");
      check(n_verify > 0 && n_raw_frames > 0, "verification mode exercised");
    end
    check(n_read_ph > 0, "DRAM read phase exercised");
    check(n_write_ph > 0, "DRAM write phase exercised");
    check(n_res_frames > 0, "result frames produced");
    $display("mechanisms: read_phases=%0d write_phases=%0d result_frames=%0d out_stalls=%0d in_gaps=%0d axi_stalls=%0d wraps=%0d spread_runs=%0d raw_frames=%0d",
             n_read_ph, n_write_ph, n_res_frames, n_out_stall, n_in_gap, n_axi_stall, n_wrap, n_spread,
             n_raw_frames);
    finished = 1;
  end

endmodule
