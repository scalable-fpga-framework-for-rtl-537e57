// tb_pixel_sub_avg -- the preprocessing module alone, with 4-beat frames,
// 2-beat bursts and a stalling DRAM model. Beats are fed directly (beat
// number and end-of-frame supplied here). Three experiments: G = 3, N = 4
// with division at the end, G = 2, N = 6 with spread division, and G = 2,
// N = 4 in verification mode (raw frames passed through, results in an
// extra group). Checks every output pixel against a reference, the number
// of DRAM read and write phases ((G-1) * N/2 each, G * N/2 in verification
// mode), and that results appear only in the last group.
module tb_pixel_sub_avg;
  import denoise_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int FB = 4;
  logic        rst_n, cfg_load, cfg_spread, cfg_verify, cfg_ready;
  logic [15:0] cfg_groups, cfg_frames;
  pix_t        cfg_offset;
  addr_t       cfg_base;
  logic        in_valid, in_ready, in_eof, res_valid, res_ready;
  beat_t       in_beat, res_beat;
  logic [1:0]  in_idx;
  logic        ar_valid, ar_ready, r_valid, r_ready, aw_valid, aw_ready;
  logic        w_valid, w_ready, b_valid, b_ready, frame_done, axi_err;
  axi_ax_t     ar, aw;
  axi_r_t      r;
  axi_w_t      w;
  logic [1:0]  b_resp;
  phase_e      phase;
  logic [15:0] frame_idx, group_idx;
  longint      rd_beats, wr_beats, rd_bursts, wr_bursts, bad_bursts;

  pixel_sub_avg #(.FRAME_BEATS(FB), .BURST_LEN(2)) dut (.*);
  axi_mem_model #(.DEPTH_BEATS(1024), .STALL(1'b1)) mem (.*);

  function automatic pix_t pix(int g, int i, int j);
    return pix_t'((g * 977 + i * 131 + j * 29 + ((g + 1) * (i + 3) * (j + 7)) % 1013) % 4096);
  endfunction

  int G, N, off, sp, vf;
  int dg, di, db, np, nb, n_rd, n_wr, early;
  bit feeding;

  always_comb begin
    in_idx = 2'(db);
    in_eof = (db == FB - 1);
    for (int k = 0; k < PPB; k++) in_beat[k] = pix(dg, di, db * PPB + k);
  end
  assign in_valid = feeding && ($urandom_range(0, 4) != 0);
  always @(posedge clk) res_ready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      if (db == FB - 1) begin
        db <= 0;
        if (di == N - 1) begin di <= 0; dg <= dg + 1; if (dg == G - 1 + vf) feeding <= 0; end
        else di <= di + 1;
      end else db <= db + 1;
    end
    if (rst_n && phase == PH_READ && $past(phase) != PH_READ) n_rd <= n_rd + 1;
    if (rst_n && phase == PH_WRITE && $past(phase) != PH_WRITE) n_wr <= n_wr + 1;
    // np counts result frames, or all output frames in verification mode
    if (rst_n && res_valid && res_ready) begin
      bit ok, raw;
      int og, oi;
      ok  = 1;
      og  = vf ? np / N : 0;
      oi  = vf ? np % N : 2 * np + 1;
      raw = vf && (og < G || oi % 2 == 0);
      if (!vf && dg < G - 1) early <= early + 1;
      for (int k = 0; k < PPB; k++) begin
        pix_t s, d, e;
        s = 0;
        for (int g = 0; g < G; g++) begin
          d = pix(g, oi, nb*PPB+k) + pix_t'(off) - pix(g, oi - 1, nb*PPB+k);
          s = sp ? s + d / pix_t'(G) : s + d;
        end
        e = raw ? pix(og, oi, nb*PPB+k) : (sp ? s : s / pix_t'(G));
        if (res_beat[k] != e) begin
          ok = 0;
          $display("FAIL pair %0d px %0d got %0d exp %0d", np, nb*PPB+k, res_beat[k], e);
        end
      end
      checks <= checks + 1;
      if (!ok) failures <= failures + 1;
      if (nb == FB - 1) begin nb <= 0; np <= np + 1; end else nb <= nb + 1;
    end
  end

  task automatic run(int g, int n, int o, int s, int v);
    int nout, nph;
    nout = v ? (g + 1) * n : n / 2;
    nph  = (g - 1 + v) * n / 2;
    G = g; N = n; off = o; sp = s; vf = v;
    dg = 0; di = 0; db = 0; np = 0; nb = 0; n_rd = 0; n_wr = 0; early = 0;
    @(negedge clk);
    cfg_groups = 16'(g); cfg_frames = 16'(n); cfg_offset = pix_t'(o); cfg_spread = 1'(s);
    cfg_verify = 1'(v);
    cfg_load = 1;
    @(negedge clk);
    cfg_load = 0;
    while (!cfg_ready) @(negedge clk);
    feeding = 1;
    while (feeding || np < nout) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += 4;
    if (np != nout) begin failures++; $display("FAIL results %0d", np); end
    if (n_rd != nph) begin failures++; $display("FAIL reads %0d", n_rd); end
    if (n_wr != nph) begin failures++; $display("FAIL writes %0d", n_wr); end
    if (early != 0 || axi_err || bad_bursts != 0) begin failures++; $display("FAIL early/axi"); end
  endtask

  initial begin
    rst_n = 0; cfg_load = 0; cfg_groups = 0; cfg_frames = 0; cfg_offset = 0;
    cfg_spread = 0; cfg_verify = 0; cfg_base = 32'h100; feeding = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 4, 4096, 0, 0);
    run(2, 6, 4096, 1, 0);
    run(2, 4, 4096, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
