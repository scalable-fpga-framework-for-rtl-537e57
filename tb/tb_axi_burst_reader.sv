// tb_axi_burst_reader -- reads a 20-beat frame in 8-beat bursts (8, 8, 4)
// from the DRAM model, checks every beat lands at the right buffer address,
// the number and form of bursts, and the transfer time: frame beats plus
// the memory's 4-cycle first-data latency plus at most 3 cycles of overhead.
// A second read from another base follows, with AXI stalls turned on in a
// second model instance.
module tb_axi_burst_reader;
  import denoise_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int FB = 20, BL = 8;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  logic    rst_n;
  logic    start [2];
  addr_t   base;
  logic    busy [2], done [2], err [2];
  logic    ar_valid [2], ar_ready [2], r_valid [2], r_ready [2];
  axi_ax_t ar [2];
  axi_r_t  r [2];
  logic    buf_we [2];
  logic [4:0] buf_waddr [2];
  beat_t   buf_wdata [2];
  longint  rd_beats [2], wr_beats [2], rd_bursts [2], wr_bursts [2], bad_bursts [2];
  logic    aw_ready [2], w_ready [2], b_valid [2];
  logic [1:0] b_resp [2];
  axi_r_t  dummy_r;
  beat_t   got [2][FB];

  for (genvar u = 0; u < 2; u++) begin : g_u
    axi_burst_reader #(.FRAME_BEATS(FB), .BURST_LEN(BL)) dut (
      .clk, .rst_n, .start(start[u]), .base, .busy(busy[u]), .done(done[u]), .err(err[u]),
      .ar_valid(ar_valid[u]), .ar_ready(ar_ready[u]), .ar(ar[u]),
      .r_valid(r_valid[u]), .r_ready(r_ready[u]), .r(r[u]),
      .buf_we(buf_we[u]), .buf_waddr(buf_waddr[u]), .buf_wdata(buf_wdata[u]));
    axi_mem_model #(.DEPTH_BEATS(256), .RD_LAT(4), .STALL(u == 1)) mem (
      .clk, .rst_n, .ar_valid(ar_valid[u]), .ar_ready(ar_ready[u]), .ar(ar[u]),
      .r_valid(r_valid[u]), .r_ready(r_ready[u]), .r(r[u]),
      .aw_valid(1'b0), .aw_ready(aw_ready[u]), .aw('0), .w_valid(1'b0), .w_ready(w_ready[u]),
      .w('0), .b_valid(b_valid[u]), .b_ready(1'b1), .b_resp(b_resp[u]),
      .rd_beats(rd_beats[u]), .wr_beats(wr_beats[u]), .rd_bursts(rd_bursts[u]),
      .wr_bursts(wr_bursts[u]), .bad_bursts(bad_bursts[u]));
    always @(posedge clk) if (buf_we[u]) got[u][buf_waddr[u]] <= buf_wdata[u];
  end

  function automatic logic [127:0] word(int a);
    return {32'(a), 32'(a * 3), 32'(a ^ 32'h55aa), 32'(~a)};
  endfunction

  initial begin
    rst_n = 0; start[0] = 0; start[1] = 0; base = '0;
    for (int a = 0; a < 256; a++) begin
      g_u[0].mem.mem[a] = word(a);
      g_u[1].mem.mem[a] = word(a);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < 2; u++) begin
      for (int t = 0; t < 2; t++) begin
        int cyc, b0;
        base = addr_t'((t == 0 ? 0 : 64) * BEAT_BYTES);
        b0 = int'(rd_bursts[u]);
        @(negedge clk);
        start[u] = 1;
        @(negedge clk);
        start[u] = 0;
        cyc = 1;
        while (!done[u]) begin @(negedge clk); cyc++; end
        for (int b = 0; b < FB; b++)
          chk(got[u][b] == word(int'(base) / BEAT_BYTES + b), "beat data / buffer address");
        chk(int'(rd_bursts[u]) - b0 == 3, "three bursts");
        chk(!err[u] && bad_bursts[u] == 0, "well-formed bursts, no error");
        if (u == 0) begin
          $display("read of %0d beats took %0d cycles", FB, cyc);
          chk(cyc <= FB + 4 + 3, "transfer time");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
