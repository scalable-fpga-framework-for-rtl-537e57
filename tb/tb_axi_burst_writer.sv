// tb_axi_burst_writer -- writes a 20-beat frame from a buffer (with the
// buffer's one-cycle read latency) in 8-beat bursts to the DRAM model and
// checks memory contents, bursts, and the transfer time (frame beats plus
// the 2-cycle write-response latency plus at most 6 cycles). A second
// model instance adds random AXI stalls.
module tb_axi_burst_writer;
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
  logic    aw_valid [2], aw_ready [2], w_valid [2], w_ready [2], b_valid [2], b_ready [2];
  axi_ax_t aw [2];
  axi_w_t  w [2];
  logic [1:0] b_resp [2];
  logic    buf_re [2];
  logic [4:0] buf_raddr [2];
  beat_t   buf_rdata [2];
  longint  rd_beats [2], wr_beats [2], rd_bursts [2], wr_bursts [2], bad_bursts [2];
  logic    ar_ready [2], r_valid [2];
  axi_r_t  r [2];
  beat_t   src [FB];

  for (genvar u = 0; u < 2; u++) begin : g_u
    axi_burst_writer #(.FRAME_BEATS(FB), .BURST_LEN(BL)) dut (
      .clk, .rst_n, .start(start[u]), .base, .busy(busy[u]), .done(done[u]), .err(err[u]),
      .aw_valid(aw_valid[u]), .aw_ready(aw_ready[u]), .aw(aw[u]),
      .w_valid(w_valid[u]), .w_ready(w_ready[u]), .w(w[u]),
      .b_valid(b_valid[u]), .b_ready(b_ready[u]), .b_resp(b_resp[u]),
      .buf_re(buf_re[u]), .buf_raddr(buf_raddr[u]), .buf_rdata(buf_rdata[u]));
    axi_mem_model #(.DEPTH_BEATS(256), .WR_LAT(2), .STALL(u == 1)) mem (
      .clk, .rst_n, .ar_valid(1'b0), .ar_ready(ar_ready[u]), .ar('0),
      .r_valid(r_valid[u]), .r_ready(1'b1), .r(r[u]),
      .aw_valid(aw_valid[u]), .aw_ready(aw_ready[u]), .aw(aw[u]),
      .w_valid(w_valid[u]), .w_ready(w_ready[u]), .w(w[u]),
      .b_valid(b_valid[u]), .b_ready(b_ready[u]), .b_resp(b_resp[u]),
      .rd_beats(rd_beats[u]), .wr_beats(wr_beats[u]), .rd_bursts(rd_bursts[u]),
      .wr_bursts(wr_bursts[u]), .bad_bursts(bad_bursts[u]));
    always @(posedge clk) if (buf_re[u]) buf_rdata[u] <= src[buf_raddr[u]];
  end

  initial begin
    rst_n = 0; start[0] = 0; start[1] = 0; base = '0;
    for (int a = 0; a < 256; a++) begin
      g_u[0].mem.mem[a] = '0;
      g_u[1].mem.mem[a] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < 2; u++) begin
      for (int t = 0; t < 2; t++) begin
        int cyc, b0, ba;
        for (int b = 0; b < FB; b++) src[b] = beat_t'({$urandom, $urandom, $urandom, $urandom});
        ba = (t == 0) ? 0 : 128;
        base = addr_t'(ba * BEAT_BYTES);
        b0 = int'(wr_bursts[u]);
        @(negedge clk);
        start[u] = 1;
        @(negedge clk);
        start[u] = 0;
        cyc = 1;
        while (!done[u]) begin @(negedge clk); cyc++; end
        for (int b = 0; b < FB; b++) begin
          logic [127:0] m;
          m = (u == 0) ? g_u[0].mem.mem[ba + b] : g_u[1].mem.mem[ba + b];
          chk(m == 128'(src[b]), "memory contents");
        end
        chk(int'(wr_bursts[u]) - b0 == 3, "three bursts");
        chk(!err[u] && bad_bursts[u] == 0, "well-formed bursts, no error");
        if (u == 0) begin
          $display("write of %0d beats took %0d cycles", FB, cyc);
          chk(cyc <= FB + 2 + 6, "transfer time");
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
