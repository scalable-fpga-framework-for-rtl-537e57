// tb_input_digest -- sends well-formed 5-beat frames with random input gaps
// and output back-pressure and checks order, beat numbers and end-of-frame
// marks; then a frame whose eof comes early must raise len_err, which
// clr_err clears. Also checks the one-cycle pass-through latency.
module tb_input_digest;
  import denoise_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int FB = 5;
  logic        rst_n, clr_err, s_valid, s_ready, m_valid, m_ready, m_eof, len_err;
  pix_stream_t s_data;
  beat_t       m_beat;
  logic [2:0]  m_idx;

  input_digest #(.FRAME_BEATS(FB)) dut (.*);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  int sent, got;
  bit counting;
  always @(posedge clk) if (counting && s_valid && s_ready) sent <= sent + 1;
  bit bad_mode, rnd_ready;
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      if (!bad_mode) begin
        chk(m_beat[0] == pix_t'(got) && m_idx == 3'(got % FB) && m_eof == (got % FB == FB - 1),
            "beat order / index / eof");
      end
      got <= got + 1;
    end
  end
  always @(posedge clk) m_ready <= !rnd_ready || ($urandom_range(0, 2) != 0);

  initial begin
    rst_n = 0; clr_err = 0; s_valid = 0; s_data = '0; sent = 0; got = 0;
    bad_mode = 0; rnd_ready = 0; counting = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: one beat into an idle stage appears one cycle later
    @(negedge clk);
    s_valid = 1; s_data.data = '0; s_data.sof = 1; s_data.eof = 0;
    @(negedge clk);
    s_valid = 0;
    chk(m_valid && m_idx == 0, "one-cycle latency");
    sent = 1;
    counting = 1;
    @(negedge clk);
    rnd_ready = 1;
    while (sent < 4 * FB) begin
      s_valid = ($urandom_range(0, 3) != 0);
      s_data.data = '0;
      s_data.data[0] = pix_t'(sent);
      s_data.sof = (sent % FB == 0);
      s_data.eof = (sent % FB == FB - 1);
      @(negedge clk);
    end
    s_valid = 0;
    counting = 0;
    repeat (10) @(negedge clk);
    chk(got == 4 * FB, "all beats delivered");
    chk(!len_err, "no error on good frames");
    // bad frame: eof on beat 2
    bad_mode = 1;
    for (int b = 0; b < FB; b++) begin
      s_valid = 1; s_data.sof = (b == 0); s_data.eof = (b == 2);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    repeat (5) @(negedge clk);
    chk(len_err, "len_err on short frame");
    clr_err = 1;
    @(negedge clk);
    clr_err = 0;
    chk(!len_err, "clr_err clears");
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
