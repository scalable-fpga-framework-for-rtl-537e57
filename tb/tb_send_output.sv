// tb_send_output -- pushes three 4-beat result frames with random gaps and
// random DMA back-pressure; checks data order, sof/eof marks on the first
// and last beat of each frame, and the sent-frame counter.
module tb_send_output;
  import denoise_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int FB = 4;
  logic        rst_n, s_valid, s_ready, m_valid, m_ready;
  beat_t       s_beat;
  pix_stream_t m_data;
  logic [31:0] frames_sent;

  send_output #(.FRAME_BEATS(FB)) dut (.*);

  int sent, got;
  bit counting;
  always @(posedge clk) if (counting && s_valid && s_ready) sent <= sent + 1;
  always @(posedge clk) m_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      checks <= checks + 1;
      if (m_data.data[3] != pix_t'(got) || m_data.sof != (got % FB == 0) ||
          m_data.eof != (got % FB == FB - 1)) begin
        failures <= failures + 1;
        $display("FAIL beat %0d: data %0d sof %0d eof %0d", got, m_data.data[3], m_data.sof, m_data.eof);
      end
      got <= got + 1;
    end
  end

  initial begin
    rst_n = 0; s_valid = 0; s_beat = '0; sent = 0; got = 0; counting = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (sent < 3 * FB) begin
      s_valid = ($urandom_range(0, 3) != 0);
      s_beat = '0;
      s_beat[3] = pix_t'(sent);
      @(negedge clk);
    end
    s_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (got != 3 * FB || frames_sent != 3) begin
      failures++;
      $display("FAIL got %0d beats, %0d frames", got, frames_sent);
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
