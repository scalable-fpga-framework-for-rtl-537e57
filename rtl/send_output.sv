// send_output -- send output stage: frames the averaged beats for the host.
//
// Receives result beats (eight 16-bit averaged pixels each) from the
// preprocessing module and puts them on the 128-bit CustomLogic output
// stream, which the board's DMA carries to host memory. It counts beats to
// mark the first and last beat of every result frame (sof/eof) and counts
// the result frames sent. One register stage, valid/ready on both sides, a
// beat per cycle when the DMA side keeps up; back-pressure from the DMA
// propagates to the kernel, which then stalls.
//
// The paper names this module and says it repacks output frames to the
// stream width and sends them on; the framing and counter are choices here.
module send_output
  import denoise_pkg::*;
#(
  parameter int unsigned FRAME_BEATS = 2560,
  localparam int unsigned BW = (FRAME_BEATS > 1) ? $clog2(FRAME_BEATS) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  output logic        s_ready,
  input  beat_t       s_beat,
  output logic        m_valid,
  input  logic        m_ready,
  output pix_stream_t m_data,
  output logic [31:0] frames_sent
);

  logic [BW-1:0] cnt;
  logic          last_beat;

  assign s_ready   = !m_valid || m_ready;
  assign last_beat = (cnt == BW'(FRAME_BEATS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt         <= '0;
      m_valid     <= 1'b0;
      m_data      <= '0;
      frames_sent <= '0;
    end else begin
      if (m_valid && m_ready) begin
        m_valid <= 1'b0;
        if (m_data.eof) frames_sent <= frames_sent + 1'b1;
      end
      if (s_valid && s_ready) begin
        m_valid     <= 1'b1;
        m_data.data <= s_beat;
        m_data.sof  <= (cnt == '0);
        m_data.eof  <= last_beat;
        cnt         <= last_beat ? '0 : cnt + 1'b1;
      end
    end
  end

endmodule
