// input_digest -- input digestion stage ("Read Pixel data").
//
// Takes the 128-bit CustomLogic input stream, eight 16-bit pixels per beat,
// and hands each beat to the preprocessing module together with its beat
// number within the frame and its own end-of-frame mark. Framing comes from
// counting FRAME_BEATS beats per frame; the stream's sof/eof marks are only
// checked against that count, and any disagreement sets the sticky len_err
// flag (cleared by clr_err). One register stage with valid/ready on both
// sides: a beat is accepted whenever the output register is empty or being
// drained, so a beat per cycle passes when nothing stalls.
//
// The paper names this module and says it reads incoming packets and forwards
// them; the beat numbering and the framing check are this design's choices.
module input_digest
  import denoise_pkg::*;
#(
  parameter int unsigned FRAME_BEATS = 2560,
  localparam int unsigned BW = (FRAME_BEATS > 1) ? $clog2(FRAME_BEATS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr_err,
  // CustomLogic input stream
  input  logic          s_valid,
  output logic          s_ready,
  input  pix_stream_t   s_data,
  // to the preprocessing module
  output logic          m_valid,
  input  logic          m_ready,
  output beat_t         m_beat,
  output logic [BW-1:0] m_idx,
  output logic          m_eof,
  output logic          len_err
);

  logic [BW-1:0] cnt;
  logic          last_beat;
  logic          accept;

  assign s_ready   = !m_valid || m_ready;
  assign accept    = s_valid && s_ready;
  assign last_beat = (cnt == BW'(FRAME_BEATS - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt     <= '0;
      m_valid <= 1'b0;
      m_beat  <= '0;
      m_idx   <= '0;
      m_eof   <= 1'b0;
      len_err <= 1'b0;
    end else begin
      if (clr_err) len_err <= 1'b0;
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (accept) begin
        m_valid <= 1'b1;
        m_beat  <= s_data.data;
        m_idx   <= cnt;
        m_eof   <= last_beat;
        cnt     <= last_beat ? '0 : cnt + 1'b1;
        // marks must agree with the count
        if ((s_data.sof != (cnt == '0)) || (s_data.eof != last_beat))
          len_err <= 1'b1;
      end
    end
  end

endmodule
