// denoise_top -- CustomLogic denoising kernel: input digestion, frame
// subtraction and groupwise averaging with a DRAM-resident running sum, and
// the send-output stage.
//
// Data path: CustomLogic input stream (128 bits, eight 16-bit pixels per
// beat) -> input_digest -> pixel_sub_avg -> send_output -> CustomLogic output
// stream towards the board's DMA. pixel_sub_avg owns the AXI4 master port to
// the on-board DDR4 memory controller; the port leaves this module as plain
// signals (AR/R/AW/W/B). The memory controller, DDR4, CoaXPress front end and
// DMA/PCIe are the board's own and are outside this module.
//
// Parameters: IMG_H x IMG_W pixels per frame (default 80 x 256, the frame
// size of the reference experiments), BURST_LEN beats per AXI4 burst.
// Control: cfg_* are latched by cfg_load (groups G, frames per group N,
// offset, overflow-safe spread division, verification mode, DRAM base
// address, 4 KB aligned). Normally only result frames are sent out: N/2 of
// them, during the last group. In verification mode every input frame is
// sent on, and an extra group G+1 returns the results in place of its odd
// frames, (G+1) * N frames in all.
module denoise_top
  import denoise_pkg::*;
#(
  parameter int unsigned IMG_H     = 80,
  parameter int unsigned IMG_W     = 256,
  parameter int unsigned BURST_LEN = 256,
  localparam int unsigned FRAME_BEATS = IMG_H * IMG_W / PPB
) (
  input  logic        clk,
  input  logic        rst_n,
  // control data
  input  logic        cfg_load,
  input  logic [15:0] cfg_groups,
  input  logic [15:0] cfg_frames,
  input  pix_t        cfg_offset,
  input  logic        cfg_spread,
  input  logic        cfg_verify,
  input  addr_t       cfg_base,
  input  logic        clr_err,
  // CustomLogic input stream
  input  logic        s_valid,
  output logic        s_ready,
  input  pix_stream_t s_data,
  // CustomLogic output stream
  output logic        m_valid,
  input  logic        m_ready,
  output pix_stream_t m_data,
  // AXI4 master (on-board memory)
  output logic        ar_valid,
  input  logic        ar_ready,
  output axi_ax_t     ar,
  input  logic        r_valid,
  output logic        r_ready,
  input  axi_r_t      r,
  output logic        aw_valid,
  input  logic        aw_ready,
  output axi_ax_t     aw,
  output logic        w_valid,
  input  logic        w_ready,
  output axi_w_t      w,
  input  logic        b_valid,
  output logic        b_ready,
  input  logic [1:0]  b_resp,
  // status
  output logic        cfg_ready,
  output phase_e      phase,
  output logic [15:0] frame_idx,
  output logic [15:0] group_idx,
  output logic        frame_done,
  output logic [31:0] frames_sent,
  output logic        len_err,
  output logic        axi_err
);

  localparam int unsigned BW = (FRAME_BEATS > 1) ? $clog2(FRAME_BEATS) : 1;

  logic          d_valid, d_ready, d_eof;
  beat_t         d_beat;
  logic [BW-1:0] d_idx;
  logic          res_valid, res_ready;
  beat_t         res_beat;

  input_digest #(.FRAME_BEATS(FRAME_BEATS)) u_in (
    .clk, .rst_n, .clr_err,
    .s_valid, .s_ready, .s_data,
    .m_valid(d_valid), .m_ready(d_ready), .m_beat(d_beat),
    .m_idx(d_idx), .m_eof(d_eof), .len_err
  );

  pixel_sub_avg #(.FRAME_BEATS(FRAME_BEATS), .BURST_LEN(BURST_LEN)) u_core (
    .clk, .rst_n,
    .cfg_load, .cfg_groups, .cfg_frames, .cfg_offset, .cfg_spread, .cfg_verify, .cfg_base,
    .cfg_ready,
    .in_valid(d_valid), .in_ready(d_ready), .in_beat(d_beat),
    .in_idx(d_idx), .in_eof(d_eof),
    .res_valid, .res_ready, .res_beat,
    .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r,
    .aw_valid, .aw_ready, .aw, .w_valid, .w_ready, .w,
    .b_valid, .b_ready, .b_resp,
    .phase, .frame_idx, .group_idx, .frame_done, .axi_err
  );

  send_output #(.FRAME_BEATS(FRAME_BEATS)) u_out (
    .clk, .rst_n,
    .s_valid(res_valid), .s_ready(res_ready), .s_beat(res_beat),
    .m_valid, .m_ready, .m_data, .frames_sent
  );

endmodule
