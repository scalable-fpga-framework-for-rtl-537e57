// axi_burst_writer -- burst-mode DRAM write of one frame of running sums
// (the WriteToDRAMLoop of the kernel).
//
// On start it writes FRAME_BEATS beats, read from the sum buffer, to DRAM at
// base as AXI4 INCR bursts of up to BURST_LEN beats. Burst addresses go out
// back to back on AW; the data side prefetches from the buffer (one-cycle
// read latency) into a two-entry queue so that W carries a beat every cycle
// the memory accepts one, with WLAST on the last beat of each burst. The
// transfer ends when every burst's B response has come back: done pulses
// then, about FRAME_BEATS + write-response latency cycles after start. err
// is set (sticky until the next start) on a non-OKAY response.
//
// From the paper: the running sum is written back to DRAM in burst mode once
// the frame has been processed. The burst cap of 256 beats, the prefetch
// queue and waiting for all responses before done are choices made here.
module axi_burst_writer
  import denoise_pkg::*;
#(
  parameter int unsigned FRAME_BEATS = 2560,
  parameter int unsigned BURST_LEN   = 256,
  localparam int unsigned BW = (FRAME_BEATS > 1) ? $clog2(FRAME_BEATS) : 1,
  localparam int unsigned NBURSTS = (FRAME_BEATS + BURST_LEN - 1) / BURST_LEN
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  addr_t         base,
  output logic          busy,
  output logic          done,
  output logic          err,
  // AXI4 write address / data / response channels
  output logic          aw_valid,
  input  logic          aw_ready,
  output axi_ax_t       aw,
  output logic          w_valid,
  input  logic          w_ready,
  output axi_w_t        w,
  input  logic          b_valid,
  output logic          b_ready,
  input  logic [1:0]    b_resp,
  // sum buffer read port (one-cycle latency)
  output logic          buf_re,
  output logic [BW-1:0] buf_raddr,
  input  beat_t         buf_rdata
);

  localparam int unsigned BURST_BYTES = BURST_LEN * BEAT_BYTES;

  function automatic logic [7:0] burst_len_of(logic [31:0] left);
    return (left >= BURST_LEN) ? 8'(BURST_LEN - 1) : 8'(left - 1);
  endfunction

  logic [31:0] aw_left;
  logic [31:0] rd_cnt;       // beats fetched from the buffer
  logic [31:0] w_left_burst; // beats not yet sent, at the start of this burst
  logic [8:0]  w_in_burst;
  logic [31:0] b_cnt;
  logic        inflight;     // buffer read issued last cycle

  // two-entry prefetch queue
  beat_t       q_data [2];
  logic        q_wp, q_rp;
  logic [1:0]  q_cnt;
  logic        pop, push;

  assign pop     = w_valid && w_ready;
  assign push    = inflight;
  assign buf_re  = busy && (rd_cnt < FRAME_BEATS) &&
                   ((32'(q_cnt) + 32'(inflight) - 32'(pop)) < 2);
  assign buf_raddr = BW'(rd_cnt);

  assign w_valid = (q_cnt != 0);
  assign w.data  = q_data[q_rp];
  assign w.strb  = '1;
  assign w.last  = (32'(w_in_burst) == 32'(burst_len_of(w_left_burst)));
  assign b_ready = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      done         <= 1'b0;
      err          <= 1'b0;
      aw_valid     <= 1'b0;
      aw           <= '0;
      aw_left      <= '0;
      rd_cnt       <= '0;
      w_left_burst <= '0;
      w_in_burst   <= '0;
      b_cnt        <= '0;
      inflight     <= 1'b0;
      q_wp         <= 1'b0;
      q_rp         <= 1'b0;
      q_cnt        <= '0;
      q_data[0]    <= '0;
      q_data[1]    <= '0;
    end else begin
      done     <= 1'b0;
      inflight <= buf_re;
      if (start && !busy) begin
        busy         <= 1'b1;
        err          <= 1'b0;
        aw_valid     <= 1'b1;
        aw.addr      <= base;
        aw.len       <= burst_len_of(FRAME_BEATS);
        aw.size      <= AXI_SIZE_BEAT;
        aw.burst     <= AXI_BURST_INCR;
        aw_left      <= FRAME_BEATS;
        rd_cnt       <= '0;
        w_left_burst <= FRAME_BEATS;
        w_in_burst   <= '0;
        b_cnt        <= '0;
        q_wp         <= 1'b0;
        q_rp         <= 1'b0;
        q_cnt        <= '0;
      end else begin
        if (aw_valid && aw_ready) begin
          logic [31:0] left_after;
          left_after = aw_left - (32'(aw.len) + 1);
          aw_left <= left_after;
          if (left_after == 0) begin
            aw_valid <= 1'b0;
          end else begin
            aw.addr <= aw.addr + addr_t'(BURST_BYTES);
            aw.len  <= burst_len_of(left_after);
          end
        end
        if (buf_re) rd_cnt <= rd_cnt + 1;
        if (push) begin
          q_data[q_wp] <= buf_rdata;
          q_wp         <= ~q_wp;
        end
        if (pop) begin
          q_rp <= ~q_rp;
          if (w.last) begin
            w_in_burst   <= '0;
            w_left_burst <= w_left_burst - (32'(w_in_burst) + 1);
          end else begin
            w_in_burst <= w_in_burst + 1'b1;
          end
        end
        q_cnt <= q_cnt + 2'(push) - 2'(pop);
        if (b_valid && b_ready) begin
          if (b_resp != 2'b00) err <= 1'b1;
          b_cnt <= b_cnt + 1;
          if (b_cnt == NBURSTS - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   aw_valid && !aw_ready |=> aw_valid && $stable(aw))
    else $error("axi_burst_writer: AW changed before handshake");
  assert property (@(posedge clk) disable iff (!rst_n)
                   w_valid && !w_ready |=> w_valid && $stable(w))
    else $error("axi_burst_writer: W changed before handshake");

endmodule
