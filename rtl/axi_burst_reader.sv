// axi_burst_reader -- burst-mode DRAM read of one frame of running sums
// (the ReadFromDRAMLoop of the kernel).
//
// On start it reads FRAME_BEATS 128-bit beats from DRAM starting at base,
// as AXI4 INCR bursts of up to BURST_LEN beats, and writes beat n into the
// sum buffer at address n. Burst addresses are issued back to back on the AR
// channel without waiting for data, and R is always accepted, so after the
// memory's first-data latency the frame streams in at one beat per cycle:
// about FRAME_BEATS + latency cycles in all, which is what lets the kernel
// stay under the camera's frame interval. done pulses one cycle after the
// last beat is written; err is set (sticky until the next start) if a beat
// carries an error response or RLAST is out of place.
//
// From the paper: burst-mode reads of the whole running-sum frame before the
// frame is processed. Choices made here: the 256-beat burst cap (the AXI4
// limit, which with 16-byte beats also keeps bursts inside 4 KB pages when
// base is 4 KB aligned) and issuing all burst addresses up front.
module axi_burst_reader
  import denoise_pkg::*;
#(
  parameter int unsigned FRAME_BEATS = 2560,
  parameter int unsigned BURST_LEN   = 256,
  localparam int unsigned BW = (FRAME_BEATS > 1) ? $clog2(FRAME_BEATS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  addr_t         base,
  output logic          busy,
  output logic          done,
  output logic          err,
  // AXI4 read address / data channels
  output logic          ar_valid,
  input  logic          ar_ready,
  output axi_ax_t       ar,
  input  logic          r_valid,
  output logic          r_ready,
  input  axi_r_t        r,
  // sum buffer write port
  output logic          buf_we,
  output logic [BW-1:0] buf_waddr,
  output beat_t         buf_wdata
);

  localparam int unsigned BURST_BYTES = BURST_LEN * BEAT_BYTES;

  logic [31:0]   ar_left;   // beats not yet requested
  logic [31:0]   r_cnt;     // beats received
  logic [8:0]    r_in_burst;
  logic [31:0]   r_left_burst;
  logic          r_fire;

  function automatic logic [7:0] burst_len_of(logic [31:0] left);
    return (left >= BURST_LEN) ? 8'(BURST_LEN - 1) : 8'(left - 1);
  endfunction

  assign r_ready   = busy;
  assign r_fire    = r_valid && r_ready;
  assign buf_we    = r_fire;
  assign buf_waddr = BW'(r_cnt);
  assign buf_wdata = beat_t'(r.data);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      done         <= 1'b0;
      err          <= 1'b0;
      ar_valid     <= 1'b0;
      ar           <= '0;
      ar_left      <= '0;
      r_cnt        <= '0;
      r_in_burst   <= '0;
      r_left_burst <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy         <= 1'b1;
        err          <= 1'b0;
        ar_valid     <= 1'b1;
        ar.addr      <= base;
        ar.len       <= burst_len_of(FRAME_BEATS);
        ar.size      <= AXI_SIZE_BEAT;
        ar.burst     <= AXI_BURST_INCR;
        ar_left      <= FRAME_BEATS;
        r_cnt        <= '0;
        r_in_burst   <= '0;
        r_left_burst <= FRAME_BEATS;
      end else begin
        if (ar_valid && ar_ready) begin
          logic [31:0] left_after;
          left_after = ar_left - (32'(ar.len) + 1);
          ar_left <= left_after;
          if (left_after == 0) begin
            ar_valid <= 1'b0;
          end else begin
            ar.addr <= ar.addr + addr_t'(BURST_BYTES);
            ar.len  <= burst_len_of(left_after);
          end
        end
        if (r_fire) begin
          logic exp_last;
          exp_last = (32'(r_in_burst) == 32'(burst_len_of(r_left_burst)));
          if (r.resp != 2'b00 || r.last != exp_last) err <= 1'b1;
          if (exp_last) begin
            r_in_burst   <= '0;
            r_left_burst <= r_left_burst - (32'(r_in_burst) + 1);
          end else begin
            r_in_burst <= r_in_burst + 1'b1;
          end
          r_cnt <= r_cnt + 1;
          if (r_cnt == FRAME_BEATS - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // AXI4: a valid address is held, unchanged, until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   ar_valid && !ar_ready |=> ar_valid && $stable(ar))
    else $error("axi_burst_reader: AR changed before handshake");

endmodule
