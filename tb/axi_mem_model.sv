// axi_mem_model -- behavioural model of the on-board DRAM behind its memory
// controller, seen as an AXI4 slave (testbench only, not synthesizable).
//
// Accepts read and write bursts (INCR, 16-byte beats) into in-order queues.
// A read burst's first beat comes RD_LAT cycles after its address was
// accepted, the rest follow one per cycle; a write response comes WR_LAT
// cycles after the burst's last data beat. With STALL = 1 the ready and
// valid signals drop at random to exercise the masters' handshakes.
// Counters report beats and bursts moved so testbenches can check volumes.
module axi_mem_model
  import denoise_pkg::*;
#(
  parameter int unsigned DEPTH_BEATS = 4096,
  parameter int unsigned RD_LAT      = 4,
  parameter int unsigned WR_LAT      = 2,
  parameter bit          STALL       = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ar_valid,
  output logic        ar_ready,
  input  axi_ax_t     ar,
  output logic        r_valid,
  input  logic        r_ready,
  output axi_r_t      r,
  input  logic        aw_valid,
  output logic        aw_ready,
  input  axi_ax_t     aw,
  input  logic        w_valid,
  output logic        w_ready,
  input  axi_w_t      w,
  output logic        b_valid,
  input  logic        b_ready,
  output logic [1:0]  b_resp,
  output longint      rd_beats,
  output longint      wr_beats,
  output longint      rd_bursts,
  output longint      wr_bursts,
  output longint      bad_bursts
);

  logic [BEAT_W-1:0] mem [DEPTH_BEATS];

  typedef struct { longint beat; int len; longint ready_at; } burst_t;
  burst_t ar_q[$];
  burst_t aw_q[$];
  longint b_q[$];
  longint cyc;
  int     r_pos, w_pos;
  logic   stall_a, stall_b, stall_c;

  function automatic longint beat_of(addr_t a);
    return longint'(a / BEAT_BYTES) % DEPTH_BEATS;
  endfunction

  // read data / write response outputs, driven from the queue heads
  always_comb begin
    r_valid = (ar_q.size() > 0) && (ar_q[0].ready_at <= cyc) && !stall_b;
    r       = '0;
    if (ar_q.size() > 0) begin
      r.data = mem[(ar_q[0].beat + r_pos) % DEPTH_BEATS];
      r.last = (r_pos == ar_q[0].len - 1);
    end
    b_valid = (b_q.size() > 0) && (b_q[0] <= cyc);
    b_resp  = 2'b00;
    ar_ready = !stall_a;
    aw_ready = !stall_c;
    w_ready  = (aw_q.size() > 0) && !stall_a;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc <= 0; r_pos <= 0; w_pos <= 0;
      ar_q.delete(); aw_q.delete(); b_q.delete();
      rd_beats <= 0; wr_beats <= 0; rd_bursts <= 0; wr_bursts <= 0;
      bad_bursts <= 0;
      stall_a <= 1'b0; stall_b <= 1'b0; stall_c <= 1'b0;
    end else begin
      cyc <= cyc + 1;
      if (STALL) begin
        stall_a <= ($urandom_range(0, 7) == 0);
        stall_b <= ($urandom_range(0, 7) == 0);
        stall_c <= ($urandom_range(0, 3) == 0);
      end
      if (ar_valid && ar_ready) begin
        ar_q.push_back('{beat_of(ar.addr), int'(ar.len) + 1, cyc + RD_LAT});
        rd_bursts <= rd_bursts + 1;
        if (ar.burst != AXI_BURST_INCR || ar.size != AXI_SIZE_BEAT ||
            ((ar.addr % 4096) + (longint'(ar.len) + 1) * BEAT_BYTES > 4096))
          bad_bursts <= bad_bursts + 1;
      end
      if (r_valid && r_ready) begin
        rd_beats <= rd_beats + 1;
        if (r.last) begin
          void'(ar_q.pop_front());
          r_pos <= 0;
        end else r_pos <= r_pos + 1;
      end
      if (aw_valid && aw_ready) begin
        aw_q.push_back('{beat_of(aw.addr), int'(aw.len) + 1, 0});
        wr_bursts <= wr_bursts + 1;
        if (aw.burst != AXI_BURST_INCR || aw.size != AXI_SIZE_BEAT ||
            ((aw.addr % 4096) + (longint'(aw.len) + 1) * BEAT_BYTES > 4096))
          bad_bursts <= bad_bursts + 1;
      end
      if (w_valid && w_ready) begin
        mem[(aw_q[0].beat + w_pos) % DEPTH_BEATS] <= w.data;
        wr_beats <= wr_beats + 1;
        if (w.last != (w_pos == aw_q[0].len - 1)) bad_bursts <= bad_bursts + 1;
        if (w_pos == aw_q[0].len - 1) begin
          void'(aw_q.pop_front());
          b_q.push_back(cyc + WR_LAT);
          w_pos <= 0;
        end else w_pos <= w_pos + 1;
      end
      if (b_valid && b_ready) void'(b_q.pop_front());
    end
  end

endmodule
