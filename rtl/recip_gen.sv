// recip_gen -- computes M = ceil(2^32 / G) for division by the group count.
//
// The averaging step divides 16-bit sums by G, the number of groups, which is
// a run-time setting. Rather than put eight full dividers in the pixel path,
// the reciprocal is worked out once per configuration with a restoring
// divider (33 cycles, one quotient bit per cycle) and the pixel path then
// computes floor(x / G) as (x * M) >> 32, which is exact for x, G < 2^16
// (the error term x*(M*G - 2^32) stays below 2^32). This is a choice made
// here; the paper only says the sum is divided by G.
//
// Interface: start (pulse) with g_in; busy while working; done pulses for one
// cycle when recip is valid. recip holds its value until the next start.
// g_in = 0 is treated as 1.
module recip_gen (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] g_in,
  output logic        busy,
  output logic        done,
  output logic [32:0] recip
);

  logic [15:0] div;      // divisor G
  logic [32:0] dvd;      // remaining dividend bits, MSB first
  logic [15:0] rem;      // partial remainder (always below G)
  logic [5:0]  step;

  logic [16:0] rem_sh;
  logic        fits;
  always_comb begin
    rem_sh = {rem, dvd[32]};
    fits   = (rem_sh >= {1'b0, div});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      recip <= 33'd0;
      step  <= '0;
      dvd   <= '0;
      rem   <= '0;
      div   <= 16'd1;
    end else begin
      done <= 1'b0;
      if (start) begin
        div   <= (g_in == 16'd0) ? 16'd1 : g_in;
        // dividend 2^32 + G - 1 gives the ceiling
        dvd   <= 33'h1_0000_0000 + {17'd0, (g_in == 16'd0) ? 16'd0 : g_in - 16'd1};
        rem   <= '0;
        recip <= '0;
        step  <= 6'd33;
        busy  <= 1'b1;
      end else if (busy) begin
        rem   <= fits ? 16'(rem_sh - {1'b0, div}) : rem_sh[15:0];
        recip <= {recip[31:0], fits};
        dvd   <= {dvd[31:0], 1'b0};
        step  <= step - 6'd1;
        if (step == 6'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
