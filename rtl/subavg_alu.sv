// subavg_alu -- the Sub / Add / Div datapath of the kernel, for one beat
// (eight pixels side by side, one lane per pixel).
//
// For each lane, with all arithmetic modulo 2^16 as in the reference kernel:
//   diff    = val + offset - prv          (Sub; offset keeps it non-negative)
//   end-of-run division (burst R/W):
//     sum_out = sum_in + diff             (Add)
//     result  = sum_out / G               (Div, used in the last group)
//   spread division (burst R/W v2, spread = 1):
//     sum_out = sum_in + diff / G
//     result  = sum_out
// The first mode overflows a 16-bit sum once G * (diff range) passes 2^16
// (12-bit pixels: G > 8); the second keeps the sum bounded by one pixel's
// range for any G at the cost of truncating each term. Both follow the
// paper's description; the division is done as (x * recip) >> 32 with
// recip = ceil(2^32 / G) from recip_gen, which is this design's choice.
//
// Purely combinational; the caller supplies sum_in = 0 for the first group.
module subavg_alu
  import denoise_pkg::*;
(
  input  beat_t       val,      // pixels of the current (even) frame
  input  beat_t       prv,      // pixels of the preceding (odd) frame
  input  beat_t       sum_in,   // running sum so far
  input  pix_t        offset,
  input  logic [32:0] recip,    // ceil(2^32 / G)
  input  logic        spread,   // 1: divide every term (v2)
  output beat_t       sum_out,  // updated running sum
  output beat_t       result    // averaged pixels (meaningful in last group)
);

  function automatic pix_t div_g(pix_t x, logic [32:0] m);
    logic [48:0] p;
    p = 49'(x) * 49'(m);
    return pix_t'(p >> 32);
  endfunction

  always_comb begin
    for (int k = 0; k < PPB; k++) begin
      pix_t diff;
      diff = val[k] + offset - prv[k];
      if (spread) begin
        sum_out[k] = sum_in[k] + div_g(diff, recip);
        result[k]  = sum_out[k];
      end else begin
        sum_out[k] = sum_in[k] + diff;
        result[k]  = div_g(sum_out[k], recip);
      end
    end
  end

endmodule
