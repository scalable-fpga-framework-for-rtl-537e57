// tb_subavg_alu -- random beats through the Sub/Add/Div datapath in both
// division modes, for group counts 1..40, compared with a reference that
// uses true integer division; the reciprocal is computed here directly.
module tb_subavg_alu;
  import denoise_pkg::*;
  int checks = 0, failures = 0;

  beat_t       val, prv, sum_in, sum_out, result;
  pix_t        offset;
  logic [32:0] recip;
  logic        spread;

  subavg_alu dut (.*);

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int g;
      g = (n < 40) ? n + 1 : $urandom_range(1, 65535);
      recip = 33'((64'h1_0000_0000 + 64'(g) - 1) / 64'(g));
      spread = n[0];
      offset = pix_t'($urandom);
      for (int k = 0; k < PPB; k++) begin
        val[k] = pix_t'($urandom); prv[k] = pix_t'($urandom); sum_in[k] = pix_t'($urandom);
        if (n % 3 == 0) begin val[k] = 16'hffff; sum_in[k] = 16'hffff; prv[k] = 0; end
      end
      #1;
      for (int k = 0; k < PPB; k++) begin
        pix_t d, es, er;
        d = val[k] + offset - prv[k];
        if (spread) begin es = sum_in[k] + pix_t'(32'(d) / g); er = es; end
        else begin es = sum_in[k] + d; er = pix_t'(32'(es) / g); end
        checks++;
        if (sum_out[k] != es || result[k] != er) begin
          failures++;
          if (failures < 10) $display("FAIL g=%0d spread=%0d lane %0d: sum %0d/%0d res %0d/%0d",
                                      g, spread, k, sum_out[k], es, result[k], er);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
