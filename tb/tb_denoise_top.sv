// tb_denoise_top -- end-to-end test of the denoising kernel at small frame
// size (2 x 32 pixels, 4-beat bursts) with random stalls on every interface
// and seven configurations (end and spread division, a sum that wraps, a
// single group, verification output with both kinds of division). See
// denoise_env for what is checked.
module tb_denoise_top;
  logic clk = 1'b0;
  int   checks, failures;
  bit   finished;
  always #1 clk = ~clk;

  denoise_env #(.FULL(1'b0), .IMG_H(2), .IMG_W(32), .BURST_LEN(4)) env (.*);

  initial begin
    fork
      wait (finished);
      begin
        repeat (200000) @(posedge clk);
        $display("watchdog expired");
      end
    join_any
    if (!finished) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
