// tb_denoise_full -- the kernel at its default size (256 x 80 pixel frames,
// 2560 beats, 256-beat bursts) running the reference experiments: G = 8
// groups of N = 1000 frames with division at the end, then G = 10 and
// G = 5 with spread division, then G = 2, N = 4 with verification output.
// Every output pixel is checked, and the per-frame cycle counts are held
// against the loop latencies and the 57 us camera frame period. See denoise_env.
module tb_denoise_full;
  logic clk = 1'b0;
  int   checks, failures;
  bit   finished;
  always #1 clk = ~clk;

  denoise_env #(.FULL(1'b1)) env (.*);

  initial begin
    fork
      wait (finished);
      begin
        repeat (250_000_000) @(posedge clk);
        $display("watchdog expired");
      end
    join_any
    if (!finished) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
