// tb_frame_bram -- fills a 16-word frame buffer with random words, reads
// them back in random order, and checks the one-cycle read latency and that
// rdata holds while re is low.
module tb_frame_bram;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int D = 16;
  logic         we, re;
  logic [3:0]   waddr, raddr;
  logic [127:0] wdata, rdata;
  logic [127:0] model [D];

  frame_bram #(.DEPTH(D), .WIDTH(128)) dut (.*);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      we = 1; waddr = 4'(a);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 40; n++) begin
      int a;
      a = $urandom_range(0, D - 1);
      re = 1; raddr = 4'(a);
      @(negedge clk);
      re = 0; raddr = 4'($urandom);
      chk(rdata == model[a], "read data after one cycle");
      @(negedge clk);
      chk(rdata == model[a], "rdata held while re low");
    end
    // write and read of one address in the same cycle return the old word
    we = 1; re = 1; waddr = 4'd3; raddr = 4'd3; wdata = ~model[3];
    @(negedge clk);
    we = 0; re = 0;
    chk(rdata == model[3], "read-during-write returns old word");
    re = 1;
    @(negedge clk);
    re = 0;
    chk(rdata == ~model[3], "new word after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
