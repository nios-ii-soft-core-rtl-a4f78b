// tb_hit_delay: self-checking test of the hit pattern delay line.
// Drives random 128-bit patterns and checks that each comes out exactly DEPTH clocks
// later, against a reference history kept in the testbench.
module tb_hit_delay;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic [127:0] d = '0, q;
  logic [127:0] hist [$];
  int checks = 0, failures = 0;

  hit_delay #(.W(128), .DEPTH(DEPTH)) dut (.clk, .rst_n, .d, .q);

  always #10 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) hist.push_back('0);
    for (int k = 0; k < 200; k++) begin
      d = {$urandom, $urandom, $urandom, $urandom};
      hist.push_back(d);
      @(negedge clk);
      void'(hist.pop_front());
      checks++;
      if (q !== hist[0]) begin
        failures++;
        $display("FAIL: cycle %0d q=%h expected %h", k, q, hist[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
