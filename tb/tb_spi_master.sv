// tb_spi_master: self-checking test of the HV-module SPI master.
// A mode-0 SPI slave model in the testbench captures MOSI on rising SCLK and drives
// MISO on falling SCLK. Checks: the slave receives each 16-bit word MSB first, the
// master returns the slave's word, CSn frames exactly 16 rising edges, SCLK runs at
// 1 MHz (25 clocks per half period), and the frame takes 2*16*25+1 clocks.
module tb_spi_master;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] tx = '0, rx;
  logic busy, done, sclk, mosi, miso, cs_n;
  int checks = 0, failures = 0;
  logic [15:0] s_rx, s_tx;
  int s_edges;
  realtime last_rise, period;

  spi_master dut (.clk, .rst_n, .start, .tx, .rx, .busy, .done, .sclk, .mosi, .miso, .cs_n);

  always #10 clk = ~clk;

  // slave model
  assign miso = s_tx[15];
  always @(negedge cs_n) begin s_edges = 0; end
  always @(posedge sclk) if (!cs_n) begin
    s_rx = {s_rx[14:0], mosi};
    s_edges++;
    if (last_rise > 0) period = $realtime - last_rise;
    last_rise = $realtime;
  end
  always @(negedge sclk) if (!cs_n) s_tx = {s_tx[14:0], 1'b0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] slave_word;
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cs_n && !sclk, "idle: CSn high, SCLK low");
    for (int k = 0; k < 8; k++) begin
      tx = 16'($urandom); slave_word = 16'($urandom); s_tx = slave_word;
      last_rise = 0;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(s_rx == tx, $sformatf("slave got %h expected %h", s_rx, tx));
      check(rx == slave_word, $sformatf("master got %h expected %h", rx, slave_word));
      check(s_edges == 16, $sformatf("%0d SCLK edges", s_edges));
      check(period == 1000.0, $sformatf("SCLK period %0t expected 1 us", period));
      check(cyc == 2 * 16 * 25 + 1, $sformatf("frame %0d clocks", cyc));
      check(cs_n && !busy, "frame closed");
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
