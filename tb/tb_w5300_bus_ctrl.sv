// tb_w5300_bus_ctrl: self-checking test of the W5300 bus controller.
// Processor writes and reads through the controller to a W5300 bus model are checked
// for address, data and read return; back-to-back hardware writes must come every
// 80 ns (4 clocks at 50 MHz); a processor request made while the hardware owns the bus
// must wait until ownership is released; and strobes never overlap.
module tb_w5300_bus_ctrl;
  logic clk = 0, rst_n = 0;
  logic cpu_req = 0, cpu_we = 0, cpu_done;
  logic [9:0] cpu_addr = '0;
  logic [15:0] cpu_wdata = '0, cpu_rdata;
  logic hw_own = 0, hw_grant, hw_req = 0, hw_done;
  logic [9:0] hw_addr = '0;
  logic [15:0] hw_wdata = '0;
  logic [9:0] w_addr;
  logic [15:0] w_data_o, w_data_i;
  logic w_data_oe, w_cs_n, w_wr_n, w_rd_n, w_int_n;
  int checks = 0, failures = 0;

  w5300_bus_ctrl dut (.clk, .rst_n, .cpu_req, .cpu_we, .cpu_addr, .cpu_wdata, .cpu_rdata,
    .cpu_done, .hw_own, .hw_grant, .hw_req, .hw_addr, .hw_wdata, .hw_done, .w_addr, .w_data_o,
    .w_data_oe, .w_data_i, .w_cs_n, .w_wr_n, .w_rd_n);
  w5300_model chip (.addr(w_addr), .data_in(w_data_o), .cs_n(w_cs_n), .wr_n(w_wr_n),
    .rd_n(w_rd_n), .data_out(w_data_i), .int_n(w_int_n));

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (!w_wr_n && !w_rd_n) begin failures++; $display("FAIL: both strobes low"); end
  end

  task automatic cpu_access(input bit we, input logic [9:0] a, input logic [15:0] d,
                            output logic [15:0] r, output int cycles);
    cpu_req = 1; cpu_we = we; cpu_addr = a; cpu_wdata = d; cycles = 0;
    do begin @(posedge clk); cycles++; #1; end while (!cpu_done);
    r = cpu_rdata;
    @(posedge clk); #1;
    cpu_req = 0;
  endtask

  initial begin
    logic [15:0] r, exp;
    int cyc, n0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // processor writes then reads back
    for (int k = 0; k < 8; k++) begin
      logic [9:0] a;
      logic [15:0] d;
      a = {9'($urandom_range(0, 511)), 1'b0};
      d = 16'($urandom);
      n0 = chip.wlog_addr.size();
      cpu_access(1, a, d, r, cyc);
      check(chip.wlog_addr.size() == n0 + 1, "one write cycle");
      check(chip.wlog_addr[n0] == a && chip.wlog_data[n0] == d, "write address/data");
      cpu_access(0, a, 16'h0, r, cyc);
      check(r == d, $sformatf("read back %h expected %h", r, d));
    end
    exp = chip.regs[10'h208 >> 1];
    cpu_access(0, 10'h208, 16'h0, r, cyc);
    check(r == exp, "read of untouched register");
    // hardware burst of 50 writes
    @(negedge clk);
    hw_own = 1;
    n0 = chip.wlog_addr.size();
    fork
      begin
        for (int k = 0; k < 50; k++) begin
          hw_req = 1; hw_addr = 10'h26E; hw_wdata = 16'(k * 3 + 1);
          do begin @(posedge clk); #1; end while (!hw_done);
        end
        hw_req = 0;
      end
      begin
        // processor asks for the bus during the burst; it must wait
        repeat (20) @(negedge clk);
        cpu_req = 1; cpu_we = 1; cpu_addr = 10'h010; cpu_wdata = 16'hBEEF;
      end
    join
    @(negedge clk);
    check(chip.wlog_addr.size() == n0 + 50, $sformatf("50 hardware writes, saw %0d",
          chip.wlog_addr.size() - n0));
    for (int k = 0; k < 50; k++) begin
      check(chip.wlog_data[n0 + k] == 16'(k * 3 + 1) && chip.wlog_addr[n0 + k] == 10'h26E,
            "hardware write data in order");
      if (k > 0) check(chip.wlog_time[n0 + k] - chip.wlog_time[n0 + k - 1] == 80.0,
            $sformatf("write period %0t, expected 80 ns", chip.wlog_time[n0 + k] - chip.wlog_time[n0 + k - 1]));
    end
    check(!cpu_done, "processor still waiting while hardware owns the bus");
    hw_own = 0;
    do begin @(posedge clk); #1; end while (!cpu_done);
    @(posedge clk); #1; cpu_req = 0;
    @(negedge clk); @(negedge clk);
    check(chip.wlog_data[chip.wlog_data.size() - 1] == 16'hBEEF, "processor write after release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
