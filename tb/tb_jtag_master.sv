// tb_jtag_master: self-checking test of jtag_master against a behavioural HPTDC TAP.
//
// Driving the master the way the processor would (commands of up to 32 bits), the test
// resets the TAP, loads the IDCODE instruction and reads the 32-bit ID, loads the SETUP
// instruction and writes a random SETUP_LEN-bit configuration in 32-bit pieces, then
// writes a second one while reading the first back on TDO, and compares both with the
// TAP's update latch. It also checks, clock by clock, that TCK rests low when idle, that
// every TCK half period is TCK_DIV clocks, that TMS and TDI never change while TCK is
// high, and that a command of n bits keeps busy for 2*TCK_DIV*n + 1 clocks.
module tb_jtag_master;
  localparam int unsigned DIV = 5;
  localparam int unsigned SETUP_LEN = 647;
  localparam logic [31:0] ID = 32'h8470_DACE;

  logic clk = 0, rst_n = 0;
  logic start = 0, tms_mode = 0, tms_last = 0;
  logic [4:0] nbits_m1 = '0;
  logic [31:0] din = '0, dout;
  logic busy, tck, tms, tdi, tdo;
  int checks = 0, failures = 0;

  jtag_master #(.TCK_DIV(DIV)) dut (.clk, .rst_n, .start, .nbits_m1, .tms_mode, .tms_last,
    .din, .dout, .busy, .tck, .tms, .tdi, .tdo);
  jtag_tap_model #(.SETUP_LEN(SETUP_LEN), .IDCODE(ID)) tap (.tck, .tms, .tdi, .tdo);

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pin timing monitor
  logic tck_p = 0, tms_p = 0, tdi_p = 0;
  int half = 0, bad_half = 0, bad_hold = 0, bad_idle = 0, halves = 0;
  always @(posedge clk) if (rst_n) begin
    if (tck && tck_p && (tms != tms_p || tdi != tdi_p)) bad_hold++;
    if (!busy && tck) bad_idle++;
    if (tck != tck_p) begin
      if (half != DIV) bad_half++;
      halves++;
      half = 1;
    end else half++;
    if (!busy) half = 0;
    tck_p = tck; tms_p = tms; tdi_p = tdi;
  end

  task automatic cmd(input int n, input bit mode, input bit last, input logic [31:0] d,
                     output logic [31:0] q);
    int t;
    @(negedge clk);
    nbits_m1 = 5'(n - 1); tms_mode = mode; tms_last = last; din = d; start = 1;
    @(negedge clk);
    start = 0; din = $urandom;
    t = 1;
    while (busy) begin @(negedge clk); t++; end
    check(t == 2 * DIV * n + 1, $sformatf("%0d-bit command took %0d clocks", n, t));
    q = dout;
  endtask

  task automatic tms_seq(input int n, input logic [31:0] bits);
    logic [31:0] q;
    cmd(n, 1, 0, bits, q);
  endtask

  // shift a whole register of len bits (len >= 1), entering from and ending in Exit1
  task automatic shift_long(input int len, input logic [SETUP_LEN-1:0] d, output logic [SETUP_LEN-1:0] q);
    int pos, n;
    logic [31:0] w, r;
    pos = 0;
    q = '0;
    while (pos < len) begin
      n = (len - pos > 32) ? 32 : len - pos;
      w = '0;
      for (int k = 0; k < n; k++) w[k] = d[pos + k];
      cmd(n, 0, pos + n == len, w, r);
      for (int k = 0; k < n; k++) q[pos + k] = r[k];
      pos += n;
    end
  endtask

  initial begin : main
    logic [31:0] q;
    logic [SETUP_LEN-1:0] cfg1, cfg2, back;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(!busy && !tck, "idle after reset");

    tms_seq(6, 32'b011111);                  // Test-Logic-Reset, then Run-Test/Idle
    tms_seq(4, 32'b0011);                    // to Shift-IR
    cmd(5, 0, 1, 32'b10001, q);              // IDCODE, leave to Exit1-IR
    check(q[4:0] == 5'b00001, $sformatf("IR capture %b", q[4:0]));
    tms_seq(2, 32'b01);                      // Update-IR, Run-Test/Idle
    tms_seq(3, 32'b001);                     // to Shift-DR
    cmd(32, 0, 1, 32'h0, q);
    check(q == ID, $sformatf("IDCODE read %h", q));
    tms_seq(2, 32'b01);

    // SETUP register
    for (int k = 0; k < SETUP_LEN; k++) begin cfg1[k] = 1'($urandom); cfg2[k] = 1'($urandom); end
    tms_seq(4, 32'b0011);
    cmd(5, 0, 1, 32'b11000, q);
    tms_seq(2, 32'b01);
    tms_seq(3, 32'b001);
    shift_long(SETUP_LEN, cfg1, back);
    tms_seq(2, 32'b01);
    check(tap.setup_q == cfg1, "first configuration in the SETUP latch");
    tms_seq(3, 32'b001);
    shift_long(SETUP_LEN, cfg2, back);
    tms_seq(2, 32'b01);
    check(back == cfg1, "first configuration read back while writing the second");
    check(tap.setup_q == cfg2, "second configuration in the SETUP latch");
    check(tap.n_update_setup == 2, "two SETUP updates");

    // odd lengths, TMS exit on the only bit
    tms_seq(3, 32'b001);
    for (int n = 1; n <= 32; n++) begin
      cmd(n, 0, 0, $urandom, q);
    end
    tms_seq(3, 32'b011);                     // Exit1, Update, Run-Test/Idle
    check(tap.n_update_setup == 3, "third SETUP update");

    check(bad_hold == 0, $sformatf("%0d TMS/TDI changes while TCK high", bad_hold));
    check(bad_idle == 0, "TCK high while idle");
    check(bad_half == 0 && halves > 0, $sformatf("%0d TCK half periods not %0d clocks", bad_half, DIV));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
