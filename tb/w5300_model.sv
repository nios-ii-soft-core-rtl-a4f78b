// w5300_model: behavioural bus model of the W5300 Ethernet controller, for testbenches.
// It is not synthesizable logic and not a model of the network side. It holds 512
// 16-bit registers addressed by ADDR[9:1] in direct-address mode; writes are taken at
// the rising edge of WRn while CSn is low, and each write is also appended, with its
// simulation time, to a log (wlog_addr/wlog_data/wlog_time) so that a testbench can
// check the data sent into a socket TX FIFO and the write-cycle period. Reads return the
// register addressed while RDn is low. INTn is driven by the testbench through int_req.
module w5300_model (
  input  logic [9:0]  addr,
  input  logic [15:0] data_in,
  input  logic        cs_n,
  input  logic        wr_n,
  input  logic        rd_n,
  output logic [15:0] data_out,
  output logic        int_n
);
  logic [15:0] regs [512];
  logic [9:0]  wlog_addr [$];
  logic [15:0] wlog_data [$];
  realtime     wlog_time [$];
  logic        int_req = 1'b0;
  int          n_reads = 0;

  initial for (int i = 0; i < 512; i++) regs[i] = 16'(i * 16'h0101 + 16'h5300);

  assign data_out = (!cs_n && !rd_n) ? regs[addr[9:1]] : 16'h0;
  assign int_n    = !int_req;

  always @(posedge wr_n) begin
    if (!cs_n) begin
      regs[addr[9:1]] = data_in;
      wlog_addr.push_back(addr);
      wlog_data.push_back(data_in);
      wlog_time.push_back($realtime);
    end
  end

  always @(posedge rd_n) if (!cs_n) n_reads++;
endmodule
