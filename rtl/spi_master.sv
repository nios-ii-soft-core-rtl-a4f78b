// spi_master: SPI link from the DAQ to the high-voltage module.
//
// HV commands received over the network are forwarded by the processor to the HV module
// as SPI frames. A start pulse loads a W-bit word; the master lowers CSn, shifts the word
// out on MOSI most-significant bit first and shifts MISO in, in SPI mode 0 (SCLK idle
// low, data changed on the falling edge and sampled on the rising edge), then raises CSn
// and pulses done with the received word in rx.
// Timing: each SCLK half period is CLK_DIV clocks (1 MHz SCLK at 50 MHz with 25); a frame
// takes 2*W*CLK_DIV clocks plus one. The use of SPI follows the DAQ description; the
// frame width, mode and rate are this design's choices, as the HV module's command
// format is not published with it.
module spi_master #(
  parameter int unsigned W       = 16,
  parameter int unsigned CLK_DIV = 25
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] tx,
  output logic [W-1:0] rx,
  output logic         busy,
  output logic         done,
  output logic         sclk,
  output logic         mosi,
  input  logic         miso,
  output logic         cs_n
);
  localparam int unsigned DW = $clog2(CLK_DIV + 1);
  localparam int unsigned BW = $clog2(W + 1);

  logic [DW-1:0] div;
  logic [BW-1:0] bits;
  logic [W-1:0]  sh_tx, sh_rx;

  assign busy = !cs_n;
  assign mosi = sh_tx[W-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_n  <= 1'b1;
      sclk  <= 1'b0;
      div   <= '0;
      bits  <= '0;
      sh_tx <= '0;
      sh_rx <= '0;
      rx    <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (cs_n) begin
        if (start) begin
          cs_n  <= 1'b0;
          sh_tx <= tx;
          bits  <= '0;
          div   <= '0;
        end
      end else if (div != DW'(CLK_DIV - 1)) begin
        div <= div + 1'b1;
      end else begin
        div  <= '0;
        sclk <= !sclk;
        if (!sclk) begin
          // rising edge: sample
          sh_rx <= {sh_rx[W-2:0], miso};
          bits  <= bits + 1'b1;
        end else begin
          // falling edge: next bit out, or end of frame
          if (bits == BW'(W)) begin
            cs_n <= 1'b1;
            rx   <= sh_rx;
            done <= 1'b1;
          end else begin
            sh_tx <= {sh_tx[W-2:0], 1'b0};
          end
        end
      end
    end
  end
endmodule
