// adc_spi_master: reads one 16-bit conversion from a DQD channel ADC.
//
// In a DQD module each analog channel (instrumentation amplifier, amplifier,
// ADC) sits behind a digital isolator and talks to the FPGA over SPI. At every
// sample tick (10 kHz) this block lowers cs_n, clocks out 16 SCLK periods and
// shifts in the ADC word MSB first. The ADC is expected to change MISO after a
// falling SCLK edge (and to present the MSB when cs_n falls); this block
// samples MISO on the rising edge. SCLK is clk / (2*HALF_PERIOD).
//
// Timing: `valid` pulses for one clk cycle, 33*HALF_PERIOD cycles after the
// edge that samples `start`. A start while busy is ignored.
// The SPI link and 16-bit ADC follow the paper; the SPI mode, clock divider and
// the word format (two's complement) are this design's choices.
module adc_spi_master #(
  parameter int unsigned HALF_PERIOD = 2,
  parameter int unsigned WIDTH       = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             sclk,
  output logic             cs_n,
  input  logic             miso,
  output logic [WIDTH-1:0] data,
  output logic             valid,
  output logic             busy
);
  localparam int unsigned CW = $clog2(HALF_PERIOD + 1) + 1;
  localparam int unsigned BW = $clog2(WIDTH + 1);

  logic [CW-1:0]    div_q;
  logic [BW-1:0]    bits_q;
  logic [WIDTH-1:0] shreg_q;

  assign busy = ~cs_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_n    <= 1'b1;
      sclk    <= 1'b0;
      div_q   <= '0;
      bits_q  <= '0;
      shreg_q <= '0;
      data    <= '0;
      valid   <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (cs_n) begin
        if (start) begin
          cs_n   <= 1'b0;
          sclk   <= 1'b0;
          div_q  <= '0;
          bits_q <= '0;
        end
      end else if (div_q == CW'(HALF_PERIOD - 1)) begin
        div_q <= '0;
        if (bits_q == BW'(WIDTH)) begin
          // all bits in: release the ADC
          cs_n  <= 1'b1;
          data  <= shreg_q;
          valid <= 1'b1;
        end else if (!sclk) begin
          sclk    <= 1'b1;                       // rising edge: sample MISO
          shreg_q <= {shreg_q[WIDTH-2:0], miso};
        end else begin
          sclk   <= 1'b0;                        // falling edge: ADC shifts
          bits_q <= bits_q + 1'b1;
        end
      end else begin
        div_q <= div_q + 1'b1;
      end
    end
  end

endmodule
