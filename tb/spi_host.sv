// spi_host: behavioural model of the Tier-3 SPI master (in the real system a
// digital I/O module of the supervisory computer). xfer() sends one 32-bit
// frame MSB first in SPI mode 0, with sclk = clk/(2*HALF), and returns what
// came back on miso. wr() and rd() build register frames as defined in qd_pkg.
module spi_host #(
  parameter int unsigned HALF = 8
) (
  input  logic clk,
  output logic sclk,
  output logic cs_n,
  output logic mosi,
  input  logic miso
);
  initial begin
    sclk = 1'b0;
    cs_n = 1'b1;
    mosi = 1'b0;
  end

  task automatic xfer(input logic [31:0] tx, output logic [31:0] rx);
    rx = '0;
    @(posedge clk);
    cs_n = 1'b0;
    for (int b = 31; b >= 0; b--) begin
      mosi = tx[b];
      repeat (HALF) @(posedge clk);
      sclk = 1'b1;
      rx[b] = miso;
      repeat (HALF) @(posedge clk);
      sclk = 1'b0;
    end
    repeat (HALF) @(posedge clk);
    cs_n = 1'b1;
    repeat (2 * HALF) @(posedge clk);
  endtask

  task automatic wr(input logic [3:0] dev, input logic [10:0] regi, input logic [15:0] data);
    logic [31:0] rx;
    xfer({1'b0, dev, regi, data}, rx);
  endtask

  task automatic rd(input logic [3:0] dev, input logic [10:0] regi, output logic [15:0] data);
    logic [31:0] rx;
    xfer({1'b1, dev, regi, 16'h0000}, rx);
    data = rx[15:0];
  endtask
endmodule
