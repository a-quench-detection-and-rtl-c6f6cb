// adc_model: behavioural model of a DQD channel's 16-bit SPI ADC (not
// synthesizable logic; the real part is an off-the-shelf converter behind a
// digital isolator). When cs_n falls it takes `value` as the conversion
// result and presents the MSB on miso; every falling sclk edge shifts the next
// bit out. The ADC is modelled as ideal: no conversion delay, no noise.
module adc_model (
  input  logic        sclk,
  input  logic        cs_n,
  output logic        miso,
  input  logic [15:0] value
);
  logic [15:0] sh = '0;
  initial miso = 1'b0;
  always @(negedge cs_n) begin
    sh   = value;
    miso = sh[15];
  end
  always @(negedge sclk) begin
    if (!cs_n) begin
      sh   = {sh[14:0], 1'b0};
      miso = sh[15];
    end
  end
endmodule
