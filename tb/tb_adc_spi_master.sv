// tb_adc_spi_master: checks the ADC SPI reader against an ideal ADC model.
// Random 16-bit words (plus the extremes) are converted; each read must return
// the word exactly, valid must rise 33*HALF cycles after the edge that samples start, cs_n must
// frame exactly 16 sclk rising edges, and a start while busy must be ignored.
module tb_adc_spi_master;
  localparam int unsigned HALF = 3;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic sclk, cs_n, miso, valid, busy;
  logic [15:0] data, value;
  int checks = 0, failures = 0;
  int rises = 0;

  always #5 clk = ~clk;

  adc_spi_master #(.HALF_PERIOD(HALF), .WIDTH(16)) dut (
    .clk, .rst_n, .start, .sclk, .cs_n, .miso, .data, .valid, .busy
  );
  adc_model u_adc (.sclk, .cs_n, .miso, .value);

  always @(posedge sclk) if (!cs_n) rises++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic convert(input logic [15:0] v, input bit extra_start);
    int cyc;
    value = v;
    rises = 0;
    @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    cyc = 0;
    while (!valid) begin
      @(posedge clk);
      cyc++;
      if (extra_start && cyc == 10) start <= 1'b1;
      if (extra_start && cyc == 11) start <= 1'b0;
      if (cyc > 1000) break;
    end
    check(data == v, $sformatf("data %h expected %h", data, v));
    // the loop sees valid one edge after the edge that sets it
    check(cyc == 33 * HALF + 1, $sformatf("latency %0d cycles expected %0d", cyc - 1, 33 * HALF));
    check(rises == 16, $sformatf("%0d sclk rising edges, expected 16", rises));
    repeat (3) @(posedge clk);
    check(cs_n && !busy, "cs_n released after the word");
  endtask

  initial begin
    value = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    convert(16'h0000, 0);
    convert(16'hFFFF, 0);
    convert(16'h8001, 1);
    convert(16'h7FFE, 0);
    for (int i = 0; i < 40; i++) convert(16'($urandom), (i % 5) == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
