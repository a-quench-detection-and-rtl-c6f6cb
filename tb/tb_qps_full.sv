// tb_qps_full: one complete quench event on the design at its full default
// size: 8 DQD modules (32 channels), 60 kS per channel circular buffers in
// 8 SRAMs of 480 k words, a 10 MHz clock and a 10 kHz sample rate.
// Module 3 channel 1 is configured as QUENCH1 (threshold 1000 counts, VALID
// 3 samples, DELAY 2 samples) and every module's logger is armed. After 50
// quiet samples a step appears on that channel. Checks: the chassis dump fire
// and PS inhibit rise on exactly the 5th over-threshold sample, the first-fault
// record names module 3 / channel 1, every buffer freezes after 30 000
// post-trigger samples (3 s of data at 10 kHz), and module 3's buffer, read
// back over SPI around the trigger, holds the step where the trigger slot says.
module tb_qps_full;
  import qd_pkg::*;
  localparam int unsigned NMOD = 8, DEPTH = 60000, POST = 30000;
  localparam int unsigned AW = $clog2(8 * DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  logic t3_sclk, t3_cs_n, t3_mosi, t3_miso;
  sample_t i_mag_in;
  logic [NMOD-1:0][3:0] adc_sclk, adc_cs_n, adc_miso;
  logic [15:0] adc_val [NMOD][4];
  logic [NMOD-1:0] btn = '0;
  mod_led_t [NMOD-1:0] mod_led;
  logic [AW-1:0] sram_addr [NMOD];
  logic [15:0] sram_dq_o [NMOD], sram_dq_i [NMOD];
  logic [NMOD-1:0] sram_ce_n, sram_we_n, sram_oe_n;
  logic dqd_dump_fire, dqd_ps_inhibit, dqd_srd;
  ctrl_led_t ctrl_led;
  logic [6:0] aqd_line = '0, aqd_trip_status, aqd_fault_status;
  logic aqd_dump_fire, aqd_ps_inhibit, aqd_fault;
  int checks = 0, failures = 0;

  always #50 clk = ~clk;   // 10 MHz

  qps_top dut (
    .clk, .rst_n, .t3_sclk, .t3_cs_n, .t3_mosi, .t3_miso, .i_mag_in,
    .adc_sclk, .adc_cs_n, .adc_miso, .btn_rst(btn), .btn_trip_q1(btn), .btn_trip_q2(btn),
    .btn_trip_srd(btn), .mod_led, .sram_addr, .sram_dq_o, .sram_dq_i, .sram_ce_n,
    .sram_we_n, .sram_oe_n, .dqd_dump_fire, .dqd_ps_inhibit, .dqd_srd, .ctrl_led,
    .aqd_reset(1'b0), .aqd_mod_trip_line(aqd_line), .aqd_mod_fault_line(aqd_line),
    .aqd_trip_status, .aqd_fault_status, .aqd_dump_fire, .aqd_ps_inhibit, .aqd_fault
  );

  for (genvar m = 0; m < NMOD; m++) begin : g_m
    for (genvar a = 0; a < 4; a++) begin : g_a
      adc_model u_adc (.sclk(adc_sclk[m][a]), .cs_n(adc_cs_n[m][a]), .miso(adc_miso[m][a]),
                       .value(adc_val[m][a]));
    end
    sram_model #(.AW(AW), .WORDS(8 * DEPTH)) u_sram (
      .clk, .addr(sram_addr[m]), .dq_w(sram_dq_o[m]), .dq_r(sram_dq_i[m]),
      .ce_n(sram_ce_n[m]), .we_n(sram_we_n[m]), .oe_n(sram_oe_n[m])
    );
  end
  spi_host #(.HALF(5)) host (.clk, .sclk(t3_sclk), .cs_n(t3_cs_n), .mosi(t3_mosi), .miso(t3_miso));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic next_sample();
    @(posedge clk iff dut.sample_tick);
    repeat (100) @(negedge clk);
  endtask

  initial begin
    logic [15:0] d, tl, th;
    int trig, over_slot, n;
    i_mag_in = '0;
    for (int m = 0; m < NMOD; m++) for (int a = 0; a < 4; a++) adc_val[m][a] = 16'(10 * m + a);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    host.wr(4'd3, 11'(1 * 8 + R_TYPE), 16'(QUENCH1));
    host.wr(4'd3, 11'(1 * 8 + R_THRESH), 16'd1000);
    host.wr(4'd3, 11'(1 * 8 + R_VALID), 16'd3);
    host.wr(4'd3, 11'(1 * 8 + R_DELAY), 16'd2);
    for (int m = 0; m < NMOD; m++) host.wr(4'(m), 11'(R_CTRL), 16'h0001);
    repeat (50) next_sample();
    check(!dqd_dump_fire && !dqd_ps_inhibit, "quiet before the quench");
    adc_val[3][1] = 16'd2500;
    for (int k = 0; k < 6; k++) begin
      next_sample();
      check(dqd_dump_fire == (k >= 4), $sformatf("over sample %0d: dump fire %0b", k, dqd_dump_fire));
    end
    check(dqd_ps_inhibit, "PS inhibit");
    host.rd(DEV_CTRL, 11'(C_FIRST), d);
    check(d == 16'h9113, $sformatf("first fault %h (module 3, QUENCH1, channel 1)", d));
    // wait for all buffers to freeze: 30 000 samples
    n = 0;
    while (!ctrl_led.data && n < POST + 10) begin
      next_sample();
      n++;
    end
    check(ctrl_led.data, "all 8 buffers frozen");
    // trigger = over sample 5; samples 5 .. 5+POST-1 are recorded, 0..5 were already taken
    check(n == POST - 1, $sformatf("froze after %0d more samples", n));
    host.rd(4'd3, 11'(R_TRIG_L), tl);
    host.rd(4'd3, 11'(R_TRIG_H), th);
    trig = int'({th, tl});
    // the step began 5 samples before the trigger sample
    over_slot = (trig - 5 + DEPTH) % DEPTH;
    for (int s = -2; s < 3; s++) begin
      int slot, addr;
      slot = (over_slot + s + DEPTH) % DEPTH;
      addr = slot * 8 + 1;
      host.wr(4'd3, 11'(R_RDADDR_L), 16'(addr));
      host.wr(4'd3, 11'(R_RDADDR_H), 16'(addr >> 16));
      host.rd(4'd3, 11'(R_RDDATA), d);
      check(d == ((s < 0) ? 16'd31 : 16'd2500),
            $sformatf("module 3 ch1 at step offset %0d: %0d", s, d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
