// tb_dqd_controller: checks the chassis controller with scaled clocks
// (CLK_HZ = 100 kHz, sample tick every 10 cycles). Checks: tick period,
// current broadcast and Idot (difference of consecutive current samples,
// saturated), the output mapping (QUENCH1 -> dump fire and PS inhibit,
// QUENCH2 -> PS inhibit only, SRD -> SRD), latching until a clear written over
// SPI, the first-fault record, the enable mask, the DATA and HW_FLT
// indicators and the SPI pass-through of the backplane MISO.
module tb_dqd_controller;
  import qd_pkg::*;
  localparam int unsigned NMOD = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic t3_sclk, t3_cs_n, t3_mosi, t3_miso, bp_sclk, bp_cs_n, bp_mosi;
  logic bp_miso = 1'b0;
  sample_t i_mag_in, i_mag, idot;
  logic sample_tick, chassis_trig, chassis_clear;
  logic [NMOD-1:0] mod_q1, mod_q2, mod_srd, mod_hw_flt, mod_dat_rdy;
  logic [3:0] mod_first [NMOD];
  logic dqd_dump_fire, dqd_ps_inhibit, dqd_srd;
  ctrl_led_t led;
  int checks = 0, failures = 0, ticks = 0, last_tick = 0, cyc = 0, bad_period = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (sample_tick && rst_n) begin
      if (ticks > 0 && cyc - last_tick != 10) bad_period++;
      ticks++;
      last_tick = cyc;
    end
  end

  dqd_controller #(.NMOD(NMOD), .CLK_HZ(100_000), .SAMPLE_HZ(10_000), .HB_SAMPLES(4)) dut (
    .clk, .rst_n, .t3_sclk, .t3_cs_n, .t3_mosi, .t3_miso, .bp_sclk, .bp_cs_n, .bp_mosi,
    .bp_miso, .i_mag_in, .sample_tick, .i_mag, .idot, .chassis_trig, .chassis_clear,
    .mod_q1, .mod_q2, .mod_srd, .mod_hw_flt, .mod_dat_rdy, .mod_first,
    .dqd_dump_fire, .dqd_ps_inhibit, .dqd_srd, .led
  );
  spi_host #(.HALF(5)) host (.clk, .sclk(t3_sclk), .cs_n(t3_cs_n), .mosi(t3_mosi), .miso(t3_miso));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic wait_ticks(input int n);
    repeat (n) @(posedge sample_tick);
    @(negedge clk);
  endtask

  task automatic lines_low();
    mod_q1 = '0; mod_q2 = '0; mod_srd = '0;
  endtask

  initial begin
    logic [15:0] d;
    int prev;
    lines_low();
    mod_hw_flt = '0; mod_dat_rdy = '0; i_mag_in = '0;
    foreach (mod_first[m]) mod_first[m] = 4'(8 + m % 8);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // current broadcast and Idot
    prev = 0;
    for (int k = 0; k < 12; k++) begin
      int cur, di;
      cur = (k < 10) ? 1000 * k - 3000 : ((k == 10) ? 32767 : -32768);
      @(negedge clk);
      i_mag_in = sample_t'(cur);
      wait_ticks(1);
      di = cur - prev;
      if (di > 32767) di = 32767;
      if (di < -32767) di = -32767;
      check(int'(i_mag) == cur, $sformatf("i_mag %0d expected %0d", i_mag, cur));
      check(int'(idot) == di, $sformatf("idot %0d expected %0d", idot, di));
      prev = cur;
    end
    check(ticks > 10 && bad_period == 0, "sample tick every 10 cycles");
    host.rd(DEV_CTRL, 11'(C_ID), d);
    check(d == CTRL_ID, "controller ID");
    check(!dqd_dump_fire && !dqd_ps_inhibit && !dqd_srd && !chassis_trig, "quiet at start");
    // QUENCH2 on module 3: PS inhibit only
    @(negedge clk);
    mod_q2[3] = 1'b1;
    @(negedge clk);
    check(dqd_ps_inhibit && !dqd_dump_fire && chassis_trig && led.quench, "QUENCH2 -> PS inhibit only");
    // QUENCH1 on module 1 afterwards: dump fire, first fault stays module 3
    mod_q1[1] = 1'b1;
    @(negedge clk);
    check(dqd_dump_fire && dqd_ps_inhibit, "QUENCH1 -> dump fire");
    lines_low();
    @(negedge clk);
    check(dqd_dump_fire && dqd_ps_inhibit, "outputs latched");
    host.rd(DEV_CTRL, 11'(C_FIRST), d);
    check(d == {1'b1, 2'b00, 1'b1, 1'b0, 3'd3, 2'b00, 2'd2, 1'b0, 3'd3},
          $sformatf("first fault %h", d));
    host.rd(DEV_CTRL, 11'(C_STATUS), d);
    check(d[2:0] == 3'b011, $sformatf("status %h", d));
    host.wr(DEV_CTRL, 11'(C_CTRL), 16'h1);
    @(negedge clk);
    check(!dqd_dump_fire && !dqd_ps_inhibit && !chassis_trig, "clear releases outputs");
    // SRD on module 6
    mod_srd[6] = 1'b1;
    @(negedge clk);
    check(dqd_srd && !dqd_dump_fire && !dqd_ps_inhibit && led.srd, "SRD -> SRD only");
    lines_low();
    host.wr(DEV_CTRL, 11'(C_CTRL), 16'h1);
    // enable mask: module 5 disabled
    host.wr(DEV_CTRL, 11'(C_ENABLE), 16'h00DF);
    host.rd(DEV_CTRL, 11'(C_ENABLE), d);
    check(d == 16'h00DF, "enable mask reads back");
    mod_q1[5] = 1'b1;
    repeat (3) @(negedge clk);
    check(!dqd_dump_fire && !chassis_trig, "disabled module ignored");
    mod_q1[4] = 1'b1;
    @(negedge clk);
    check(dqd_dump_fire && dqd_ps_inhibit, "enabled module obeyed: QUENCH1 -> dump fire and PS inhibit");
    lines_low();
    host.wr(DEV_CTRL, 11'(C_CTRL), 16'h1);
    // indicators
    mod_dat_rdy = 8'hDF;
    mod_hw_flt = 8'h04;
    @(negedge clk);
    check(led.data && led.hw_flt, "DATA and HW_FLT indicators");
    mod_dat_rdy = 8'h5F;
    @(negedge clk);
    check(!led.data, "DATA needs every enabled module");
    check(led.spi_link, "SPI_LINK after traffic");
    // backplane MISO passes to the Tier-3
    @(negedge clk);
    bp_miso = 1'b1;
    @(negedge clk);
    check(t3_miso, "backplane MISO reaches the Tier-3");
    bp_miso = 1'b0;
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
