// tb_dqd_module: one DQD module with four ADC models, an SRAM model and the
// Tier-3 host on its backplane SPI (slot 2), at a 32-slot buffer (POST = 8).
// The testbench plays the controller: it issues the sample ticks, current and
// Idot, and forwards the module's lines as the chassis trigger.
// Configuration over SPI:
//   ch0 QUENCH1, thr 1000, VALID 3, DELAY 2
//   ch2 NO_ACTION, thr 10 (always over, must never drive a line)
//   ch5 = ch1 - ch2 (bucked), QUENCH2, thr 500, VALID 2, DELAY 0
//   ch6 = ch3 - 2*Idot (bucked), SRD, thr 400, VALID 1, DELAY 1
// Checks: register read-back and live values, the exact sample on which each
// line rises, spike rejection, latching and clear, the first-channel record,
// the buffer freeze POST samples after the trigger and a read-back of all
// 256 SRAM words over SPI against values computed in the testbench, the
// hardware-fault flag for a rail code, the test buttons and the indicators.
module tb_dqd_module;
  import qd_pkg::*;
  localparam int unsigned DEPTH = 32, POST = 8;
  localparam int unsigned AW = $clog2(8 * DEPTH);
  localparam logic [3:0] SLOT = 4'd2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic sample_tick = 1'b0, chassis_trig, chassis_clear = 1'b0;
  sample_t i_mag, idot;
  logic [3:0] adc_sclk, adc_cs_n, adc_miso;
  logic [15:0] adc_val [4];
  logic bp_sclk, bp_cs_n, bp_mosi, bp_miso;
  logic q1, q2, srd, hw_flt, dat_rdy;
  logic [3:0] first_ch;
  logic btn_rst = 0, btn_trip_q1 = 0, btn_trip_q2 = 0, btn_trip_srd = 0;
  mod_led_t led;
  logic [AW-1:0] sram_addr;
  logic [15:0] sram_dq_o, sram_dq_i;
  logic sram_ce_n, sram_we_n, sram_oe_n;
  int checks = 0, failures = 0;
  int nsamp = 0;                 // samples since arming
  logic [15:0] logbuf [1024][8]; // expected channel values per sample

  always #5 clk = ~clk;
  assign chassis_trig = q1 | q2 | srd;

  dqd_module #(.DEPTH(DEPTH), .POST(POST), .ADC_HALF(2), .HB_SAMPLES(4)) dut (
    .clk, .rst_n, .slot_id(SLOT[2:0]), .sample_tick, .i_mag, .idot, .chassis_trig,
    .chassis_clear, .adc_sclk, .adc_cs_n, .adc_miso, .bp_sclk, .bp_cs_n, .bp_mosi, .bp_miso,
    .q1, .q2, .srd, .hw_flt, .dat_rdy, .first_ch, .btn_rst, .btn_trip_q1, .btn_trip_q2,
    .btn_trip_srd, .led, .sram_addr, .sram_dq_o, .sram_dq_i, .sram_ce_n, .sram_we_n, .sram_oe_n
  );
  for (genvar a = 0; a < 4; a++) begin : g_adc
    adc_model u_adc (.sclk(adc_sclk[a]), .cs_n(adc_cs_n[a]), .miso(adc_miso[a]), .value(adc_val[a]));
  end
  sram_model #(.AW(AW), .WORDS(8 * DEPTH)) u_sram (
    .clk, .addr(sram_addr), .dq_w(sram_dq_o), .dq_r(sram_dq_i),
    .ce_n(sram_ce_n), .we_n(sram_we_n), .oe_n(sram_oe_n)
  );
  spi_host #(.HALF(5)) host (.clk, .sclk(bp_sclk), .cs_n(bp_cs_n), .mosi(bp_mosi), .miso(bp_miso));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [15:0] sat(input int v);
    if (v > 32767) return 16'h7FFF;
    if (v < -32768) return 16'h8000;
    return 16'(v);
  endfunction

  // one sample: set the four inputs, tick, let the pipeline settle
  task automatic sample(input int c0, input int c1, input int c2, input int c3, input int di);
    @(negedge clk);
    adc_val[0] = 16'(c0); adc_val[1] = 16'(c1); adc_val[2] = 16'(c2); adc_val[3] = 16'(c3);
    idot = sample_t'(di);
    if (nsamp < 1024) begin
      logbuf[nsamp][0] = 16'(c0); logbuf[nsamp][1] = 16'(c1);
      logbuf[nsamp][2] = 16'(c2); logbuf[nsamp][3] = 16'(c3);
      logbuf[nsamp][4] = 16'h0000;                 // ch0 - ch0 (reset source)
      logbuf[nsamp][5] = sat(c1 - c2);
      logbuf[nsamp][6] = sat(c3 - 2 * di);
      logbuf[nsamp][7] = sat(c3 - c0);             // reset source: ch3 - ch0
    end
    nsamp++;
    sample_tick = 1'b1;
    @(negedge clk);
    sample_tick = 1'b0;
    repeat (120) @(negedge clk);
  endtask

  task automatic quiet(input int n);
    repeat (n) sample(100, 300, 300, 50, 25);
  endtask

  task automatic cfg(input int c, input chan_type_e t, input int th, input int v, input int d);
    host.wr(SLOT, 11'(c * 8 + R_TYPE), 16'(t));
    host.wr(SLOT, 11'(c * 8 + R_THRESH), 16'(th));
    host.wr(SLOT, 11'(c * 8 + R_VALID), 16'(v));
    host.wr(SLOT, 11'(c * 8 + R_DELAY), 16'(d));
  endtask

  task automatic clear_all();
    host.wr(SLOT, 11'(R_CTRL), 16'h0002);
    @(negedge clk);
  endtask

  initial begin
    logic [15:0] d, tl;
    int ktrip, trig, last;
    foreach (adc_val[a]) adc_val[a] = '0;
    i_mag = '0; idot = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    host.rd(SLOT, 11'(R_ID), d);
    check(d == MODULE_ID, $sformatf("module ID %h", d));
    host.rd(4'd5, 11'(R_ID), d);
    check(d == 16'h0, "other slot's frames not answered");
    cfg(0, QUENCH1, 1000, 3, 2);
    cfg(2, NO_ACTION, 10, 1, 0);
    cfg(5, QUENCH2, 500, 2, 0);
    host.wr(SLOT, 11'(5 * 8 + R_BUCKSRC), 16'h0009);    // a = 1, b = 2
    host.wr(SLOT, 11'(5 * 8 + R_BUCKGAIN), 16'd256);
    cfg(6, SRD, 400, 1, 1);
    host.wr(SLOT, 11'(6 * 8 + R_BUCKSRC), 16'h0013);    // a = 3, Idot
    host.wr(SLOT, 11'(6 * 8 + R_BUCKGAIN), 16'd512);
    host.rd(SLOT, 11'(6 * 8 + R_BUCKSRC), d);
    check(d == 16'h0013, "bucking source reads back");
    host.rd(SLOT, 11'(0 * 8 + R_VALID), d);
    check(d == 16'd3, "VALID_TIME reads back");
    // arm the logger
    host.wr(SLOT, 11'(R_CTRL), 16'h0001);
    nsamp = 0;
    quiet(6);
    check(!q1 && !q2 && !srd && !hw_flt, "no lines while quiet (NO_ACTION channel over)");
    host.rd(SLOT, 11'(5 * 8 + R_LIVE), d);
    check(d == 16'h0, "bucked ch5 live value 0");
    host.rd(SLOT, 11'(6 * 8 + R_LIVE), d);
    check(d == 16'h0, "bucked ch6 live value 0");
    host.rd(SLOT, 11'(2 * 8 + R_LIVE), d);
    check(d == 16'd300, "live value ch2");
    // spike of 2 samples on ch0: rejected by VALID_TIME = 3
    sample(1500, 300, 300, 50, 25);
    sample(-1500, 300, 300, 50, 25);
    quiet(3);
    check(!q1, "2-sample spike rejected");
    // step on ch0: validated on its 3rd sample, line 2 samples later
    for (int k = 0; k < 6; k++) begin
      if (k == 0) ktrip = nsamp + 4;
      sample(1500, 300, 300, 50, 25);
      check(q1 == (k >= 4), $sformatf("QUENCH1 after step sample %0d: q1=%0b", k, q1));
    end
    check(led.q1_ff && !q2 && !srd, "only QUENCH1 line");
    check(first_ch == 4'b1000, $sformatf("first channel %b", first_ch));
    // keep sampling until the buffer freezes
    for (int k = 0; k < POST + 2 && !dat_rdy; k++) quiet(1);
    repeat (20) @(negedge clk);
    check(dat_rdy && led.dat_rdy, "buffer frozen");
    host.rd(SLOT, 11'(R_TRIG_L), tl);
    trig = ktrip + 1;                   // the line is seen with the next sample
    check(int'(tl) == trig % DEPTH, $sformatf("trigger slot %0d expected %0d", tl, trig % DEPTH));
    last = trig + POST - 1;
    host.wr(SLOT, 11'(R_RDADDR_L), 16'h0);
    host.wr(SLOT, 11'(R_RDADDR_H), 16'h0);
    for (int s = 0; s < DEPTH; s++) begin
      int k;
      k = last - ((last - s) % DEPTH + DEPTH) % DEPTH;
      for (int c = 0; c < 8; c++) begin
        host.rd(SLOT, 11'(R_RDDATA), d);
        if (k >= 0) check(d == logbuf[k][c],
                          $sformatf("buffer slot %0d ch %0d: %h expected %h", s, c, d, logbuf[k][c]));
      end
    end
    host.wr(SLOT, 11'(R_CTRL), 16'h0005);     // DAT_SVD
    @(negedge clk);
    check(led.dat_svd, "DAT_SVD set");
    host.wr(SLOT, 11'(R_CTRL), 16'h0000);     // disarm
    // clear
    quiet(1);
    clear_all();
    check(!q1 && first_ch == 4'b0000, "clear releases QUENCH1");
    // bucked QUENCH2: ch1 - ch2 = 600 > 500 for 2 samples, no delay
    for (int k = 0; k < 3; k++) begin
      sample(100, 900, 300, 50, 25);
      check(q2 == (k >= 1), $sformatf("QUENCH2 sample %0d: q2=%0b", k, q2));
    end
    check(!q1 && first_ch == 4'b1101, $sformatf("first channel 5 (%b)", first_ch));
    quiet(1);
    clear_all();
    // bucked SRD against Idot: ch3 - 2*Idot = 550 - 50 = 500 > 400; delay 1
    for (int k = 0; k < 3; k++) begin
      sample(100, 300, 300, 550, 25);
      check(srd == (k >= 1), $sformatf("SRD sample %0d: srd=%0b", k, srd));
    end
    // with Idot = 100 the same ch3 is bucked to 350: no SRD
    quiet(1);
    clear_all();
    repeat (3) sample(100, 300, 300, 550, 100);
    check(!srd, "Idot bucking cancels the inductive voltage");
    // hardware fault: rail code on a configured channel
    sample(32767, 300, 300, 50, 25);
    check(hw_flt && led.hw_flt, "rail code flags HW_FLT");
    quiet(1);
    clear_all();
    check(!hw_flt, "clear releases HW_FLT");
    // front-panel test buttons and reset button
    @(negedge clk);
    btn_trip_q2 = 1'b1;
    @(negedge clk);
    btn_trip_q2 = 1'b0;
    @(negedge clk);
    check(q2 && !q1 && !srd, "TRIP_Q2 button");
    btn_trip_srd = 1'b1;
    @(negedge clk);
    btn_trip_srd = 1'b0;
    @(negedge clk);
    check(srd, "TRIP_SRD button");
    btn_rst = 1'b1;
    @(negedge clk);
    btn_rst = 1'b0;
    @(negedge clk);
    check(!q2 && !srd, "RST button");
    check(led.spi_link, "SPI_LINK indicator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
