// tb_qps_top: end-to-end test of the quench protection logic at reduced size:
// 3 DQD modules, 32-slot buffers (POST = 8), a 2 MHz clock (200 cycles per
// 10 kHz sample) and a 2-module AQD backplane. ADCs, SRAMs, the Tier-3 host
// and the AQD module lines are behavioural models.
// The scenario walks through every mechanism of the design and counts each:
// Idot bucking cancelling a ramp voltage, the current-dependent threshold,
// spike rejection by the validation time, a NO_ACTION channel that only logs,
// a QUENCH1 trip with the exact sample latency (dump fire + PS inhibit), the
// first-fault record, the chassis-wide buffer freeze and an SRAM read-back,
// DAT_SVD, a QUENCH2 trip (PS inhibit only), an SRD trip, the controller's
// enable mask, a hardware fault, a front-panel test trip, the chassis clear
// and an AQD module trip. A mechanism that never happened counts a failure.
module tb_qps_top;
  import qd_pkg::*;
  localparam int unsigned NMOD = 3, DEPTH = 32, POST = 8, AQN = 2;
  localparam int unsigned CLK_HZ = 2_000_000, SPS = CLK_HZ / 10_000;
  localparam int unsigned AW = $clog2(8 * DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  logic t3_sclk, t3_cs_n, t3_mosi, t3_miso;
  sample_t i_mag_in;
  logic [NMOD-1:0][3:0] adc_sclk, adc_cs_n, adc_miso;
  logic [15:0] adc_val [NMOD][4];
  logic [NMOD-1:0] btn_rst = '0, btn_trip_q1 = '0, btn_trip_q2 = '0, btn_trip_srd = '0;
  mod_led_t [NMOD-1:0] mod_led;
  logic [AW-1:0] sram_addr [NMOD];
  logic [15:0] sram_dq_o [NMOD], sram_dq_i [NMOD];
  logic [NMOD-1:0] sram_ce_n, sram_we_n, sram_oe_n;
  logic dqd_dump_fire, dqd_ps_inhibit, dqd_srd;
  ctrl_led_t ctrl_led;
  logic aqd_reset = 1'b0;
  logic [AQN-1:0] aqd_trip_line = '0, aqd_fault_line = '0, aqd_run = '1;
  logic [AQN-1:0] aqd_trip_status, aqd_fault_status;
  logic aqd_dump_fire, aqd_ps_inhibit, aqd_fault;
  int checks = 0, failures = 0;

  typedef enum int {
    M_IDOT_BUCK, M_CUR_DEP, M_SPIKE, M_NO_ACTION, M_QUENCH1, M_FIRST_FAULT, M_FREEZE,
    M_READBACK, M_DAT_SVD, M_QUENCH2, M_SRD, M_MASK, M_HW_FLT, M_TEST_BTN, M_CLEAR,
    M_AQD_TRIP, M_COUNT
  } mech_e;
  int mech [M_COUNT];

  always #5 clk = ~clk;

  qps_top #(
    .NMOD(NMOD), .DEPTH(DEPTH), .POST(POST), .CLK_HZ(CLK_HZ), .SAMPLE_HZ(10_000),
    .ADC_HALF(2), .HB_SAMPLES(4), .AQD_NMOD(AQN)
  ) dut (
    .clk, .rst_n, .t3_sclk, .t3_cs_n, .t3_mosi, .t3_miso, .i_mag_in,
    .adc_sclk, .adc_cs_n, .adc_miso, .btn_rst, .btn_trip_q1, .btn_trip_q2, .btn_trip_srd,
    .mod_led, .sram_addr, .sram_dq_o, .sram_dq_i, .sram_ce_n, .sram_we_n, .sram_oe_n,
    .dqd_dump_fire, .dqd_ps_inhibit, .dqd_srd, .ctrl_led,
    .aqd_reset, .aqd_mod_trip_line(aqd_trip_line), .aqd_mod_fault_line(aqd_fault_line),
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

  // AQD module models: toggle at 10 kHz while running
  always begin
    repeat (SPS / 2) @(posedge clk);
    for (int m = 0; m < AQN; m++) begin
      if (aqd_run[m]) aqd_trip_line[m] <= ~aqd_trip_line[m];
      aqd_fault_line[m] <= ~aqd_fault_line[m];
    end
  end

  // sample bookkeeping: module 0's inputs at every sample its logger records
  int nsamp = 0;
  logic [15:0] log0 [512][4];
  always @(posedge clk) begin
    if (rst_n && dut.g_mod[0].u_mod.samp_v && dut.g_mod[0].u_mod.u_buf.logging) begin
      if (nsamp < 512) for (int a = 0; a < 4; a++) log0[nsamp][a] <= adc_val[0][a];
      nsamp <= nsamp + 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Wait for the next tick, then for the pipeline (ADC + bucking + detector).
  // Inputs set after this task are taken by the following tick.
  task automatic next_sample();
    @(posedge clk iff dut.sample_tick);
    repeat (80) @(negedge clk);
  endtask

  task automatic set_all(input int m, input int c0, input int c1, input int c2, input int c3);
    adc_val[m][0] = 16'(c0); adc_val[m][1] = 16'(c1);
    adc_val[m][2] = 16'(c2); adc_val[m][3] = 16'(c3);
  endtask

  task automatic cfg(input int m, input int c, input chan_type_e t, input int th,
                     input int sl, input int v, input int d);
    host.wr(4'(m), 11'(c * 8 + R_TYPE), 16'(t));
    host.wr(4'(m), 11'(c * 8 + R_THRESH), 16'(th));
    host.wr(4'(m), 11'(c * 8 + R_SLOPE), 16'(sl));
    host.wr(4'(m), 11'(c * 8 + R_VALID), 16'(v));
    host.wr(4'(m), 11'(c * 8 + R_DELAY), 16'(d));
  endtask

  task automatic chassis_clear();
    host.wr(DEV_CTRL, 11'(C_CTRL), 16'h0001);
    repeat (4) @(negedge clk);
  endtask

  function automatic logic [15:0] m0_val(input int k, input int c);
    // module 0 bucked channels keep their reset sources: ch4 = 0, ch(4+b) = ch b - ch0
    if (c < 4) return log0[k][c];
    if (c == 4) return 16'h0;
    return 16'(int'($signed(log0[k][c - 4])) - int'($signed(log0[k][0])));
  endfunction

  initial begin
    logic [15:0] d;
    int cur, k0, trig, last, bad;
    mech_e me;
    i_mag_in = '0;
    for (int m = 0; m < NMOD; m++) set_all(m, 0, 0, 0, 0);
    foreach (mech[i]) mech[i] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    // ---------------- configuration ----------------
    for (int m = 0; m < NMOD; m++) begin
      host.rd(4'(m), 11'(R_ID), d);
      check(d == MODULE_ID, $sformatf("module in slot %0d answers on the backplane", m));
    end
    host.rd(DEV_CTRL, 11'(C_ID), d);
    check(d == CTRL_ID, "controller answers");
    cfg(0, 0, QUENCH1, 1000, 32768, 2, 1);      // thr = 1000 + |I|/2
    cfg(1, 5, QUENCH2, 500, 0, 2, 0);           // ch5 = ch1 - ch2
    host.wr(4'd1, 11'(5 * 8 + R_BUCKSRC), 16'h0009);
    cfg(1, 3, QUENCH2, 16'h7FFF, 0, 1, 0);      // can never exceed: used for the rail test
    cfg(2, 6, SRD, 400, 0, 1, 0);               // ch6 = ch3 - Idot
    host.wr(4'd2, 11'(6 * 8 + R_BUCKSRC), 16'h0013);
    cfg(2, 0, NO_ACTION, 10, 0, 1, 0);          // logging only
    for (int m = 0; m < NMOD; m++) host.wr(4'(m), 11'(R_CTRL), 16'h0001);
    host.rd(4'd0, 11'(R_CTRL), d);
    check(d[0], "LOG_ARM set");
    @(posedge clk iff dut.sample_tick);
    // ---------------- ramp: Idot bucking ----------------
    set_all(2, 200, 0, 0, 0);                   // NO_ACTION channel far over threshold
    cur = 0;
    for (int k = 0; k < 10; k++) begin
      cur += 100;
      i_mag_in = sample_t'(cur);
      set_all(2, 200, 0, 0, 100);               // inductive voltage L dI/dt = Idot
      next_sample();
    end
    check(!dqd_srd && !dqd_ps_inhibit && !dqd_dump_fire, "ramp voltage cancelled by Idot bucking");
    host.rd(4'd2, 11'(6 * 8 + R_LIVE), d);
    check(d == 16'h0, $sformatf("bucked ramp channel live value %0d", $signed(d)));
    if (!dqd_srd && d == 16'h0) mech[M_IDOT_BUCK]++;
    if (!dqd_srd && !dqd_dump_fire) mech[M_NO_ACTION]++;
    // flat top at 1000 A-counts: Idot 0, inductive voltage gone
    set_all(2, 200, 0, 0, 0);
    next_sample();
    next_sample();
    // ---------------- current-dependent threshold ----------------
    set_all(0, 1400, 0, 0, 0);                  // 1400 < 1000 + 1000/2
    repeat (5) next_sample();
    check(!dqd_dump_fire, "threshold raised by the current");
    if (!dqd_dump_fire) mech[M_CUR_DEP]++;
    // ---------------- spike rejection ----------------
    set_all(0, 3000, 0, 0, 0);
    next_sample();
    set_all(0, 0, 0, 0, 0);
    repeat (3) next_sample();
    check(!dqd_dump_fire, "1-sample spike rejected");
    if (!dqd_dump_fire) mech[M_SPIKE]++;
    // ---------------- QUENCH1 ----------------
    set_all(0, -1600, 0, 0, 0);
    k0 = nsamp;                                 // index of the first over sample
    for (int k = 0; k < 4; k++) begin
      next_sample();
      // VALID 2 -> validated on sample 1, DELAY 1 -> line on sample 2
      check(dqd_dump_fire == (k >= 2) && dqd_ps_inhibit == (k >= 2),
            $sformatf("QUENCH1 sample %0d: dump=%0b inhibit=%0b", k, dqd_dump_fire, dqd_ps_inhibit));
    end
    if (dqd_dump_fire && dqd_ps_inhibit) mech[M_QUENCH1]++;
    host.rd(DEV_CTRL, 11'(C_FIRST), d);
    check(d == 16'h9010, $sformatf("first fault %h (module 0, QUENCH1, channel 0)", d));
    if (d == 16'h9010) mech[M_FIRST_FAULT]++;
    // ---------------- buffer freeze and read-back ----------------
    repeat (POST + 2) next_sample();
    check(ctrl_led.data && mod_led[1].dat_rdy && mod_led[2].dat_rdy, "all buffers frozen");
    if (ctrl_led.data) mech[M_FREEZE]++;
    host.rd(4'd0, 11'(R_TRIG_L), d);
    trig = k0 + 3;                              // line on sample k0+2, seen by the next one
    check(int'(d) == trig % DEPTH, $sformatf("trigger slot %0d expected %0d", d, trig % DEPTH));
    last = trig + POST - 1;
    bad = 0;
    host.wr(4'd0, 11'(R_RDADDR_L), 16'h0);
    host.wr(4'd0, 11'(R_RDADDR_H), 16'h0);
    for (int s = 0; s < DEPTH; s++) begin
      int k;
      k = last - ((last - s) % DEPTH + DEPTH) % DEPTH;
      for (int c = 0; c < 8; c++) begin
        host.rd(4'd0, 11'(R_RDDATA), d);
        if (k >= 0 && d != m0_val(k, c)) begin
          bad++;
          if (bad < 5) $display("FAIL: module 0 slot %0d ch %0d: %h expected %h", s, c, d, m0_val(k, c));
        end
      end
    end
    check(bad == 0, "module 0 buffer read-back");
    if (bad == 0) mech[M_READBACK]++;
    for (int m = 0; m < NMOD; m++) host.wr(4'(m), 11'(R_CTRL), 16'h0005);
    @(negedge clk);
    check(mod_led[0].dat_svd && mod_led[2].dat_svd, "DAT_SVD set");
    if (mod_led[0].dat_svd) mech[M_DAT_SVD]++;
    for (int m = 0; m < NMOD; m++) host.wr(4'(m), 11'(R_CTRL), 16'h0000);
    // ---------------- clear ----------------
    set_all(0, 0, 0, 0, 0);
    next_sample();
    chassis_clear();
    check(!dqd_dump_fire && !dqd_ps_inhibit && !ctrl_led.quench && !mod_led[0].q1_ff, "chassis clear");
    if (!dqd_dump_fire && !mod_led[0].q1_ff) mech[M_CLEAR]++;
    // ---------------- QUENCH2 through a bucked channel ----------------
    set_all(1, 0, 900, 300, 0);
    repeat (3) next_sample();
    check(dqd_ps_inhibit && !dqd_dump_fire, "QUENCH2 -> PS inhibit only");
    if (dqd_ps_inhibit && !dqd_dump_fire) mech[M_QUENCH2]++;
    set_all(1, 0, 0, 0, 0);
    next_sample();
    chassis_clear();
    // ---------------- SRD ----------------
    set_all(2, 200, 0, 0, 500);
    repeat (2) next_sample();
    check(dqd_srd && !dqd_ps_inhibit && !dqd_dump_fire, "SRD only");
    if (dqd_srd && !dqd_ps_inhibit) mech[M_SRD]++;
    set_all(2, 200, 0, 0, 0);
    next_sample();
    chassis_clear();
    // ---------------- enable mask ----------------
    host.wr(DEV_CTRL, 11'(C_ENABLE), 16'h0005);  // module 1 ignored
    set_all(1, 0, 900, 300, 0);
    repeat (3) next_sample();
    check(mod_led[1].q2_ff && !dqd_ps_inhibit, "masked module's QUENCH2 ignored");
    if (mod_led[1].q2_ff && !dqd_ps_inhibit) mech[M_MASK]++;
    set_all(1, 0, 0, 0, 0);
    next_sample();
    chassis_clear();
    host.wr(DEV_CTRL, 11'(C_ENABLE), 16'h00FF);
    // ---------------- hardware fault ----------------
    set_all(1, 0, 0, 0, 32767);
    repeat (2) next_sample();
    check(ctrl_led.hw_flt && mod_led[1].hw_flt && !dqd_ps_inhibit, "rail code -> HW_FLT");
    if (ctrl_led.hw_flt) mech[M_HW_FLT]++;
    set_all(1, 0, 0, 0, 0);
    next_sample();
    chassis_clear();
    check(!ctrl_led.hw_flt, "clear releases HW_FLT");
    // ---------------- test button ----------------
    @(negedge clk);
    btn_trip_q1[2] = 1'b1;
    @(negedge clk);
    btn_trip_q1[2] = 1'b0;
    repeat (3) @(negedge clk);
    check(dqd_dump_fire && dqd_ps_inhibit, "TRIP_Q1 test button fires the chassis");
    if (dqd_dump_fire) mech[M_TEST_BTN]++;
    chassis_clear();
    // ---------------- AQD ----------------
    check(aqd_trip_status == '0, "AQD healthy");
    aqd_run[1] = 1'b0;
    repeat (4 * SPS) @(negedge clk);
    check(aqd_trip_status == 2'b10 && aqd_dump_fire == 1'b0, "AQD module 1 trip");
    begin
      int edges;
      logic p;
      edges = 0;
      p = aqd_dump_fire;
      repeat (4 * SPS) begin
        @(negedge clk);
        if (aqd_dump_fire != p) edges++;
        p = aqd_dump_fire;
      end
      check(edges == 0, "AQD_DUMP_FIRE stopped modulating");
      if (aqd_trip_status[1] && edges == 0) mech[M_AQD_TRIP]++;
    end
    // ---------------- summary ----------------
    for (int i = 0; i < M_COUNT; i++) begin
      me = mech_e'(i);
      $display("mechanism %-14s happened %0d time(s)", me.name(), mech[i]);
      check(mech[i] > 0, $sformatf("mechanism %s never happened", me.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
