// tb_aqd_backplane_cpld: checks the AQD backplane CPLD with scaled clocks
// (CLK_HZ = 100 kHz, 10 kHz modulation, loss after 20 cycles) and 3 modules,
// DUMP_MASK = 011. Healthy modules toggle their lines; the outputs must then
// toggle at the modulation rate, with an exact half period of 5 cycles. A
// module line that stops (low or stuck high) must be flagged 20 to 24 cycles
// (LOSS_CYCLES plus synchroniser) after its last edge and stop exactly the outputs
// its mask selects; a line that keeps toggling must never be flagged; reset
// with healthy lines must restore everything; a line that never toggles after
// power-up must not be flagged during the grace period but must be after it.
module tb_aqd_backplane_cpld;
  localparam int unsigned NMOD = 3;
  logic clk = 1'b0, rst_n = 1'b0, reset = 1'b0;
  logic [NMOD-1:0] trip_line = '0, fault_line = '0;
  logic [NMOD-1:0] run_trip, run_fault, hold_hi = '0, hold_lo = '0, trip_status, fault_status;
  logic aqd_dump_fire, aqd_ps_inhibit, aqd_fault;
  int checks = 0, failures = 0;
  int e_dump = 0, e_inh = 0, e_flt = 0;
  logic p_dump = 0, p_inh = 0, p_flt = 0;
  int phase = 0;
  int cyc = 0, last_tedge2 = 0, last_dedge = -1, bad_spacing = 0, spacings = 0;
  bit meas = 1'b0;

  always #5 clk = ~clk;

  aqd_backplane_cpld #(
    .NMOD(NMOD), .CLK_HZ(100_000), .MOD_HZ(10_000),
    .DUMP_MASK(3'b011), .INHIBIT_MASK(3'b111), .FAULT_MASK(3'b111)
  ) dut (
    .clk, .rst_n, .reset, .mod_trip_line(trip_line), .mod_fault_line(fault_line),
    .trip_status, .fault_status, .aqd_dump_fire, .aqd_ps_inhibit, .aqd_fault
  );

  // module models: toggle every 5 cycles while running, else hold
  always @(posedge clk) begin
    phase <= (phase == 4) ? 0 : phase + 1;
    for (int m = 0; m < NMOD; m++) begin
      if (phase == 0 && run_trip[m])  trip_line[m]  <= ~trip_line[m];
      if (phase == 0 && run_fault[m]) fault_line[m] <= ~fault_line[m];
      if (hold_hi[m]) trip_line[m] <= 1'b1;
      if (hold_lo[m]) fault_line[m] <= 1'b0;
    end
    cyc <= cyc + 1;
    if (rst_n && trip_line[2] != $past(trip_line[2])) last_tedge2 <= cyc;
    if (aqd_dump_fire != p_dump) begin
      e_dump++;
      // output must toggle every CLK_HZ/MOD_HZ/2 = 5 cycles while healthy
      if (meas && last_dedge >= 0) begin
        spacings++;
        if (cyc - last_dedge != 5) bad_spacing++;
      end
      last_dedge <= cyc;
    end
    if (aqd_ps_inhibit != p_inh) e_inh++;
    if (aqd_fault != p_flt) e_flt++;
    p_dump <= aqd_dump_fire; p_inh <= aqd_ps_inhibit; p_flt <= aqd_fault;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // count output edges over 100 cycles (10 modulation half periods of 5 cycles)
  task automatic window(output int d, output int i, output int f);
    e_dump = 0; e_inh = 0; e_flt = 0;
    repeat (100) @(posedge clk);
    d = e_dump; i = e_inh; f = e_flt;
  endtask

  initial begin
    int d, i, f;
    run_trip = '1; run_fault = '1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (60) @(posedge clk);
    meas = 1'b1;
    window(d, i, f);
    meas = 1'b0;
    check(spacings >= 15 && bad_spacing == 0,
          $sformatf("dump fire half period is 5 cycles (%0d of %0d wrong)", bad_spacing, spacings));
    check(trip_status == '0 && fault_status == '0, "healthy modules not flagged");
    check(d >= 18 && i >= 18 && f >= 18, $sformatf("outputs modulate when healthy (%0d %0d %0d)", d, i, f));
    // module 2 trip line stops: PS inhibit stops, dump fire (mask 011) keeps going
    run_trip[2] = 1'b0;
    begin
      int lat;
      lat = -1;
      for (int k = 0; k < 40 && lat < 0; k++) begin
        @(posedge clk);
        #1;
        if (trip_status[2]) lat = cyc - last_tedge2;
      end
      // declared lost LOSS_CYCLES (20) after the last edge, plus the input
      // synchroniser and the status register
      check(lat >= 20 && lat <= 24, $sformatf("loss declared %0d cycles after last edge", lat));
    end
    repeat (4) @(posedge clk);
    check(trip_status == 3'b100, $sformatf("module 2 trip flagged (%b)", trip_status));
    window(d, i, f);
    check(d >= 18 && i == 0 && f >= 18, $sformatf("only PS inhibit stopped (%0d %0d %0d)", d, i, f));
    check(aqd_ps_inhibit == 1'b0, "stopped output held low");
    // module 0 trip line stuck high
    @(posedge clk);
    run_trip[0] = 1'b0;
    hold_hi[0] = 1'b1;
    repeat (5 + 20 + 4) @(posedge clk);
    window(d, i, f);
    check(trip_status == 3'b101 && d == 0, "module 0 stuck line stops dump fire");
    // fault line of module 1
    run_fault[1] = 1'b0;
    repeat (5 + 20 + 4) @(posedge clk);
    window(d, i, f);
    check(fault_status == 3'b010 && f == 0, "fault line loss stops AQD_FAULT");
    // restore and reset
    run_trip = '1; run_fault = '1; hold_hi = '0;
    repeat (20) @(posedge clk);
    check(trip_status == 3'b101, "trip stays latched after the line recovers");
    reset = 1'b1;
    @(posedge clk);
    reset = 1'b0;
    repeat (10) @(posedge clk);
    window(d, i, f);
    check(trip_status == '0 && fault_status == '0 && d >= 18 && i >= 18 && f >= 18,
          "reset restores modulation");
    // a module whose fault line never toggles after power-up is flagged once
    // the grace period has run out
    run_fault[0] = 1'b0;
    hold_lo[0] = 1'b1;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (10) @(posedge clk);
    check(fault_status == '0, "no flag during the grace period");
    repeat (80) @(posedge clk);
    check(fault_status == 3'b001, $sformatf("silent module flagged after grace (%b)", fault_status));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
