// tb_quench_channel: checks the threshold / validation / delay sequence.
// Sample streams are generated around a threshold; the expected trip sample is
// worked out independently from the whole stream: the first sample n at which
// the last V samples were all over thr (thr = THRESH + |I|*slope/65536) gives a
// trip at sample n + D. The trip must rise exactly after that sample's strobe,
// not earlier, and stay latched; clear must release it; test_trip must trip at
// once. Cases include spikes shorter than V (must be rejected), negative
// polarity, VALID_TIME = 0 and DELAY_TIME = 0, and a current-dependent threshold.
module tb_quench_channel;
  import qd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, valid_i = 1'b0, clear = 1'b0, test_trip = 1'b0;
  sample_t sample;
  logic [15:0] i_abs, thresh, slope, valid_time, delay_time;
  logic over, validated, trip;
  int checks = 0, failures = 0;
  int trips_seen = 0, rejected_spikes = 0;

  always #5 clk = ~clk;

  quench_channel dut (
    .clk, .rst_n, .valid_i, .sample, .i_abs, .thresh, .slope, .valid_time,
    .delay_time, .clear, .test_trip, .over, .validated, .trip
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Run one stream of N samples and compare the trip against the reference.
  task automatic run(input int n, input int v, input int d, input int th, input int sl,
                     input int cur, input int mode);
    int stream [];
    int thr, vneed, run_len, exp_trip;
    stream = new[n];
    thr = th + ((cur * sl) >>> 16);
    if (thr > 65535) thr = 65535;
    vneed = (v == 0) ? 1 : v;
    for (int k = 0; k < n; k++) begin
      int mag;
      case (mode)
        0: mag = (k >= 10) ? thr + 1 + ($urandom % 50) : ($urandom % (thr + 1));       // step
        1: mag = ((k % 7) < vneed - 1 || k < 5) ? thr + 5 : thr - ($urandom % 3);     // spikes < V
        default: mag = ($urandom % 4 == 0) ? thr - 1 : thr + 1 + ($urandom % 5);    // noisy
      endcase
      if (mag > 32767) mag = 32767;
      stream[k] = ($urandom % 2) ? mag : -mag;
    end
    // reference: first index where the last vneed samples are over
    exp_trip = -1;
    run_len = 0;
    for (int k = 0; k < n; k++) begin
      int a = (stream[k] < 0) ? -stream[k] : stream[k];
      if (a > 32767) a = 32767;
      run_len = (a > thr) ? run_len + 1 : 0;
      if (run_len >= vneed) begin
        exp_trip = k + d;
        break;
      end
    end
    if (exp_trip >= n) exp_trip = -1;
    // drive
    @(negedge clk);
    thresh = 16'(th); slope = 16'(sl); i_abs = 16'(cur);
    valid_time = 16'(v); delay_time = 16'(d);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    for (int k = 0; k < n; k++) begin
      sample  = sample_t'(stream[k]);
      valid_i = 1'b1;
      @(negedge clk);
      valid_i = 1'b0;
      check(trip == (exp_trip >= 0 && k >= exp_trip),
            $sformatf("mode %0d V=%0d D=%0d sample %0d: trip=%0b, expected trip at %0d",
                      mode, v, d, k, trip, exp_trip));
      repeat ($urandom % 3) @(negedge clk);
    end
    if (exp_trip >= 0) trips_seen++;
    else if (mode == 1) rejected_spikes++;
  endtask

  initial begin
    sample = '0; i_abs = '0; thresh = 16'd1000; slope = '0; valid_time = 16'd1; delay_time = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(40, 3, 2, 1000, 0, 0, 0);
    run(40, 1, 0, 500, 0, 0, 0);
    run(40, 0, 0, 500, 0, 0, 0);
    run(60, 5, 7, 300, 32768, 2000, 0);   // thr = 300 + 1000
    run(60, 4, 1, 800, 0, 0, 1);          // spikes of 3 samples: rejected
    run(60, 1, 3, 800, 0, 0, 1);
    for (int i = 0; i < 30; i++)
      run(50, $urandom % 6, $urandom % 6, 100 + $urandom % 20000, $urandom % 65536,
          $urandom % 32768, i % 3);
    // test button
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    check(!trip, "clear releases trip");
    test_trip = 1'b1;
    @(negedge clk);
    test_trip = 1'b0;
    check(trip, "test_trip trips at once");
    check(trips_seen > 0 && rejected_spikes > 0, "both tripping and rejected streams occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
