// tb_circ_buffer_ctrl: checks the circular logger with a small buffer
// (DEPTH = 16 slots, POST = 6) and an SRAM model. Sample k of channel c has
// the value k*16 + c. After the trigger at sample T the logger must write
// exactly POST samples (T .. T+POST-1), raise dat_rdy, report trig_slot =
// T mod DEPTH and then stop writing. Every SRAM word is read back through
// rd_addr/rd_data and compared with the newest sample that maps to that slot.
// Runs twice: once after wrapping many times, once before the first wrap,
// and checks that dropping arm returns to idle.
module tb_circ_buffer_ctrl;
  import qd_pkg::*;
  localparam int unsigned NCH = 8, DEPTH = 16, POST = 6;
  localparam int unsigned AW = $clog2(NCH * DEPTH);
  logic clk = 1'b0, rst_n = 1'b0, sample_valid = 1'b0, arm = 1'b0, trigger = 1'b0;
  sample_t samples [NCH];
  logic [AW-1:0] rd_addr, trig_slot, sram_addr;
  logic [15:0] rd_data, sram_dq_o, sram_dq_i;
  logic logging, triggered, dat_rdy, sram_ce_n, sram_we_n, sram_oe_n;
  int checks = 0, failures = 0;
  int writes = 0;

  always #5 clk = ~clk;

  circ_buffer_ctrl #(.NCH(NCH), .DEPTH(DEPTH), .POST(POST)) dut (
    .clk, .rst_n, .sample_valid, .samples, .arm, .trigger, .rd_addr, .rd_data,
    .logging, .triggered, .dat_rdy, .trig_slot, .sram_addr, .sram_dq_o, .sram_dq_i,
    .sram_ce_n, .sram_we_n, .sram_oe_n
  );
  sram_model #(.AW(AW), .WORDS(NCH * DEPTH)) u_sram (
    .clk, .addr(sram_addr), .dq_w(sram_dq_o), .dq_r(sram_dq_i),
    .ce_n(sram_ce_n), .we_n(sram_we_n), .oe_n(sram_oe_n)
  );

  always @(posedge clk) if (!sram_ce_n && !sram_we_n) writes++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input int t);
    int last, w0;
    @(negedge clk);
    arm = 1'b1;
    repeat (2) @(negedge clk);
    check(logging && !dat_rdy, "logging after arm");
    for (int k = 0; k < t + POST + 10; k++) begin
      for (int c = 0; c < NCH; c++) samples[c] = sample_t'(k * 16 + c);
      trigger = (k >= t);
      sample_valid = 1'b1;
      @(negedge clk);
      sample_valid = 1'b0;
      repeat (12) @(negedge clk);
      if (k == t + POST - 2) check(!dat_rdy && triggered, "still recording one sample before the end");
      if (k == t + POST - 1) begin
        check(dat_rdy, $sformatf("dat_rdy after sample %0d", k));
        w0 = writes;
      end
    end
    trigger = 1'b0;
    check(writes == w0, "no writes after the buffer froze");
    check(32'(trig_slot) == t % DEPTH, $sformatf("trig_slot %0d expected %0d", trig_slot, t % DEPTH));
    last = t + POST - 1;
    for (int s = 0; s < DEPTH; s++) begin
      int k;
      k = last - ((last - s) % DEPTH + DEPTH) % DEPTH;   // newest sample in slot s
      for (int c = 0; c < NCH; c++) begin
        @(negedge clk);
        rd_addr = AW'(s * NCH + c);
        repeat (2) @(negedge clk);
        if (k >= 0)
          check(rd_data == 16'(k * 16 + c),
                $sformatf("slot %0d ch %0d: %h expected %h", s, c, rd_data, 16'(k * 16 + c)));
      end
    end
    @(negedge clk);
    arm = 1'b0;
    @(negedge clk);
    check(!logging && !dat_rdy, "idle after disarm");
  endtask

  initial begin
    foreach (samples[c]) samples[c] = '0;
    rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(40);      // wraps
    run(5);       // trigger before the buffer has wrapped (slots > 10 hold run 1's data)
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
