// aqd_backplane_cpld: backplane logic of an Analog Quench Detector (AQD) chassis.
//
// Each of up to NMOD four-channel AQD modules reports a trip line and a
// hardware-fault line to the backplane as a 10 kHz modulated signal. This block
// treats a line as healthy while it keeps toggling: a line that shows no edge
// for LOSS_CYCLES clock cycles (two modulation periods by default) is read as a
// trip (or fault), so a broken wire, a dead module or a stuck driver counts as
// a trip - the failsafe reading. Losses latch until `reset`.
// The consolidated outputs are themselves modulated: AQD_DUMP_FIRE,
// AQD_PS_INHIBIT and AQD_FAULT toggle at MOD_HZ while all is well and stop (held
// low) when tripped. Which modules drive which output is set by the firmware
// parameters DUMP_MASK, INHIBIT_MASK and, for hardware faults, FAULT_MASK.
// Timing: a line that stops toggling is declared lost LOSS_CYCLES after its
// last edge; the output stops at its next half period at the latest.
// Following the paper: 10 kHz modulated module status and a CPLD that
// consolidates it into modulated outputs as configured in firmware. This
// design's own choices: modulation present = healthy, the loss timeout, the
// masks, latching and the grace period of LOSS_CYCLES after reset.
module aqd_backplane_cpld #(
  parameter int unsigned NMOD         = 7,
  parameter int unsigned CLK_HZ       = 10_000_000,
  parameter int unsigned MOD_HZ       = 10_000,
  parameter int unsigned LOSS_CYCLES  = 2 * CLK_HZ / MOD_HZ,
  parameter logic [NMOD-1:0] DUMP_MASK    = '1,
  parameter logic [NMOD-1:0] INHIBIT_MASK = '1,
  parameter logic [NMOD-1:0] FAULT_MASK   = '1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            reset,          // operator reset of latched trips
  input  logic [NMOD-1:0] mod_trip_line,  // modulated trip status per module
  input  logic [NMOD-1:0] mod_fault_line, // modulated fault status per module
  output logic [NMOD-1:0] trip_status,    // latched: module tripped
  output logic [NMOD-1:0] fault_status,   // latched: module hardware fault
  output logic            aqd_dump_fire,  // modulated, stops on trip
  output logic            aqd_ps_inhibit, // modulated, stops on trip
  output logic            aqd_fault       // modulated, stops on fault
);
  localparam int unsigned HALF = CLK_HZ / MOD_HZ / 2;
  localparam int unsigned LW   = $clog2(LOSS_CYCLES + 1);

  // --- line supervision ---
  logic [2*NMOD-1:0] line, lost;
  logic [1:0]        sync_q [2*NMOD];
  logic              prev_q [2*NMOD];
  logic [LW-1:0]     cnt_q  [2*NMOD];

  assign line = {mod_fault_line, mod_trip_line};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2*NMOD; i++) begin
        sync_q[i] <= '0;
        prev_q[i] <= 1'b0;
        cnt_q[i]  <= '0;
        lost[i]   <= 1'b0;
      end
    end else begin
      for (int i = 0; i < 2*NMOD; i++) begin
        sync_q[i] <= {sync_q[i][0], line[i]};
        prev_q[i] <= sync_q[i][1];
        if (sync_q[i][1] != prev_q[i])             cnt_q[i] <= '0;
        else if (cnt_q[i] != LW'(LOSS_CYCLES))     cnt_q[i] <= cnt_q[i] + 1'b1;
        if (reset)                                 lost[i]  <= 1'b0;
        else if (cnt_q[i] == LW'(LOSS_CYCLES))     lost[i]  <= 1'b1;
      end
    end
  end

  assign trip_status  = lost[NMOD-1:0];
  assign fault_status = lost[2*NMOD-1:NMOD];

  // --- modulated outputs ---
  logic [$clog2(HALF+1)-1:0] div_q;
  logic                      osc_q;
  logic                      dump_ok, inh_ok, flt_ok;

  assign dump_ok = (trip_status  & DUMP_MASK)    == '0;
  assign inh_ok  = (trip_status  & INHIBIT_MASK) == '0;
  assign flt_ok  = (fault_status & FAULT_MASK)   == '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_q          <= '0;
      osc_q          <= 1'b0;
      aqd_dump_fire  <= 1'b0;
      aqd_ps_inhibit <= 1'b0;
      aqd_fault      <= 1'b0;
    end else begin
      if (div_q == $bits(div_q)'(HALF - 1)) begin
        div_q <= '0;
        osc_q <= ~osc_q;
      end else begin
        div_q <= div_q + 1'b1;
      end
      aqd_dump_fire  <= dump_ok & osc_q;
      aqd_ps_inhibit <= inh_ok  & osc_q;
      aqd_fault      <= flt_ok  & osc_q;
    end
  end

endmodule
