// qps_top: digital logic of the quench protection system's two hardware tiers.
//
// Tier 1, the Digital Quench Detector (DQD) chassis: one controller and NMOD
// (up to 8) four-channel DQD modules joined by a backplane. The controller
// generates the common sample tick, broadcasts the magnet current and its
// derivative, buffers the Tier-3 SPI bus to every module slot and turns the
// modules' QUENCH1/QUENCH2/SRD lines into DQD_DUMP_FIRE, DQD_PS_INHIBIT and
// DQD_SRD. Each module digitises its four voltage-tap pairs, bucks them, runs
// eight quench detectors and logs all eight channels in its own external SRAM.
// Tier 2, the Analog Quench Detector (AQD), is analog apart from its backplane
// CPLD, which is included here; its modules' modulated status lines are ports.
// The two tiers share nothing but the clock, as the two systems are
// independent and redundant.
//
// Ports: the Tier-3 SPI bus, the magnet current word, per-module ADC SPI
// links, front-panel buttons and LEDs and SRAM ports, the DQD chassis outputs,
// and the AQD CPLD's module lines and modulated outputs.
// Timing: see dqd_controller, dqd_module and aqd_backplane_cpld.
module qps_top
  import qd_pkg::*;
#(
  parameter int unsigned NMOD       = 8,
  parameter int unsigned DEPTH      = 60000,
  parameter int unsigned POST       = 30000,
  parameter int unsigned CLK_HZ     = 10_000_000,
  parameter int unsigned SAMPLE_HZ  = 10_000,
  parameter int unsigned ADC_HALF   = 2,
  parameter int unsigned HB_SAMPLES = 5000,
  parameter int unsigned AQD_NMOD   = 7,
  parameter int unsigned AW         = $clog2(8 * DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // Tier-3 SPI
  input  logic                   t3_sclk,
  input  logic                   t3_cs_n,
  input  logic                   t3_mosi,
  output logic                   t3_miso,
  // magnet current word
  input  sample_t                i_mag_in,
  // DQD modules: ADC links, front panels, SRAM
  output logic [NMOD-1:0][3:0]   adc_sclk,
  output logic [NMOD-1:0][3:0]   adc_cs_n,
  input  logic [NMOD-1:0][3:0]   adc_miso,
  input  logic [NMOD-1:0]        btn_rst,
  input  logic [NMOD-1:0]        btn_trip_q1,
  input  logic [NMOD-1:0]        btn_trip_q2,
  input  logic [NMOD-1:0]        btn_trip_srd,
  output mod_led_t [NMOD-1:0]    mod_led,
  output logic [AW-1:0]          sram_addr [NMOD],
  output logic [15:0]            sram_dq_o [NMOD],
  input  logic [15:0]            sram_dq_i [NMOD],
  output logic [NMOD-1:0]        sram_ce_n,
  output logic [NMOD-1:0]        sram_we_n,
  output logic [NMOD-1:0]        sram_oe_n,
  // DQD chassis outputs
  output logic                   dqd_dump_fire,
  output logic                   dqd_ps_inhibit,
  output logic                   dqd_srd,
  output ctrl_led_t              ctrl_led,
  // AQD backplane
  input  logic                   aqd_reset,
  input  logic [AQD_NMOD-1:0]    aqd_mod_trip_line,
  input  logic [AQD_NMOD-1:0]    aqd_mod_fault_line,
  output logic [AQD_NMOD-1:0]    aqd_trip_status,
  output logic [AQD_NMOD-1:0]    aqd_fault_status,
  output logic                   aqd_dump_fire,
  output logic                   aqd_ps_inhibit,
  output logic                   aqd_fault
);
  // backplane
  logic            bp_sclk, bp_cs_n, bp_mosi, bp_miso;
  logic [NMOD-1:0] bp_miso_m;
  logic            sample_tick, chassis_trig, chassis_clear;
  sample_t         i_mag, idot;
  logic [NMOD-1:0] mq1, mq2, msrd, mhw, mrdy;
  logic [3:0]      mfirst [NMOD];

  assign bp_miso = |bp_miso_m;

  dqd_controller #(
    .NMOD(NMOD), .CLK_HZ(CLK_HZ), .SAMPLE_HZ(SAMPLE_HZ), .HB_SAMPLES(HB_SAMPLES)
  ) u_ctrl (
    .clk, .rst_n,
    .t3_sclk, .t3_cs_n, .t3_mosi, .t3_miso,
    .bp_sclk, .bp_cs_n, .bp_mosi, .bp_miso,
    .i_mag_in, .sample_tick, .i_mag, .idot, .chassis_trig, .chassis_clear,
    .mod_q1(mq1), .mod_q2(mq2), .mod_srd(msrd), .mod_hw_flt(mhw),
    .mod_dat_rdy(mrdy), .mod_first(mfirst),
    .dqd_dump_fire, .dqd_ps_inhibit, .dqd_srd, .led(ctrl_led)
  );

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    dqd_module #(
      .DEPTH(DEPTH), .POST(POST), .ADC_HALF(ADC_HALF), .HB_SAMPLES(HB_SAMPLES), .AW(AW)
    ) u_mod (
      .clk, .rst_n, .slot_id(3'(m)),
      .sample_tick, .i_mag, .idot, .chassis_trig, .chassis_clear,
      .adc_sclk(adc_sclk[m]), .adc_cs_n(adc_cs_n[m]), .adc_miso(adc_miso[m]),
      .bp_sclk, .bp_cs_n, .bp_mosi, .bp_miso(bp_miso_m[m]),
      .q1(mq1[m]), .q2(mq2[m]), .srd(msrd[m]), .hw_flt(mhw[m]), .dat_rdy(mrdy[m]),
      .first_ch(mfirst[m]),
      .btn_rst(btn_rst[m]), .btn_trip_q1(btn_trip_q1[m]), .btn_trip_q2(btn_trip_q2[m]),
      .btn_trip_srd(btn_trip_srd[m]), .led(mod_led[m]),
      .sram_addr(sram_addr[m]), .sram_dq_o(sram_dq_o[m]), .sram_dq_i(sram_dq_i[m]),
      .sram_ce_n(sram_ce_n[m]), .sram_we_n(sram_we_n[m]), .sram_oe_n(sram_oe_n[m])
    );
  end

  aqd_backplane_cpld #(
    .NMOD(AQD_NMOD), .CLK_HZ(CLK_HZ), .MOD_HZ(SAMPLE_HZ)
  ) u_aqd (
    .clk, .rst_n, .reset(aqd_reset),
    .mod_trip_line(aqd_mod_trip_line), .mod_fault_line(aqd_mod_fault_line),
    .trip_status(aqd_trip_status), .fault_status(aqd_fault_status),
    .aqd_dump_fire, .aqd_ps_inhibit, .aqd_fault
  );

endmodule
