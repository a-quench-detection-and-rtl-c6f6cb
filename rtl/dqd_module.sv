// dqd_module: FPGA of one Digital Quench Detector (DQD) module.
//
// A module has four isolated analog inputs, each digitised by a 16-bit ADC
// read over SPI at every chassis sample tick (10 kHz). Four more "bucked"
// channels subtract a scaled second channel or the magnet current derivative
// Idot from one channel. Each of the 8 channels has its own quench detector
// (current-dependent threshold, validation time, delay time) and is configured
// as QUENCH1, QUENCH2, SRD or NO_ACTION; tripped channels of the first three
// types drive the module's backplane lines q1, q2 and srd, which stay latched
// until cleared. All 8 channels are logged into a circular buffer in the
// external SRAM, which freezes POST samples after a chassis-wide trigger.
//
// Interfaces: backplane SPI register slave (device number = slot_id, map in
// qd_pkg), four ADC SPI masters, an asynchronous SRAM port, the chassis sample
// tick / current / Idot / trigger from the controller, the front-panel buttons
// (RST, TRIP_Q1, TRIP_Q2, TRIP_SRD) and LEDs.
// Timing: ADC words are ready 33*ADC_HALF+1 cycles after the tick, bucked
// samples one cycle later, detector outputs one cycle after that.
// Design choices beyond the paper: register map and reset values, hardware
// fault = a configured channel reading a full-scale rail code (open or overdriven
// input), test buttons latch the module line directly, the buffer trigger is the
// controller's chassis trigger or any local trip.
module dqd_module
  import qd_pkg::*;
#(
  parameter int unsigned DEPTH      = 60000,
  parameter int unsigned POST       = 30000,
  parameter int unsigned ADC_HALF   = 2,
  parameter int unsigned HB_SAMPLES = 5000,
  parameter int unsigned AW         = $clog2(8 * DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [2:0]    slot_id,
  // chassis broadcast from the controller
  input  logic          sample_tick,
  input  sample_t       i_mag,
  input  sample_t       idot,
  input  logic          chassis_trig,
  input  logic          chassis_clear,
  // ADC links
  output logic [3:0]    adc_sclk,
  output logic [3:0]    adc_cs_n,
  input  logic [3:0]    adc_miso,
  // backplane SPI
  input  logic          bp_sclk,
  input  logic          bp_cs_n,
  input  logic          bp_mosi,
  output logic          bp_miso,
  // backplane quench and status lines
  output logic          q1,
  output logic          q2,
  output logic          srd,
  output logic          hw_flt,
  output logic          dat_rdy,
  output logic [3:0]    first_ch,    // [3] valid, [2:0] first channel to trip
  // front panel
  input  logic          btn_rst,
  input  logic          btn_trip_q1,
  input  logic          btn_trip_q2,
  input  logic          btn_trip_srd,
  output mod_led_t      led,
  // external SRAM
  output logic [AW-1:0] sram_addr,
  output logic [15:0]   sram_dq_o,
  input  logic [15:0]   sram_dq_i,
  output logic          sram_ce_n,
  output logic          sram_we_n,
  output logic          sram_oe_n
);
  localparam int unsigned NCH = 8;

  // ---------------- registers ----------------
  chan_type_e  type_q  [NCH];
  logic [15:0] thr_q   [NCH];
  logic [15:0] slope_q [NCH];
  logic [15:0] valid_q [NCH];
  logic [15:0] delay_q [NCH];
  logic [4:0]  bsrc_q  [4];
  logic [15:0] bgain_q [4];
  logic        log_arm_q, dat_svd_q, clr_pulse_q;
  logic [31:0] rdaddr_q;

  logic [REG_ADDR_W-1:0] reg_addr;
  logic                  wr_en, rd_en, frame_done;
  logic [REG_W-1:0]      wr_data, rd_data;

  spi_reg_slave u_spi (
    .clk, .rst_n,
    .sclk(bp_sclk), .cs_n(bp_cs_n), .mosi(bp_mosi), .miso(bp_miso),
    .my_dev({1'b0, slot_id}),
    .reg_addr, .wr_en, .wr_data, .rd_en, .rd_data, .frame_done
  );

  // ---------------- datapath ----------------
  logic [3:0]  adc_valid;
  logic [3:0]  adc_busy;   // unused: the tick period far exceeds a transfer
  logic [15:0] adc_word [4];
  sample_t     raw_q    [4];
  logic        raw_v_q;
  sample_t     bucked   [4];
  logic [3:0]  buck_v;
  sample_t     samp     [NCH];
  logic        samp_v;
  logic [NCH-1:0] trip, over, validated;
  logic        clear;
  logic [15:0] i_abs;

  assign i_abs = abs16(i_mag);
  assign clear = clr_pulse_q | btn_rst | chassis_clear;

  for (genvar a = 0; a < 4; a++) begin : g_adc
    adc_spi_master #(.HALF_PERIOD(ADC_HALF), .WIDTH(16)) u_adc (
      .clk, .rst_n, .start(sample_tick),
      .sclk(adc_sclk[a]), .cs_n(adc_cs_n[a]), .miso(adc_miso[a]),
      .data(adc_word[a]), .valid(adc_valid[a]), .busy(adc_busy[a])
    );
  end

  // all four ADCs run in lock step; channel 0 marks the sample
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw_v_q <= 1'b0;
      for (int a = 0; a < 4; a++) raw_q[a] <= '0;
    end else begin
      raw_v_q <= adc_valid[0];
      for (int a = 0; a < 4; a++) if (adc_valid[a]) raw_q[a] <= sample_t'(adc_word[a]);
    end
  end

  for (genvar b = 0; b < 4; b++) begin : g_buck
    buck_unit #(.NCH(4)) u_buck (
      .clk, .rst_n, .valid_i(raw_v_q), .ch(raw_q), .idot,
      .sel_a(bsrc_q[b][1:0]), .sel_b(bsrc_q[b][3:2]), .use_idot(bsrc_q[b][4]),
      .gain(bgain_q[b]), .out(bucked[b]), .valid_o(buck_v[b])
    );
  end

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      samp[c]     = raw_q[c];     // raw_q holds until the next sample
      samp[c + 4] = bucked[c];
    end
  end
  assign samp_v = buck_v[0];

  for (genvar c = 0; c < NCH; c++) begin : g_qch
    quench_channel u_qch (
      .clk, .rst_n, .valid_i(samp_v), .sample(samp[c]), .i_abs,
      .thresh(thr_q[c]), .slope(slope_q[c]), .valid_time(valid_q[c]),
      .delay_time(delay_q[c]), .clear, .test_trip(1'b0),
      .over(over[c]), .validated(validated[c]), .trip(trip[c])
    );
  end

  // ---------------- quench lines ----------------
  logic tq1_q, tq2_q, tsrd_q, hw_q;
  logic [3:0] first_q;
  logic [NCH-1:0] act_trip;

  always_comb begin
    q1  = tq1_q;
    q2  = tq2_q;
    srd = tsrd_q;
    for (int c = 0; c < NCH; c++) begin
      act_trip[c] = trip[c] && (type_q[c] != NO_ACTION);
      if (trip[c] && type_q[c] == QUENCH1) q1  = 1'b1;
      if (trip[c] && type_q[c] == QUENCH2) q2  = 1'b1;
      if (trip[c] && type_q[c] == SRD)     srd = 1'b1;
    end
  end
  assign hw_flt   = hw_q;
  // the first channel is known in the cycle its line rises
  always_comb begin
    first_ch = first_q;
    if (!first_q[3]) begin
      for (int c = NCH - 1; c >= 0; c--)
        if (act_trip[c]) first_ch = {1'b1, 3'(c)};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tq1_q   <= 1'b0;
      tq2_q   <= 1'b0;
      tsrd_q  <= 1'b0;
      hw_q    <= 1'b0;
      first_q <= '0;
    end else if (clear) begin
      tq1_q   <= 1'b0;
      tq2_q   <= 1'b0;
      tsrd_q  <= 1'b0;
      hw_q    <= 1'b0;
      first_q <= '0;
    end else begin
      if (btn_trip_q1)  tq1_q  <= 1'b1;
      if (btn_trip_q2)  tq2_q  <= 1'b1;
      if (btn_trip_srd) tsrd_q <= 1'b1;
      if (!first_q[3] && act_trip != '0) begin
        // lowest-numbered channel wins a tie
        for (int c = NCH - 1; c >= 0; c--)
          if (act_trip[c]) first_q <= {1'b1, 3'(c)};
      end
      if (samp_v) begin
        for (int c = 0; c < NCH; c++)
          if (type_q[c] != NO_ACTION &&
              (samp[c] == 16'sh7FFF || samp[c] == 16'sh8000)) hw_q <= 1'b1;
      end
    end
  end

  // ---------------- circular buffer ----------------
  logic          logging, triggered, buf_rdy;
  logic [AW-1:0] trig_slot;
  logic [15:0]   buf_rd_data;

  circ_buffer_ctrl #(.NCH(NCH), .DEPTH(DEPTH), .POST(POST), .AW(AW)) u_buf (
    .clk, .rst_n, .sample_valid(samp_v), .samples(samp), .arm(log_arm_q),
    .trigger(chassis_trig | (act_trip != '0)), .rd_addr(rdaddr_q[AW-1:0]),
    .rd_data(buf_rd_data), .logging, .triggered, .dat_rdy(buf_rdy), .trig_slot,
    .sram_addr, .sram_dq_o, .sram_dq_i, .sram_ce_n, .sram_we_n, .sram_oe_n
  );
  assign dat_rdy = buf_rdy;

  // ---------------- register file ----------------
  logic [2:0] rch;
  logic [2:0] roff;
  assign rch  = reg_addr[5:3];
  assign roff = reg_addr[2:0];

  always_comb begin
    rd_data = '0;
    if (reg_addr < 11'h40) begin
      unique case (roff)
        3'(R_TYPE):     rd_data = 16'(type_q[rch]);
        3'(R_THRESH):   rd_data = thr_q[rch];
        3'(R_SLOPE):    rd_data = slope_q[rch];
        3'(R_VALID):    rd_data = valid_q[rch];
        3'(R_DELAY):    rd_data = delay_q[rch];
        3'(R_BUCKSRC):  rd_data = rch[2] ? 16'(bsrc_q[rch[1:0]]) : '0;
        3'(R_BUCKGAIN): rd_data = rch[2] ? bgain_q[rch[1:0]] : '0;
        3'(R_LIVE):     rd_data = samp[rch];
        default:        rd_data = '0;
      endcase
    end else begin
      case (reg_addr)
        11'(R_CTRL):     rd_data = {13'd0, dat_svd_q, 1'b0, log_arm_q};
        11'(R_STATUS):   rd_data = {7'd0, dat_svd_q, buf_rdy, triggered, logging,
                                    log_arm_q, hw_q, srd, q2, q1};
        11'(R_RDADDR_L): rd_data = rdaddr_q[15:0];
        11'(R_RDADDR_H): rd_data = rdaddr_q[31:16];
        11'(R_RDDATA):   rd_data = buf_rd_data;
        11'(R_TRIG_L):   rd_data = 16'(32'(trig_slot));
        11'(R_TRIG_H):   rd_data = 16'(32'(trig_slot) >> 16);
        11'(R_FIRST):    rd_data = {12'd0, first_q};
        11'(R_ID):       rd_data = MODULE_ID;
        11'(R_TRIPS):    rd_data = {over, trip};
        default:         rd_data = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH; c++) begin
        type_q[c]  <= NO_ACTION;
        thr_q[c]   <= 16'h7FFF;
        slope_q[c] <= '0;
        valid_q[c] <= 16'd1;
        delay_q[c] <= '0;
      end
      for (int b = 0; b < 4; b++) begin
        bsrc_q[b]  <= 5'(b);        // channel b, against channel 0
        bgain_q[b] <= 16'sd256;     // unity
      end
      log_arm_q   <= 1'b0;
      dat_svd_q   <= 1'b0;
      clr_pulse_q <= 1'b0;
      rdaddr_q    <= '0;
    end else begin
      clr_pulse_q <= 1'b0;
      if (rd_en && reg_addr == 11'(R_RDDATA)) rdaddr_q <= rdaddr_q + 1'b1;
      if (wr_en) begin
        if (reg_addr < 11'h40) begin
          unique case (roff)
            3'(R_TYPE):     type_q[rch]  <= chan_type_e'(wr_data[1:0]);
            3'(R_THRESH):   thr_q[rch]   <= wr_data;
            3'(R_SLOPE):    slope_q[rch] <= wr_data;
            3'(R_VALID):    valid_q[rch] <= wr_data;
            3'(R_DELAY):    delay_q[rch] <= wr_data;
            3'(R_BUCKSRC):  if (rch[2]) bsrc_q[rch[1:0]]  <= wr_data[4:0];
            3'(R_BUCKGAIN): if (rch[2]) bgain_q[rch[1:0]] <= wr_data;
            default: ;
          endcase
        end else begin
          case (reg_addr)
            11'(R_CTRL): begin
              if (wr_data[0] && !log_arm_q) dat_svd_q <= 1'b0;  // re-arm
              log_arm_q   <= wr_data[0];
              clr_pulse_q <= wr_data[1];
              if (wr_data[2]) dat_svd_q <= 1'b1;
            end
            11'(R_RDADDR_L): rdaddr_q[15:0]  <= wr_data;
            11'(R_RDADDR_H): rdaddr_q[31:16] <= wr_data;
            default: ;
          endcase
        end
      end
    end
  end

  // ---------------- indicators ----------------
  logic [$clog2(HB_SAMPLES+1)-1:0] hb_cnt_q;
  logic [$clog2(10001)-1:0]        link_cnt_q;
  logic                            hb_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hb_cnt_q   <= '0;
      hb_q       <= 1'b0;
      link_cnt_q <= '0;
    end else begin
      if (frame_done) link_cnt_q <= 14'(10000);
      else if (sample_tick && link_cnt_q != '0) link_cnt_q <= link_cnt_q - 1'b1;
      if (sample_tick) begin
        if (hb_cnt_q >= $bits(hb_cnt_q)'(HB_SAMPLES - 1)) begin
          hb_cnt_q <= '0;
          hb_q     <= ~hb_q;
        end else begin
          hb_cnt_q <= hb_cnt_q + 1'b1;
        end
      end
    end
  end

  assign led = '{mod_hb:   hb_q,
                 spi_link: (link_cnt_q != '0),
                 hw_flt:   hw_q,
                 srd:      srd,
                 q1_ff:    q1,
                 q2_ff:    q2,
                 log_arm:  log_arm_q,
                 dat_rdy:  buf_rdy,
                 dat_svd:  dat_svd_q};

endmodule
