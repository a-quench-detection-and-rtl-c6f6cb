// dqd_controller: DQD chassis controller.
//
// The controller collects the backplane quench lines of up to NMOD DQD modules
// and drives the chassis outputs:
//   DQD_DUMP_FIRE  (fires energy extraction)  = any enabled module's QUENCH1 line
//   DQD_PS_INHIBIT (power supply to bypass)   = any enabled QUENCH1 or QUENCH2
//   DQD_SRD        (slow ramp down request)   = any enabled SRD line
// The outputs latch until a clear. The first fault (module, action type and the
// module's first channel) is recorded for the operator. Any latched output is
// also broadcast as the chassis trigger that freezes all circular buffers.
// The controller generates the common 10 kHz sample tick, samples the magnet
// current word at each tick and broadcasts it with its per-sample difference
// Idot (counts per 0.1 ms, saturated). The Tier-3 SPI bus is buffered onto the
// backplane; the controller answers frames for device 8 itself (map in qd_pkg).
// Timing: a module line that rises reaches the outputs one clk later.
// Following the paper: aggregation of module quench signals into DUMP_FIRE and
// PS_INHIBIT, the module count and the 10 kHz rate. This design's own choices:
// which action type drives which output, latching, the enable mask (all
// modules enabled at reset), the current input and the Idot computation.
module dqd_controller
  import qd_pkg::*;
#(
  parameter int unsigned NMOD       = 8,
  parameter int unsigned CLK_HZ     = 10_000_000,
  parameter int unsigned SAMPLE_HZ  = 10_000,
  parameter int unsigned HB_SAMPLES = 5000
) (
  input  logic            clk,
  input  logic            rst_n,
  // Tier-3 SPI
  input  logic            t3_sclk,
  input  logic            t3_cs_n,
  input  logic            t3_mosi,
  output logic            t3_miso,
  // backplane SPI
  output logic            bp_sclk,
  output logic            bp_cs_n,
  output logic            bp_mosi,
  input  logic            bp_miso,
  // magnet current word (current transducer digitiser)
  input  sample_t         i_mag_in,
  // broadcast to modules
  output logic            sample_tick,
  output sample_t         i_mag,
  output sample_t         idot,
  output logic            chassis_trig,
  output logic            chassis_clear,
  // module lines
  input  logic [NMOD-1:0] mod_q1,
  input  logic [NMOD-1:0] mod_q2,
  input  logic [NMOD-1:0] mod_srd,
  input  logic [NMOD-1:0] mod_hw_flt,
  input  logic [NMOD-1:0] mod_dat_rdy,
  input  logic [3:0]      mod_first [NMOD],
  // chassis outputs
  output logic            dqd_dump_fire,
  output logic            dqd_ps_inhibit,
  output logic            dqd_srd,
  output ctrl_led_t       led
);
  localparam int unsigned DIV = CLK_HZ / SAMPLE_HZ;

  // ---------------- SPI ----------------
  logic [REG_ADDR_W-1:0] reg_addr;
  logic                  wr_en, rd_en, frame_done;
  logic [REG_W-1:0]      wr_data, rd_data;
  logic                  own_miso;

  spi_reg_slave u_spi (
    .clk, .rst_n, .sclk(t3_sclk), .cs_n(t3_cs_n), .mosi(t3_mosi), .miso(own_miso),
    .my_dev(DEV_CTRL), .reg_addr, .wr_en, .wr_data, .rd_en, .rd_data, .frame_done
  );

  assign bp_sclk = t3_sclk;
  assign bp_cs_n = t3_cs_n;
  assign bp_mosi = t3_mosi;
  assign t3_miso = own_miso | bp_miso;

  // ---------------- sample tick, current and Idot ----------------
  logic [$clog2(DIV)-1:0] div_q;
  sample_t                i_prev_q;
  logic signed [16:0]     di;

  assign di = 17'(i_mag_in) - 17'(i_prev_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_q       <= '0;
      sample_tick <= 1'b0;
      i_mag       <= '0;
      i_prev_q    <= '0;
      idot        <= '0;
    end else begin
      sample_tick <= 1'b0;
      if (div_q == $bits(div_q)'(DIV - 1)) begin
        div_q       <= '0;
        sample_tick <= 1'b1;
        i_mag       <= i_mag_in;
        i_prev_q    <= i_mag_in;
        if (di > 17'sd32767)       idot <= 16'sh7FFF;
        else if (di < -17'sd32767) idot <= -16'sh7FFF;
        else                       idot <= di[15:0];
      end else begin
        div_q <= div_q + 1'b1;
      end
    end
  end

  // ---------------- aggregation ----------------
  logic [NMOD-1:0] enable_q;
  logic            clr_q;
  logic            fire_q, inh_q, srd_q;
  logic [15:0]     first_q;
  logic [NMOD-1:0] eq1, eq2, esrd;

  assign eq1  = mod_q1  & enable_q;
  assign eq2  = mod_q2  & enable_q;
  assign esrd = mod_srd & enable_q;

  assign dqd_dump_fire  = fire_q;
  assign dqd_ps_inhibit = inh_q;
  assign dqd_srd        = srd_q;
  assign chassis_trig   = fire_q | inh_q | srd_q;
  assign chassis_clear  = clr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable_q <= '1;
      clr_q    <= 1'b0;
      fire_q   <= 1'b0;
      inh_q    <= 1'b0;
      srd_q    <= 1'b0;
      first_q  <= '0;
    end else begin
      clr_q <= 1'b0;
      if (wr_en && reg_addr == 11'(C_ENABLE)) enable_q <= wr_data[NMOD-1:0];
      if (wr_en && reg_addr == 11'(C_CTRL))   clr_q    <= wr_data[0];
      if (clr_q) begin
        fire_q  <= 1'b0;
        inh_q   <= 1'b0;
        srd_q   <= 1'b0;
        first_q <= '0;
      end else begin
        if (eq1 != '0)               fire_q <= 1'b1;
        if ((eq1 | eq2) != '0)       inh_q  <= 1'b1;
        if (esrd != '0)              srd_q  <= 1'b1;
        if (!first_q[15] && (eq1 | eq2 | esrd) != '0) begin
          // lowest module wins a tie; within a module QUENCH1 > QUENCH2 > SRD
          for (int m = NMOD - 1; m >= 0; m--) begin
            if (eq1[m] | eq2[m] | esrd[m])
              first_q <= {1'b1, 2'b00, mod_first[m][3], 1'b0, mod_first[m][2:0],
                          2'b00, (eq1[m] ? 2'd1 : eq2[m] ? 2'd2 : 2'd3), 1'b0, 3'(m)};
          end
        end
      end
    end
  end

  always_comb begin
    case (reg_addr)
      11'(C_ENABLE): rd_data = 16'(enable_q);
      11'(C_STATUS): rd_data = {10'd0, led.hw_flt, led.data, 1'b0, srd_q, inh_q, fire_q};
      11'(C_FIRST):  rd_data = first_q;
      11'(C_ID):     rd_data = CTRL_ID;
      default:       rd_data = '0;
    endcase
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

  assign led = '{quench:   fire_q | inh_q,
                 srd:      srd_q,
                 data:     (enable_q != '0) && ((mod_dat_rdy & enable_q) == enable_q),
                 ctrl_hb:  hb_q,
                 spi_link: (link_cnt_q != '0),
                 hw_flt:   (mod_hw_flt != '0)};

endmodule
