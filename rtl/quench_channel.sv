// quench_channel: quench decision for one DQD channel.
//
// Every sample the channel magnitude |v| is compared with a threshold that
// depends on the magnet current:
//     thr = CUR_DEP_THRESH + (slope * |I|) >> 16      (saturated to 16 bits)
// The signal must stay above the threshold for VALID_TIME consecutive samples
// to be validated, which rejects noise spikes. Once validated, the quench
// signal is raised DELAY_TIME samples later and stays latched until `clear`.
// With the first over-threshold sample numbered 0, `trip` rises one clk after
// the valid strobe of sample max(VALID_TIME,1)-1+DELAY_TIME. A sample back
// under threshold before validation restarts the count; after validation the
// delay runs to the end. `test_trip` (front-panel test button) trips at once.
// The threshold/validation/delay sequence and register names follow the paper;
// the linear current dependence, the use of the magnitude (both polarities)
// and the behaviour during the delay are this design's choices.
module quench_channel
  import qd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid_i,     // sample strobe
  input  sample_t     sample,
  input  logic [15:0] i_abs,       // |magnet current|, ADC counts
  input  logic [15:0] thresh,      // CUR_DEP_THRESH
  input  logic [15:0] slope,       // Q0.16 threshold slope against |I|
  input  logic [15:0] valid_time,  // VALID_TIME, samples
  input  logic [15:0] delay_time,  // DELAY_TIME, samples
  input  logic        clear,
  input  logic        test_trip,
  output logic        over,        // comparator of the current sample (registered)
  output logic        validated,
  output logic        trip
);
  logic [16:0] thr_full;
  logic [15:0] thr;
  logic [31:0] prod;
  logic        over_now;
  logic [15:0] vcnt_q, dcnt_q;
  logic [15:0] vneed;

  always_comb begin
    prod     = i_abs * slope;
    thr_full = 17'(thresh) + 17'(prod[31:16]);
    thr      = thr_full[16] ? 16'hFFFF : thr_full[15:0];
    over_now = abs16(sample) > thr;
    vneed    = (valid_time == '0) ? 16'd1 : valid_time;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      over      <= 1'b0;
      validated <= 1'b0;
      trip      <= 1'b0;
      vcnt_q    <= '0;
      dcnt_q    <= '0;
    end else if (clear) begin
      over      <= 1'b0;
      validated <= 1'b0;
      trip      <= 1'b0;
      vcnt_q    <= '0;
      dcnt_q    <= '0;
    end else begin
      if (test_trip) trip <= 1'b1;
      if (valid_i) begin
        over <= over_now;
        if (!trip) begin
          if (!validated) begin
            if (over_now) begin
              if (vcnt_q + 16'd1 >= vneed) begin
                validated <= 1'b1;
                dcnt_q    <= '0;
                if (delay_time == '0) trip <= 1'b1;
              end else begin
                vcnt_q <= vcnt_q + 16'd1;
              end
            end else begin
              vcnt_q <= '0;
            end
          end else if (dcnt_q + 16'd1 >= delay_time) begin
            trip <= 1'b1;
          end else begin
            dcnt_q <= dcnt_q + 16'd1;
          end
        end
      end
    end
  end

endmodule
