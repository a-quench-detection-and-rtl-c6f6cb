// circ_buffer_ctrl: circular data logger of a DQD module in external SRAM.
//
// All channels of a module (4 individual, 4 bucked) are recorded at the sample
// rate into an external asynchronous SRAM, DEPTH samples per channel
// (60 kS/channel, 480 kS/module). Samples are interleaved: channel c of buffer
// slot s lives at address s*NCH + c. The buffer runs while LOG_ARM (`arm`) is
// set. On the first `trigger` (a quench anywhere in the chassis) it records
// POST more samples, the trigger sample included, then stops and raises
// `dat_rdy`, so the buffer holds DEPTH-POST samples before and POST samples
// from the trigger on. The slot of the trigger sample is kept in `trig_slot`.
// Clearing `arm` returns to idle and clears `dat_rdy`; arming again restarts
// the buffer at slot 0.
// While the logger is not writing, the SRAM address follows `rd_addr` and the
// word read appears on `rd_data` one cycle later (readback by the Tier-3).
// SRAM port: one write per clk cycle (ce_n/we_n low for one cycle), NCH write
// cycles after each `sample_valid`; reads are asynchronous (oe_n low).
// Buffer size and stop-after-quench follow the paper; the interleaving, the
// post-trigger length and the readback path are this design's choices.
module circ_buffer_ctrl
  import qd_pkg::*;
#(
  parameter int unsigned NCH   = 8,
  parameter int unsigned DEPTH = 60000,
  parameter int unsigned POST  = 30000,
  parameter int unsigned AW    = $clog2(NCH * DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sample_valid,
  input  sample_t       samples [NCH],
  input  logic          arm,
  input  logic          trigger,
  input  logic [AW-1:0] rd_addr,
  output logic [15:0]   rd_data,
  output logic          logging,   // LOG_ARM and still recording
  output logic          triggered, // trigger seen, post-trigger samples running
  output logic          dat_rdy,   // DAT_RDY: buffer frozen, ready to read
  output logic [AW-1:0] trig_slot,
  output logic [AW-1:0] sram_addr,
  output logic [15:0]   sram_dq_o,
  input  logic [15:0]   sram_dq_i,
  output logic          sram_ce_n,
  output logic          sram_we_n,
  output logic          sram_oe_n
);
  localparam int unsigned SW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(NCH + 1);
  localparam int unsigned PW = $clog2(POST + 1);

  typedef enum logic [1:0] {S_IDLE, S_LOG, S_POST, S_DONE} state_e;
  state_e state_q;

  sample_t       lat_q [NCH];
  logic [SW-1:0] slot_q;
  logic [CW-1:0] wch_q;      // channel being written, NCH = not writing
  logic [PW-1:0] post_q;
  logic          writing;

  assign writing   = (wch_q != CW'(NCH));
  assign logging   = (state_q == S_LOG) || (state_q == S_POST);
  assign triggered = (state_q == S_POST);
  assign dat_rdy   = (state_q == S_DONE) && !writing;

  always_comb begin
    if (writing) begin
      sram_addr = AW'(slot_q) * AW'(NCH) + AW'(wch_q);
      sram_dq_o = lat_q[wch_q[$clog2(NCH)-1:0]];
      sram_we_n = 1'b0;
      sram_oe_n = 1'b1;
    end else begin
      sram_addr = rd_addr;
      sram_dq_o = '0;
      sram_we_n = 1'b1;
      sram_oe_n = 1'b0;
    end
    sram_ce_n = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      slot_q    <= '0;
      wch_q     <= CW'(NCH);
      post_q    <= '0;
      trig_slot <= '0;
      rd_data   <= '0;
      for (int c = 0; c < NCH; c++) lat_q[c] <= '0;
    end else begin
      if (!writing) rd_data <= sram_dq_i;

      if (writing) begin
        if (wch_q == CW'(NCH - 1)) begin
          slot_q <= (slot_q == SW'(DEPTH - 1)) ? '0 : slot_q + 1'b1;
        end
        wch_q <= wch_q + 1'b1;
      end

      unique case (state_q)
        S_IDLE: if (arm) begin
          state_q <= S_LOG;
          slot_q  <= '0;      // each arming starts at slot 0
        end
        S_LOG: begin
          if (!arm) state_q <= S_IDLE;
          else if (sample_valid) begin
            for (int c = 0; c < NCH; c++) lat_q[c] <= samples[c];
            wch_q <= '0;
            if (trigger) begin
              trig_slot <= AW'(slot_q);
              post_q    <= PW'(1);
              state_q   <= (POST <= 1) ? S_DONE : S_POST;
            end
          end
        end
        S_POST: begin
          if (!arm) state_q <= S_IDLE;
          else if (sample_valid) begin
            for (int c = 0; c < NCH; c++) lat_q[c] <= samples[c];
            wch_q  <= '0;
            post_q <= post_q + 1'b1;
            if (post_q + 1'b1 >= PW'(POST)) state_q <= S_DONE;
          end
        end
        S_DONE: if (!arm) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
