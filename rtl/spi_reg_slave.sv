// spi_reg_slave: register access over the backplane SPI bus.
//
// The Tier-3 configures and reads the DQD over SPI (through the controller and
// the backplane). SCLK, MOSI and CS_N are synchronised into the clk domain and
// edge-detected, so SCLK must be at most clk/8. Mode 0: MOSI is sampled on the
// rising SCLK edge, MISO changes after the falling edge. Frames are 32 bits,
// MSB first: {rw, dev[3:0], reg[10:0], data[15:0]} (see qd_pkg).
// After the 16 header bits, a frame whose dev equals `my_dev` is accepted:
// for a read, `rd_en` pulses with `reg_addr` valid and `rd_data` (which must
// be valid in the same cycle) is shifted out on MISO during the 16 data bits;
// for a write, `wr_en` pulses with `reg_addr`/`wr_data` after the 32nd bit.
// MISO is 0 when the frame is for another device, so the MISO lines of
// several slaves can be ORed. A frame cut short by CS_N rising is dropped.
// SPI as the register path follows the paper; the frame layout and mode are
// this design's choices.
module spi_reg_slave
  import qd_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  sclk,
  input  logic                  cs_n,
  input  logic                  mosi,
  output logic                  miso,
  input  logic [DEV_W-1:0]      my_dev,
  output logic [REG_ADDR_W-1:0] reg_addr,
  output logic                  wr_en,
  output logic [REG_W-1:0]      wr_data,
  output logic                  rd_en,
  input  logic [REG_W-1:0]      rd_data,
  output logic                  frame_done   // a complete frame for this device
);
  logic [2:0] sclk_s, cs_s;
  logic [1:0] mosi_s;
  logic       rise, fall, csn;
  logic [5:0] nbits_q;
  logic [31:0] in_q;
  logic [15:0] out_q;
  logic        sel_q, rw_q;

  assign rise = sclk_s[1] & ~sclk_s[2];
  assign fall = ~sclk_s[1] & sclk_s[2];
  assign csn  = cs_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s     <= '0;
      cs_s       <= '1;
      mosi_s     <= '0;
      nbits_q    <= '0;
      in_q       <= '0;
      out_q      <= '0;
      sel_q      <= 1'b0;
      rw_q       <= 1'b0;
      miso       <= 1'b0;
      reg_addr   <= '0;
      wr_en      <= 1'b0;
      wr_data    <= '0;
      rd_en      <= 1'b0;
      frame_done <= 1'b0;
    end else begin
      sclk_s     <= {sclk_s[1:0], sclk};
      cs_s       <= {cs_s[1:0], cs_n};
      mosi_s     <= {mosi_s[0], mosi};
      wr_en      <= 1'b0;
      rd_en      <= 1'b0;
      frame_done <= 1'b0;
      if (csn) begin
        nbits_q <= '0;
        sel_q   <= 1'b0;
        miso    <= 1'b0;
      end else if (rise && nbits_q < 6'd32) begin
        in_q    <= {in_q[30:0], mosi_s[1]};
        nbits_q <= nbits_q + 1'b1;
        if (nbits_q == 6'd15) begin
          // header complete: {rw, dev, reg} are in_q[14:0] plus this bit
          rw_q     <= in_q[14];
          sel_q    <= (in_q[13:10] == my_dev);
          reg_addr <= {in_q[9:0], mosi_s[1]};
          rd_en    <= in_q[14] && (in_q[13:10] == my_dev);
          out_q    <= '0;
        end
        if (nbits_q == 6'd31 && sel_q) begin
          wr_data    <= {in_q[14:0], mosi_s[1]};
          wr_en      <= ~rw_q;
          frame_done <= 1'b1;
        end
      end else if (fall && nbits_q >= 6'd16 && nbits_q < 6'd32 && sel_q) begin
        miso  <= out_q[15];
        out_q <= {out_q[14:0], 1'b0};
      end
      // rd_data answers rd_en in the same cycle
      if (rd_en) out_q <= rd_data;
    end
  end

endmodule
