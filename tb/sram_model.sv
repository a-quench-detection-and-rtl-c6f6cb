// sram_model: behavioural model of the external asynchronous SRAM of a DQD
// module (a commercial memory chip, not part of the FPGA logic). A write
// happens at the rising clk edge while ce_n and we_n are low; a read is
// asynchronous while ce_n and oe_n are low. Contents start at zero.
module sram_model #(
  parameter int unsigned AW    = 19,
  parameter int unsigned WORDS = 480000
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic [15:0]   dq_w,
  output logic [15:0]   dq_r,
  input  logic          ce_n,
  input  logic          we_n,
  input  logic          oe_n
);
  logic [15:0] mem [WORDS];
  initial for (int i = 0; i < WORDS; i++) mem[i] = '0;
  always @(posedge clk)
    if (!ce_n && !we_n && 32'(addr) < WORDS) mem[addr] <= dq_w;
  assign dq_r = (!ce_n && !oe_n && 32'(addr) < WORDS) ? mem[addr] : 16'h0000;
endmodule
