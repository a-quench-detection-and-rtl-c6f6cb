// buck_unit: one digitally bucked DQD channel.
//
// A bucked channel subtracts a scaled reference from one of the module's
// individual channels, so that the inductive voltage common to both cancels and
// only a resistive (quench) voltage remains. The reference is either another
// individual channel or the magnet current derivative Idot:
//     out = ch[sel_a] - (gain * ref) >>> 8,  ref = use_idot ? idot : ch[sel_b]
// gain is signed Q8.8 (256 = 1.0); the result saturates to 16 bits.
// Timing: registered, `valid_o` follows `valid_i` by one cycle.
// Bucking against another channel or Idot follows the paper; the gain and its
// format are this design's choice (the paper does not give the arithmetic).
module buck_unit
  import qd_pkg::*;
#(
  parameter int unsigned NCH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   valid_i,
  input  sample_t                ch [NCH],
  input  sample_t                idot,
  input  logic [$clog2(NCH)-1:0] sel_a,
  input  logic [$clog2(NCH)-1:0] sel_b,
  input  logic                   use_idot,
  input  logic signed [15:0]     gain,
  output sample_t                out,
  output logic                   valid_o
);
  sample_t              ref_s;
  logic signed [31:0]   prod;
  logic signed [32:0]   diff;
  sample_t              sat;

  always_comb begin
    ref_s = use_idot ? idot : ch[sel_b];
    prod  = ref_s * gain;
    diff  = 33'(ch[sel_a]) - 33'(prod >>> 8);
    if (diff > 33'sd32767)       sat = 16'sh7FFF;
    else if (diff < -33'sd32768) sat = 16'sh8000;
    else                         sat = diff[15:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out     <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) out <= sat;
    end
  end

endmodule
