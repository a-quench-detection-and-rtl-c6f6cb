// tb_buck_unit: checks a bucked channel against a reference computed in the
// testbench with plain integers: out = ch[a] - floor(gain*ref/256), clipped to
// [-32768, 32767], ref = Idot or ch[b]. Random operands, random selections,
// unity and extreme gains; the result must appear one cycle after valid_i.
module tb_buck_unit;
  import qd_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, valid_i = 1'b0, valid_o;
  sample_t ch [4];
  sample_t idot, out;
  logic [1:0] sel_a, sel_b;
  logic use_idot;
  logic signed [15:0] gain;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  buck_unit #(.NCH(4)) dut (
    .clk, .rst_n, .valid_i, .ch, .idot, .sel_a, .sel_b, .use_idot, .gain, .out, .valid_o
  );

  function automatic int ref_model(int a, int r, int g);
    longint p, q, d;
    p = longint'(r) * longint'(g);
    // floor division by 256
    q = (p >= 0) ? p / 256 : -((-p + 255) / 256);
    d = longint'(a) - q;
    if (d > 32767) d = 32767;
    if (d < -32768) d = -32768;
    return int'(d);
  endfunction

  initial begin
    int exp_v;
    foreach (ch[i]) ch[i] = '0;
    idot = '0; sel_a = '0; sel_b = '0; use_idot = 1'b0; gain = 16'sd256;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      foreach (ch[k]) ch[k] = (i < 20) ? sample_t'(($urandom % 2001) - 1000) : sample_t'($urandom);
      idot     = sample_t'($urandom);
      sel_a    = 2'($urandom);
      sel_b    = 2'($urandom);
      use_idot = 1'($urandom);
      case (i % 4)
        0: gain = 16'sd256;
        1: gain = 16'sh7FFF;
        2: gain = 16'sh8000;
        default: gain = 16'($urandom);
      endcase
      exp_v = ref_model(int'(ch[sel_a]), use_idot ? int'(idot) : int'(ch[sel_b]), int'(gain));
      valid_i = 1'b1;
      @(negedge clk);
      valid_i = 1'b0;
      checks++;
      if (!valid_o || int'(out) != exp_v) begin
        failures++;
        $display("FAIL: a=%0d b=%0d idot=%0d use=%0b gain=%0d: out=%0d v=%0b expected %0d",
                 ch[sel_a], ch[sel_b], idot, use_idot, gain, out, valid_o, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
