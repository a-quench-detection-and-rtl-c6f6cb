// tb_spi_reg_slave: checks the SPI register slave with a Tier-3 host model.
// The testbench plays the register file: a 2048-entry array read
// combinationally and written on wr_en. A shadow copy, updated only from the
// frames the host sends, gives the expected values. Checks: writes land at
// the right index with the right data, reads return the addressed word on
// MISO, frames for other devices change nothing and leave MISO at 0,
// frame_done counts only own frames, and rd_en comes only for reads.
module tb_spi_reg_slave;
  import qd_pkg::*;
  localparam logic [3:0] ME = 4'd3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic sclk, cs_n, mosi, miso;
  logic [REG_ADDR_W-1:0] reg_addr;
  logic wr_en, rd_en, frame_done;
  logic [REG_W-1:0] wr_data, rd_data;
  logic [15:0] regs   [2048];
  logic [15:0] shadow [2048];
  int checks = 0, failures = 0, frames = 0, rds = 0;

  always #5 clk = ~clk;

  spi_reg_slave dut (
    .clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .my_dev(ME),
    .reg_addr, .wr_en, .wr_data, .rd_en, .rd_data, .frame_done
  );
  spi_host #(.HALF(6)) host (.clk, .sclk, .cs_n, .mosi, .miso);

  assign rd_data = regs[reg_addr];
  always @(posedge clk) begin
    if (rst_n) begin
      if (wr_en) regs[reg_addr] <= wr_data;
      if (frame_done) frames++;
      if (rd_en) rds++;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [15:0] d;
    logic [31:0] rx;
    logic [10:0] a;
    int own, own_rd;
    own = 0;
    own_rd = 0;
    for (int i = 0; i < 2048; i++) begin
      regs[i] = 16'(i * 7);
      shadow[i] = 16'(i * 7);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 120; i++) begin
      a = 11'($urandom);
      d = 16'($urandom);
      case ($urandom % 4)
        0: begin
          host.wr(ME, a, d);
          shadow[a] = d;
          own++;
        end
        1: begin
          host.rd(ME, a, d);
          check(d == shadow[a], $sformatf("read reg %h: %h expected %h", a, d, shadow[a]));
          own++;
          own_rd++;
        end
        2: begin
          host.wr(4'($urandom % 3), a, d);      // another device: ignored
        end
        default: begin
          host.xfer({1'b1, 4'd8, a, 16'h0}, rx); // another device's read
          check(rx == 32'h0, "MISO stays 0 for another device");
        end
      endcase
    end
    for (int i = 0; i < 2048; i++)
      if (regs[i] != shadow[i]) begin
        check(1'b0, $sformatf("register %0d holds %h expected %h", i, regs[i], shadow[i]));
        break;
      end
    check(frames == own, $sformatf("frame_done %0d times, expected %0d", frames, own));
    check(rds == own_rd, $sformatf("rd_en %0d times, expected %0d", rds, own_rd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
