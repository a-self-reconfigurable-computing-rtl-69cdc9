// tb_driver_comm: self-checking test of the driver's register set.
// Writes BASE/LEN of all targets and reads them back; checks the CONTROL
// command pulses (start, stop, soft reset) last exactly one cycle and carry
// the written bits; checks MODE levels, the ID word, the STATUS and REMAIN
// read paths and the STATUS write-1-to-clear pulse.
module tb_driver_comm;
  import proteus_pkg::*;
  localparam int CW = 24;
  logic clk = 0, rst = 1, wr = 0;
  reg_addr_t addr = '0;
  logic [31:0] wdata = '0, rdata, status = '0;
  logic [3:0] start, stop;
  logic soft_rst, rc_hold, sm_read_mode;
  logic [3:0][31:0] base;
  logic [3:0][CW-1:0] len, remaining = '0;
  logic [11:4] st_clr;
  int checks = 0, failures = 0;
  logic [31:0] b_ref [4];
  logic [CW-1:0] l_ref [4];

  always #15 clk = ~clk;
  driver_comm #(.CNT_W(CW)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wreg(input reg_addr_t a, input logic [31:0] d);
    @(negedge clk); wr = 1; addr = a; wdata = d;
    @(negedge clk); wr = 0;
  endtask

  task automatic expect_reg(input reg_addr_t a, input logic [31:0] e, input string msg);
    addr = a;
    #1;
    chk(rdata == e, msg);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 4; t++) begin
      b_ref[t] = $urandom; l_ref[t] = CW'($urandom);
      wreg(REG_BASE0 + reg_addr_t'(2*t), b_ref[t]);
      wreg(REG_LEN0 + reg_addr_t'(2*t), 32'(l_ref[t]) | 32'hFF00_0000);
    end
    for (int t = 0; t < 4; t++) begin
      chk(base[t] == b_ref[t] && len[t] == l_ref[t], $sformatf("outputs %0d", t));
      expect_reg(REG_BASE0 + reg_addr_t'(2*t), b_ref[t], "base readback");
      expect_reg(REG_LEN0 + reg_addr_t'(2*t), 32'(l_ref[t]), "len readback");
      remaining[t] = CW'(t * 1000 + 5);
      expect_reg(REG_REMAIN0 + reg_addr_t'(t), 32'(t * 1000 + 5), "remain readback");
    end
    // command pulses
    @(negedge clk); wr = 1; addr = REG_CONTROL; wdata = 32'h0000_01A5;
    @(negedge clk); wr = 0;
    chk(start == 4'h5 && stop == 4'hA && soft_rst, "command pulse");
    @(negedge clk);
    chk(start == 0 && stop == 0 && !soft_rst, "pulse lasts one cycle");
    expect_reg(REG_CONTROL, 0, "control reads zero");
    // mode
    wreg(REG_MODE, 32'h3);
    chk(rc_hold && sm_read_mode, "mode set");
    expect_reg(REG_MODE, 32'd3, "mode readback");
    wreg(REG_MODE, 32'h2);
    chk(!rc_hold && sm_read_mode, "mode change");
    expect_reg(REG_ID, PROTEUS_ID, "id");
    status = 32'h1234_5678;
    expect_reg(REG_STATUS, 32'h1234_5678, "status read path");
    @(negedge clk); wr = 1; addr = REG_STATUS; wdata = 32'h0000_0FF0;
    @(negedge clk); wr = 0;
    chk(st_clr == 8'hFF, "status clear pulse");
    @(negedge clk);
    chk(st_clr == 0, "clear pulse one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
