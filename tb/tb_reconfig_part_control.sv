// tb_reconfig_part_control: self-checking test of the static registers
// shared with the reconfigurable part. Writes all control registers with
// random values (rc_ctrl must show them, with one rc_ctrl_wr pulse each,
// and they must read back), drives random status values (readable two
// cycles later) and gives rising edges on rc_irq, each of which must give
// exactly one irq pulse.
module tb_reconfig_part_control;
  import proteus_pkg::*;
  localparam int NR = RC_REGS;
  logic clk = 0, rst = 1, wr = 0;
  reg_addr_t addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [NR-1:0][31:0] rc_ctrl, rc_status = '0;
  logic [NR-1:0] rc_ctrl_wr;
  logic rc_irq = 0, irq;
  logic [31:0] c_ref [NR];
  int checks = 0, failures = 0, npulse = 0;

  always #15 clk = ~clk;
  reconfig_part_control #(.NREG(NR)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (irq) npulse++;

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
    for (int i = 0; i < NR; i++) begin
      c_ref[i] = $urandom;
      @(negedge clk); wr = 1; addr = REG_RC_CTRL0 + reg_addr_t'(i); wdata = c_ref[i];
      @(negedge clk); wr = 0;
      chk(rc_ctrl_wr == (NR'(1) << i), "one write pulse");
      chk(rc_ctrl[i] == c_ref[i], "control value");
    end
    for (int i = 0; i < NR; i++) begin
      addr = REG_RC_CTRL0 + reg_addr_t'(i); #1;
      chk(rdata == c_ref[i], "control readback");
      rc_status[i] = $urandom;
    end
    repeat (3) @(negedge clk);
    for (int i = 0; i < NR; i++) begin
      addr = REG_RC_STAT0 + reg_addr_t'(i); #1;
      chk(rdata == rc_status[i], "status readback");
    end
    for (int k = 0; k < 5; k++) begin
      @(negedge clk) rc_irq = 1;
      repeat (4) @(negedge clk);
      rc_irq = 0;
      repeat (4) @(negedge clk);
    end
    chk(npulse == 5, $sformatf("irq pulses %0d", npulse));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
