// tb_reset_ctrl: self-checking test of the reset tree with three unrelated
// clocks. Checks: the PCI bus reset asserts every output (asynchronously once running) and each is
// released within a few cycles of its own clock; a soft reset pulse asserts
// dp_rst, st_rst, cfg_rst and rc_rst but not reg_rst, for SOFT_RST_CYCLES
// PCI cycles or more; rc_hold keeps st_rst and rc_rst asserted and leaves
// dp_rst and cfg_rst alone.
module tb_reset_ctrl;
  logic pci_clk = 0, cfg_clk = 0, rc_clk = 0;
  logic pci_rst_n = 0, soft_rst = 0, rc_hold = 0;
  logic reg_rst, dp_rst, st_rst, cfg_rst, rc_rst;
  int checks = 0, failures = 0, dp_len = 0;

  always #15 pci_clk = ~pci_clk;
  always #5  cfg_clk = ~cfg_clk;
  always #11 rc_clk  = ~rc_clk;

  reset_ctrl #(.SOFT_RST_CYCLES(8)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge pci_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge pci_clk);
    chk(reg_rst && dp_rst && st_rst && cfg_rst && rc_rst, "all asserted in bus reset");
    repeat (3) @(negedge pci_clk);
    pci_rst_n = 1;
    repeat (10) @(negedge pci_clk);
    chk(!reg_rst && !dp_rst && !st_rst && !cfg_rst && !rc_rst, "all released");
    // asynchronous assertion
    #7 pci_rst_n = 0;
    #1 chk(reg_rst && dp_rst && st_rst && cfg_rst && rc_rst, "asynchronous assertion");
    @(negedge pci_clk) pci_rst_n = 1;
    repeat (10) @(negedge pci_clk);
    // soft reset
    soft_rst = 1;
    @(negedge pci_clk) soft_rst = 0;
    while (dp_rst || dp_len == 0) begin
      if (dp_rst) dp_len++;
      chk(!reg_rst, "soft reset leaves registers alone");
      @(negedge pci_clk);
      if (dp_len > 0 && dp_len < 4) chk(cfg_rst && rc_rst && st_rst, "soft reset reaches all domains");
    end
    chk(dp_len >= 8, $sformatf("soft reset length %0d", dp_len));
    repeat (10) @(negedge pci_clk);
    chk(!cfg_rst && !rc_rst, "soft reset released");
    // hold the reconfigurable part
    rc_hold = 1;
    repeat (10) @(negedge pci_clk);
    chk(st_rst && rc_rst && !dp_rst && !cfg_rst && !reg_rst, "rc_hold");
    rc_hold = 0;
    repeat (10) @(negedge pci_clk);
    chk(!st_rst && !rc_rst, "rc_hold released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
