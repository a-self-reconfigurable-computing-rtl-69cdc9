// tb_pci_target_regs: self-checking test of the PCI-Target Register Space
// decoder. Every dword address 0x00-0xFF is written and read: the write
// strobe must go to exactly the region the map assigns (fixed 0x00-0x1F,
// common 0x20-0x2F, reconfig 0x40-0x5F, none elsewhere) with address and
// data passed on, and a read must answer one cycle later with that region's
// data (zero for unmapped addresses).
module tb_pci_target_regs;
  import proteus_pkg::*;
  logic clk = 0, rst = 1;
  logic t_wr = 0, t_rd = 0, t_rvalid;
  reg_addr_t t_addr = '0, r_addr;
  logic [31:0] t_wdata = '0, t_rdata, r_wdata;
  logic fx_wr, cm_wr, rc_wr;
  logic [31:0] fx_rdata, cm_rdata, rc_rdata;
  int checks = 0, failures = 0;

  always #15 clk = ~clk;
  pci_target_regs dut (.*);

  // each region answers with a tag and the address
  assign fx_rdata = 32'hF1F1_0000 | 32'(r_addr);
  assign cm_rdata = 32'hC0C0_0000 | 32'(r_addr);
  assign rc_rdata = 32'hEEEE_0000 | 32'(r_addr);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
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
    for (int a = 0; a < 256; a++) begin
      int reg_n;
      logic [31:0] exp;
      reg_n = a < 'h20 ? 1 : a < 'h30 ? 2 : (a >= 'h40 && a < 'h60) ? 3 : 0;
      exp = reg_n == 1 ? 32'hF1F1_0000 | a : reg_n == 2 ? 32'hC0C0_0000 | a : reg_n == 3 ? 32'hEEEE_0000 | a : 0;
      @(negedge clk);
      t_wr = 1; t_addr = 8'(a); t_wdata = $urandom;
      #1;
      chk(fx_wr == (reg_n == 1) && cm_wr == (reg_n == 2) && rc_wr == (reg_n == 3), $sformatf("write strobe %h", a));
      chk(r_addr == 8'(a) && r_wdata == t_wdata, "address and data passed on");
      @(negedge clk);
      t_wr = 0; t_rd = 1;
      @(negedge clk);
      t_rd = 0;
      chk(t_rvalid && t_rdata == exp, $sformatf("read %h got %h", a, t_rdata));
      @(negedge clk);
      chk(!t_rvalid, "rvalid is one pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
