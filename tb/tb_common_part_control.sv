// tb_common_part_control: self-checking test of the interrupt generation.
// Random source pulses, enable writes and write-1-to-clear accesses are
// applied while a reference model of INT_STATUS and INT_ENABLE is kept
// here; int_req must equal (status & enable) != 0 one cycle later, and both
// registers must read back. Checks that a masked source does not interrupt.
module tb_common_part_control;
  import proteus_pkg::*;
  logic clk = 0, rst = 1, wr = 0;
  reg_addr_t addr = REG_INT_STATUS;
  logic [31:0] wdata = '0, rdata;
  logic [NUM_IRQ-1:0] irq_src = '0, st_ref = '0, en_ref = '0;
  logic int_req, req_ref = 0;
  int checks = 0, failures = 0, asserted = 0;

  always #15 clk = ~clk;
  common_part_control dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    // masked source: no interrupt
    irq_src = 6'b000001;
    @(negedge clk) irq_src = '0;
    st_ref = 6'b000001;
    repeat (2) @(negedge clk);
    chk(!int_req, "masked source does not interrupt");
    for (int k = 0; k < 3000; k++) begin
      int op;
      op = $urandom_range(0, 5);
      irq_src = ($urandom_range(0, 3) == 0) ? NUM_IRQ'($urandom) : '0;
      wr = (op < 2);
      addr = (op == 0) ? REG_INT_STATUS : REG_INT_ENABLE;
      wdata = $urandom;
      #1;
      if (!wr || addr != REG_INT_STATUS) chk(rdata == ((addr == REG_INT_STATUS) ? 32'(st_ref) : 32'(en_ref)), "readback");
      @(negedge clk);
      req_ref = |(st_ref & en_ref);
      st_ref = (st_ref & ~((wr && addr == REG_INT_STATUS) ? wdata[NUM_IRQ-1:0] : '0)) | irq_src;
      if (wr && addr == REG_INT_ENABLE) en_ref = wdata[NUM_IRQ-1:0];
      chk(int_req == req_ref, "int_req");
      if (int_req) asserted++;
      wr = 0;
    end
    chk(asserted > 100, "interrupt asserted often");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
