// tb_status_flags: self-checking test of Flags, Status Bits and Error
// Reporting. Random done/error pulses, clears, starts and live inputs are
// applied; a reference model of the sticky bits (set wins over clear, start
// clears) is kept here and the STATUS word is compared every cycle.
module tb_status_flags;
  logic clk = 0, rst = 1;
  logic [3:0] active = '0, done = '0, start = '0;
  logic err = 0, sm_busy = 0;
  logic [1:0] err_idx = '0;
  logic [11:4] clr = '0;
  logic [31:0] status;
  logic [3:0] d_ref = '0, e_ref = '0;
  int checks = 0, failures = 0;

  always #15 clk = ~clk;
  status_flags dut (.*);

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
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      active = 4'($urandom); sm_busy = 1'($urandom);
      done = ($urandom_range(0, 3) == 0) ? 4'($urandom) : '0;
      err  = ($urandom_range(0, 5) == 0); err_idx = 2'($urandom);
      clr  = ($urandom_range(0, 3) == 0) ? 8'($urandom) : '0;
      start = ($urandom_range(0, 7) == 0) ? 4'($urandom) : '0;
      for (int t = 0; t < 4; t++) begin
        if (done[t]) d_ref[t] = 1; else if (clr[4 + t] || start[t]) d_ref[t] = 0;
        if (err && err_idx == 2'(t)) e_ref[t] = 1; else if (clr[8 + t] || start[t]) e_ref[t] = 0;
      end
      @(negedge clk);
      done = '0; err = 0; clr = '0; start = '0;
      #1;
      checks++;
      if (status !== {19'd0, sm_busy, e_ref, d_ref, active}) begin
        failures++;
        $display("FAIL: status %h", status);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
