// tb_stream_data_section: self-checking test of the two stream buffers.
// The PCI side (33 MHz-like clock) pushes 600 downstream items, never more
// than ds_free allows; the reconfigurable-part side (a different clock)
// takes them with a random ready and checks order. At the same time the
// reconfigurable part sends 600 upstream items with a random valid, and the
// PCI side pops them whenever us_pop_valid is high and checks order; it
// also checks that us_avail never exceeds what has been sent. Checks that
// ds_free starts at DEPTH and returns to DEPTH at the end, and that the
// upstream side applied back-pressure (rc_us_ready low) at least once while
// the PCI side was paused.
module tb_stream_data_section;
  localparam int D = 256, AW = 8, N = 600;
  logic pci_clk = 0, rc_clk = 0, pci_rst = 1, rc_rst = 1;
  logic ds_push = 0, us_pop = 0;
  logic [31:0] ds_push_data = '0, us_pop_data;
  logic [AW:0] ds_free, us_avail;
  logic us_pop_valid;
  logic [31:0] rc_ds_data, rc_us_data = '0;
  logic rc_ds_valid, rc_ds_ready = 0, rc_us_valid = 0, rc_us_ready;
  int checks = 0, failures = 0, backpressure = 0;
  int ds_sent = 0, ds_got = 0, us_sent = 0, us_got = 0;

  always #15 pci_clk = ~pci_clk;
  always #4  rc_clk  = ~rc_clk;

  stream_data_section #(.DEPTH(D)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] dsv(int k); return 32'hD000_0000 + k; endfunction
  function automatic logic [31:0] usv(int k); return 32'h0050_0000 ^ (k * 32'h9E37); endfunction

  initial begin
    repeat (40000) @(posedge pci_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge pci_clk);
    pci_rst = 0; rc_rst = 0;
    @(negedge pci_clk);
    chk(ds_free == D, "ds_free at start");
    fork
      // PCI side downstream pushes
      while (ds_sent < N) begin
        @(negedge pci_clk);
        ds_push = (ds_free != 0) && ($urandom_range(0, 3) != 0);
        ds_push_data = dsv(ds_sent);
        if (ds_push) ds_sent++;
        if (ds_sent == N) begin @(negedge pci_clk); ds_push = 0; end
      end
      // rc side downstream receive
      while (ds_got < N) begin
        @(negedge rc_clk);
        rc_ds_ready = ($urandom_range(0, 2) != 0);
        if (rc_ds_ready && rc_ds_valid) begin
          chk(rc_ds_data == dsv(ds_got), "downstream order");
          ds_got++;
        end
        if (ds_got == N) rc_ds_ready = 0;
      end
      // rc side upstream sends
      begin
       while (us_sent < N) begin
        @(negedge rc_clk);
        if (!rc_us_ready) backpressure++;
        rc_us_valid = ($urandom_range(0, 1) != 0);
        rc_us_data  = usv(us_sent);
        if (rc_us_valid && rc_us_ready) us_sent++;
       end
       @(negedge rc_clk) rc_us_valid = 0;
      end
      // PCI side upstream pops, pausing for a while to let the buffer fill
      begin
        repeat (200) @(negedge pci_clk);
        while (us_got < N) begin
          @(negedge pci_clk);
          chk(int'(us_avail) <= us_sent - us_got, $sformatf("us_avail bound %0d %0d %0d", us_avail, us_sent, us_got));
          us_pop = us_pop_valid && ($urandom_range(0, 3) != 0);
          if (us_pop) begin
            chk(us_pop_data == usv(us_got), "upstream order");
            us_got++;
          end
        end
        @(negedge pci_clk); us_pop = 0;
      end
    join
    rc_us_valid = 0;
    repeat (10) @(negedge pci_clk);
    chk(ds_free == D, "ds_free back to DEPTH");
    chk(backpressure > 0, "upstream back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
