// tb_selectmap_data_section: self-checking test of the configuration
// controller's data path against the ICAP model.
// 1. Configuration: 600 random items are pushed on the PCI side (never more
//    than wr_free), with a long gap in the middle. The ICAP must receive
//    exactly the 2400 bytes, most significant byte of each item first. While
//    the buffer is well filled the SelectMap clock must carry one byte per
//    two cfg_clk cycles (400 bytes in 800 cycles); during the gap the clock
//    must stop (counted as pauses), and sm_busy must fall at the end.
// 2. Readback: 300 items are requested with the PCI side not reading at
//    first, so the 256-item buffer fills and the clock stops; then all
//    items are popped and compared with the model's byte sequence, packed
//    first byte most significant. The model raises busy at random; those
//    edges must not produce bytes.
// 3. Back to configuration direction: 20 more items must arrive intact.
module tb_selectmap_data_section;
  localparam int D = 256, AW = 8;
  logic pci_clk = 0, cfg_clk = 0, pci_rst = 1, cfg_rst = 1;
  logic wr_push = 0, rb_pop = 0, mode_sm_read = 0, rb_start = 0;
  logic [31:0] wr_push_data = '0, rb_pop_data;
  logic [AW:0] wr_free, rb_avail;
  logic sm_busy, rb_pop_valid;
  logic [23:0] rb_words = '0;
  logic icap_cclk, icap_ce_n, icap_write_n, icap_busy;
  logic [7:0] icap_i, icap_o;
  logic [31:0] sent [$];
  int checks = 0, failures = 0, pauses = 0, stopped_run = 0;
  longint cfg_cycles = 0;

  always #15 pci_clk = ~pci_clk;
  always #5  cfg_clk = ~cfg_clk;

  selectmap_data_section #(.DEPTH(D)) dut (.*);
  icap_model #(.MAX_BYTES(8192), .BUSY_PCT(25)) icap (
    .cclk(icap_cclk), .ce_n(icap_ce_n), .write_n(icap_write_n), .i(icap_i), .o(icap_o), .busy(icap_busy)
  );

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // count clock stops in the middle of a configuration stream
  always @(posedge cfg_clk) begin
    cfg_cycles++;
    if (!icap_cclk && !icap_write_n && icap.n_wr > 0 && icap.n_wr < 2400) begin
      stopped_run++;
      if (stopped_run == 8) pauses++;
    end else stopped_run = 0;
  end

  initial begin
    repeat (100000) @(posedge pci_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push_items(input int n, input int gap_at);
    int k;
    k = 0;
    while (k < n) begin
      @(negedge pci_clk);
      if (k == gap_at) begin
        wr_push = 0;
        repeat (1500) @(negedge pci_clk);
      end
      wr_push = (wr_free != 0);
      wr_push_data = $urandom;
      if (wr_push) begin sent.push_back(wr_push_data); k++; end
    end
    @(negedge pci_clk); wr_push = 0;
  endtask

  initial begin
    repeat (4) @(negedge pci_clk);
    pci_rst = 0; cfg_rst = 0;
    // 1. configuration
    fork
      push_items(600, 350);
      begin
        longint c0;
        wait (icap.n_wr >= 400);
        @(posedge cfg_clk) c0 = cfg_cycles;
        wait (icap.n_wr >= 800);
        @(posedge cfg_clk);
        chk(cfg_cycles - c0 >= 798 && cfg_cycles - c0 <= 802,
            $sformatf("400 bytes took %0d cfg cycles", cfg_cycles - c0));
      end
    join
    wait (icap.n_wr >= 2400);
    repeat (20) @(negedge pci_clk);
    chk(icap.n_wr == 2400, $sformatf("bytes received %0d", icap.n_wr));
    for (int k = 0; k < 600; k++)
      for (int b = 0; b < 4; b++)
        chk(icap.wr_bytes[4*k+b] == sent[k][31-8*b -: 8], $sformatf("byte %0d.%0d", k, b));
    chk(pauses >= 1, "configuration clock stopped during the gap");
    chk(!sm_busy, "sm_busy low at the end");
    // 2. readback
    @(negedge pci_clk);
    mode_sm_read = 1; rb_words = 24'd300;
    repeat (4) @(negedge pci_clk);
    rb_start = 1;
    @(negedge pci_clk) rb_start = 0;
    repeat (1500) @(negedge pci_clk);
    chk(icap_write_n, "write_n high in readback");
    chk(int'(rb_avail) == D + 1, $sformatf("readback buffer full: %0d", rb_avail));
    chk(icap.n_rd == 4 * (D + 1), $sformatf("readback stopped at %0d bytes", icap.n_rd));
    begin
      int got;
      got = 0;
      while (got < 300) begin
        @(negedge pci_clk);
        rb_pop = rb_pop_valid;
        if (rb_pop) begin
          logic [31:0] e;
          e = {icap.rb_byte(4*got), icap.rb_byte(4*got+1), icap.rb_byte(4*got+2), icap.rb_byte(4*got+3)};
          chk(rb_pop_data == e, $sformatf("readback item %0d got %h want %h", got, rb_pop_data, e));
          got++;
        end
      end
      @(negedge pci_clk) rb_pop = 0;
    end
    repeat (50) @(negedge pci_clk);
    chk(icap.n_rd == 1200 && rb_avail == 0, "readback read exactly 300 items");
    chk(icap.n_busy > 0, "busy exercised");
    // 3. back to configuration
    mode_sm_read = 0;
    repeat (10) @(negedge pci_clk);
    push_items(20, -1);
    wait (icap.n_wr >= 2480);
    repeat (20) @(negedge pci_clk);
    chk(icap.n_wr == 2480, "second configuration stream length");
    for (int k = 600; k < 620; k++)
      for (int b = 0; b < 4; b++)
        chk(icap.wr_bytes[4*k+b] == sent[k][31-8*b -: 8], $sformatf("byte %0d.%0d", k, b));
    $display("pauses=%0d busy=%0d", pauses, icap.n_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
