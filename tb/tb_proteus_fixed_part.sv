// tb_proteus_fixed_part: end-to-end test of the fixed part at its default
// sizes (256x32 buffers, 64-item bursts), with models of the PCI core and
// PC memory, of the ICAP and of a simple algorithm in the reconfigurable
// part. The PC side is driven only through register accesses, as a device
// driver would, and waits for interrupts.
//   1. Partial reconfiguration: a 1500-item bitstream in PC memory is
//      streamed to the ICAP by bus-master reads; part of it with a slow PCI
//      bus so that the configuration clock has to stop. All 6000 bytes must
//      reach the ICAP in order.
//   1b. The same bitstream again on a PCI bus with no wait states and no
//      disconnects: the PCI side must keep the SelectMap port at its full
//      rate, one byte per two configuration clocks (50 MByte/s at 100 MHz),
//      without a single clock stop.
//   2. Readback: 300 items are read from the ICAP into PC memory.
//   3. Algorithm setup: a control register written by the PC is seen by the
//      algorithm, which answers in a status register.
//   4. Processing: 3000 items flow downstream, through the algorithm
//      (y = 3x + 1) and upstream into PC memory, both streams at once, with
//      the algorithm stalling at random. The algorithm raises its
//      interrupt when done.
//   5. A bus-master burst is aborted: error flag and interrupt.
//   6. Soft reset, holding the algorithm in reset, and a last short stream.
// Every mechanism is counted and must have happened at least once: clock
// stop, interrupted bursts, contested arbitration, ICAP busy, upstream
// back-pressure, interrupts, error abort, soft reset, algorithm reset.
module tb_proteus_fixed_part;
  import proteus_pkg::*;
  localparam int MEMW = 16384, LW = 7;
  localparam int NBIT = 1500, NRB = 300, NSTR = 3000;
  localparam int BIT_W = 0, RB_W = 2048, DS_W = 4096, US_W = 8192, LAST_W = 12288;

  logic pci_clk = 0, cfg_clk = 0, rc_clk = 0, pci_rst_n = 1;
  logic t_wr = 0, t_rd = 0, t_rvalid, int_req;
  reg_addr_t t_addr = '0;
  logic [31:0] t_wdata = '0, t_rdata;
  logic m_req, m_write, m_ack, m_rvalid, m_wvalid, m_wready, m_done, m_err;
  logic [31:0] m_addr, m_rdata, m_wdata;
  logic [LW-1:0] m_len;
  logic icap_cclk, icap_ce_n, icap_write_n, icap_busy;
  logic [7:0] icap_i, icap_o;
  logic rc_rst, rc_ds_valid, rc_ds_ready, rc_us_valid, rc_us_ready, rc_irq;
  logic [31:0] rc_ds_data, rc_us_data;
  logic [RC_REGS-1:0][31:0] rc_ctrl, rc_status;
  logic [RC_REGS-1:0] rc_ctrl_wr;
  logic abort_next = 0;

  int checks = 0, failures = 0;
  int n_pause = 0, n_contest = 0, n_backpressure = 0, n_irq = 0, n_err = 0, n_soft = 0, n_rchold = 0;

  always #15 pci_clk = ~pci_clk;   // 33 MHz
  always #5  cfg_clk = ~cfg_clk;   // 100 MHz -> 50 MHz SelectMap clock
  always #6  rc_clk  = ~rc_clk;    // algorithm clock

  proteus_fixed_part dut (.*);

  pci_core_model #(.MEM_WORDS(MEMW), .LEN_W(LW), .WAIT_PCT(10), .DISCONNECT_PCT(3)) core (
    .clk(pci_clk), .m_req, .m_write, .m_addr, .m_len, .m_ack, .m_rdata, .m_rvalid,
    .m_wdata, .m_wvalid, .m_wready, .m_done, .m_err, .abort_next
  );
  icap_model #(.MAX_BYTES(8 * NBIT), .BUSY_PCT(20)) icap (
    .cclk(icap_cclk), .ce_n(icap_ce_n), .write_n(icap_write_n), .i(icap_i), .o(icap_o), .busy(icap_busy)
  );

  // ---------------- algorithm model (reconfigurable part) ----------------
  int alg_in = 0, alg_out = 0, alg_target = 0;
  logic [31:0] alg_q [$];
  logic alg_stall = 0;
  always @(posedge rc_clk) begin
    if (rc_rst) begin
      alg_q.delete();
      alg_in <= 0; alg_out <= 0;
      rc_irq <= 0;
    end else begin
      if (rc_ds_valid && rc_ds_ready) begin alg_q.push_back(3 * rc_ds_data + 1); alg_in <= alg_in + 1; end
      if (rc_us_valid && rc_us_ready) begin void'(alg_q.pop_front()); alg_out <= alg_out + 1; end
      rc_irq <= (alg_target != 0) && (alg_out >= alg_target);
    end
  end
  always_comb begin
    rc_ds_ready = !rc_rst && !alg_stall && alg_q.size() < 8;
    rc_us_valid = !rc_rst && alg_q.size() > 0;
    rc_us_data  = alg_q.size() > 0 ? alg_q[0] : 32'd0;
    for (int i = 0; i < RC_REGS; i++) rc_status[i] = rc_ctrl[i] + 32'(i + 1);
  end
  always @(negedge rc_clk) alg_stall <= ($urandom_range(0, 99) < 30);

  // ---------------- mechanism counters ----------------
  int stop_run = 0;
  // full-rate window of step 1b: cycles from its first to its last byte
  int fast_cyc = 0, fast_stops = 0;
  logic cclk_q = 0;
  always @(posedge cfg_clk) begin
    cclk_q <= icap_cclk;
    if (icap.n_wr > 4 * NBIT && icap.n_wr < 8 * NBIT) begin
      fast_cyc++;
      if (!icap_cclk && !cclk_q) fast_stops++;
    end
  end
  always @(posedge cfg_clk) begin
    if (!icap_cclk && !icap_write_n && icap.n_wr > 0 && icap.n_wr < 4 * NBIT) begin
      stop_run++;
      if (stop_run == 8) n_pause++;
    end else stop_run = 0;
  end
  logic int_q = 0;
  always @(posedge pci_clk) begin
    if (dut.u_fpc.gnt && $countones(dut.u_fpc.req) > 1) n_contest++;
    if (int_req && !int_q) n_irq++;
    int_q <= int_req;
    if (dut.err && !dut.dp_rst) n_err++;
  end
  always @(posedge rc_clk) if (rc_us_valid && !rc_us_ready) n_backpressure++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- driver-side register access ----------------
  task automatic wreg(input reg_addr_t a, input logic [31:0] d);
    @(negedge pci_clk); t_wr = 1; t_addr = a; t_wdata = d;
    @(negedge pci_clk); t_wr = 0;
  endtask
  task automatic rreg(input reg_addr_t a, output logic [31:0] d);
    @(negedge pci_clk); t_rd = 1; t_addr = a;
    @(negedge pci_clk); t_rd = 0;
    while (!t_rvalid) @(negedge pci_clk);
    d = t_rdata;
  endtask
  // wait for an interrupt carrying the given INT_STATUS bits, then clear them
  task automatic wait_irq(input logic [31:0] bits, input string what);
    logic [31:0] st;
    st = '0;
    while ((st & bits) != bits) begin
      while (!int_req) @(negedge pci_clk);
      rreg(REG_INT_STATUS, st);
      if ((st & bits) != bits) repeat (20) @(negedge pci_clk);
    end
    wreg(REG_INT_STATUS, bits);
    chk(1, what);
  endtask
  task automatic start_target(input int t, input int word, input int n);
    wreg(REG_BASE0 + reg_addr_t'(2 * t), 32'(word * 4));
    wreg(REG_LEN0 + reg_addr_t'(2 * t), 32'(n));
  endtask

  function automatic logic [31:0] bitv(int k);    return 32'hAA99_5566 ^ (k * 32'h0001_0203); endfunction
  function automatic logic [31:0] dsv(int k);     return 32'h0100_0000 + k * 5; endfunction

  initial begin
    repeat (400000) @(posedge pci_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    #1 pci_rst_n = 0;   // PCI bus reset at power-up
    for (int w = 0; w < MEMW; w++) core.mem[w] = 32'hDEAD_0000 + w;
    for (int k = 0; k < NBIT; k++) core.mem[BIT_W + k] = bitv(k);
    for (int k = 0; k < NSTR; k++) core.mem[DS_W + k] = dsv(k);
    repeat (5) @(negedge pci_clk);
    pci_rst_n = 1;
    repeat (10) @(negedge pci_clk);
    rreg(REG_ID, d);
    chk(d == PROTEUS_ID, "ID register");
    wreg(REG_INT_ENABLE, 32'h3F);

    // 1. partial reconfiguration, first third on a slow bus
    core.wait_pct = 85;
    start_target(TGT_SM_WRITE, BIT_W, NBIT);
    wreg(REG_CONTROL, 32'h8);
    wait (icap.n_wr >= 4 * NBIT / 3);
    core.wait_pct = 10;
    wait_irq(32'h8, "SelectMap write done interrupt");
    do rreg(REG_STATUS, d); while (d[ST_SM_BUSY]);
    repeat (20) @(negedge pci_clk);
    chk(icap.n_wr == 4 * NBIT, $sformatf("ICAP received %0d bytes", icap.n_wr));
    for (int k = 0; k < NBIT; k++)
      for (int b = 0; b < 4; b++)
        chk(icap.wr_bytes[4*k+b] == bitv(k)[31-8*b -: 8], $sformatf("bitstream byte %0d.%0d", k, b));

    // 1b. the same bitstream at full speed
    core.wait_pct = 0; core.disc_pct = 0;
    start_target(TGT_SM_WRITE, BIT_W, NBIT);
    wreg(REG_CONTROL, 32'h8);
    wait_irq(32'h8, "full-speed SelectMap write done interrupt");
    do rreg(REG_STATUS, d); while (d[ST_SM_BUSY]);
    repeat (20) @(negedge pci_clk);
    chk(icap.n_wr == 8 * NBIT, $sformatf("ICAP received %0d bytes in all", icap.n_wr));
    for (int k = 0; k < NBIT; k++)
      chk({icap.wr_bytes[4*(NBIT+k)], icap.wr_bytes[4*(NBIT+k)+1], icap.wr_bytes[4*(NBIT+k)+2],
           icap.wr_bytes[4*(NBIT+k)+3]} == bitv(k), $sformatf("full-speed bitstream item %0d", k));
    $display("full-speed reconfiguration: %0d bytes in %0d configuration clocks, %0d clock stops",
             4 * NBIT - 1, fast_cyc, fast_stops);
    chk(fast_stops == 0, "no clock stop at full PCI speed");
    chk(fast_cyc <= 2 * (4 * NBIT - 1) + 2, $sformatf("SelectMap at full rate: %0d cycles", fast_cyc));
    core.wait_pct = 10; core.disc_pct = 3;

    // 2. readback
    wreg(REG_MODE, 32'h2);
    start_target(TGT_SM_READ, RB_W, NRB);
    wreg(REG_CONTROL, 32'h4);
    wait_irq(32'h4, "readback done interrupt");
    for (int k = 0; k < NRB; k++)
      chk(core.mem[RB_W + k] == {icap.rb_byte(4*k), icap.rb_byte(4*k+1), icap.rb_byte(4*k+2), icap.rb_byte(4*k+3)},
          $sformatf("readback item %0d", k));
    chk(core.mem[RB_W + NRB] == 32'hDEAD_0000 + RB_W + NRB, "readback stops at its length");
    wreg(REG_MODE, 32'h0);

    // 3. algorithm registers
    wreg(REG_RC_CTRL0 + 8'd3, 32'h1234_0000);
    repeat (4) @(negedge pci_clk);
    rreg(REG_RC_STAT0 + 8'd3, d);
    chk(rc_ctrl[3] == 32'h1234_0000 && d == 32'h1234_0004, "algorithm register round trip");

    // 4. processing: both streams at once
    alg_target = NSTR;
    core.wr_wait_pct = 90;   // slow writes into PC memory: the upstream buffer fills
    start_target(TGT_DOWNSTREAM, DS_W, NSTR);
    start_target(TGT_UPSTREAM, US_W, NSTR);
    wreg(REG_CONTROL, 32'h3);
    wait (core.items > 4 * NSTR / 3);
    core.wr_wait_pct = 10;
    wait_irq(32'h23, "stream done and algorithm interrupts");
    for (int k = 0; k < NSTR; k++)
      chk(core.mem[US_W + k] == 3 * dsv(k) + 1, $sformatf("result %0d", k));
    rreg(REG_STATUS, d);
    chk(d[7:0] == 8'hF0, $sformatf("all four targets done, none active: %h", d));
    alg_target = 0;

    // 5. aborted burst
    abort_next = 1;
    start_target(TGT_DOWNSTREAM, DS_W, 40);
    wreg(REG_CONTROL, 32'h2);
    wait_irq(32'h10, "error interrupt");
    abort_next = 0;
    rreg(REG_STATUS, d);
    chk(d[ST_ERR_LSB + 1] && !d[ST_ACTIVE_LSB + 1], "error flag on downstream, target stopped");
    wreg(REG_STATUS, 32'hFF0);
    rreg(REG_STATUS, d);
    chk(d[11:4] == 0, "flags cleared");

    // 6. soft reset and algorithm reset
    wreg(REG_CONTROL, 32'h100);
    @(negedge pci_clk);
    if (dut.dp_rst && rc_rst) n_soft++;
    repeat (20) @(negedge pci_clk);
    wreg(REG_MODE, 32'h1);
    repeat (10) @(negedge pci_clk);
    if (rc_rst) n_rchold++;
    wreg(REG_MODE, 32'h0);
    repeat (10) @(negedge pci_clk);
    chk(!rc_rst, "algorithm out of reset");
    for (int k = 0; k < 100; k++) core.mem[DS_W + k] = dsv(k + 77);
    alg_target = 100;
    start_target(TGT_DOWNSTREAM, DS_W, 100);
    start_target(TGT_UPSTREAM, LAST_W, 100);
    wreg(REG_CONTROL, 32'h3);
    wait_irq(32'h23, "stream after reset");
    for (int k = 0; k < 100; k++)
      chk(core.mem[LAST_W + k] == 3 * dsv(k + 77) + 1, $sformatf("result after reset %0d", k));

    $display("mechanisms: clock_stop=%0d interrupted_bursts=%0d contested_arbitration=%0d icap_busy=%0d",
             n_pause, core.disconnects, n_contest, icap.n_busy);
    $display("            upstream_backpressure=%0d interrupts=%0d pci_aborts=%0d soft_reset=%0d rc_hold=%0d",
             n_backpressure, n_irq, n_err, n_soft, n_rchold);
    chk(n_pause > 0, "configuration clock stopped");
    chk(core.disconnects > 0, "interrupted bursts resumed");
    chk(n_contest > 0, "contested arbitration");
    chk(icap.n_busy > 0, "ICAP busy during readback");
    chk(n_backpressure > 0, "upstream back-pressure");
    chk(n_irq >= 5, "interrupts");
    chk(n_err == 1, "one PCI abort");
    chk(n_soft == 1 && n_rchold == 1, "soft reset and algorithm reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
