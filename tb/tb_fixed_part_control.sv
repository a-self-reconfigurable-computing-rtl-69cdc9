// tb_fixed_part_control: self-checking test of the Fixed Part Control
// Section with the PCI core model and simple buffer models.
// All four targets run at once: Upstream (500 items) and Select Map Read
// (300) send generated items into PC memory, Downstream (500) and Select
// Map Write (700) fetch PC memory into buffers that drain at random rates.
// The core model inserts wait states and cuts bursts short. Checks: every
// fetched item equals PC memory at the right address and arrives in order,
// every sent item lands at base + 4k, done pulses once per target, the
// buffers never overflow or underflow, bursts were interrupted and resumed
// and the arbiter chose between several waiting targets. Then a burst is
// aborted: the error must name the target and the target must stop.
module tb_fixed_part_control;
  localparam int N = 4, D = 256, AW = 8, MB = 64, LW = 7, CW = 24, MEMW = 4096;
  logic clk = 0, rst = 1;
  logic [N-1:0] start = '0, stop = '0, active, done, pop, push;
  logic [N-1:0][31:0] base = '0, src_data;
  logic [N-1:0][CW-1:0] len = '0, remaining;
  logic err;
  logic [1:0] err_idx;
  logic [N-1:0][AW:0] room;
  logic [N-1:0] src_valid;
  logic [31:0] push_data;
  logic m_req, m_write, m_ack, m_rvalid, m_wvalid, m_wready, m_done, m_err;
  logic [31:0] m_addr, m_rdata, m_wdata;
  logic [LW-1:0] m_len;
  logic abort_next = 0;
  int checks = 0, failures = 0, contested = 0, ndone [N], nerr = 0, overflow = 0;

  always #15 clk = ~clk;

  fixed_part_control #(.DEPTH(D), .MAX_BURST(MB), .THRESH(32), .CNT_W(CW)) dut (.*);
  pci_core_model #(.MEM_WORDS(MEMW), .LEN_W(LW), .WAIT_PCT(20), .DISCONNECT_PCT(4)) core (
    .clk, .m_req, .m_write, .m_addr, .m_len, .m_ack, .m_rdata, .m_rvalid,
    .m_wdata, .m_wvalid, .m_wready, .m_done, .m_err, .abort_next
  );

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] pcv(int w); return 32'hA5A5_0000 ^ (w * 32'h0101_0013); endfunction
  function automatic logic [31:0] genv(int t, int k); return {8'(t), 24'(k * 7 + 1)}; endfunction

  // buffer models: ring buffers updated on the rising edge like a real buffer
  logic [31:0] ring [N][D];
  int wcnt [N], rcnt [N], total [N];
  logic [N-1:0] active_run = '0;

  always_comb begin
    for (int t = 0; t < N; t++) begin
      if (proteus_pkg::TGT_TO_PC[t]) begin
        room[t]      = (AW+1)'(wcnt[t] - rcnt[t]);
        src_valid[t] = (wcnt[t] != rcnt[t]);
        src_data[t]  = ring[t][rcnt[t] % D];
      end else begin
        room[t]      = (AW+1)'(D - (wcnt[t] - rcnt[t]));
        src_valid[t] = 1'b0;
        src_data[t]  = '0;
      end
    end
  end

  always @(posedge clk) begin
    if (!rst) for (int t = 0; t < N; t++) begin
      if (proteus_pkg::TGT_TO_PC[t]) begin
        if (pop[t]) begin
          if (wcnt[t] == rcnt[t]) overflow++;
          rcnt[t] <= rcnt[t] + 1;
        end
        // producer: the algorithm or the readback engine
        if (active_run[t] && wcnt[t] < total[t] && (wcnt[t] - rcnt[t]) < D && $urandom_range(0, 2) != 0) begin
          ring[t][wcnt[t] % D] <= genv(t, wcnt[t]);
          wcnt[t] <= wcnt[t] + 1;
        end
      end else begin
        if (push[t]) begin
          if (wcnt[t] - rcnt[t] >= D) overflow++;
          ring[t][wcnt[t] % D] <= push_data;
          wcnt[t] <= wcnt[t] + 1;
        end
        // consumer
        if (wcnt[t] != rcnt[t] && $urandom_range(0, 2) != 0) begin
          chk(ring[t][rcnt[t] % D] == pcv(int'(base[t] >> 2) + rcnt[t]),
              $sformatf("target %0d item %0d", t, rcnt[t]));
          rcnt[t] <= rcnt[t] + 1;
        end
      end
      if (done[t]) ndone[t]++;
    end
    if (dut.gnt && $countones(dut.req) > 1) contested++;
    if (err) nerr++;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < MEMW; w++) core.mem[w] = pcv(w);
    for (int t = 0; t < N; t++) begin wcnt[t] = 0; rcnt[t] = 0; ndone[t] = 0; end
    total[0] = 500; total[1] = 500; total[2] = 300; total[3] = 700;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int t = 0; t < N; t++) begin
      base[t] = 32'(t * 4096);
      len[t]  = CW'(total[t]);
    end
    start = '1; active_run = '1;
    @(negedge clk) start = '0;
    wait (ndone[0] && ndone[1] && ndone[2] && ndone[3]);
    repeat (200) @(negedge clk);
    for (int t = 0; t < N; t++) begin
      chk(ndone[t] == 1 && remaining[t] == 0 && !active[t], $sformatf("target %0d done once", t));
      if (!proteus_pkg::TGT_TO_PC[t]) chk(rcnt[t] == total[t], $sformatf("target %0d consumed %0d", t, rcnt[t]));
      else for (int k = 0; k < total[t]; k++)
        chk(core.mem[t * 1024 + k] == genv(t, k), $sformatf("target %0d mem item %0d", t, k));
    end
    chk(overflow == 0, "no buffer overflow/underflow");
    chk(core.disconnects > 0, "bursts interrupted and resumed");
    chk(contested > 0, "arbitration between waiting targets");
    // aborted burst
    abort_next = 1;
    len[1] = 24'd100; start = 4'b0010;
    @(negedge clk) start = '0;
    wait (err);
    chk(err_idx == 2'd1, "error names the target");
    @(negedge clk);
    abort_next = 0;
    repeat (5) @(negedge clk);
    chk(remaining[1] == 0 && !active[1], "aborted target stopped");
    $display("disconnects=%0d contested=%0d bursts=%0d", core.disconnects, contested, core.bursts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
