// tb_busmaster_initiator: self-checking test of the Busmaster Initiator
// with the PCI core model. Directed bursts: a 16-item read from PC memory
// for Downstream (every push must carry the memory word at the granted
// address, in order, and each must be reported as a beat), a 16-item write
// to PC memory from Upstream (memory must hold the source items), a burst
// the core cuts short (beats must equal the items moved and the initiator
// must be idle again), and an aborted burst (err with the target index).
// m_req must carry the granted address, length and direction, and busy
// must cover the whole burst.
module tb_busmaster_initiator;
  localparam int N = 4, LW = 7, MEMW = 1024;
  logic clk = 0, rst = 1;
  logic gnt = 0;
  logic [1:0] gnt_idx = '0, cur_idx, beat_idx, err_idx;
  logic [LW-1:0] gnt_len = '0, m_len;
  logic busy, beat, err;
  logic [N-1:0][31:0] addr = '0, src_data;
  logic [N-1:0] src_valid, pop, push;
  logic [31:0] push_data;
  logic m_req, m_write, m_ack, m_rvalid, m_wvalid, m_wready, m_done, m_err;
  logic [31:0] m_addr, m_rdata, m_wdata;
  logic abort_next = 0;
  int checks = 0, failures = 0, beats = 0, pushes = 0, srcn = 0;

  always #15 clk = ~clk;

  busmaster_initiator #(.N(N), .LEN_W(LW)) dut (.*);
  pci_core_model #(.MEM_WORDS(MEMW), .LEN_W(LW), .WAIT_PCT(25), .DISCONNECT_PCT(0)) core (
    .clk, .m_req, .m_write, .m_addr, .m_len, .m_ack, .m_rdata, .m_rvalid,
    .m_wdata, .m_wvalid, .m_wready, .m_done, .m_err, .abort_next
  );

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] srcv(int k); return 32'h5000_0000 + k * 3; endfunction

  // Upstream source: an endless sequence, always valid
  always_comb begin
    src_data  = '0;
    src_valid = '0;
    src_data[0]  = srcv(srcn);
    src_valid[0] = 1'b1;
  end

  always @(posedge clk) begin
    if (pop[0]) srcn <= srcn + 1;
    if (beat) beats++;
    if (push[1]) begin
      chk(push_data == core.mem[(32'h100 >> 2) + pushes], $sformatf("push %0d", pushes));
      pushes++;
    end
    chk((push & ~4'b0010) == '0 && (pop & ~4'b0001) == '0, "only the granted target is served");
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic grant(input int t, input int l);
    @(negedge clk);
    gnt = 1; gnt_idx = 2'(t); gnt_len = LW'(l);
    @(negedge clk);
    gnt = 0;
    chk(busy && cur_idx == 2'(t), "busy after grant");
    chk(m_req && m_addr == addr[t] && m_len == LW'(l) && m_write == (t == 0), "request fields");
    wait (!busy);
  endtask

  initial begin
    for (int w = 0; w < MEMW; w++) core.mem[w] = $urandom;
    addr[1] = 32'h100; addr[0] = 32'h800;
    repeat (3) @(negedge clk);
    rst = 0;
    // read burst
    grant(1, 16);
    chk(pushes == 16 && beats == 16, $sformatf("read burst pushes %0d beats %0d", pushes, beats));
    // write burst
    grant(0, 16);
    @(negedge clk);
    chk(srcn == 16 && beats == 32, "write burst pops");
    for (int k = 0; k < 16; k++) chk(core.mem[(32'h800 >> 2) + k] == srcv(k), $sformatf("mem %0d", k));
    // aborted burst
    abort_next = 1;
    fork
      grant(1, 8);
      begin wait (err); chk(err_idx == 2'd1, "error index"); end
    join
    abort_next = 0;
    chk(pushes == 16 && beats == 32, "abort moves nothing");
    // short grant after abort: engine still works
    grant(0, 3);
    @(negedge clk);
    chk(srcn == 19 && beats == 35, "three-item write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
