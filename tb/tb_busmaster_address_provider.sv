// tb_busmaster_address_provider: self-checking test of the address
// bookkeeping. Starts all four targets with random bases and lengths, then
// applies random beats for random targets (as interrupted bursts would) and
// checks after every cycle that each target's address equals base + 4 *
// items moved, that remaining counts down to zero and stays there, that done
// pulses exactly once per target, and that stop abandons a transfer.
module tb_busmaster_address_provider;
  localparam int N = 4, CW = 24;
  logic clk = 0, rst = 1;
  logic [N-1:0] start = '0, stop = '0, done;
  logic [N-1:0][31:0] base = '0, addr;
  logic [N-1:0][CW-1:0] len = '0, remaining;
  logic beat = 0;
  logic [1:0] beat_idx = '0;
  int checks = 0, failures = 0;
  int moved [N], ndone [N];

  always #5 clk = ~clk;
  busmaster_address_provider #(.N(N), .CNT_W(CW)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < N; t++) begin
      base[t] = {$urandom} & 32'hFFFF_FFFC;
      len[t]  = CW'($urandom_range(50, 300));
      moved[t] = 0; ndone[t] = 0;
    end
    start = '1;
    @(negedge clk); start = '0;
    for (int t = 0; t < N; t++) chk(addr[t] == base[t] && remaining[t] == len[t], "load");
    for (int k = 0; k < 2000; k++) begin
      int t;
      t = $urandom_range(0, N - 1);
      beat = ($urandom_range(0, 3) != 0);
      beat_idx = 2'(t);
      @(negedge clk);
      if (beat && moved[t] < int'(len[t])) moved[t]++;
      for (int u = 0; u < N; u++) begin
        chk(addr[u] == base[u] + 32'(4 * moved[u]), $sformatf("addr %0d", u));
        chk(remaining[u] == len[u] - CW'(moved[u]), $sformatf("remaining %0d", u));
        if (done[u]) ndone[u]++;
      end
    end
    beat = 0;
    for (int t = 0; t < N; t++) chk(ndone[t] == 1 && remaining[t] == 0, $sformatf("done once %0d", t));
    // stop abandons a running transfer
    len[1] = 24'd10; start = 4'b0010;
    @(negedge clk); start = '0;
    chk(remaining[1] == 10, "restart");
    stop = 4'b0010;
    @(negedge clk); stop = '0;
    chk(remaining[1] == 0 && done == '0, "stop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
