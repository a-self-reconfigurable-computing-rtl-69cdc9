// tb_transfer_arbiter: self-checking test of the Transfer Arbitration.
// Random request patterns and a random busy; a grant must come exactly when
// the initiator is idle and someone requests, must go to a requester, must
// carry that requester's length, must follow round-robin order from the
// last grant, and no target may be granted twice in a row while another
// target is requesting. A lone requester must be granted back to back.
module tb_transfer_arbiter;
  localparam int N = 4, LW = 9;
  logic clk = 0, rst = 1;
  logic [N-1:0] req = '0;
  logic [N-1:0][LW-1:0] req_len = '0;
  logic busy = 0;
  logic gnt;
  logic [1:0] gnt_idx;
  logic [LW-1:0] gnt_len;
  int checks = 0, failures = 0, last = N - 1, lone = 0, contested = 0;
  int cnt [N];

  always #5 clk = ~clk;
  transfer_arbiter #(.N(N), .LEN_W(LW)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (cnt[i]) cnt[i] = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 5000; k++) begin
      int exp;
      @(negedge clk);
      req  = (k % 50 < 5) ? 4'b0100 : N'($urandom);
      busy = ($urandom_range(0, 3) == 0);
      for (int t = 0; t < N; t++) req_len[t] = LW'($urandom);
      #1;
      exp = -1;
      for (int s = 1; s <= N; s++) if (exp < 0 && req[(last + s) % N]) exp = (last + s) % N;
      chk(gnt == (!busy && req != 0), "grant when idle and requested");
      if (gnt) begin
        chk(int'(gnt_idx) == exp, $sformatf("round robin: got %0d want %0d", gnt_idx, exp));
        chk(gnt_len == req_len[gnt_idx], "length follows grant");
        if ($countones(req) > 1) begin
          chk(int'(gnt_idx) != last, "no target twice in a row while others wait");
          contested++;
        end else if (int'(gnt_idx) == last) lone++;
        cnt[gnt_idx]++;
        last = gnt_idx;
      end
    end
    for (int t = 0; t < N; t++) chk(cnt[t] > 500, $sformatf("target %0d served %0d", t, cnt[t]));
    chk(lone > 0 && contested > 0, "both lone and contested grants seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
