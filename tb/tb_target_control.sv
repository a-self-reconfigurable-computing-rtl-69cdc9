// tb_target_control: self-checking test of a target's request logic.
// For random remaining counts, buffer room and service state, the request
// and its length are compared with the rule worked out here: length =
// min(remaining, room, MAX_BURST); request when not in service, length > 0
// and (length >= THRESH or length == remaining). Directed cases cover an
// empty buffer, a short tail and a full burst.
module tb_target_control;
  localparam int CW = 24, RW = 9, LW = 7, MB = 64, TH = 32;
  logic [CW-1:0] remaining = '0;
  logic [RW-1:0] room = '0;
  logic in_service = 0, req;
  logic [LW-1:0] req_len;
  int checks = 0, failures = 0;

  target_control #(.CNT_W(CW), .ROOM_W(RW), .LEN_W(LW), .MAX_BURST(MB), .THRESH(TH)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic try(input int rem, input int rm, input bit svc);
    int l;
    bit r;
    remaining = CW'(rem); room = RW'(rm); in_service = svc;
    #1;
    l = rem; if (rm < l) l = rm; if (MB < l) l = MB;
    r = !svc && l > 0 && (l >= TH || l == rem);
    chk(req == r, $sformatf("req rem=%0d room=%0d svc=%0d", rem, rm, svc));
    if (r) chk(int'(req_len) == l, $sformatf("len rem=%0d room=%0d got %0d", rem, rm, req_len));
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    try(1000, 0, 0);     // nothing in / no room
    try(10, 256, 0);     // short tail goes out at once
    try(1000, 256, 0);   // full burst
    try(1000, 20, 0);    // too little room: wait
    try(1000, 40, 0);    // enough room: partial burst
    try(1000, 256, 1);   // being served
    try(0, 256, 0);      // idle target
    for (int k = 0; k < 3000; k++)
      try($urandom_range(0, 3) == 0 ? $urandom_range(0, 100) : $urandom_range(0, 100000),
          $urandom_range(0, 257), $urandom_range(0, 4) == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
