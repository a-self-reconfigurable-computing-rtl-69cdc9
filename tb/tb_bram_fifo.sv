// tb_bram_fifo: self-checking test of the dual-clock BRAM buffer.
// Phase 1 fills the buffer with the reader stopped and checks that exactly
// DEPTH+1 items fit (DEPTH in the RAM, one in its output register; wr_full,
// wr_level = DEPTH) and that the read side then sees
// rd_level = DEPTH+1. Phase 2 drains it, checking order. Phase 3 runs random
// writes and reads on unrelated clocks and checks every item against a
// reference queue, and that a burst of items streams out at one per read
// clock.
module tb_bram_fifo;
  localparam int D = 256, AW = 8;
  logic wr_clk = 0, rd_clk = 0, wr_rst = 1, rd_rst = 1;
  logic wr_en = 0, rd_en = 0;
  logic [31:0] wr_data = '0, rd_data;
  logic wr_full, rd_valid;
  logic [AW:0] wr_level, rd_level;
  logic [31:0] q[$];
  int checks = 0, failures = 0, nread = 0;

  always #5 wr_clk = ~wr_clk;
  always #6 rd_clk = ~rd_clk;

  bram_fifo #(.WIDTH(32), .DEPTH(D)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge wr_clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge wr_clk);
    @(negedge wr_clk); wr_rst = 0; @(negedge rd_clk); rd_rst = 0;
    // phase 1: fill
    for (int k = 0; k < D + 5; k++) begin
      @(negedge wr_clk);
      wr_en = 1; wr_data = $urandom;
      if (!wr_full) q.push_back(wr_data);
    end
    @(negedge wr_clk); wr_en = 0;
    chk(q.size() == D + 1, $sformatf("accepted %0d items", q.size()));
    chk(wr_full, "full after DEPTH writes");
    chk(wr_level == D, "wr_level == DEPTH");
    repeat (10) @(posedge rd_clk);
    chk(rd_level == D + 1, $sformatf("rd_level %0d", rd_level));
    // phase 2: drain at full speed, check one item per clock
    begin
      int start_t, cnt;
      cnt = 0;
      @(negedge rd_clk);
      start_t = 0;
      while (q.size() > 0) begin
        rd_en = 1;
        if (rd_valid) begin
          chk(rd_data == q.pop_front(), "drain order");
          cnt++;
        end
        start_t++;
        @(negedge rd_clk);
      end
      rd_en = 0;
      // one item per read clock once the first one is out
      chk(start_t <= D + 2, $sformatf("drain took %0d clocks", start_t));
    end
    repeat (10) @(posedge wr_clk);
    chk(wr_level == 0 && !wr_full, "empty after drain");
    // phase 3: random traffic
    fork
      begin
        for (int k = 0; k < 3000; k++) begin
          @(negedge wr_clk);
          wr_en = ($urandom_range(0, 2) != 0);
          wr_data = $urandom;
          if (wr_en && !wr_full) q.push_back(wr_data);
        end
        @(negedge wr_clk) wr_en = 0;
      end
      begin
        int idle;
        idle = 0;
        while (idle < 200) begin
          @(negedge rd_clk);
          rd_en = ($urandom_range(0, 3) != 0);
          if (rd_en && rd_valid) begin
            logic [31:0] e;
            e = q.size() > 0 ? q.pop_front() : 32'd0;
            chk(rd_data == e, $sformatf("random order got %h want %h", rd_data, e));
            nread++;
            idle = 0;
          end else idle++;
        end
      end
    join
    @(negedge wr_clk); wr_en = 0;
    chk(q.size() == 0, $sformatf("%0d items left", q.size()));
    chk(nread > 1000, "enough traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
