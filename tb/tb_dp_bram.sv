// tb_dp_bram: self-checking test of the dual-port, dual-clock block RAM.
// Writes random words through port A on one clock while port B, on an
// unrelated clock, reads addresses that were written earlier; every read
// must return, one port-B clock later, the word a reference array holds.
// Also checks that q holds its value while re_b is low.
module tb_dp_bram;
  localparam int W = 32, D = 256, AW = 8;
  logic clk_a = 0, clk_b = 0;
  logic we_a = 0, re_b = 0;
  logic [AW-1:0] waddr_a = '0, raddr_b = '0;
  logic [W-1:0] wdata_a = '0, q_b;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  always #5 clk_a = ~clk_a;
  always #7 clk_b = ~clk_b;

  dp_bram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk_a);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every location from port A
    for (int a = 0; a < D; a++) begin
      @(negedge clk_a);
      we_a = 1; waddr_a = AW'(a); wdata_a = $urandom; ref_mem[a] = wdata_a;
    end
    @(negedge clk_a); we_a = 0;
    repeat (3) @(posedge clk_b);
    // random reads on port B, random rewrites on port A to other locations
    fork
      begin
        for (int k = 0; k < 400; k++) begin
          logic [AW-1:0] a;
          @(negedge clk_b);
          a = AW'($urandom);
          re_b = 1; raddr_b = a;
          @(negedge clk_b);
          re_b = 0;
          checks++;
          if (q_b !== ref_mem[a]) begin
            failures++;
            $display("read %0d: got %h want %h", a, q_b, ref_mem[a]);
          end
          // q must hold while re_b is low
          @(negedge clk_b);
          checks++;
          if (q_b !== ref_mem[a]) failures++;
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
