// dp_bram: simple dual-port block RAM with one clock per port.
//
// Port A writes, port B reads; each port runs on its own clock, which is what
// lets every buffer of the fixed part sit between the PCI clock and another
// clock domain. The read is synchronous with a read enable: q holds the word
// at raddr one clock after re_b, and keeps it while re_b is low, as a Virtex-II
// block RAM does. Default size 256 x 32 bit, the buffer size of the design.
// Writing and reading the same address in the same cycle returns the old word.
module dp_bram #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  // write port
  input  logic             clk_a,
  input  logic             we_a,
  input  logic [AW-1:0]    waddr_a,
  input  logic [WIDTH-1:0] wdata_a,
  // read port
  input  logic             clk_b,
  input  logic             re_b,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] q_b
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_a) begin
    if (we_a) mem[waddr_a] <= wdata_a;
  end

  always_ff @(posedge clk_b) begin
    if (re_b) q_b <= mem[raddr_b];
  end

endmodule
