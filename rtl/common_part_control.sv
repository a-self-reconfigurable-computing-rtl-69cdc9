// common_part_control: the Common Part Control Section, which holds the
// interrupt generation of the fixed part.
//
// Interrupt sources are one-cycle pulses: transfer done for each of the four
// targets, a PCI error, and a request from the reconfigurable part (already
// brought into the PCI clock domain). Each sets its bit in INT_STATUS (0x20),
// which the driver clears by writing 1s to it; INT_ENABLE (0x21) masks
// them. int_req, the interrupt request to the PCI core (which drives INTA#),
// is a register that is high while any enabled status bit is set.
// Register reads are combinational in addr.
//
// Interrupt generation in this section follows the design; the sources,
// registers and write-1-to-clear are this implementation's choices.
module common_part_control
  import proteus_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               wr,
  input  reg_addr_t          addr,
  input  logic [31:0]        wdata,
  output logic [31:0]        rdata,
  input  logic [NUM_IRQ-1:0] irq_src,
  output logic               int_req
);

  logic [NUM_IRQ-1:0] int_status, int_enable;

  always_ff @(posedge clk) begin
    if (rst) begin
      int_status <= '0;
      int_enable <= '0;
      int_req    <= 1'b0;
    end else begin
      int_status <= (int_status & ~((wr && addr == REG_INT_STATUS) ? wdata[NUM_IRQ-1:0] : '0))
                    | irq_src;
      if (wr && addr == REG_INT_ENABLE) int_enable <= wdata[NUM_IRQ-1:0];
      int_req <= |(int_status & int_enable);
    end
  end

  always_comb begin
    rdata = '0;
    if (addr == REG_INT_STATUS) rdata = 32'(int_status);
    if (addr == REG_INT_ENABLE) rdata = 32'(int_enable);
  end

endmodule
