// reconfig_part_control: the Reconfig Part Control Section, static
// registers shared between the PC and the reconfigurable part.
//
// RC_REGS control registers (0x40..) are written and read back by the PC and
// drive rc_ctrl, a set of static values the algorithm reads for its setup.
// RC_REGS status registers (0x50..) are driven by the algorithm on rc_status
// and read by the PC. Each register has its own address, so the algorithm
// gets individually addressable registers without decoding anything itself.
// rc_ctrl_wr[i] pulses (PCI clock) when the PC writes control register i.
//
// Clocking: rc_ctrl is driven from the PCI clock domain and rc_status is
// captured in it through two flip-flops; both are meant as static values,
// changed while the other side does not use them. The interrupt request
// rc_irq from the algorithm is a level in its own clock; a rising edge,
// after a two-flop synchroniser, gives the one-cycle pulse irq on the PCI
// clock.
//
// Static registers and the algorithm's interrupt follow the design; the
// count, addresses and synchronisation are this implementation's choices.
module reconfig_part_control
  import proteus_pkg::*;
#(
  parameter int unsigned NREG = RC_REGS
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   wr,
  input  reg_addr_t              addr,
  input  logic [31:0]            wdata,
  output logic [31:0]            rdata,
  output logic [NREG-1:0][31:0]  rc_ctrl,
  output logic [NREG-1:0]        rc_ctrl_wr,
  input  logic [NREG-1:0][31:0]  rc_status,
  input  logic                   rc_irq,
  output logic                   irq
);

  logic [NREG-1:0][31:0] stat_s1, stat_s2;
  logic [2:0]            irq_s;

  always_ff @(posedge clk) begin
    if (rst) begin
      rc_ctrl    <= '0;
      rc_ctrl_wr <= '0;
      stat_s1    <= '0;
      stat_s2    <= '0;
      irq_s      <= '0;
    end else begin
      rc_ctrl_wr <= '0;
      for (int i = 0; i < NREG; i++) begin
        if (wr && addr == REG_RC_CTRL0 + reg_addr_t'(i)) begin
          rc_ctrl[i]    <= wdata;
          rc_ctrl_wr[i] <= 1'b1;
        end
      end
      stat_s1 <= rc_status;
      stat_s2 <= stat_s1;
      irq_s   <= {irq_s[1:0], rc_irq};
    end
  end

  assign irq = irq_s[1] && !irq_s[2];

  always_comb begin
    rdata = '0;
    for (int i = 0; i < NREG; i++) begin
      if (addr == REG_RC_CTRL0 + reg_addr_t'(i)) rdata = rc_ctrl[i];
      if (addr == REG_RC_STAT0 + reg_addr_t'(i)) rdata = stat_s2[i];
    end
  end

endmodule
