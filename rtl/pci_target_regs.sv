// pci_target_regs: the PCI-Target Register Space, the fixed part's slave
// side of the PCI core.
//
// The PC reads and writes 32-bit registers in one memory BAR. This block
// decodes the dword address into three regions and forwards the access:
//   0x00-0x1F  fixed part registers  (Device Driver Communication)
//   0x20-0x2F  common part registers (interrupt control)
//   0x40-0x5F  reconfig part registers
// Writes are passed on in the cycle of t_wr as a one-cycle strobe for the
// addressed region together with the address and data. Reads are answered
// one cycle after t_rd: t_rvalid pulses with the addressed region's data on
// t_rdata. Unmapped addresses read as zero and ignore writes.
//
// The block is named in the design; the map and the one-cycle read latency
// are this implementation's choices.
module pci_target_regs
  import proteus_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // PCI core target side
  input  logic        t_wr,
  input  logic        t_rd,
  input  reg_addr_t   t_addr,
  input  logic [31:0] t_wdata,
  output logic [31:0] t_rdata,
  output logic        t_rvalid,
  // register bus towards the sections
  output reg_addr_t   r_addr,
  output logic [31:0] r_wdata,
  output logic        fx_wr,
  output logic        cm_wr,
  output logic        rc_wr,
  input  logic [31:0] fx_rdata,   // combinational read data for r_addr
  input  logic [31:0] cm_rdata,
  input  logic [31:0] rc_rdata
);

  typedef enum logic [1:0] {RG_NONE, RG_FIXED, RG_COMMON, RG_RECONF} region_e;
  region_e region;

  always_comb begin
    if (t_addr < 8'h20)      region = RG_FIXED;
    else if (t_addr < 8'h30) region = RG_COMMON;
    else if (t_addr >= 8'h40 && t_addr < 8'h60) region = RG_RECONF;
    else                     region = RG_NONE;
  end

  assign r_addr  = t_addr;
  assign r_wdata = t_wdata;
  assign fx_wr   = t_wr && region == RG_FIXED;
  assign cm_wr   = t_wr && region == RG_COMMON;
  assign rc_wr   = t_wr && region == RG_RECONF;

  always_ff @(posedge clk) begin
    if (rst) begin
      t_rdata  <= '0;
      t_rvalid <= 1'b0;
    end else begin
      t_rvalid <= t_rd;
      if (t_rd) begin
        unique case (region)
          RG_FIXED:  t_rdata <= fx_rdata;
          RG_COMMON: t_rdata <= cm_rdata;
          RG_RECONF: t_rdata <= rc_rdata;
          default:   t_rdata <= '0;
        endcase
      end
    end
  end

  a_one_access: assert property (@(posedge clk) disable iff (rst) !(t_wr && t_rd));

endmodule
