// proteus_pkg: types, sizes and the register map shared by the fixed part.
//
// The fixed part bridges the PCI bus (32-bit, 33 MHz) to two data sections:
// the stream ports of the reconfigurable part and the SelectMap port of the
// ICAP. Four stream targets share the single bus-master PCI interface; they
// are numbered here in the order the design names them.
//
// Taken from the design description: 32-bit items, 256x32 buffers, the four
// targets. Own choices: target numbering, burst size, register addresses and
// bit positions, the number of reconfig-part registers.
package proteus_pkg;


  // Default buffer depth in 32-bit items (256x32 per buffer).
  localparam int unsigned BUF_DEPTH = 256;

  // Largest bus-master burst requested at once, in 32-bit items.
  localparam int unsigned MAX_BURST = 64;

  // Stream targets of the Transfer Arbitration block.
  localparam int unsigned NUM_TARGETS = 4;
  typedef enum logic [1:0] {
    TGT_UPSTREAM   = 2'd0,  // reconfigurable part -> PC memory (bus-master write)
    TGT_DOWNSTREAM = 2'd1,  // PC memory -> reconfigurable part (bus-master read)
    TGT_SM_READ    = 2'd2,  // ICAP readback -> PC memory (bus-master write)
    TGT_SM_WRITE   = 2'd3   // PC memory -> ICAP (bus-master read)
  } target_e;

  // Direction of a target as seen on PCI: 1 = the fixed part writes PC memory.
  localparam logic [NUM_TARGETS-1:0] TGT_TO_PC = 4'b0101;

  // Number of 32-bit static registers in each direction for the reconfigurable part.
  localparam int unsigned RC_REGS = 16;

  // PCI target register space: dword addresses inside the memory BAR.
  localparam int unsigned REG_AW = 8;
  typedef logic [REG_AW-1:0] reg_addr_t;

  // Fixed part region 0x00-0x1F
  localparam reg_addr_t REG_CONTROL = 8'h00;  // W: commands (see below)
  localparam reg_addr_t REG_STATUS  = 8'h01;  // R: flags, W1C: done/error bits
  localparam reg_addr_t REG_MODE    = 8'h02;  // RW: level settings
  localparam reg_addr_t REG_ID      = 8'h03;  // R: identification
  localparam reg_addr_t REG_BASE0   = 8'h04;  // RW: base byte address, target t at 0x04+2t
  localparam reg_addr_t REG_LEN0    = 8'h05;  // RW: length in 32-bit items, target t at 0x05+2t
  localparam reg_addr_t REG_REMAIN0 = 8'h0C;  // R: items still to move, target t at 0x0C+t
  // Common part region 0x20-0x2F
  localparam reg_addr_t REG_INT_STATUS = 8'h20;  // R, W1C
  localparam reg_addr_t REG_INT_ENABLE = 8'h21;  // RW
  // Reconfig part region 0x40-0x5F
  localparam reg_addr_t REG_RC_CTRL0   = 8'h40;  // RW: 0x40..0x4F, driven to the reconfigurable part
  localparam reg_addr_t REG_RC_STAT0   = 8'h50;  // R : 0x50..0x5F, driven by the reconfigurable part

  localparam logic [31:0] PROTEUS_ID = 32'h5052_0001;

  // REG_CONTROL bits (write 1 to act; self clearing)
  localparam int unsigned CTL_START_LSB = 0;   // [3:0]  start target t
  localparam int unsigned CTL_STOP_LSB  = 4;   // [7:4]  abandon target t
  localparam int unsigned CTL_SOFT_RST  = 8;   // [8]    reset the fixed part data path
  // REG_MODE bits (levels)
  localparam int unsigned MODE_RC_RST   = 0;   // [0]    hold the reconfigurable part in reset
  localparam int unsigned MODE_SM_READ  = 1;   // [1]    SelectMap port in readback direction
  // REG_STATUS bits
  localparam int unsigned ST_ACTIVE_LSB = 0;   // [3:0]  target t is moving data
  localparam int unsigned ST_DONE_LSB   = 4;   // [7:4]  target t finished (sticky, W1C)
  localparam int unsigned ST_ERR_LSB    = 8;   // [11:8] target t aborted by a PCI error (sticky, W1C)
  localparam int unsigned ST_SM_BUSY    = 12;  // [12]   SelectMap write buffer not yet drained

  // Interrupt sources (REG_INT_STATUS / REG_INT_ENABLE bit positions)
  localparam int unsigned NUM_IRQ = 6;
  localparam int unsigned IRQ_DONE_LSB = 0;  // [3:0] target t done
  localparam int unsigned IRQ_ERROR    = 4;  // [4]   any PCI error
  localparam int unsigned IRQ_RC       = 5;  // [5]   raised by the reconfigurable part

endpackage
