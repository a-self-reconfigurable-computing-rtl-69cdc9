// driver_comm: Device Driver Communication, the fixed part registers through
// which the device driver sets up and starts transfers.
//
// Registers (dword addresses, see proteus_pkg):
//   CONTROL  0x00 W   [3:0] start target t, [7:4] stop target t,
//                     [8] soft reset of the fixed part data path; each bit
//                     gives a one-cycle pulse and reads back as zero
//   STATUS   0x01 R   flags from Flags/Status/Error; writing 1s to bits [11:4]
//                     clears those sticky bits (passed on as st_clr)
//   MODE     0x02 RW  [0] hold the reconfigurable part in reset,
//                     [1] SelectMap port in readback direction
//   ID       0x03 R   fixed identification word
//   BASE t   0x04+2t  RW  PC byte address of target t's memory area
//   LEN t    0x05+2t  RW  length of the transfer in 32-bit items (24 bits)
//   REMAIN t 0x0C+t   R   items target t still has to move
// Writes take effect on the clock edge of wr; rdata is combinational in
// addr. The register set is this implementation's; the design only names
// the block and says the fixed part handles all communication with the
// driver.
module driver_comm
  import proteus_pkg::*;
#(
  parameter int unsigned CNT_W = 24
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        wr,
  input  reg_addr_t   addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,

  output logic [NUM_TARGETS-1:0]            start,
  output logic [NUM_TARGETS-1:0]            stop,
  output logic                              soft_rst,
  output logic                              rc_hold,
  output logic                              sm_read_mode,
  output logic [NUM_TARGETS-1:0][31:0]      base,
  output logic [NUM_TARGETS-1:0][CNT_W-1:0] len,
  output logic [11:4]                       st_clr,

  input  logic [31:0]                       status,
  input  logic [NUM_TARGETS-1:0][CNT_W-1:0] remaining
);

  always_ff @(posedge clk) begin
    if (rst) begin
      start        <= '0;
      stop         <= '0;
      soft_rst     <= 1'b0;
      rc_hold      <= 1'b0;
      sm_read_mode <= 1'b0;
      base         <= '0;
      len          <= '0;
      st_clr       <= '0;
    end else begin
      start    <= '0;
      stop     <= '0;
      soft_rst <= 1'b0;
      st_clr   <= '0;
      if (wr) begin
        if (addr == REG_CONTROL) begin
          start    <= wdata[CTL_START_LSB +: NUM_TARGETS];
          stop     <= wdata[CTL_STOP_LSB +: NUM_TARGETS];
          soft_rst <= wdata[CTL_SOFT_RST];
        end
        if (addr == REG_STATUS) st_clr <= wdata[11:4];
        if (addr == REG_MODE) begin
          rc_hold      <= wdata[MODE_RC_RST];
          sm_read_mode <= wdata[MODE_SM_READ];
        end
        for (int t = 0; t < NUM_TARGETS; t++) begin
          if (addr == REG_BASE0 + reg_addr_t'(2*t)) base[t] <= wdata;
          if (addr == REG_LEN0  + reg_addr_t'(2*t)) len[t]  <= wdata[CNT_W-1:0];
        end
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (addr == REG_STATUS) rdata = status;
    if (addr == REG_MODE)   rdata = {30'd0, sm_read_mode, rc_hold};
    if (addr == REG_ID)     rdata = PROTEUS_ID;
    for (int t = 0; t < NUM_TARGETS; t++) begin
      if (addr == REG_BASE0 + reg_addr_t'(2*t))   rdata = base[t];
      if (addr == REG_LEN0  + reg_addr_t'(2*t))   rdata = 32'(len[t]);
      if (addr == REG_REMAIN0 + reg_addr_t'(t))   rdata = 32'(remaining[t]);
    end
  end

endmodule
