// proteus_fixed_part: the fixed (static) part of the self-reconfigurable
// PCI platform, i.e. everything on the FPGA between the PCI interface core,
// the ICAP and the bus macros to the reconfigurable part.
//
// The PC reaches the fixed part in two ways. As PCI target it reads and
// writes registers (pci_target_regs): transfer setup and status
// (driver_comm, status_flags), interrupts (common_part_control) and the
// static registers of the algorithm (reconfig_part_control). As bus master
// the fixed part itself moves data between PC memory and four stream
// targets (fixed_part_control):
//   Upstream        algorithm results -> PC memory  (stream_data_section)
//   Downstream      PC memory -> algorithm          (stream_data_section)
//   Select Map Read ICAP readback -> PC memory      (selectmap_data_section)
//   Select Map Write partial bitstream -> ICAP      (selectmap_data_section)
// Every data section holds dual-clock 256x32 BRAM buffers, so the PCI
// clock, the configuration clock and the algorithm's clock are independent.
// A partial bitstream thus streams from PC memory through the PCI core and
// a buffer to the ICAP without the PC's CPU, in bursts triggered by the
// buffer's fill level, and the configuration clock stops whenever the
// buffer runs dry.
//
// Ports: pci_* are the user side of the PCI core (target: t_*, initiator:
// m_*, interrupt request int_req); icap_* are the ICAP's SelectMap pins;
// rc_* cross the bus macros to the reconfigurable part. Clocks: pci_clk
// (33 MHz), cfg_clk (twice the SelectMap clock, 100 MHz for 50 MByte/s),
// rc_clk (chosen by the algorithm). pci_rst_n is the PCI bus reset.
//
// The partitioning, sections, buffers and targets follow the design; the
// register map, the PCI core user-side handshake and everything listed as
// an own choice in the sub-blocks are this implementation's.
module proteus_fixed_part
  import proteus_pkg::*;
#(
  parameter int unsigned DEPTH     = BUF_DEPTH,
  parameter int unsigned MAX_BRST  = MAX_BURST,
  parameter int unsigned THRESH    = 32,
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned LEN_W    = $clog2(MAX_BRST) + 1,
  localparam int unsigned CNT_W    = 24
) (
  input  logic        pci_clk,
  input  logic        pci_rst_n,
  input  logic        cfg_clk,
  input  logic        rc_clk,

  // PCI core, target side
  input  logic        t_wr,
  input  logic        t_rd,
  input  reg_addr_t   t_addr,
  input  logic [31:0] t_wdata,
  output logic [31:0] t_rdata,
  output logic        t_rvalid,
  output logic        int_req,
  // PCI core, initiator side
  output logic             m_req,
  output logic             m_write,
  output logic [31:0]      m_addr,
  output logic [LEN_W-1:0] m_len,
  input  logic             m_ack,
  input  logic [31:0]      m_rdata,
  input  logic             m_rvalid,
  output logic [31:0]      m_wdata,
  output logic             m_wvalid,
  input  logic             m_wready,
  input  logic             m_done,
  input  logic             m_err,

  // ICAP SelectMap port
  output logic        icap_cclk,
  output logic        icap_ce_n,
  output logic        icap_write_n,
  output logic [7:0]  icap_i,
  input  logic [7:0]  icap_o,
  input  logic        icap_busy,

  // bus macros to the reconfigurable part
  output logic                      rc_rst,
  output logic [31:0]               rc_ds_data,
  output logic                      rc_ds_valid,
  input  logic                      rc_ds_ready,
  input  logic [31:0]               rc_us_data,
  input  logic                      rc_us_valid,
  output logic                      rc_us_ready,
  output logic [RC_REGS-1:0][31:0]  rc_ctrl,
  output logic [RC_REGS-1:0]        rc_ctrl_wr,
  input  logic [RC_REGS-1:0][31:0]  rc_status,
  input  logic                      rc_irq
);

  localparam int unsigned N = NUM_TARGETS;

  // ---------------- resets ----------------
  logic reg_rst, dp_rst, st_rst, cfg_rst;
  logic soft_rst, rc_hold, sm_read_mode;

  reset_ctrl u_reset (
    .pci_clk, .pci_rst_n, .soft_rst, .rc_hold, .cfg_clk, .rc_clk,
    .reg_rst, .dp_rst, .st_rst, .cfg_rst, .rc_rst
  );

  // ---------------- register space ----------------
  reg_addr_t   r_addr;
  logic [31:0] r_wdata, fx_rdata, cm_rdata, rc_rdata;
  logic        fx_wr, cm_wr, rc_wr;

  pci_target_regs u_regs (
    .clk(pci_clk), .rst(reg_rst),
    .t_wr, .t_rd, .t_addr, .t_wdata, .t_rdata, .t_rvalid,
    .r_addr, .r_wdata, .fx_wr, .cm_wr, .rc_wr, .fx_rdata, .cm_rdata, .rc_rdata
  );

  logic [N-1:0]            start, stop, active, done;
  logic [N-1:0][31:0]      base;
  logic [N-1:0][CNT_W-1:0] len, remaining;
  logic [11:4]             st_clr;
  logic [31:0]             status;
  logic                    err;
  logic [1:0]              err_idx;
  logic                    sm_busy;

  driver_comm #(.CNT_W(CNT_W)) u_driver (
    .clk(pci_clk), .rst(reg_rst), .wr(fx_wr), .addr(r_addr), .wdata(r_wdata),
    .rdata(fx_rdata), .start, .stop, .soft_rst, .rc_hold, .sm_read_mode,
    .base, .len, .st_clr, .status, .remaining
  );

  status_flags u_flags (
    .clk(pci_clk), .rst(dp_rst), .active, .done, .err, .err_idx, .start,
    .sm_busy, .clr(st_clr), .status
  );

  logic rc_irq_pulse;

  reconfig_part_control #(.NREG(RC_REGS)) u_rcctl (
    .clk(pci_clk), .rst(reg_rst), .wr(rc_wr), .addr(r_addr), .wdata(r_wdata),
    .rdata(rc_rdata), .rc_ctrl, .rc_ctrl_wr, .rc_status, .rc_irq, .irq(rc_irq_pulse)
  );

  common_part_control u_common (
    .clk(pci_clk), .rst(reg_rst), .wr(cm_wr), .addr(r_addr), .wdata(r_wdata),
    .rdata(cm_rdata), .irq_src({rc_irq_pulse, err, done}), .int_req
  );

  // ---------------- data sections ----------------
  logic [AW:0]  ds_free, us_avail, wr_free, rb_avail;
  logic [31:0]  us_pop_data, rb_pop_data, push_data;
  logic         us_pop_valid, rb_pop_valid;
  logic [N-1:0] pop, push;

  stream_data_section #(.DEPTH(DEPTH)) u_stream (
    .pci_clk, .pci_rst(st_rst), .rc_clk, .rc_rst,
    .ds_push(push[TGT_DOWNSTREAM]), .ds_push_data(push_data), .ds_free,
    .us_pop(pop[TGT_UPSTREAM]), .us_pop_data, .us_pop_valid, .us_avail,
    .rc_ds_data, .rc_ds_valid, .rc_ds_ready, .rc_us_data, .rc_us_valid, .rc_us_ready
  );

  selectmap_data_section #(.DEPTH(DEPTH)) u_selectmap (
    .pci_clk, .pci_rst(dp_rst), .cfg_clk, .cfg_rst,
    .wr_push(push[TGT_SM_WRITE]), .wr_push_data(push_data), .wr_free, .sm_busy,
    .rb_pop(pop[TGT_SM_READ]), .rb_pop_data, .rb_pop_valid, .rb_avail,
    .mode_sm_read(sm_read_mode), .rb_start(start[TGT_SM_READ]), .rb_words(len[TGT_SM_READ]),
    .icap_cclk, .icap_ce_n, .icap_write_n, .icap_i, .icap_o, .icap_busy
  );

  // ---------------- fixed part control ----------------
  logic [N-1:0][AW:0]  room;
  logic [N-1:0][31:0]  src_data;
  logic [N-1:0]        src_valid;

  always_comb begin
    room      = '0;
    src_data  = '0;
    src_valid = '0;
    room[TGT_UPSTREAM]       = us_avail;
    room[TGT_DOWNSTREAM]     = ds_free;
    room[TGT_SM_READ]        = rb_avail;
    room[TGT_SM_WRITE]       = wr_free;
    src_data[TGT_UPSTREAM]   = us_pop_data;
    src_valid[TGT_UPSTREAM]  = us_pop_valid;
    src_data[TGT_SM_READ]    = rb_pop_data;
    src_valid[TGT_SM_READ]   = rb_pop_valid;
  end

  fixed_part_control #(
    .DEPTH(DEPTH), .MAX_BURST(MAX_BRST), .THRESH(THRESH), .CNT_W(CNT_W)
  ) u_fpc (
    .clk(pci_clk), .rst(dp_rst), .start, .stop, .base, .len,
    .remaining, .active, .done, .err, .err_idx,
    .room, .src_data, .src_valid, .pop, .push, .push_data,
    .m_req, .m_write, .m_addr, .m_len, .m_ack, .m_rdata, .m_rvalid,
    .m_wdata, .m_wvalid, .m_wready, .m_done, .m_err
  );

endmodule
