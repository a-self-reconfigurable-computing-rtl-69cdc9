// reset_ctrl: Reset Implementation of the fixed part.
//
// Turns the PCI bus reset (pci_rst_n, asynchronous, active low) and the
// driver's reset commands into one active-high reset per use and per clock:
//   reg_rst  PCI clock: registers, only from the PCI bus reset
//   dp_rst   PCI clock: fixed part data path; also SOFT_RST_CYCLES cycles
//            after a soft_rst pulse
//   st_rst   PCI clock: PCI side of the stream buffers; also while rc_hold
//   cfg_rst  configuration clock: SelectMap engine, follows dp_rst
//   rc_rst   reconfigurable part clock: the algorithm and the far side of
//            the stream buffers, follows st_rst
// Each output is asserted at once (asynchronously) and released
// synchronously to its own clock after two flip-flops, so the sides of every
// dual-clock buffer are reset together. Holding the reconfigurable part in
// reset therefore also empties the stream buffers.
//
// dp_rst and st_rst are used twice: as synchronous resets by the PCI clock
// logic and as the asynchronous assert source of the cfg_clk and rc_clk
// synchronisers. A lint tool flags this mixed use; it is intended, because
// both consumers need the same reset and each releases it on its own clock.
//
// The design names this block only; the reset tree is this
// implementation's.
module reset_ctrl #(
  parameter int unsigned SOFT_RST_CYCLES = 8
) (
  input  logic pci_clk,
  input  logic pci_rst_n,
  input  logic soft_rst,
  input  logic rc_hold,
  input  logic cfg_clk,
  input  logic rc_clk,
  output logic reg_rst,
  output logic dp_rst,
  output logic st_rst,
  output logic cfg_rst,
  output logic rc_rst
);

  logic [1:0] reg_sync;
  logic [$clog2(SOFT_RST_CYCLES+1)-1:0] soft_cnt;
  logic [1:0] cfg_sync, rc_sync;

  // PCI bus reset: asynchronous assert, synchronous release
  always_ff @(posedge pci_clk or negedge pci_rst_n) begin
    if (!pci_rst_n) reg_sync <= 2'b11;
    else            reg_sync <= {reg_sync[0], 1'b0};
  end
  assign reg_rst = reg_sync[1];

  // data path and stream resets, registered so that they never glitch
  always_ff @(posedge pci_clk or negedge pci_rst_n) begin
    if (!pci_rst_n) begin
      soft_cnt <= '0;
      dp_rst   <= 1'b1;
      st_rst   <= 1'b1;
    end else begin
      if (soft_rst)            soft_cnt <= ($bits(soft_cnt))'(SOFT_RST_CYCLES);
      else if (soft_cnt != '0) soft_cnt <= soft_cnt - 1'b1;
      dp_rst <= reg_rst || soft_rst || soft_cnt != '0;
      st_rst <= reg_rst || soft_rst || soft_cnt != '0 || rc_hold;
    end
  end

  always_ff @(posedge cfg_clk or posedge dp_rst) begin
    if (dp_rst) cfg_sync <= 2'b11;
    else        cfg_sync <= {cfg_sync[0], 1'b0};
  end
  assign cfg_rst = cfg_sync[1];

  always_ff @(posedge rc_clk or posedge st_rst) begin
    if (st_rst) rc_sync <= 2'b11;
    else        rc_sync <= {rc_sync[0], 1'b0};
  end
  assign rc_rst = rc_sync[1];

endmodule
