// stream_data_section: the two stream buffers between the PCI side and the
// reconfigurable part.
//
// The downstream buffer carries 32-bit items read from PC memory to the
// reconfigurable part; the upstream buffer carries the reconfigurable part's
// results back to be written into PC memory. Each is a 256x32 dual-clock
// BRAM buffer: its PCI-side port runs on the PCI clock, its other port on
// the clock of the reconfigurable part, so the algorithm may run at any
// clock. Towards the reconfigurable part both streams are valid/ready
// handshakes: an item moves on a clock edge where valid and ready are both
// high. Towards the Fixed Part Control the section reports the fill status
// that starts bus-master transfers: items waiting upstream and free places
// downstream.
//
// The two buffers and their clocking follow the design; the valid/ready
// handshake towards the algorithm is this implementation's choice.
module stream_data_section #(
  parameter int unsigned DEPTH = proteus_pkg::BUF_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic        pci_clk,
  input  logic        pci_rst,
  input  logic        rc_clk,
  input  logic        rc_rst,

  // PCI side, downstream (PC -> reconfigurable part)
  input  logic        ds_push,
  input  logic [31:0] ds_push_data,
  output logic [AW:0] ds_free,
  // PCI side, upstream (reconfigurable part -> PC)
  input  logic        us_pop,
  output logic [31:0] us_pop_data,
  output logic        us_pop_valid,
  output logic [AW:0] us_avail,

  // reconfigurable part side
  output logic [31:0] rc_ds_data,
  output logic        rc_ds_valid,
  input  logic        rc_ds_ready,
  input  logic [31:0] rc_us_data,
  input  logic        rc_us_valid,
  output logic        rc_us_ready
);

  logic [AW:0] ds_wr_level;
  logic        ds_full, us_full;

  assign ds_free = (AW+1)'(DEPTH) - ds_wr_level;

  bram_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_downstream (
    .wr_clk  (pci_clk),
    .wr_rst  (pci_rst),
    .wr_en   (ds_push),
    .wr_data (ds_push_data),
    .wr_full (ds_full),
    .wr_level(ds_wr_level),
    .rd_clk  (rc_clk),
    .rd_rst  (rc_rst),
    .rd_en   (rc_ds_ready),
    .rd_valid(rc_ds_valid),
    .rd_data (rc_ds_data),
    .rd_level()
  );

  assign rc_us_ready = !us_full;

  bram_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_upstream (
    .wr_clk  (rc_clk),
    .wr_rst  (rc_rst),
    .wr_en   (rc_us_valid),
    .wr_data (rc_us_data),
    .wr_full (us_full),
    .wr_level(),
    .rd_clk  (pci_clk),
    .rd_rst  (pci_rst),
    .rd_en   (us_pop),
    .rd_valid(us_pop_valid),
    .rd_data (us_pop_data),
    .rd_level(us_avail)
  );

  // the PCI side never writes more than the free space it was shown
  a_ds_no_overflow: assert property (@(posedge pci_clk) disable iff (pci_rst) ds_push |-> !ds_full);

endmodule
