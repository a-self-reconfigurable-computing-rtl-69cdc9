// selectmap_data_section: the configuration controller's data path between
// the PCI side and the ICAP's 8-bit SelectMap port.
//
// Configuration (write) direction: 32-bit items from PC memory are buffered
// in a 256x32 dual-clock BRAM buffer. On the configuration clock side a
// multiplexer cuts each item into four bytes, most significant byte first,
// and presents them on icap_i. The SelectMap clock icap_cclk is a register
// that toggles on cfg_clk, so it runs at half of cfg_clk (cfg_clk = 100 MHz
// gives 50 MHz and 50 MByte/s, the SelectMap maximum). When the buffer runs
// empty the controller pauses by holding icap_cclk low, and resumes once an
// item arrives; icap_ce_n is low exactly while a byte is presented.
//
// Readback direction (mode_sm_read = 1): after rb_start, icap_write_n is high
// and the controller clocks the ICAP for rb_words items. A byte is taken from
// icap_o on the clock's falling edge unless icap_busy is high, four bytes are
// packed into one item (first byte most significant) and written into a
// second 256x32 buffer read by the PCI side. The clock also stops while that
// buffer is full.
//
// Timing: one byte per two cfg_clk cycles while data flows; data and
// icap_ce_n change only while icap_cclk is low, and icap_write_n changes
// only while no byte is presented. mode_sm_read and rb_words come from the
// PCI clock domain and must be stable before rb_start (a one-cycle pulse)
// is given; they are resynchronised here.
//
// The buffer, the 32-to-8 bit multiplexer and the clock stop follow the
// design. Byte order, the readback packing, icap_busy handling and the
// derivation of the SelectMap clock are this implementation's choices.
module selectmap_data_section #(
  parameter int unsigned DEPTH = proteus_pkg::BUF_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic        pci_clk,
  input  logic        pci_rst,
  input  logic        cfg_clk,
  input  logic        cfg_rst,

  // PCI side: configuration data in
  input  logic        wr_push,
  input  logic [31:0] wr_push_data,
  output logic [AW:0] wr_free,
  output logic        sm_busy,        // configuration data not yet all sent to the ICAP
  // PCI side: readback data out
  input  logic        rb_pop,
  output logic [31:0] rb_pop_data,
  output logic        rb_pop_valid,
  output logic [AW:0] rb_avail,
  // PCI side: readback control
  input  logic        mode_sm_read,
  input  logic        rb_start,
  input  logic [23:0] rb_words,

  // SelectMap port of the ICAP
  output logic        icap_cclk,
  output logic        icap_ce_n,
  output logic        icap_write_n,
  output logic [7:0]  icap_i,
  input  logic [7:0]  icap_o,
  input  logic        icap_busy
);

  // ---------------- buffers ----------------
  logic [AW:0] wr_level;
  logic        rb_full;
  logic        c_valid, c_pop;
  logic [31:0] c_data;
  logic        rb_push;
  logic [31:0] rb_word;

  assign wr_free = (AW+1)'(DEPTH) - wr_level;

  bram_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_cfg_buf (
    .wr_clk(pci_clk), .wr_rst(pci_rst), .wr_en(wr_push), .wr_data(wr_push_data),
    .wr_full(), .wr_level(wr_level),
    .rd_clk(cfg_clk), .rd_rst(cfg_rst), .rd_en(c_pop), .rd_valid(c_valid),
    .rd_data(c_data), .rd_level()
  );

  bram_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_rb_buf (
    .wr_clk(cfg_clk), .wr_rst(cfg_rst), .wr_en(rb_push), .wr_data(rb_word),
    .wr_full(rb_full), .wr_level(),
    .rd_clk(pci_clk), .rd_rst(pci_rst), .rd_en(rb_pop), .rd_valid(rb_pop_valid),
    .rd_data(rb_pop_data), .rd_level(rb_avail)
  );

  // ---------------- PCI -> cfg control crossing ----------------
  logic       rb_tgl_p;                  // pci domain
  logic [2:0] rb_tgl_c;                  // cfg domain synchroniser + edge
  logic [1:0] mode_c;
  logic       rb_go;

  always_ff @(posedge pci_clk) begin
    if (pci_rst)       rb_tgl_p <= 1'b0;
    else if (rb_start) rb_tgl_p <= ~rb_tgl_p;
  end

  always_ff @(posedge cfg_clk) begin
    if (cfg_rst) begin
      rb_tgl_c <= '0;
      mode_c   <= '0;
    end else begin
      rb_tgl_c <= {rb_tgl_c[1:0], rb_tgl_p};
      mode_c   <= {mode_c[0], mode_sm_read};
    end
  end
  assign rb_go = rb_tgl_c[2] ^ rb_tgl_c[1];

  // ---------------- SelectMap engine (cfg domain) ----------------
  logic [31:0] word_q;      // item being cut into bytes
  logic [1:0]  bidx;        // index of the byte on icap_i (0 = bits 31:24)
  logic        have;        // a byte is presented (write) / bytes are wanted (read)
  logic [23:0] rb_left;     // readback items still to fetch
  logic        rb_pend;     // readback requested, waiting for the direction change
  logic [23:0] pack;        // readback bytes gathered so far
  logic [1:0]  pcnt;        // number of bytes in pack
  logic        rd_dir;      // resynchronised mode_sm_read

  assign rd_dir    = mode_c[1];
  assign icap_ce_n = !have;

  function automatic logic [7:0] byte_of(logic [31:0] w, logic [1:0] i);
    return w[31 - 8*i -: 8];
  endfunction

  always_comb begin
    c_pop   = 1'b0;
    // an item is taken at the start of a word: from idle, or at the falling
    // edge that ends byte 3
    if (!rd_dir && !icap_write_n && c_valid) begin
      if (!icap_cclk && !have)            c_pop = 1'b1;
      if (icap_cclk && have && bidx == 2'd3) c_pop = 1'b1;
    end
  end

  always_ff @(posedge cfg_clk) begin
    if (cfg_rst) begin
      icap_cclk    <= 1'b0;
      icap_write_n <= 1'b0;
      icap_i       <= '0;
      have         <= 1'b0;
      word_q       <= '0;
      bidx         <= '0;
      rb_left      <= '0;
      rb_pend      <= 1'b0;
      pack         <= '0;
      pcnt         <= '0;
      rb_push      <= 1'b0;
      rb_word      <= '0;
    end else begin
      rb_push <= 1'b0;
      if (rb_go) rb_pend <= 1'b1;

      if (icap_cclk) begin
        // falling edge of the SelectMap clock
        icap_cclk <= 1'b0;
        if (!icap_write_n) begin
          // byte bidx has been taken by the ICAP on the rising edge
          if (bidx == 2'd3) begin
            if (c_valid) begin
              word_q <= c_data;
              bidx   <= 2'd0;
              icap_i <= byte_of(c_data, 2'd0);
            end else begin
              have   <= 1'b0;   // buffer empty: the clock stops here
            end
          end else begin
            bidx   <= bidx + 2'd1;
            icap_i <= byte_of(word_q, bidx + 2'd1);
          end
        end else if (!icap_busy) begin
          // readback byte valid
          if (pcnt == 2'd3) begin
            rb_push <= 1'b1;
            rb_word <= {pack, icap_o};
            pcnt    <= 2'd0;
            rb_left <= rb_left - 24'd1;
            if (rb_left == 24'd1) have <= 1'b0;
          end else begin
            pack <= {pack[15:0], icap_o};
            pcnt <= pcnt + 2'd1;
          end
        end
      end else if (have) begin
        // rising edge: write always, read only while an item can be stored
        if (!icap_write_n || !rb_full) icap_cclk <= 1'b1;
      end else if (icap_write_n != rd_dir) begin
        // direction change with no byte presented
        icap_write_n <= rd_dir;
      end else if (!rd_dir && c_valid) begin
        word_q <= c_data;
        bidx   <= 2'd0;
        icap_i <= byte_of(c_data, 2'd0);
        have   <= 1'b1;
      end else if (rd_dir && rb_pend && !rb_go) begin
        rb_pend <= 1'b0;
        rb_left <= rb_words;
        pcnt    <= 2'd0;
        have    <= (rb_words != 24'd0);
      end
    end
  end

  // ---------------- status back to the PCI side ----------------
  logic [1:0] have_p;
  always_ff @(posedge pci_clk) begin
    if (pci_rst) have_p <= '0;
    else         have_p <= {have_p[0], have && !icap_write_n};
  end
  assign sm_busy = (wr_level != '0) || have_p[1];

  a_ce_stable: assert property (@(posedge cfg_clk) disable iff (cfg_rst)
                                icap_cclk |-> ##1 !icap_cclk);

endmodule
