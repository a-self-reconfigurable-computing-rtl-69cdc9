// pci_core_model: behavioural model of the PCI interface core's initiator
// (bus-master) side together with the PC memory it reaches. Not
// synthesizable; used by the testbenches only.
//
// The model works on the falling clock edge: it looks at the design's
// outputs there and sets its own outputs for the next rising edge. A request
// (m_req) is acknowledged after 1..4 cycles. The data phase then moves one
// 32-bit item on each cycle the model chooses (random wait states): when
// m_wvalid && m_wready for writes into PC memory, when m_rvalid for reads
// from it. With DISCONNECT_PCT percent chance per item the model ends the
// burst early, as a PCI target disconnect or a latency-timer expiry would.
// A burst ends with a one-cycle m_done; if abort_next is set when the burst
// is acknowledged it ends at once with m_err (master abort). PC memory is
// the array mem, indexed by the 32-bit item address modulo MEM_WORDS;
// testbenches fill and check it by hierarchical reference.
module pci_core_model #(
  parameter int unsigned MEM_WORDS      = 4096,
  parameter int unsigned LEN_W          = 7,
  parameter int unsigned WAIT_PCT       = 20,
  parameter int unsigned DISCONNECT_PCT = 3
) (
  input  logic             clk,
  input  logic             m_req,
  input  logic             m_write,
  input  logic [31:0]      m_addr,
  input  logic [LEN_W-1:0] m_len,
  output logic             m_ack,
  output logic [31:0]      m_rdata,
  output logic             m_rvalid,
  input  logic [31:0]      m_wdata,
  input  logic             m_wvalid,
  output logic             m_wready,
  output logic             m_done,
  output logic             m_err,
  input  logic             abort_next
);

  logic [31:0] mem [MEM_WORDS];
  int unsigned bursts = 0, disconnects = 0, aborts = 0, items = 0;
  int unsigned wait_pct = WAIT_PCT;     // may be changed by the testbench
  int unsigned wr_wait_pct = WAIT_PCT;  // the same for writes into PC memory
  int unsigned disc_pct = DISCONNECT_PCT; // may be changed by the testbench

  initial begin
    m_ack = 0; m_rvalid = 0; m_wready = 0; m_done = 0; m_err = 0; m_rdata = '0;
    forever begin
      @(negedge clk);
      if (m_req) begin
        logic [31:0] a;
        int unsigned n, len;
        logic wr, cut;
        a = m_addr; len = m_len; wr = m_write; n = 0; cut = 0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
        m_ack = 1'b1;
        bursts++;
        @(negedge clk);
        m_ack = 1'b0;
        if (abort_next) begin
          aborts++;
          m_done = 1'b1; m_err = 1'b1;
          @(negedge clk);
          m_done = 1'b0; m_err = 1'b0;
          continue;
        end
        while (n < len && !cut) begin
          if ($urandom_range(0, 99) < (wr ? wr_wait_pct : wait_pct)) begin
            @(negedge clk);
            continue;
          end
          if (wr) begin
            if (m_wvalid) begin
              m_wready = 1'b1;
              mem[(a >> 2) % MEM_WORDS] = m_wdata;
              a += 4; n++; items++;
            end
            @(negedge clk);
            m_wready = 1'b0;
          end else begin
            m_rvalid = 1'b1;
            m_rdata  = mem[(a >> 2) % MEM_WORDS];
            a += 4; n++; items++;
            @(negedge clk);
            m_rvalid = 1'b0;
          end
          if (n < len && $urandom_range(0, 99) < disc_pct) begin
            cut = 1; disconnects++;
          end
        end
        m_done = 1'b1;
        @(negedge clk);
        m_done = 1'b0;
      end
    end
  end

endmodule
