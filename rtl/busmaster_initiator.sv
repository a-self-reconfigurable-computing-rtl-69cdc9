// busmaster_initiator: runs the bus-master bursts between PC memory and the
// buffer of the target that the Transfer Arbitration granted.
//
// On a grant it latches the target, the burst length and the target's next
// PC address (from the Busmaster Address Provider) and raises m_req to the
// PCI core's initiator side, with m_write high for targets that send data to
// PC memory. After m_ack the data phase runs:
//   - to PC memory: the target's buffer output is offered on m_wdata/m_wvalid;
//     each cycle with m_wvalid and m_wready moves one item and pops it;
//   - from PC memory: each cycle with m_rvalid pushes m_rdata into the
//     target's buffer.
// Every moved item is reported as a beat for the address provider. m_done
// ends the burst, whether all m_len items moved or the PCI bus cut it short
// (disconnect, retry, latency timer); m_err marks a master or target abort,
// reported on err/err_idx. In either case the initiator stays busy for one
// more cycle, in which the error (if any) is reported and the address
// provider's count is final, and is then idle; an unfinished target simply
// requests again later.
//
// The PCI core's user-side handshake (m_req/m_ack/m_rvalid/m_wready/m_done/
// m_err) is this implementation's abstraction of the vendor core; the role of
// the block follows the design.
module busmaster_initiator #(
  parameter int unsigned N     = proteus_pkg::NUM_TARGETS,
  parameter int unsigned LEN_W = 9,
  parameter logic [N-1:0] TO_PC = proteus_pkg::TGT_TO_PC,
  localparam int unsigned IW   = $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst,
  // from Transfer Arbitration
  input  logic                  gnt,
  input  logic [IW-1:0]         gnt_idx,
  input  logic [LEN_W-1:0]      gnt_len,
  output logic                  busy,
  output logic [IW-1:0]         cur_idx,
  // from / to Busmaster Address Provider
  input  logic [N-1:0][31:0]    addr,
  output logic                  beat,
  output logic [IW-1:0]         beat_idx,
  // PCI core initiator side
  output logic                  m_req,
  output logic                  m_write,
  output logic [31:0]           m_addr,
  output logic [LEN_W-1:0]      m_len,
  input  logic                  m_ack,
  input  logic [31:0]           m_rdata,
  input  logic                  m_rvalid,
  output logic [31:0]           m_wdata,
  output logic                  m_wvalid,
  input  logic                  m_wready,
  input  logic                  m_done,
  input  logic                  m_err,
  // target buffers
  input  logic [N-1:0][31:0]    src_data,
  input  logic [N-1:0]          src_valid,
  output logic [N-1:0]          pop,
  output logic [N-1:0]          push,
  output logic [31:0]           push_data,
  // error report
  output logic                  err,
  output logic [IW-1:0]         err_idx
);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_XFER, S_END} state_e;
  state_e          state;
  logic [IW-1:0]   tgt;
  logic [LEN_W-1:0] cnt;
  logic            to_pc;

  assign busy     = (state != S_IDLE);
  assign cur_idx  = tgt;
  assign to_pc    = TO_PC[tgt];
  assign m_req    = (state == S_REQ);
  assign m_write  = to_pc;
  assign beat_idx = tgt;
  assign push_data = m_rdata;

  always_comb begin
    m_wdata  = src_data[tgt];
    m_wvalid = (state == S_XFER) && to_pc && src_valid[tgt] && (cnt != m_len);
    pop      = '0;
    push     = '0;
    beat     = 1'b0;
    if (state == S_XFER) begin
      if (to_pc) begin
        if (m_wvalid && m_wready) begin
          pop[tgt] = 1'b1;
          beat     = 1'b1;
        end
      end else if (m_rvalid && cnt != m_len) begin
        push[tgt] = 1'b1;
        beat      = 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      tgt     <= '0;
      cnt     <= '0;
      m_len   <= '0;
      m_addr  <= '0;
      err     <= 1'b0;
      err_idx <= '0;
    end else begin
      err <= 1'b0;
      case (state)
        S_IDLE: if (gnt) begin
          tgt    <= gnt_idx;
          m_len  <= gnt_len;
          m_addr <= addr[gnt_idx];
          cnt    <= '0;
          state  <= S_REQ;
        end
        S_REQ: if (m_ack) state <= S_XFER;
        S_XFER: begin
          if (beat) cnt <= cnt + 1'b1;
          if (m_done) begin
            state <= S_END;
            if (m_err) begin
              err     <= 1'b1;
              err_idx <= tgt;
            end
          end
        end
        S_END: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_grant_when_busy: assert property (@(posedge clk) disable iff (rst) gnt |-> !busy);
  a_beat_bound: assert property (@(posedge clk) disable iff (rst) beat |-> cnt < m_len);

endmodule
