// fixed_part_control: the Fixed Part Control Section, which runs all data
// transfers between PC memory and the fixed part's buffers.
//
// It connects four target_control instances (Upstream, Downstream, Select
// Map Read, Select Map Write), the transfer_arbiter, the
// busmaster_initiator and the busmaster_address_provider. The driver starts
// a target with base address and length (start[t]); from then on the
// target's control section requests bursts as its buffer fills (towards the
// PC) or empties (from the PC), the arbiter picks one target at a time, the
// initiator moves the burst over the PCI core and the address provider keeps
// each target's place in PC memory. done[t] pulses when target t has moved
// all its items; err/err_idx report an aborted burst, after which the
// target is stopped.
//
// Structure and the four targets follow the design; the stop-on-error policy
// is this implementation's choice.
module fixed_part_control #(
  parameter int unsigned DEPTH     = proteus_pkg::BUF_DEPTH,
  parameter int unsigned MAX_BURST = proteus_pkg::MAX_BURST,
  parameter int unsigned THRESH    = 32,
  parameter int unsigned CNT_W     = 24,
  localparam int unsigned N        = proteus_pkg::NUM_TARGETS,
  localparam int unsigned ROOM_W   = $clog2(DEPTH) + 1,
  localparam int unsigned LEN_W    = $clog2(MAX_BURST) + 1
) (
  input  logic                    clk,
  input  logic                    rst,
  // from Device Driver Communication
  input  logic [N-1:0]            start,
  input  logic [N-1:0]            stop,
  input  logic [N-1:0][31:0]      base,
  input  logic [N-1:0][CNT_W-1:0] len,
  // status
  output logic [N-1:0][CNT_W-1:0] remaining,
  output logic [N-1:0]            active,
  output logic [N-1:0]            done,
  output logic                    err,
  output logic [1:0]              err_idx,
  // buffer fill status: free places (from PC) or stored items (to PC)
  input  logic [N-1:0][ROOM_W-1:0] room,
  // buffer data
  input  logic [N-1:0][31:0]      src_data,
  input  logic [N-1:0]            src_valid,
  output logic [N-1:0]            pop,
  output logic [N-1:0]            push,
  output logic [31:0]             push_data,
  // PCI core initiator side
  output logic                    m_req,
  output logic                    m_write,
  output logic [31:0]             m_addr,
  output logic [LEN_W-1:0]        m_len,
  input  logic                    m_ack,
  input  logic [31:0]             m_rdata,
  input  logic                    m_rvalid,
  output logic [31:0]             m_wdata,
  output logic                    m_wvalid,
  input  logic                    m_wready,
  input  logic                    m_done,
  input  logic                    m_err
);

  logic [N-1:0]            req;
  logic [N-1:0][LEN_W-1:0] req_len;
  logic                    gnt, busy, beat;
  logic [1:0]              gnt_idx, cur_idx, beat_idx;
  logic [LEN_W-1:0]        gnt_len;
  logic [N-1:0][31:0]      addr;
  logic [N-1:0]            stop_all;

  // an aborted burst stops its target
  always_comb begin
    stop_all = stop;
    if (err) stop_all[err_idx] = 1'b1;
  end

  for (genvar t = 0; t < N; t++) begin : g_tc
    assign active[t] = (remaining[t] != '0);
    target_control #(
      .CNT_W(CNT_W), .ROOM_W(ROOM_W), .LEN_W(LEN_W),
      .MAX_BURST(MAX_BURST), .THRESH(THRESH)
    ) u_tc (
      .remaining (remaining[t]),
      .room      (room[t]),
      .in_service(busy && cur_idx == 2'(t)),
      .req       (req[t]),
      .req_len   (req_len[t])
    );
  end

  transfer_arbiter #(.N(N), .LEN_W(LEN_W)) u_arb (
    .clk, .rst, .req, .req_len, .busy, .gnt, .gnt_idx, .gnt_len
  );

  busmaster_initiator #(.N(N), .LEN_W(LEN_W)) u_init (
    .clk, .rst, .gnt, .gnt_idx, .gnt_len, .busy, .cur_idx,
    .addr, .beat, .beat_idx,
    .m_req, .m_write, .m_addr, .m_len, .m_ack, .m_rdata, .m_rvalid,
    .m_wdata, .m_wvalid, .m_wready, .m_done, .m_err,
    .src_data, .src_valid, .pop, .push, .push_data,
    .err, .err_idx
  );

  busmaster_address_provider #(.N(N), .CNT_W(CNT_W)) u_addr (
    .clk, .rst, .start, .stop(stop_all), .base, .len,
    .beat, .beat_idx, .addr, .remaining, .done
  );

endmodule
