// target_control: the control section of one stream target.
//
// It watches the fill status of the target's buffer in a data section and
// the number of items the target still has to move, and asks the Transfer
// Arbitration for a bus-master burst when one is worth doing. "room" is the
// free space of the buffer for targets that bring data from PC memory
// (Downstream, Select Map Write) and the number of stored items for those
// that send data to PC memory (Upstream, Select Map Read). The burst length
// is the smallest of remaining, room and MAX_BURST; a request is raised when
// that length reaches THRESH, or covers all that remains. Bursts are never
// larger than the buffer can take or give, so the initiator never waits on
// a buffer in the middle of a burst. No request is raised while the target
// is being served.
//
// Purely combinational. The data-driven request follows the design
// ("triggered on the fill status of the internal BRAM buffers"); MAX_BURST
// and THRESH are this implementation's values.
module target_control #(
  parameter int unsigned CNT_W     = 24,
  parameter int unsigned ROOM_W    = 9,
  parameter int unsigned LEN_W     = 9,
  parameter int unsigned MAX_BURST = proteus_pkg::MAX_BURST,
  parameter int unsigned THRESH    = 32
) (
  input  logic [CNT_W-1:0]  remaining,
  input  logic [ROOM_W-1:0] room,
  input  logic              in_service,
  output logic              req,
  output logic [LEN_W-1:0]  req_len
);

  logic [CNT_W-1:0] len_full;

  always_comb begin
    len_full = remaining;
    if (len_full > CNT_W'(room))      len_full = CNT_W'(room);
    if (len_full > CNT_W'(MAX_BURST)) len_full = CNT_W'(MAX_BURST);
    req_len = LEN_W'(len_full);
    req = !in_service && (len_full != '0) &&
          (len_full >= CNT_W'(THRESH) || len_full == remaining);
  end

endmodule
