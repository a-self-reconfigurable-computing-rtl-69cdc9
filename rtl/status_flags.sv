// status_flags: Flags, Status Bits and Error Reporting of the fixed part.
//
// Collects the state of the four stream targets into the STATUS word read by
// the driver:
//   [3:0]   active: target t still has items to move (live)
//   [7:4]   done:   target t finished (sticky)
//   [11:8]  error:  a burst of target t ended in a PCI abort (sticky)
//   [12]    SelectMap write data not yet all passed to the ICAP (live)
// Sticky bits are set by one-cycle pulses, cleared by writing 1 to them
// (clr) and cleared for a target when it is started again; setting wins over
// clearing in the same cycle. The bit layout is this implementation's.
module status_flags
  import proteus_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic [NUM_TARGETS-1:0] active,
  input  logic [NUM_TARGETS-1:0] done,
  input  logic                   err,
  input  logic [1:0]             err_idx,
  input  logic [NUM_TARGETS-1:0] start,
  input  logic                   sm_busy,
  input  logic [11:4]            clr,
  output logic [31:0]            status
);

  logic [NUM_TARGETS-1:0] done_q, err_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      done_q <= '0;
      err_q  <= '0;
    end else begin
      for (int t = 0; t < NUM_TARGETS; t++) begin
        if (done[t])                          done_q[t] <= 1'b1;
        else if (clr[ST_DONE_LSB + t] || start[t]) done_q[t] <= 1'b0;
        if (err && err_idx == 2'(t))          err_q[t] <= 1'b1;
        else if (clr[ST_ERR_LSB + t] || start[t])  err_q[t] <= 1'b0;
      end
    end
  end

  assign status = {19'd0, sm_busy, err_q, done_q, active};

endmodule
