// busmaster_address_provider: PC memory address bookkeeping for the stream
// targets.
//
// For each target it holds the byte address of the next 32-bit item in PC
// memory and the number of items still to move. start[t] loads base[t] and
// len[t]; every data beat the initiator reports for target t (beat with
// beat_idx = t) advances the address by 4 and counts the item off. Because
// the count follows the beats that really happened, a burst that the PCI bus
// interrupts part way leaves the address on the next item, and the next burst
// for that target restarts exactly there. stop[t] abandons what is left.
// done[t] pulses for one cycle when the last item has moved.
//
// Keeping one address per target and counting per beat follows the design's
// description; widths and the stop command are this implementation's.
module busmaster_address_provider #(
  parameter int unsigned N     = proteus_pkg::NUM_TARGETS,
  parameter int unsigned CNT_W = 24,
  localparam int unsigned IW   = $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [N-1:0]            start,
  input  logic [N-1:0]            stop,
  input  logic [N-1:0][31:0]      base,
  input  logic [N-1:0][CNT_W-1:0] len,
  input  logic                    beat,
  input  logic [IW-1:0]           beat_idx,
  output logic [N-1:0][31:0]      addr,
  output logic [N-1:0][CNT_W-1:0] remaining,
  output logic [N-1:0]            done
);

  always_ff @(posedge clk) begin
    if (rst) begin
      addr      <= '0;
      remaining <= '0;
      done      <= '0;
    end else begin
      done <= '0;
      for (int t = 0; t < N; t++) begin
        if (start[t]) begin
          addr[t]      <= {base[t][31:2], 2'b00};
          remaining[t] <= len[t];
        end else if (stop[t]) begin
          remaining[t] <= '0;
        end else if (beat && beat_idx == IW'(t) && remaining[t] != '0) begin
          addr[t]      <= addr[t] + 32'd4;
          remaining[t] <= remaining[t] - 1'b1;
          if (remaining[t] == CNT_W'(1)) done[t] <= 1'b1;
        end
      end
    end
  end

endmodule
