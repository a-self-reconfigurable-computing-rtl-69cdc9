// icap_model: behavioural model of the Virtex-II ICAP's SelectMap side. Not
// synthesizable; used by the testbenches only.
//
// On each rising edge of cclk with ce_n low: in write direction (write_n
// low) the byte on i is recorded in wr_bytes; in readback direction the
// model drives the next readback byte on o, or raises busy instead with
// BUSY_PCT percent chance (the byte then comes on a later edge). Readback
// byte k is rb_byte(k) = (k * 37 + 11) mod 256.
module icap_model #(
  parameter int unsigned MAX_BYTES = 65536,
  parameter int unsigned BUSY_PCT  = 25
) (
  input  logic       cclk,
  input  logic       ce_n,
  input  logic       write_n,
  input  logic [7:0] i,
  output logic [7:0] o,
  output logic       busy
);

  logic [7:0] wr_bytes [MAX_BYTES];
  int unsigned n_wr = 0, n_rd = 0, n_busy = 0, n_edges = 0;

  function automatic logic [7:0] rb_byte(int unsigned k);
    return 8'((k * 37 + 11) % 256);
  endfunction

  initial begin
    o = '0; busy = 1'b0;
  end

  always @(posedge cclk) begin
    n_edges++;
    if (!ce_n && !write_n) begin
      if (n_wr < MAX_BYTES) wr_bytes[n_wr] = i;
      n_wr++;
    end else if (!ce_n && write_n) begin
      if ($urandom_range(0, 99) < BUSY_PCT) begin
        busy <= 1'b1;
        n_busy++;
      end else begin
        busy <= 1'b0;
        o    <= rb_byte(n_rd);
        n_rd++;
      end
    end
  end

endmodule
