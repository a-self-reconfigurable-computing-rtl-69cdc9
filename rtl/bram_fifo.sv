// bram_fifo: dual-clock first-in first-out buffer built on one dp_bram.
//
// The write side and the read side each run on their own clock. Binary
// pointers one bit wider than the address are kept per side; each side passes
// its pointer to the other as Gray code through a two-flop synchroniser, so
// every fill count is conservative: the writer may see fewer free places and
// the reader fewer items than there really are, never more.
//
// The read side is first-word-fall-through: rd_valid/rd_data show the oldest
// item, rd_en pops it. Behind rd_data sits the RAM's output register, so an
// item written appears at rd_valid a few read clocks after wr_en (pointer
// synchroniser plus one RAM read); items then follow at one per read clock.
// wr_en while wr_full is ignored, as is rd_en while !rd_valid. The buffer
// holds DEPTH items in the RAM plus the one waiting in the output register.
//
// wr_level counts items held, seen from the write side; rd_level counts items
// that can be popped, seen from the read side. Each side has its own
// synchronous active-high reset; both must be applied together.
module bram_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             wr_clk,
  input  logic             wr_rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             wr_full,
  output logic [AW:0]      wr_level,

  input  logic             rd_clk,
  input  logic             rd_rst,
  input  logic             rd_en,
  output logic             rd_valid,
  output logic [WIDTH-1:0] rd_data,
  output logic [AW:0]      rd_level
);

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write side ----------------
  logic [AW:0] wptr, wptr_gray;
  logic [AW:0] rptr, rptr_gray;
  logic [AW:0] rptr_gray_s1, rptr_gray_s2, rptr_w;
  logic        push;

  assign rptr_w   = gray2bin(rptr_gray_s2);
  assign wr_level = wptr - rptr_w;
  assign wr_full  = (wr_level == (AW+1)'(DEPTH));
  assign push     = wr_en && !wr_full;

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wptr         <= '0;
      wptr_gray    <= '0;
      rptr_gray_s1 <= '0;
      rptr_gray_s2 <= '0;
    end else begin
      if (push) begin
        wptr      <= wptr + 1'b1;
        wptr_gray <= bin2gray(wptr + 1'b1);
      end
      rptr_gray_s1 <= rptr_gray;
      rptr_gray_s2 <= rptr_gray_s1;
    end
  end

  // ---------------- read side ----------------
  logic [AW:0] wptr_gray_s1, wptr_gray_s2, wptr_r;
  logic        ram_empty, fetch, pop, q_valid;

  assign wptr_r    = gray2bin(wptr_gray_s2);
  assign ram_empty = (wptr_r == rptr);
  assign pop       = rd_en && q_valid;
  // load the output register when it is free or being emptied this cycle
  assign fetch     = !ram_empty && (!q_valid || pop);
  assign rd_valid  = q_valid;
  assign rd_level  = (wptr_r - rptr) + (AW+1)'(q_valid);

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rptr         <= '0;
      rptr_gray    <= '0;
      wptr_gray_s1 <= '0;
      wptr_gray_s2 <= '0;
      q_valid      <= 1'b0;
    end else begin
      if (fetch) begin
        rptr      <= rptr + 1'b1;
        rptr_gray <= bin2gray(rptr + 1'b1);
      end
      if (fetch)    q_valid <= 1'b1;
      else if (pop) q_valid <= 1'b0;
      wptr_gray_s1 <= wptr_gray;
      wptr_gray_s2 <= wptr_gray_s1;
    end
  end

  dp_bram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_ram (
    .clk_a  (wr_clk),
    .we_a   (push),
    .waddr_a(wptr[AW-1:0]),
    .wdata_a(wr_data),
    .clk_b  (rd_clk),
    .re_b   (fetch),
    .raddr_b(rptr[AW-1:0]),
    .q_b    (rd_data)
  );

  // a full buffer may never be written past, an empty one never read
  a_level_bound: assert property (@(posedge wr_clk) disable iff (wr_rst) wr_level <= (AW+1)'(DEPTH));

endmodule
