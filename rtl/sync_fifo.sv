// sync_fifo: single-clock first-in first-out buffer used for the PE result
// FIFO f_c and the stream buffers of the memory access controller.
//
// Storage is a plain array (maps to block or distributed RAM), addressed by
// read and write pointers with one extra wrap bit. Push and pop may happen in
// the same cycle. The head word is visible combinationally on rd_data while
// !empty (first-word fall-through). Pushing when full or popping when empty
// is a caller error and is flagged by assertions.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wr_data,
  input  logic pop,
  output T     rd_data,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T mem [DEPTH];
  logic [AW:0] wp, rp;

  always_ff @(posedge clk) begin
    if (push) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp[AW-1:0] == AW'(DEPTH - 1)) ? {~wp[AW], AW'(0)} : wp + 1'b1;
      if (pop)  rp <= (rp[AW-1:0] == AW'(DEPTH - 1)) ? {~rp[AW], AW'(0)} : rp + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  assign rd_data = mem[rp[AW-1:0]];
  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
