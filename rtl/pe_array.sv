// pe_array: one linear array of P processing elements.
//
// Streams A and B enter at PE_0 and move one PE per cycle towards PE_{P-1};
// stream C (results) moves the other way and leaves at PE_0. The tail ports
// (A/B out of PE_{P-1}, C into PE_{P-1}) let an array be chained behind the
// previous one through an array_mux in cooperation mode. PE_i gets the
// identifier pid_base + i, where pid_base is its array's offset inside a
// chain of arrays (0 for an array that works independently).
module pe_array
  import mm_pkg::*;
#(
  parameter int unsigned P = P_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [IDXW-1:0] pid_base,
  input  logic            a_in_valid,
  input  a_tok_t          a_in,
  input  logic            b_in_valid,
  input  b_tok_t          b_in,
  output logic            c_out_valid,
  output c_tok_t          c_out,
  input  logic            c_out_ready,
  // tail
  output logic            a_tail_valid,
  output a_tok_t          a_tail,
  output logic            b_tail_valid,
  output b_tok_t          b_tail,
  input  logic            c_tail_valid,
  input  c_tok_t          c_tail,
  output logic            c_tail_ready
);
  // link[i] is the input side of PE_i; link[P] is the tail
  logic   av [P+1];
  a_tok_t ad [P+1];
  logic   bv [P+1];
  b_tok_t bd [P+1];
  logic   cv [P+1];
  c_tok_t cd [P+1];
  logic   cr [P+1];

  assign av[0] = a_in_valid;
  assign ad[0] = a_in;
  assign bv[0] = b_in_valid;
  assign bd[0] = b_in;
  assign c_out_valid = cv[0];
  assign c_out       = cd[0];
  assign cr[0]       = c_out_ready;

  assign a_tail_valid = av[P];
  assign a_tail       = ad[P];
  assign b_tail_valid = bv[P];
  assign b_tail       = bd[P];
  assign cv[P]        = c_tail_valid;
  assign cd[P]        = c_tail;
  assign c_tail_ready = cr[P];

  for (genvar i = 0; i < P; i++) begin : g_pe
    pe u_pe (
      .clk, .rst_n,
      .pid(pid_base + IDXW'(i)),
      .a_in_valid(av[i]),   .a_in(ad[i]),
      .a_out_valid(av[i+1]), .a_out(ad[i+1]),
      .b_in_valid(bv[i]),   .b_in(bd[i]),
      .b_out_valid(bv[i+1]), .b_out(bd[i+1]),
      .c_in_valid(cv[i+1]), .c_in(cd[i+1]), .c_in_ready(cr[i+1]),
      .c_out_valid(cv[i]),  .c_out(cd[i]),  .c_out_ready(cr[i])
    );
  end
endmodule
