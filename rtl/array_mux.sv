// array_mux: the multiplexer placed between two adjacent PE arrays.
//
// In independent mode (coop = 0) the following array takes streams A and B
// from its own phase synchronization unit and sends its results to its own
// port of the memory access controller; the preceding array's tail sees no
// results. In cooperation mode (coop = 1) the following array takes A and B
// from the tail of the preceding array, so the two form one longer array
// sharing one memory interface, and its results are sent into the tail of
// the preceding array. coop is written by the host before a run.
//
// Purely combinational; the paper gives the two modes and the select, the
// routing of the result stream is this design's reading of Fig. 1.
module array_mux
  import mm_pkg::*;
(
  input  logic   coop,
  // own head sources (phase synchronization unit of the following array)
  input  logic   own_a_valid,
  input  a_tok_t own_a,
  input  logic   own_b_valid,
  input  b_tok_t own_b,
  // tail of the preceding array
  input  logic   prev_a_valid,
  input  a_tok_t prev_a,
  input  logic   prev_b_valid,
  input  b_tok_t prev_b,
  // head of the following array
  output logic   head_a_valid,
  output a_tok_t head_a,
  output logic   head_b_valid,
  output b_tok_t head_b,
  // results leaving PE_0 of the following array
  input  logic   head_c_valid,
  input  c_tok_t head_c,
  output logic   head_c_ready,
  // to the memory access controller port of the following array
  output logic   mac_c_valid,
  output c_tok_t mac_c,
  input  logic   mac_c_ready,
  // to the tail of the preceding array
  output logic   prev_c_valid,
  output c_tok_t prev_c,
  input  logic   prev_c_ready
);
  always_comb begin
    if (coop) begin
      head_a_valid = prev_a_valid;
      head_a       = prev_a;
      head_b_valid = prev_b_valid;
      head_b       = prev_b;
      prev_c_valid = head_c_valid;
      mac_c_valid  = 1'b0;
      head_c_ready = prev_c_ready;
    end else begin
      head_a_valid = own_a_valid;
      head_a       = own_a;
      head_b_valid = own_b_valid;
      head_b       = own_b;
      prev_c_valid = 1'b0;
      mac_c_valid  = head_c_valid;
      head_c_ready = mac_c_ready;
    end
    prev_c = head_c;
    mac_c  = head_c;
  end
endmodule
