// mpe: matrices processing engine, P_M linear PE arrays of P PEs each with a
// multiplexer (array_mux) between every two adjacent arrays.
//
// coop[j] joins array j+1 behind array j (cooperation mode). A maximal run
// of joined arrays acts as one array of (run length x P) PEs; only its first
// array (the head) is fed and drained by the memory access controller. The
// PE identifiers continue across a run: array j gets pid_base = P x (j -
// index of its head). Each array has its own phase synchronization unit at
// its head (used only while the array is a head).
//
// Per array j the ports are: a workload job (S_i, S_j, K), streams A and B
// from the memory access controller, the result stream C back to it, and a
// c_done pulse from it when a result block has been written back.
//
// The number of arrays, the PEs per array and the multiplexers follow the
// paper (P_M = 4, P = 64 in its experiments); the per-array synchronization
// units at the heads are this design's arrangement.
module mpe
  import mm_pkg::*;
#(
  parameter int unsigned P_M = P_M_DEF,
  parameter int unsigned P   = P_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [P_M-2:0]      coop,
  // per-array workload parameters
  input  logic [P_M-1:0]      job_valid,
  input  logic [BZW-1:0]      job_si [P_M],
  input  logic [BZW-1:0]      job_sj [P_M],
  input  logic [KW-1:0]       job_k  [P_M],
  output logic [P_M-1:0]      job_ready,
  // per-array element streams
  input  logic [P_M-1:0]      a_valid,
  input  fp32_t               a_data [P_M],
  output logic [P_M-1:0]      a_ready,
  input  logic [P_M-1:0]      b_valid,
  input  fp32_t               b_data [P_M],
  output logic [P_M-1:0]      b_ready,
  // per-array result streams
  output logic [P_M-1:0]      c_valid,
  output c_tok_t              c_data [P_M],
  input  logic [P_M-1:0]      c_ready,
  input  logic [P_M-1:0]      c_done,
  // status
  output logic [P_M-1:0]      busy,
  output logic [P_M-1:0]      stall_sync,
  output logic [P_M-1:0]      stall_gap,
  output logic [P_M-1:0]      stall_drain
);
  // head-side streams of each array
  logic   psu_av [P_M], psu_bv [P_M], hd_av [P_M], hd_bv [P_M];
  a_tok_t psu_a  [P_M], hd_a [P_M];
  b_tok_t psu_b  [P_M], hd_b [P_M];
  logic   hc_v   [P_M], hc_r [P_M];
  c_tok_t hc     [P_M];
  // tail-side streams of each array
  logic   tl_av  [P_M], tl_bv [P_M], tl_cv [P_M], tl_cr [P_M];
  a_tok_t tl_a   [P_M];
  b_tok_t tl_b   [P_M];
  c_tok_t tl_c   [P_M];

  logic [IDXW-1:0] pid_base [P_M];

  always_comb begin
    pid_base[0] = '0;
    for (int j = 1; j < P_M; j++)
      pid_base[j] = coop[j-1] ? pid_base[j-1] + IDXW'(P) : '0;
  end

  for (genvar j = 0; j < P_M; j++) begin : g_arr
    psu u_psu (
      .clk, .rst_n,
      .job_valid(job_valid[j]), .job_si(job_si[j]), .job_sj(job_sj[j]), .job_k(job_k[j]),
      .job_ready(job_ready[j]),
      .a_valid(a_valid[j]), .a_data(a_data[j]), .a_ready(a_ready[j]),
      .b_valid(b_valid[j]), .b_data(b_data[j]), .b_ready(b_ready[j]),
      .c_done(c_done[j]),
      .a_out_valid(psu_av[j]), .a_out(psu_a[j]),
      .b_out_valid(psu_bv[j]), .b_out(psu_b[j]),
      .busy(busy[j]), .stall_sync(stall_sync[j]), .stall_gap(stall_gap[j]),
      .stall_drain(stall_drain[j])
    );

    pe_array #(.P(P)) u_array (
      .clk, .rst_n,
      .pid_base(pid_base[j]),
      .a_in_valid(hd_av[j]), .a_in(hd_a[j]),
      .b_in_valid(hd_bv[j]), .b_in(hd_b[j]),
      .c_out_valid(hc_v[j]), .c_out(hc[j]), .c_out_ready(hc_r[j]),
      .a_tail_valid(tl_av[j]), .a_tail(tl_a[j]),
      .b_tail_valid(tl_bv[j]), .b_tail(tl_b[j]),
      .c_tail_valid(tl_cv[j]), .c_tail(tl_c[j]), .c_tail_ready(tl_cr[j])
    );

    if (j == 0) begin : g_first
      assign hd_av[0]   = psu_av[0];
      assign hd_a[0]    = psu_a[0];
      assign hd_bv[0]   = psu_bv[0];
      assign hd_b[0]    = psu_b[0];
      assign c_valid[0] = hc_v[0];
      assign c_data[0]  = hc[0];
      assign hc_r[0]    = c_ready[0];
    end else begin : g_mux
      array_mux u_mux (
        .coop(coop[j-1]),
        .own_a_valid(psu_av[j]), .own_a(psu_a[j]),
        .own_b_valid(psu_bv[j]), .own_b(psu_b[j]),
        .prev_a_valid(tl_av[j-1]), .prev_a(tl_a[j-1]),
        .prev_b_valid(tl_bv[j-1]), .prev_b(tl_b[j-1]),
        .head_a_valid(hd_av[j]), .head_a(hd_a[j]),
        .head_b_valid(hd_bv[j]), .head_b(hd_b[j]),
        .head_c_valid(hc_v[j]), .head_c(hc[j]), .head_c_ready(hc_r[j]),
        .mac_c_valid(c_valid[j]), .mac_c(c_data[j]), .mac_c_ready(c_ready[j]),
        .prev_c_valid(tl_cv[j-1]), .prev_c(tl_c[j-1]), .prev_c_ready(tl_cr[j-1])
      );
    end
  end

  // the last array has nothing behind it
  assign tl_cv[P_M-1] = 1'b0;
  assign tl_c[P_M-1]  = '0;
endmodule
