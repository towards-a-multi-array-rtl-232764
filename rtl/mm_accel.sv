// mm_accel: multi-array accelerator for large dense matrix multiplication
// C = A x B in single-precision floating point.
//
// The result is computed block by block: a task multiplies SA_i (S_i rows of
// A, all K columns) with SB_j (K rows, S_j columns of B) into C_{i,j}. Tasks
// are described by buffer descriptors that the host appends to per-array
// workload queues (wqm). The memory access controller (mac) takes each
// array's tasks, streams the operands from external memory into the
// matrices processing engine (mpe) and writes the results back. The mpe
// holds P_M linear arrays of P PEs; the multiplexers between them can join
// adjacent arrays into longer ones (cooperation mode) so that larger blocks
// fit, at the cost of fewer arrays working in parallel. Idle arrays take
// tasks from the fullest queue (work stealing).
//
// Configuration (static while tasks run, written by the host):
//   coop[j]      join array j+1 behind array j;
//   array_en[j]  array j takes part (N_p arrays in use = enabled heads).
// Only the head array of a joined group owns a queue, a mac engine and a
// memory interface; S_i must not exceed the PEs of the group and S_j must
// not exceed BZ_MAX.
//
// The external memory and its interface (a DDR controller) are outside this
// design: each array's mac engine has its own burst read ports for A and B
// and a write port for C, which a memory interface is expected to arbitrate.
module mm_accel
  import mm_pkg::*;
#(
  parameter int unsigned P_M     = P_M_DEF,
  parameter int unsigned P       = P_DEF,
  parameter int unsigned Q_DEPTH = 16,
  parameter int unsigned SDEPTH  = 2 * BZ_MAX
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic [P_M-2:0]   coop,
  input  logic [P_M-1:0]   array_en,
  // host: task submission
  input  logic             task_valid,
  input  logic [$clog2(P_M)-1:0] task_queue,
  input  desc_t            task_desc,
  output logic             task_ready,
  // memory ports, one set per array
  output logic [P_M-1:0]   ra_req_valid,
  output logic [ADDRW-1:0] ra_req_addr [P_M],
  output logic [BZW-1:0]   ra_req_len  [P_M],
  input  logic [P_M-1:0]   ra_req_ready,
  input  logic [P_M-1:0]   ra_rsp_valid,
  input  fp32_t            ra_rsp_data [P_M],
  output logic [P_M-1:0]   rb_req_valid,
  output logic [ADDRW-1:0] rb_req_addr [P_M],
  output logic [BZW-1:0]   rb_req_len  [P_M],
  input  logic [P_M-1:0]   rb_req_ready,
  input  logic [P_M-1:0]   rb_rsp_valid,
  input  fp32_t            rb_rsp_data [P_M],
  output logic [P_M-1:0]   wr_valid,
  output logic [ADDRW-1:0] wr_addr [P_M],
  output fp32_t            wr_data [P_M],
  input  logic [P_M-1:0]   wr_ready,
  // status and events
  output logic [P_M-1:0]   blocks_done,   // pulse per result block written
  output logic             steal,
  output logic [$clog2(P_M)-1:0] steal_from,
  output logic [$clog2(P_M)-1:0] steal_to,
  output logic [P_M-1:0]   stall_sync,
  output logic [P_M-1:0]   stall_gap,
  output logic [P_M-1:0]   stall_drain,
  output logic [P_M-1:0]   busy
);
  logic [P_M-1:0] head;
  always_comb begin
    head[0] = array_en[0];
    for (int j = 1; j < P_M; j++) head[j] = array_en[j] && !coop[j-1];
  end

  // queues <-> mac
  logic [P_M-1:0] q_valid, q_ready;
  desc_t          q_desc [P_M];
  logic [$clog2(Q_DEPTH+1)-1:0] q_cnt [P_M];

  wqm #(.P_M(P_M), .Q_DEPTH(Q_DEPTH)) u_wqm (
    .clk, .rst_n, .active(head),
    .push_valid(task_valid), .push_q(task_queue), .push_desc(task_desc),
    .push_ready(task_ready),
    .pop_valid(q_valid), .pop_desc(q_desc), .pop_ready(q_ready),
    .cnt(q_cnt), .steal, .steal_from, .steal_to
  );

  // mac <-> mpe
  logic [P_M-1:0] job_valid, job_ready, a_valid, a_ready, b_valid, b_ready;
  logic [P_M-1:0] c_valid, c_ready, c_done, psu_busy;
  logic [BZW-1:0] job_si [P_M], job_sj [P_M];
  logic [KW-1:0]  job_k [P_M];
  fp32_t          a_data [P_M], b_data [P_M];
  c_tok_t         c_data [P_M];

  mac #(.P_M(P_M), .SDEPTH(SDEPTH)) u_mac (
    .clk, .rst_n, .enable(head),
    .q_valid, .q_desc, .q_ready,
    .job_valid, .job_si, .job_sj, .job_k, .job_ready,
    .a_valid, .a_data, .a_ready, .b_valid, .b_data, .b_ready,
    .c_valid, .c_data, .c_ready, .c_done,
    .ra_req_valid, .ra_req_addr, .ra_req_len, .ra_req_ready, .ra_rsp_valid, .ra_rsp_data,
    .rb_req_valid, .rb_req_addr, .rb_req_len, .rb_req_ready, .rb_rsp_valid, .rb_rsp_data,
    .wr_valid, .wr_addr, .wr_data, .wr_ready
  );

  mpe #(.P_M(P_M), .P(P)) u_mpe (
    .clk, .rst_n, .coop,
    .job_valid, .job_si, .job_sj, .job_k, .job_ready,
    .a_valid, .a_data, .a_ready, .b_valid, .b_data, .b_ready,
    .c_valid, .c_data, .c_ready, .c_done,
    .busy(psu_busy), .stall_sync, .stall_gap, .stall_drain
  );

  assign blocks_done = c_done;
  always_comb begin
    for (int j = 0; j < P_M; j++)
      busy[j] = psu_busy[j] || q_cnt[j] != '0 || job_valid[j] || a_valid[j] || b_valid[j];
  end
endmodule
