// mac: memory access controller, one mac_engine per PE array.
//
// Engine j serves workload queue j and the head of PE array j, and owns
// three memory ports (burst reads for stream A and stream B, word writes for
// stream C) towards the external memory interface. An engine is enabled only
// while its array is the head of a group (its array is not joined behind the
// previous one in cooperation mode); disabled engines take no tasks, so all
// arrays of a group share the memory interface of the head's engine.
//
// The paper gives the controller's role and the buffer-descriptor format;
// the split into per-array engines with their own memory ports is this
// design's choice (arbitration between ports belongs to the memory
// interface, outside this design).
module mac
  import mm_pkg::*;
#(
  parameter int unsigned P_M    = P_M_DEF,
  parameter int unsigned SDEPTH = 2 * BZ_MAX
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [P_M-1:0]   enable,
  // workload queues
  input  logic [P_M-1:0]   q_valid,
  input  desc_t            q_desc [P_M],
  output logic [P_M-1:0]   q_ready,
  // MPE side
  output logic [P_M-1:0]   job_valid,
  output logic [BZW-1:0]   job_si [P_M],
  output logic [BZW-1:0]   job_sj [P_M],
  output logic [KW-1:0]    job_k  [P_M],
  input  logic [P_M-1:0]   job_ready,
  output logic [P_M-1:0]   a_valid,
  output fp32_t            a_data [P_M],
  input  logic [P_M-1:0]   a_ready,
  output logic [P_M-1:0]   b_valid,
  output fp32_t            b_data [P_M],
  input  logic [P_M-1:0]   b_ready,
  input  logic [P_M-1:0]   c_valid,
  input  c_tok_t           c_data [P_M],
  output logic [P_M-1:0]   c_ready,
  output logic [P_M-1:0]   c_done,
  // memory ports
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
  input  logic [P_M-1:0]   wr_ready
);
  for (genvar j = 0; j < P_M; j++) begin : g_eng
    mac_engine #(.SDEPTH(SDEPTH)) u_eng (
      .clk, .rst_n, .enable(enable[j]),
      .q_valid(q_valid[j]), .q_desc(q_desc[j]), .q_ready(q_ready[j]),
      .job_valid(job_valid[j]), .job_si(job_si[j]), .job_sj(job_sj[j]), .job_k(job_k[j]),
      .job_ready(job_ready[j]),
      .a_valid(a_valid[j]), .a_data(a_data[j]), .a_ready(a_ready[j]),
      .b_valid(b_valid[j]), .b_data(b_data[j]), .b_ready(b_ready[j]),
      .c_valid(c_valid[j]), .c_data(c_data[j]), .c_ready(c_ready[j]), .c_done(c_done[j]),
      .ra_req_valid(ra_req_valid[j]), .ra_req_addr(ra_req_addr[j]), .ra_req_len(ra_req_len[j]),
      .ra_req_ready(ra_req_ready[j]), .ra_rsp_valid(ra_rsp_valid[j]), .ra_rsp_data(ra_rsp_data[j]),
      .rb_req_valid(rb_req_valid[j]), .rb_req_addr(rb_req_addr[j]), .rb_req_len(rb_req_len[j]),
      .rb_req_ready(rb_req_ready[j]), .rb_rsp_valid(rb_rsp_valid[j]), .rb_rsp_data(rb_rsp_data[j]),
      .wr_valid(wr_valid[j]), .wr_addr(wr_addr[j]), .wr_data(wr_data[j]), .wr_ready(wr_ready[j])
    );
  end
endmodule
