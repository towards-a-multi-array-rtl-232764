// mem_model: behavioural model of the external memory and its interface
// for the testbenches (not synthesizable, not part of the design).
//
// A flat array of 32-bit words serves P_M sets of ports (burst reads for
// streams A and B, word writes for stream C). Each read port keeps a queue
// of accepted bursts; a burst starts after a random latency and then returns
// one word per cycle, with random gaps. Write ports accept with random
// ready. GRANT_PCT sets how often a port may move data in a cycle.
module mem_model
  import mm_pkg::*;
#(
  parameter int P_M       = 4,
  parameter int WORDS     = 65536,
  parameter int GRANT_PCT = 80,
  parameter int MAX_LAT   = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [P_M-1:0]   ra_req_valid,
  input  logic [ADDRW-1:0] ra_req_addr [P_M],
  input  logic [BZW-1:0]   ra_req_len  [P_M],
  output logic [P_M-1:0]   ra_req_ready,
  output logic [P_M-1:0]   ra_rsp_valid,
  output fp32_t            ra_rsp_data [P_M],
  input  logic [P_M-1:0]   rb_req_valid,
  input  logic [ADDRW-1:0] rb_req_addr [P_M],
  input  logic [BZW-1:0]   rb_req_len  [P_M],
  output logic [P_M-1:0]   rb_req_ready,
  output logic [P_M-1:0]   rb_rsp_valid,
  output fp32_t            rb_rsp_data [P_M],
  input  logic [P_M-1:0]   wr_valid,
  input  logic [ADDRW-1:0] wr_addr [P_M],
  input  fp32_t            wr_data [P_M],
  output logic [P_M-1:0]   wr_ready
);
  fp32_t mem [WORDS];

  typedef struct { int addr; int len; int wait_cyc; } burst_t;
  burst_t qa [P_M][$];
  burst_t qb [P_M][$];

  always_ff @(posedge clk) begin
    for (int j = 0; j < P_M; j++) begin
      ra_req_ready[j] <= ($urandom_range(99) < GRANT_PCT);
      rb_req_ready[j] <= ($urandom_range(99) < GRANT_PCT);
      wr_ready[j]     <= ($urandom_range(99) < GRANT_PCT);
    end
  end

  always @(posedge clk) begin
    for (int j = 0; j < P_M; j++) begin
      ra_rsp_valid[j] <= 1'b0;
      rb_rsp_valid[j] <= 1'b0;
      if (rst_n) begin
        if (ra_req_valid[j] && ra_req_ready[j])
          qa[j].push_back('{int'(ra_req_addr[j]), int'(ra_req_len[j]), $urandom_range(MAX_LAT)});
        if (rb_req_valid[j] && rb_req_ready[j])
          qb[j].push_back('{int'(rb_req_addr[j]), int'(rb_req_len[j]), $urandom_range(MAX_LAT)});
        if (wr_valid[j] && wr_ready[j])
          mem[wr_addr[j] % WORDS] <= wr_data[j];
        if (qa[j].size() > 0) begin
          if (qa[j][0].wait_cyc > 0) qa[j][0].wait_cyc--;
          else if ($urandom_range(99) < GRANT_PCT) begin
            ra_rsp_valid[j] <= 1'b1;
            ra_rsp_data[j]  <= mem[qa[j][0].addr % WORDS];
            qa[j][0].addr++;
            qa[j][0].len--;
            if (qa[j][0].len == 0) void'(qa[j].pop_front());
          end
        end
        if (qb[j].size() > 0) begin
          if (qb[j][0].wait_cyc > 0) qb[j][0].wait_cyc--;
          else if ($urandom_range(99) < GRANT_PCT) begin
            rb_rsp_valid[j] <= 1'b1;
            rb_rsp_data[j]  <= mem[qb[j][0].addr % WORDS];
            qb[j][0].addr++;
            qb[j][0].len--;
            if (qb[j][0].len == 0) void'(qb[j].pop_front());
          end
        end
      end
    end
  end
endmodule
