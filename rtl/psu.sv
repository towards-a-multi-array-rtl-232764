// psu: phase synchronization unit at the head of a PE array.
//
// It merges the element streams that the memory access controller fetches
// for one workload (a column of SA per iteration on stream A, a row of SB
// per iteration on stream B) into the phase schedule every PE relies on:
//
//   prefetch : the S_i elements of column 1 of SA (V_1);
//   phase k  : row k of SB (S_j elements) together with column k+1 of SA
//              (S_i elements, none in the last phase), k = 1..K.
//
// A phase ends only when both of its streams are complete, so a phase lasts
// max(S_i, S_j) cycles when data are always available; this is where the
// stalls that keep column k and row k in step are inserted when S_i != S_j.
// Column k+1 is never started before the first element of row k, which keeps
// the PEs' double-buffered R_a safe. Two further stalls are inserted:
//   - when S_j < ACC_GAP, the first element of a row waits so that any two
//     uses of the same partial sum in M_c are ACC_GAP cycles apart;
//   - the last row of a workload waits until every result of the previous
//     workload has left the array (c_done), so the PEs' result FIFOs f_c
//     never see two blocks at once.
// Because the array itself has no internal flow control, every PE sees the
// same schedule delayed by one cycle per hop, so one unit at the head
// synchronises the whole array. The paper places a PSU in each PE and says
// only that it inserts stalls so that column k and row k arrive together;
// the schedule above and the placement at the head are this design's own.
//
// Interface: job (S_i, S_j, K) with valid/ready, streams A and B in with
// valid/ready (pop on ready), token streams out with valid only.
module psu
  import mm_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // workload parameters
  input  logic            job_valid,
  input  logic [BZW-1:0]  job_si,
  input  logic [BZW-1:0]  job_sj,
  input  logic [KW-1:0]   job_k,
  output logic            job_ready,
  // element streams from the memory access controller
  input  logic            a_valid,
  input  fp32_t           a_data,
  output logic            a_ready,
  input  logic            b_valid,
  input  fp32_t           b_data,
  output logic            b_ready,
  // one pulse per result block fully written back
  input  logic            c_done,
  // token streams into the array
  output logic            a_out_valid,
  output a_tok_t          a_out,
  output logic            b_out_valid,
  output b_tok_t          b_out,
  // status
  output logic            busy,
  output logic            stall_sync,   // one stream done, waiting for the other
  output logic            stall_gap,    // row held back for the M_c distance
  output logic            stall_drain   // last row held back for write-back
);
  typedef enum logic [1:0] {IDLE, PREFETCH, PHASE} state_t;
  state_t state;

  logic [BZW-1:0] si, sj, a_cnt, b_cnt;
  logic [KW-1:0]  k_tot, k;
  logic [3:0]     since_b;
  logic [1:0]     outstanding;

  logic last_row, need_a, gap_ok, drain_ok, can_b, can_a, issue_a, issue_b;
  logic b_done_nxt, a_done_nxt, phase_end;

  always_comb begin
    last_row   = (k == k_tot);
    need_a     = (state == PREFETCH) || (state == PHASE && !last_row);
    gap_ok     = (b_cnt != '0) || (sj >= BZW'(ACC_GAP))
              || (BZW'(since_b) >= BZW'(ACC_GAP) - sj);
    drain_ok   = !last_row || (outstanding == '0) || (b_cnt != '0);
    can_b      = (state == PHASE) && (b_cnt < sj) && gap_ok && drain_ok;
    issue_b    = can_b && b_valid;
    can_a      = need_a && (a_cnt < si) && (state == PREFETCH || b_cnt != '0 || issue_b);
    issue_a    = can_a && a_valid;
    b_done_nxt = (b_cnt + BZW'(issue_b)) == sj;
    a_done_nxt = !need_a || (state == PHASE && (a_cnt + BZW'(issue_a)) == si)
              || (state == PREFETCH && (a_cnt + BZW'(issue_a)) == si);
    phase_end  = (state == PHASE) && b_done_nxt && a_done_nxt;
  end

  assign job_ready = (state == IDLE);
  assign a_ready   = issue_a;
  assign b_ready   = issue_b;
  assign busy      = (state != IDLE);

  assign a_out_valid = issue_a;
  assign a_out       = '{data: a_data, idx: a_cnt[IDXW-1:0], si_m1: IDXW'(si - 1'b1)};
  assign b_out_valid = issue_b;
  assign b_out       = '{data: b_data, col: b_cnt[IDXW-1:0], si_m1: IDXW'(si - 1'b1),
                         row_first: (b_cnt == '0), row_last: (b_cnt == sj - 1'b1),
                         first_it: (k == KW'(1)), last_it: last_row};

  assign stall_sync  = (state == PHASE) && need_a
                    && ((b_cnt == sj && a_cnt < si) || (a_cnt == si && b_cnt < sj));
  assign stall_gap   = (state == PHASE) && b_cnt == '0 && !gap_ok && drain_ok;
  assign stall_drain = (state == PHASE) && !drain_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= IDLE;
      si          <= '0;
      sj          <= '0;
      k_tot       <= '0;
      k           <= '0;
      a_cnt       <= '0;
      b_cnt       <= '0;
      since_b     <= '1;
      outstanding <= '0;
    end else begin
      if (issue_b)            since_b <= '0;
      else if (since_b != '1) since_b <= since_b + 1'b1;

      outstanding <= outstanding + 2'(phase_end && last_row) - 2'(c_done);

      case (state)
        IDLE: if (job_valid) begin
          si    <= job_si;
          sj    <= job_sj;
          k_tot <= job_k;
          k     <= KW'(1);
          a_cnt <= '0;
          b_cnt <= '0;
          state <= PREFETCH;
        end
        PREFETCH: begin
          a_cnt <= a_cnt + BZW'(issue_a);
          if (a_done_nxt) begin
            a_cnt <= '0;
            state <= PHASE;
          end
        end
        PHASE: begin
          a_cnt <= a_cnt + BZW'(issue_a);
          b_cnt <= b_cnt + BZW'(issue_b);
          if (phase_end) begin
            a_cnt <= '0;
            b_cnt <= '0;
            k     <= k + 1'b1;
            if (last_row) state <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_job_sizes: assert property (@(posedge clk) disable iff (!rst_n)
    (job_valid && job_ready) |-> (job_si != 0 && job_sj != 0 && job_k != 0
                                  && job_si <= BZW'(BZ_MAX) && job_sj <= BZW'(BZ_MAX)));
endmodule
