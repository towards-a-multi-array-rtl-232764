// wqm: workload queue management with work stealing.
//
// One descriptor queue per PE array; the host appends buffer descriptors
// (tasks) to any queue and the memory access controller takes them from the
// head of its array's queue. A counter per queue holds its number of tasks.
//
// Work stealing: every cycle, each active queue whose counter is zero while
// its array's controller is ready for a task (pop_ready) raises a stealing
// request. A round-robin arbiter picks one request; the controller compares
// the counters of the other active queues and takes the one with the most
// tasks as the victim (the lowest index on a tie). The victim's newest task
// (its tail) is moved to the tail of the empty queue in the same cycle, and
// the idle array takes it from there. Detection and arbitration repeat every
// cycle, one move per cycle.
//
// Follows the paper: per-array queues, counters, stealing into an empty
// queue from the fullest one, round-robin arbitration of concurrent
// requests. This design's own choices: the queue depth, taking the victim's
// tail, raising a request only while the array is ready for work (so a
// single task is not moved back and forth between two empty queues), never
// taking the task a victim's own array is taking in the same cycle, and
// holding stealing in a cycle in which the host appends a task.
module wqm
  import mm_pkg::*;
#(
  parameter int unsigned P_M     = P_M_DEF,
  parameter int unsigned Q_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [P_M-1:0]       active,      // queues whose array is a head
  // host side
  input  logic                 push_valid,
  input  logic [$clog2(P_M)-1:0] push_q,
  input  desc_t                push_desc,
  output logic                 push_ready,
  // array side
  output logic [P_M-1:0]       pop_valid,
  output desc_t                pop_desc [P_M],
  input  logic [P_M-1:0]       pop_ready,
  // counters and stealing events
  output logic [$clog2(Q_DEPTH+1)-1:0] cnt [P_M],
  output logic                 steal,
  output logic [$clog2(P_M)-1:0] steal_from,
  output logic [$clog2(P_M)-1:0] steal_to
);
  localparam int unsigned QW = $clog2(Q_DEPTH);
  localparam int unsigned CW = $clog2(Q_DEPTH+1);
  localparam int unsigned IW = $clog2(P_M);

  desc_t          mem  [P_M][Q_DEPTH];
  logic [QW-1:0]  head [P_M];
  logic [QW-1:0]  tail [P_M];   // next free slot

  logic [P_M-1:0] req, grant, pop, hpush, qin;
  logic [IW-1:0]  thief, victim;
  logic           victim_ok, do_push;
  logic [CW-1:0]  best;

  assign push_ready = cnt[push_q] != CW'(Q_DEPTH);
  assign do_push    = push_valid && push_ready;

  always_comb begin
    for (int q = 0; q < P_M; q++) begin
      req[q]       = active[q] && cnt[q] == '0 && pop_ready[q];
      pop_valid[q] = cnt[q] != '0;
      pop_desc[q]  = mem[q][head[q]];
      pop[q]       = pop_valid[q] && pop_ready[q];
      hpush[q]     = do_push && push_q == IW'(q);
    end
  end

  rr_arbiter #(.N(P_M)) u_arb (
    .clk, .rst_n, .req, .advance(steal), .grant, .grant_idx(thief)
  );

  // victim: active queue with the largest counter that still holds a task
  // after its own array's pop in this cycle
  always_comb begin
    victim    = '0;
    victim_ok = 1'b0;
    best      = '0;
    for (int q = 0; q < P_M; q++) begin
      if (active[q] && cnt[q] > CW'(pop[q]) && cnt[q] > best) begin
        best      = cnt[q];
        victim    = IW'(q);
        victim_ok = 1'b1;
      end
    end
  end

  assign steal      = |grant && victim_ok && !do_push;
  for (genvar q = 0; q < P_M; q++) begin : g_qin
    assign qin[q] = hpush[q] || (steal && thief == IW'(q));
  end
  assign steal_from = victim;
  assign steal_to   = thief;

  always_ff @(posedge clk) begin
    if (do_push)
      mem[push_q][tail[push_q]] <= push_desc;
    if (steal)
      mem[thief][tail[thief]] <= mem[victim][tail[victim] - 1'b1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < P_M; q++) begin
        head[q] <= '0;
        tail[q] <= '0;
        cnt[q]  <= '0;
      end
    end else begin
      for (int q = 0; q < P_M; q++) begin
        if (pop[q]) head[q] <= head[q] + 1'b1;
        if (hpush[q] || (steal && thief == IW'(q)))
          tail[q] <= tail[q] + 1'b1;
        else if (steal && victim == IW'(q))
          tail[q] <= tail[q] - 1'b1;
        cnt[q] <= cnt[q] + CW'(qin[q]) - CW'(pop[q]) - CW'(steal && victim == IW'(q));
      end
    end
  end

  a_pow2: assert property (@(posedge clk) 1'b1 |-> (Q_DEPTH & (Q_DEPTH - 1)) == 0);
  a_steal_target_empty: assert property (@(posedge clk) disable iff (!rst_n)
    steal |-> cnt[thief] == '0 && cnt[victim] > CW'(pop[victim]));
endmodule
