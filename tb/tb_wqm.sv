// tb_wqm: checks the workload queue management against a queue model.
// The host appends tasks with random target queues (mostly queue 0), the
// arrays take tasks at random. Every cycle the model checks the counters,
// the head task offered to each array, and each steal: the thief must be an
// empty active queue whose array is ready, chosen round-robin, the victim the
// active queue with the most tasks (lowest index on a tie) that keeps a task
// after its own array's pop,
// and the moved task the victim's newest one. It also checks that stealing
// happens whenever it should, and that an inactive queue neither steals nor
// is stolen from.
module tb_wqm;
  import mm_pkg::*;
  localparam int PM = 4, QD = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  logic [PM-1:0] active, pop_valid, pop_ready;
  logic push_valid, push_ready, steal;
  logic [1:0] push_q, steal_from, steal_to;
  desc_t push_desc, pop_desc [PM];
  logic [$clog2(QD+1)-1:0] cnt [PM];

  wqm #(.P_M(PM), .Q_DEPTH(QD)) dut (.*);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  logic [31:0] mq [PM][$];
  int last = PM - 1, n_steal = 0, id = 1;

  always @(posedge clk) begin
    if (rst_n) begin
      int thief, victim, best;
      logic any_req;
      // expected steal
      any_req = 0; thief = -1;
      for (int o = 1; o <= PM; o++) begin
        int c;
        c = (last + o) % PM;
        if (thief < 0 && active[c] && mq[c].size() == 0 && pop_ready[c]) thief = c;
      end
      best = 0; victim = -1;
      for (int q = 0; q < PM; q++)
        if (active[q] && mq[q].size() > int'(pop_valid[q] && pop_ready[q]) && mq[q].size() > best) begin
          best = mq[q].size(); victim = q;
        end
      for (int q = 0; q < PM; q++) begin
        check(int'(cnt[q]) == mq[q].size(), $sformatf("cnt[%0d] %0d model %0d", q, cnt[q], mq[q].size()));
        check(pop_valid[q] == (mq[q].size() > 0), "pop_valid");
        if (mq[q].size() > 0) check(pop_desc[q].addr_a == mq[q][0], "head task");
      end
      check(steal == (thief >= 0 && victim >= 0 && !(push_valid && push_ready)),
            $sformatf("steal %b expected thief %0d victim %0d", steal, thief, victim));
      if (steal) begin
        check(int'(steal_to) == thief && int'(steal_from) == victim, "thief/victim choice");
        n_steal++;
        last = thief;
      end
      // apply this cycle's operations to the model
      for (int q = 0; q < PM; q++)
        if (pop_valid[q] && pop_ready[q]) void'(mq[q].pop_front());
      if (steal) mq[steal_to].push_back(mq[steal_from].pop_back());
      if (push_valid && push_ready) mq[push_q].push_back(push_desc.addr_a);
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; push_valid = 0; push_q = 0; push_desc = '0; pop_ready = 0; active = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      if (n == 1000) active <= 4'b0111;
      if (n == 2000) active <= 4'b0101;
      push_valid <= ($urandom_range(2) == 0);
      push_q     <= ($urandom_range(3) == 0) ? 2'($urandom) : 2'd0;
      push_desc  <= '0;
      push_desc.addr_a <= id;
      id++;
      for (int q = 0; q < PM; q++) pop_ready[q] <= ($urandom_range(5) == 0);
      @(posedge clk);
    end
    check(n_steal > 20, "stealing happened");
    $display("steals: %0d", n_steal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
