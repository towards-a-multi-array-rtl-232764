// tb_psu: checks the phase synchronization unit on its own.
// The element streams are always available, so the schedule must be tight:
// for one workload the span from the first A element to the last B element
// must be S_i + (K-1)*max(S_i, S_j, ACC_GAP) + S_j cycles. Every token's
// data, index and flags are compared with the expected sequence, column k+1
// of A must never start before row k of B, and the last row must wait for
// c_done of the previous block (write-back stall). Shapes cover S_i < S_j,
// S_i > S_j and S_j below ACC_GAP.
module tb_psu;
  import mm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  logic job_valid, job_ready, a_valid, a_ready, b_valid, b_ready, c_done;
  logic [BZW-1:0] job_si, job_sj;
  logic [KW-1:0] job_k;
  fp32_t a_data, b_data;
  logic a_out_valid, b_out_valid, busy, stall_sync, stall_gap, stall_drain;
  a_tok_t a_out;
  b_tok_t b_out;

  psu dut (.*);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // streams: data are running counters so that order can be checked
  int a_next = 0, b_next = 0;
  assign a_valid = 1'b1;
  assign b_valid = 1'b1;
  assign a_data  = 32'(a_next);
  assign b_data  = 32'(b_next);

  a_tok_t ea [$];
  b_tok_t eb [$];
  int cyc = 0, first_a = -1, last_b = -1, n_drain = 0, n_sync = 0, n_gap = 0;
  int b_rows_started = 0, a_cols_done = 0, a_in_col = 0;
  int cur_si = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (a_ready) a_next <= a_next + 1;
      if (b_ready) b_next <= b_next + 1;
      n_drain <= n_drain + int'(stall_drain);
      n_sync  <= n_sync + int'(stall_sync);
      n_gap   <= n_gap + int'(stall_gap);
      if (a_out_valid) begin
        a_tok_t e;
        e = ea.pop_front();
        check(a_out == e, $sformatf("A token %p exp %p", a_out, e));
        if (first_a < 0) first_a <= cyc;
      end
      if (b_out_valid) begin
        b_tok_t e;
        e = eb.pop_front();
        check(b_out == e, $sformatf("B token %p exp %p", b_out, e));
        last_b <= cyc;
      end
    end
  end

  // expected sequences for one job; data continue the running counters
  int exp_a = 0, exp_b = 0;
  task automatic expect_job(int si, int sj, int k);
    for (int kk = 1; kk <= k; kk++)
      for (int i = 0; i < si; i++)
        ea.push_back('{data: 32'(exp_a++), idx: IDXW'(i), si_m1: IDXW'(si - 1)});
    for (int kk = 1; kk <= k; kk++)
      for (int c = 0; c < sj; c++)
        eb.push_back('{data: 32'(exp_b++), col: IDXW'(c), si_m1: IDXW'(si - 1),
                       row_first: c == 0, row_last: c == sj - 1,
                       first_it: kk == 1, last_it: kk == k});
  endtask

  task automatic give_job(int si, int sj, int k);
    expect_job(si, sj, k);
    job_si <= BZW'(si); job_sj <= BZW'(sj); job_k <= KW'(k);
    job_valid <= 1'b1;
    @(posedge clk);
    while (!job_ready) @(posedge clk);
    job_valid <= 1'b0;
  endtask

  task automatic timed(int si, int sj, int k);
    int m;
    first_a = -1;
    give_job(si, sj, k);
    while (busy || job_valid) @(posedge clk);
    repeat (3) @(posedge clk);
    m = si > sj ? si : sj;
    if (m < ACC_GAP) m = ACC_GAP;
    check(last_b - first_a + 1 == si + (k - 1) * m + sj,
          $sformatf("span %0dx%0dx%0d got %0d exp %0d", si, sj, k, last_b - first_a + 1,
                    si + (k - 1) * m + sj));
    check(ea.size() == 0 && eb.size() == 0, "all tokens issued");
    // release the block for the next last row
    c_done <= 1'b1; @(posedge clk); c_done <= 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; job_valid = 0; c_done = 0; job_si = 0; job_sj = 0; job_k = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    timed(5, 8, 4);
    timed(8, 5, 3);
    timed(6, 6, 5);
    timed(2, 2, 4);   // S_j < ACC_GAP
    timed(1, 3, 2);
    timed(7, 1, 1);
    // back to back without c_done: the second last row must wait
    give_job(3, 6, 2);
    give_job(4, 6, 2);
    repeat (200) @(posedge clk);
    check(eb.size() == 6, "last row held until c_done");
    check(stall_drain, "drain stall visible");
    c_done <= 1'b1; @(posedge clk); c_done <= 1'b0;
    repeat (50) @(posedge clk);
    check(ea.size() == 0 && eb.size() == 0, "released after c_done");
    check(n_sync > 0 && n_gap > 0 && n_drain > 0, "all stall kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
