// tb_pe: checks one processing element (PID 1) on its own.
// The testbench plays the array head: it sends the prefetch column and then,
// per iteration, one row of SB with the next column of SA, in the token
// format of the design. It checks that A and B are forwarded one cycle later
// while S_i - 1 > PID and are null otherwise, that the PE's own row of C is
// the correctly rounded accumulation of its A elements times each B row, that
// the last PE marks its final result as last, and that after its own results
// the PE passes the results of the downstream PEs through f_c in order,
// with back-pressure on its output.
module tb_pe;
  import mm_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;
  localparam logic [IDXW-1:0] PID = 1;

  logic a_in_valid, a_out_valid, b_in_valid, b_out_valid;
  a_tok_t a_in, a_out;
  b_tok_t b_in, b_out;
  logic c_in_valid, c_in_ready, c_out_valid, c_out_ready;
  c_tok_t c_in, c_out;

  pe #(.FC_DEPTH(16), .MC_DEPTH(16)) dut (.clk, .rst_n, .pid(PID), .*);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // forwarding monitor: outputs equal last cycle's inputs, gated
  logic pa_v, pb_v;
  a_tok_t pa;
  b_tok_t pb;
  int n_fwd = 0, n_null = 0;
  always_ff @(posedge clk) begin
    pa_v <= a_in_valid; pa <= a_in;
    pb_v <= b_in_valid; pb <= b_in;
    if (rst_n) begin
      if (pa_v) begin
        check(a_out_valid == (pa.si_m1 > PID), "A forward gating");
        if (a_out_valid) check(a_out == pa, "A forwarded token");
        if (a_out_valid) n_fwd++; else n_null++;
      end else check(!a_out_valid, "no spurious A");
      if (pb_v) begin
        check(b_out_valid == (pb.si_m1 > PID), "B forward gating");
        if (b_out_valid) check(b_out == pb, "B forwarded token");
      end else check(!b_out_valid, "no spurious B");
    end
  end

  // expected output stream of C
  c_tok_t exp_c [$];
  int n_c = 0;
  always_ff @(posedge clk) begin
    c_out_ready <= ($urandom_range(3) != 0);
    if (rst_n && c_out_valid && c_out_ready) begin
      c_tok_t e;
      e = exp_c.size() > 0 ? exp_c.pop_front() : '{data: 32'hDEAD_BEEF, last: 1'b0};
      check(c_out == e, $sformatf("C out %h/%b exp %h/%b", c_out.data, c_out.last, e.data, e.last));
      n_c++;
    end
  end

  // one workload: K iterations, S_i (array rows), S_j; downstream results
  task automatic job(int si, int sj, int k, int n_down);
    fp32_t a [][], b [][];
    fp32_t acc [];
    a = new[k]; b = new[k]; acc = new[sj];
    for (int kk = 0; kk < k; kk++) begin
      a[kk] = new[si]; b[kk] = new[sj];
      foreach (a[kk][i]) a[kk][i] = rand_fp(3);
      foreach (b[kk][c]) b[kk][c] = rand_fp(3);
    end
    for (int c = 0; c < sj; c++) begin
      acc[c] = 32'd0;
      for (int kk = 0; kk < k; kk++)
        acc[c] = to_fp32(from_fp32(to_fp32(from_fp32(a[kk][PID]) * from_fp32(b[kk][c]))) + from_fp32(acc[c]));
      if (acc[c] == 32'h8000_0000) acc[c] = 32'd0;
      exp_c.push_back('{data: acc[c], last: (c == sj - 1) && (si - 1 == int'(PID))});
    end
    // prefetch
    for (int i = 0; i < si; i++) begin
      a_in_valid <= 1'b1;
      a_in <= '{data: a[0][i], idx: IDXW'(i), si_m1: IDXW'(si - 1)};
      @(posedge clk);
    end
    a_in_valid <= 1'b0;
    for (int kk = 0; kk < k; kk++) begin
      int len;
      len = si > sj ? si : sj;
      if (len < ACC_GAP) len = ACC_GAP;
      for (int t = 0; t < len; t++) begin
        b_in_valid <= t < sj;
        b_in <= '{data: (t < sj) ? b[kk][t] : 32'd0, col: IDXW'(t), si_m1: IDXW'(si - 1),
                  row_first: t == 0, row_last: t == sj - 1,
                  first_it: kk == 0, last_it: kk == k - 1};
        a_in_valid <= (kk < k - 1) && (t < si);
        a_in <= '{data: (kk < k - 1 && t < si) ? a[kk + 1][t] : 32'd0, idx: IDXW'(t),
                  si_m1: IDXW'(si - 1)};
        @(posedge clk);
      end
    end
    a_in_valid <= 1'b0;
    b_in_valid <= 1'b0;
    // downstream PEs' results arrive on c_in
    for (int d = 0; d < n_down; d++) begin
      c_tok_t t;
      t = '{data: 32'(1000 + d), last: d == n_down - 1};
      exp_c.push_back(t);
      c_in_valid <= 1'b1;
      c_in <= t;
      @(posedge clk);
      while (!c_in_ready) @(posedge clk);
    end
    c_in_valid <= 1'b0;
    repeat (60) @(posedge clk);
    check(exp_c.size() == 0, "all results left the PE");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; a_in_valid = 0; b_in_valid = 0; c_in_valid = 0; a_in = '0; b_in = '0; c_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    job(4, 6, 5, 12);   // PID 1 of 4 active PEs: forwards, passes 2 rows
    job(2, 3, 3, 0);    // PID 1 is the last active PE: null forwarding, marks last
    job(3, 8, 4, 8);    // S_j > S_i
    job(6, 2, 6, 8);    // S_j < ACC_GAP
    check(n_fwd > 0 && n_null > 0, "both forwarding and null seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
