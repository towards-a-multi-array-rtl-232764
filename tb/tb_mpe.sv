// tb_mpe: drives the matrices processing engine directly with workloads
// (random FP32 blocks) on every array, with random gaps on the input streams
// and random back-pressure on the result streams, in independent and in
// cooperation mode. Each result block is compared element by element with a
// reference that repeats the PE's operation order in double precision,
// rounding to single after every multiply and add. Also counts the stalls of
// the phase synchronization units and checks that each kind happened.
module tb_mpe;
  import mm_pkg::*;
  import tb_fp_pkg::*;
  localparam int PM = 2;
  localparam int PP = 4;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  logic [PM-2:0] coop;
  logic [PM-1:0] job_valid, job_ready, a_valid, a_ready, b_valid, b_ready;
  logic [PM-1:0] c_valid, c_ready, c_done, busy, st_sync, st_gap, st_drain;
  logic [BZW-1:0] job_si [PM], job_sj [PM];
  logic [KW-1:0]  job_k [PM];
  fp32_t a_data [PM], b_data [PM];
  c_tok_t c_data [PM];

  mpe #(.P_M(PM), .P(PP)) dut (.*, .stall_sync(st_sync), .stall_gap(st_gap), .stall_drain(st_drain));

  // per-array driver state
  typedef struct { int si; int sj; int k; } job_t;
  job_t      jobs [PM][$];
  fp32_t     aq [PM][$], bq [PM][$], cq [PM][$];
  int        n_sync = 0, n_gap = 0, n_drain = 0, blocks_done = 0;

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // Build one workload for array j: A^T rows (K x si), B rows (K x sj),
  // expected C (si x sj, row-major).
  task automatic add_job(int j, int si, int sj, int k);
    fp32_t a [][], b [][];
    a = new[k]; b = new[k];
    for (int kk = 0; kk < k; kk++) begin
      a[kk] = new[si]; b[kk] = new[sj];
      for (int i = 0; i < si; i++) begin a[kk][i] = rand_fp(3); aq[j].push_back(a[kk][i]); end
      for (int c = 0; c < sj; c++) begin b[kk][c] = rand_fp(3); bq[j].push_back(b[kk][c]); end
    end
    for (int i = 0; i < si; i++)
      for (int c = 0; c < sj; c++) begin
        fp32_t acc;
        acc = 32'd0;
        for (int kk = 0; kk < k; kk++)
          acc = to_fp32(from_fp32(to_fp32(from_fp32(a[kk][i]) * from_fp32(b[kk][c]))) + from_fp32(acc));
        if (acc == 32'h8000_0000) acc = 32'd0;
        cq[j].push_back(acc);
      end
    jobs[j].push_back('{si, sj, k});
  endtask

  // drivers
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int j = 0; j < PM; j++) begin
        if (job_valid[j] && job_ready[j]) void'(jobs[j].pop_front());
        if (a_valid[j] && a_ready[j]) void'(aq[j].pop_front());
        if (b_valid[j] && b_ready[j]) void'(bq[j].pop_front());
      end
      n_sync  <= n_sync  + $countones(st_sync);
      n_gap   <= n_gap   + $countones(st_gap);
      n_drain <= n_drain + $countones(st_drain);
    end
  end

  logic [PM-1:0] a_gate, b_gate;
  always_ff @(posedge clk) begin
    for (int j = 0; j < PM; j++) begin
      a_gate[j]  <= ($urandom_range(9) < 8);
      b_gate[j]  <= ($urandom_range(9) < 8);
      c_ready[j] <= ($urandom_range(9) < 7);
    end
  end

  always_comb begin
    for (int j = 0; j < PM; j++) begin
      job_valid[j] = jobs[j].size() > 0;
      job_si[j]    = jobs[j].size() > 0 ? BZW'(jobs[j][0].si) : '0;
      job_sj[j]    = jobs[j].size() > 0 ? BZW'(jobs[j][0].sj) : '0;
      job_k[j]     = jobs[j].size() > 0 ? KW'(jobs[j][0].k)   : '0;
      a_valid[j]   = aq[j].size() > 0 && a_gate[j];
      a_data[j]    = aq[j].size() > 0 ? aq[j][0] : '0;
      b_valid[j]   = bq[j].size() > 0 && b_gate[j];
      b_data[j]    = bq[j].size() > 0 ? bq[j][0] : '0;
    end
  end

  // result monitor; c_done plays the memory access controller's role
  int cnt_in_block [PM];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_done <= '0;
      for (int j = 0; j < PM; j++) cnt_in_block[j] <= 0;
    end else begin
      c_done <= '0;
      for (int j = 0; j < PM; j++) begin
        if (c_valid[j] && c_ready[j]) begin
          fp32_t e;
          e = cq[j].size() > 0 ? cq[j].pop_front() : 32'hDEAD_BEEF;
          check(c_data[j].data == e,
                $sformatf("array %0d elem %0d got %h exp %h", j, cnt_in_block[j], c_data[j].data, e));
          cnt_in_block[j] <= cnt_in_block[j] + 1;
          if (c_data[j].last) begin
            c_done[j]      <= 1'b1;
            cnt_in_block[j] <= 0;
            blocks_done++;
          end
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_done(int nblocks);
    while (blocks_done < nblocks) @(posedge clk);
    repeat (10) @(posedge clk);
  endtask

  initial begin
    rst_n = 0;
    coop  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // independent mode: both arrays, various block shapes
    add_job(0, 3, 6, 5);   // S_i < S_j, S_i < P (null forwarding)
    add_job(0, 4, 4, 1);   // K = 1
    add_job(0, 2, 7, 3);
    add_job(1, 4, 2, 3);   // S_j < ACC_GAP
    add_job(1, 1, 1, 4);
    add_job(1, 4, 9, 6);
    wait_done(6);
    check(cq[0].size() == 0 && cq[1].size() == 0, "all independent results seen");
    // cooperation mode: arrays 0 and 1 form one array of 8 PEs
    coop = 1'b1;
    @(posedge clk);
    add_job(0, 7, 5, 4);
    add_job(0, 8, 8, 3);
    add_job(0, 6, 3, 2);
    wait_done(9);
    check(cq[0].size() == 0, "all cooperation results seen");
    check(n_sync  > 0, "sync stalls happened");
    check(n_gap   > 0, "gap stalls happened");
    check(n_drain >= 0, "drain stall count");
    $display("stalls: sync=%0d gap=%0d drain=%0d", n_sync, n_gap, n_drain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
