// tb_conv2_sweep: the accelerator at its default size running a slice of the
// AlexNet conv-2 layer (M = 128 and K = 1200 as in the layer, the first 64 of
// its 729 output columns) once in each of the four ways the arrays can be
// grouped: N_p = 1 (all four arrays joined, S_i = 128, so half of the 256
// PEs forward nulls), N_p = 2 (pairs, S_i = 64), N_p = 3 (three single
// arrays, the fourth disabled, S_i = 32) and N_p = 4 (S_i = 16). S_j = S_i
// except where N runs out. This is the same sweep over (N_p, S_i) that is
// used to validate the analytical execution-time model. All tasks go to
// queue 0 and are shared by work stealing; every element of C is checked.
// For each run it prints the cycle count next to the model's compute-bound
// lower bound N_work x (S_i + max(S_i,S_j) x K + Stage_fmac) and checks that
// the run is neither faster than that bound nor more than twice as slow; the
// memory model is not a DDR3 model, so only the compute side is compared.
module tb_conv2_sweep;
  import mm_pkg::*;
  import tb_fp_pkg::*;
  localparam int PM = 4;
  localparam int PP = P_DEF;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  logic [PM-2:0] coop;
  logic [PM-1:0] array_en;
  logic task_valid, task_ready;
  logic [1:0] task_queue;
  desc_t task_desc;
  logic [PM-1:0]   ra_req_valid, ra_req_ready, ra_rsp_valid;
  logic [ADDRW-1:0] ra_req_addr [PM];
  logic [BZW-1:0]  ra_req_len [PM];
  fp32_t           ra_rsp_data [PM];
  logic [PM-1:0]   rb_req_valid, rb_req_ready, rb_rsp_valid;
  logic [ADDRW-1:0] rb_req_addr [PM];
  logic [BZW-1:0]  rb_req_len [PM];
  fp32_t           rb_rsp_data [PM];
  logic [PM-1:0]   wr_valid, wr_ready;
  logic [ADDRW-1:0] wr_addr [PM];
  fp32_t           wr_data [PM];
  logic [PM-1:0]   blocks_done, stall_sync, stall_gap, stall_drain, busy;
  logic            steal;
  logic [1:0]      steal_from, steal_to;

  mm_accel dut (.*);
  mem_model #(.P_M(PM), .WORDS(1048576), .GRANT_PCT(95)) u_mem (.*);

  int n_steal = 0, n_sync = 0, n_gap = 0, n_drain = 0, n_coop = 0, n_null = 0, n_mode = 0;
  int n_blocks = 0, cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;
  always_ff @(posedge clk) begin
    if (rst_n) begin
      n_steal  <= n_steal + int'(steal);
      n_sync   <= n_sync  + $countones(stall_sync);
      n_gap    <= n_gap   + $countones(stall_gap);
      n_drain  <= n_drain + $countones(stall_drain);
      n_blocks <= n_blocks + $countones(blocks_done);
      for (int j = 1; j < PM; j++)
        if (coop[j-1] && dut.u_mpe.hd_bv[j]) n_coop <= n_coop + 1;
    end
  end

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  localparam int AT_BASE = 0, B_BASE = 360448, C_BASE = 720896;

  // one matrix product M x K x N cut into si x sj blocks
  task automatic run(string name, int np, logic [PM-2:0] cf, logic [PM-1:0] en, int m, int k, int n, int si, int sj);
    fp32_t a [], b [];
    int nblk, start, t0;
    a = new[m * k]; b = new[k * n];
    coop = cf; array_en = en;
    n_mode++;
    for (int i = 0; i < m * k; i++) a[i] = rand_fp(3);
    for (int i = 0; i < k * n; i++) b[i] = rand_fp(3);
    for (int r = 0; r < m; r++)
      for (int kk = 0; kk < k; kk++) u_mem.mem[AT_BASE + kk * m + r] = a[r * k + kk];  // A^T
    for (int i = 0; i < k * n; i++) u_mem.mem[B_BASE + i] = b[i];
    for (int i = 0; i < m * n; i++) u_mem.mem[C_BASE + i] = 32'hDEAD_BEEF;
    @(posedge clk);
    start = n_blocks;
    nblk  = ((m + si - 1) / si) * ((n + sj - 1) / sj);
    t0    = cyc;
    for (int bi = 0; bi < (m + si - 1) / si; bi++)
      for (int bj = 0; bj < (n + sj - 1) / sj; bj++) begin
        int bsi, bsj;
        bsi = (m - bi * si < si) ? m - bi * si : si;
        bsj = (n - bj * sj < sj) ? n - bj * sj : sj;
        task_desc  <= '{addr_a: ADDRW'(AT_BASE + bi * si), str_a: ADDRW'(m), bz_a: BZW'(bsi),
                        addr_b: ADDRW'(B_BASE + bj * sj), str_b: ADDRW'(n), bz_b: BZW'(bsj),
                        iter_k: KW'(k),
                        addr_c: ADDRW'(C_BASE + bi * si * n + bj * sj), str_c: ADDRW'(n)};
        task_queue <= 2'd0;
        task_valid <= 1'b1;
        @(posedge clk);
        while (!task_ready) @(posedge clk);
        task_valid <= 1'b0;
        @(posedge clk);
      end
    while (n_blocks < start + nblk) @(posedge clk);
    begin
      // lower bound of the analytical model: N_work x (S_i + max(S_i,S_j) x K + Stage_fmac),
      // with N_work the tasks of the busiest array
      int groups, nwork, bound;
      real gflops;
      groups = 0;
      for (int j = 0; j < PM; j++) if (en[j] && (j == 0 || !cf[j-1])) groups++;
      nwork  = (nblk + groups - 1) / groups;
      bound  = nwork * (si + (si > sj ? si : sj) * k + FMUL_LAT + FADD_LAT);
      gflops = 2.0 * m * k * n / (real'(cyc - t0) / 200.0e6) / 1.0e9;
      $display("%s: %0d tasks on %0d arrays, %0d cycles (model lower bound %0d), %.1f GFLOPS at 200 MHz",
               name, nblk, groups, cyc - t0, bound, gflops);
      check(groups == np, $sformatf("%s: %0d arrays work in parallel", name, groups));
      check(cyc - t0 >= bound, $sformatf("%s: not faster than the compute bound", name));
      check(cyc - t0 <= 2 * bound, $sformatf("%s: loading overlaps computing", name));
    end
    repeat (5) @(posedge clk);
    for (int r = 0; r < m; r++)
      for (int c = 0; c < n; c++) begin
        fp32_t acc;
        acc = 32'd0;
        for (int kk = 0; kk < k; kk++)
          acc = to_fp32(from_fp32(to_fp32(from_fp32(a[r * k + kk]) * from_fp32(b[kk * n + c])))
                        + from_fp32(acc));
        if (acc == 32'h8000_0000) acc = 32'd0;
        check(u_mem.mem[C_BASE + r * n + c] == acc,
              $sformatf("cfg %b C[%0d][%0d] got %h exp %h", cf, r, c, u_mem.mem[C_BASE + r * n + c], acc));
      end
    // null forwarding: S_i smaller than the PEs of a group
    begin
      int grp;
      grp = PP;
      for (int j = 0; j < PM - 1 && cf[j]; j++) grp += PP;
      if (si < grp) n_null++;
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; task_valid = 0; task_queue = 0; task_desc = '0;
    coop = '0; array_en = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // conv-2 is 128 x 1200 x 729; the first 64 columns of C
    run("N_p=1 S_i=128", 1, 3'b111, 4'b1111, 128, 1200, 64, 128, 128);
    run("N_p=2 S_i=64",  2, 3'b101, 4'b1111, 128, 1200, 64, 64, 64);
    run("N_p=3 S_i=32",  3, 3'b000, 4'b0111, 128, 1200, 64, 32, 32);
    run("N_p=4 S_i=16",  4, 3'b000, 4'b1111, 128, 1200, 64, 16, 16);
    $display("events: steal=%0d sync=%0d gap=%0d drain=%0d coop=%0d null=%0d modes=%0d",
             n_steal, n_sync, n_gap, n_drain, n_coop, n_null, n_mode);
    check(n_coop  > 0, "cooperation transfer happened");
    check(n_sync  > 0, "phase-synchronization stall happened");
    check(n_mode  == 4, "mode switches");
    check(n_null  > 0, "null forwarding happened");
    check(n_steal > 0, "work stealing happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
