// tb_mm_accel_full: the accelerator at its default size (4 arrays of 64
// PEs, blocks up to 256) running whole matrix products end to end: first
// 256x16x256 with arrays joined in pairs (N_p = 2, S_i = S_j = 128, four
// tasks submitted to queue 0 and shared by work stealing), then 256x8x200
// on all four arrays joined (N_p = 1, S_i = 256, S_j = 200, stalls from
// S_i != S_j). Every element of C is compared with a reference rounded after
// each multiply and add.
module tb_mm_accel_full;
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
  mem_model #(.P_M(PM), .WORDS(131072)) u_mem (.*);

  int n_steal = 0, n_sync = 0, n_gap = 0, n_drain = 0, n_coop = 0, n_null = 0, n_mode = 0;
  int n_blocks = 0;
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

  localparam int AT_BASE = 0, B_BASE = 16384, C_BASE = 32768;

  // one matrix product M x K x N cut into si x sj blocks
  task automatic run(logic [PM-2:0] cf, logic [PM-1:0] en, int m, int k, int n, int si, int sj);
    fp32_t a [], b [];
    int nblk, start;
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
    nblk  = (m / si) * (n / sj);
    for (int bi = 0; bi < m / si; bi++)
      for (int bj = 0; bj < n / sj; bj++) begin
        task_desc  <= '{addr_a: ADDRW'(AT_BASE + bi * si), str_a: ADDRW'(m), bz_a: BZW'(si),
                        addr_b: ADDRW'(B_BASE + bj * sj), str_b: ADDRW'(n), bz_b: BZW'(sj),
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
    repeat (400000) @(posedge clk);
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
    run(3'b101, 4'b1111, 256, 16, 256, 128, 128);  // N_p = 2, S_i = 128: the optimum for most layers
    run(3'b111, 4'b1111, 256, 8, 200, 256, 200);   // N_p = 1, one array of 256 PEs
    $display("events: steal=%0d sync=%0d gap=%0d drain=%0d coop=%0d null=%0d modes=%0d",
             n_steal, n_sync, n_gap, n_drain, n_coop, n_null, n_mode);
    check(n_coop  > 0, "cooperation transfer happened");
    check(n_sync  > 0, "phase-synchronization stall happened");
    check(n_mode  == 2, "mode switches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
