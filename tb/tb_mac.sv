// tb_mac: checks the memory access controller with two engines and the
// memory model. For each task it checks the job handed to the
// synchronization unit, that stream A delivers the K rows of the transposed
// block (ADDR_A + k*STR_A, BZ_A words) and stream B the K rows of SB in
// order, and that results sent on stream C land at ADDR_C + i*STR_C + j with
// one c_done per block. A disabled engine must take no task.
module tb_mac;
  import mm_pkg::*;
  localparam int PM = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;

  logic [PM-1:0] enable, q_valid, q_ready, job_valid, job_ready, a_valid, a_ready, b_valid, b_ready;
  logic [PM-1:0] c_valid, c_ready, c_done;
  desc_t q_desc [PM];
  logic [BZW-1:0] job_si [PM], job_sj [PM];
  logic [KW-1:0] job_k [PM];
  fp32_t a_data [PM], b_data [PM];
  c_tok_t c_data [PM];
  logic [PM-1:0]   ra_req_valid, ra_req_ready, ra_rsp_valid, rb_req_valid, rb_req_ready, rb_rsp_valid;
  logic [ADDRW-1:0] ra_req_addr [PM], rb_req_addr [PM], wr_addr [PM];
  logic [BZW-1:0]  ra_req_len [PM], rb_req_len [PM];
  fp32_t           ra_rsp_data [PM], rb_rsp_data [PM], wr_data [PM];
  logic [PM-1:0]   wr_valid, wr_ready;

  mac #(.P_M(PM), .SDEPTH(32)) dut (.*);
  mem_model #(.P_M(PM), .WORDS(8192)) u_mem (.*);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // memory word w holds the value w + 0x40000000 (so addresses are visible)
  desc_t  tq [PM][$];           // tasks to give
  desc_t  jq [PM][$];           // expected jobs
  fp32_t  aq [PM][$], bq [PM][$];
  int     wq [PM][$];           // expected write addresses
  int     n_done [PM];
  int     c_left [PM];
  int     n_c = 0;

  always_comb begin
    for (int j = 0; j < PM; j++) begin
      q_valid[j] = tq[j].size() > 0;
      q_desc[j]  = tq[j].size() > 0 ? tq[j][0] : '0;
    end
  end

  always @(posedge clk) begin
    for (int j = 0; j < PM; j++) begin
      job_ready[j] <= ($urandom_range(3) == 0);
      a_ready[j]   <= ($urandom_range(3) != 0);
      b_ready[j]   <= ($urandom_range(3) != 0);
      if (rst_n) begin
        if (q_valid[j] && q_ready[j]) begin
          check(enable[j], "only enabled engines take tasks");
          void'(tq[j].pop_front());
        end
        if (job_valid[j] && job_ready[j]) begin
          desc_t e;
          e = jq[j].pop_front();
          check(job_si[j] == e.bz_a && job_sj[j] == e.bz_b && job_k[j] == e.iter_k, "job fields");
          c_left[j] = c_left[j] + int'(e.bz_a) * int'(e.bz_b);
        end
        if (a_valid[j] && a_ready[j]) check(aq[j].size() > 0 && a_data[j] == aq[j].pop_front(), "stream A word");
        if (b_valid[j] && b_ready[j]) check(bq[j].size() > 0 && b_data[j] == bq[j].pop_front(), "stream B word");
        if (wr_valid[j] && wr_ready[j]) begin
          check(wr_data[j] == (32'(wr_addr[j]) ^ 32'h5555_0000), "write data");
          check(wq[j].size() > 0 && int'(wr_addr[j]) == wq[j].pop_front(),
                $sformatf("write address %0d", wr_addr[j]));
        end
        if (c_done[j]) n_done[j]++;
        // stream C source: addresses are not known to it, data are tagged
        // with the address the result must go to
        if (c_valid[j] && c_ready[j]) begin
          c_left[j]--;
          n_c++;
        end
      end
    end
  end

  // C source: one result per cycle (random), last flag at block end
  int c_addr_idx [PM];
  always_comb begin
    for (int j = 0; j < PM; j++) begin
      c_valid[j] = c_left[j] > 0 && wq[j].size() > 0;
      c_data[j].data = wq[j].size() > 0 ? 32'(wq[j][0]) ^ 32'h5555_0000 : '0;
      c_data[j].last = 1'b0;
    end
  end
  int blk_left [PM][$];
  always_comb begin
    for (int j = 0; j < PM; j++)
      if (blk_left[j].size() > 0) c_data[j].last = (blk_left[j][0] == 1);
  end
  always @(posedge clk) begin
    for (int j = 0; j < PM; j++)
      if (rst_n && c_valid[j] && c_ready[j]) begin
        blk_left[j][0]--;
        if (blk_left[j][0] == 0) void'(blk_left[j].pop_front());
      end
  end

  task automatic add_task(int j, int aa, int sa, int si, int ab, int sb, int sj, int k, int ac, int sc);
    desc_t d;
    d = '{addr_a: ADDRW'(aa), str_a: ADDRW'(sa), bz_a: BZW'(si), addr_b: ADDRW'(ab),
          str_b: ADDRW'(sb), bz_b: BZW'(sj), iter_k: KW'(k), addr_c: ADDRW'(ac), str_c: ADDRW'(sc)};
    tq[j].push_back(d);
    if (!enable[j]) return;
    jq[j].push_back(d);
    for (int kk = 0; kk < k; kk++) begin
      for (int i = 0; i < si; i++) aq[j].push_back(u_mem.mem[aa + kk * sa + i]);
      for (int c = 0; c < sj; c++) bq[j].push_back(u_mem.mem[ab + kk * sb + c]);
    end
    for (int i = 0; i < si; i++)
      for (int c = 0; c < sj; c++) wq[j].push_back(ac + i * sc + c);
    blk_left[j].push_back(si * sj);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; enable = 2'b11;
    for (int j = 0; j < PM; j++) begin n_done[j] = 0; c_left[j] = 0; end
    for (int w = 0; w < 8192; w++) u_mem.mem[w] = 32'(w) + 32'h4000_0000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    add_task(0, 0,   64, 4, 1000, 50, 6, 5, 4000, 100);
    add_task(0, 10,  64, 8, 1200, 50, 3, 3, 5000, 20);
    add_task(0, 300, 16, 1, 1300, 7,  1, 4, 5500, 3);
    add_task(1, 2000, 30, 5, 3000, 40, 5, 6, 6000, 12);
    add_task(1, 2100, 30, 16, 3100, 40, 16, 2, 6500, 16);
    while (n_done[0] < 3 || n_done[1] < 2) @(posedge clk);
    repeat (20) @(posedge clk);
    check(aq[0].size() == 0 && bq[0].size() == 0 && aq[1].size() == 0 && bq[1].size() == 0, "streams drained");
    check(wq[0].size() == 0 && wq[1].size() == 0, "all results written");
    check(n_done[0] == 3 && n_done[1] == 2, "one c_done per block");
    // a disabled engine takes nothing
    enable = 2'b01;
    add_task(1, 0, 1, 2, 0, 1, 2, 1, 7000, 2);
    repeat (200) @(posedge clk);
    check(tq[1].size() == 1, "disabled engine idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
