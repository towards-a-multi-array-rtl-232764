// tb_array_mux: checks the multiplexer between two PE arrays with random
// tokens in both modes: in independent mode the following array's head is
// fed by its own synchronization unit and its results go to the memory
// access controller; in cooperation mode its head is fed by the preceding
// array's tail and its results go into that tail, with the ready signal
// routed back from the selected receiver.
module tb_array_mux;
  import mm_pkg::*;
  int checks = 0, failures = 0;

  logic   coop, own_a_valid, own_b_valid, prev_a_valid, prev_b_valid;
  a_tok_t own_a, prev_a, head_a;
  b_tok_t own_b, prev_b, head_b;
  logic   head_a_valid, head_b_valid, head_c_valid, head_c_ready;
  c_tok_t head_c, mac_c, prev_c;
  logic   mac_c_valid, mac_c_ready, prev_c_valid, prev_c_ready;

  array_mux dut (.*);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      coop         = 1'($urandom);
      own_a_valid  = 1'($urandom);  own_a  = a_tok_t'({$urandom, $urandom});
      own_b_valid  = 1'($urandom);  own_b  = b_tok_t'({$urandom, $urandom, $urandom});
      prev_a_valid = 1'($urandom);  prev_a = a_tok_t'({$urandom, $urandom});
      prev_b_valid = 1'($urandom);  prev_b = b_tok_t'({$urandom, $urandom, $urandom});
      head_c_valid = 1'($urandom);  head_c = c_tok_t'({$urandom, $urandom});
      mac_c_ready  = 1'($urandom);
      prev_c_ready = 1'($urandom);
      #1;
      if (coop) begin
        check(head_a_valid == prev_a_valid && head_a == prev_a, "coop A from tail");
        check(head_b_valid == prev_b_valid && head_b == prev_b, "coop B from tail");
        check(prev_c_valid == head_c_valid && prev_c == head_c, "coop C to tail");
        check(!mac_c_valid, "coop C not to MAC");
        check(head_c_ready == prev_c_ready, "coop C ready from tail");
      end else begin
        check(head_a_valid == own_a_valid && head_a == own_a, "indep A from own");
        check(head_b_valid == own_b_valid && head_b == own_b, "indep B from own");
        check(mac_c_valid == head_c_valid && mac_c == head_c, "indep C to MAC");
        check(!prev_c_valid, "indep C not to tail");
        check(head_c_ready == mac_c_ready, "indep C ready from MAC");
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
