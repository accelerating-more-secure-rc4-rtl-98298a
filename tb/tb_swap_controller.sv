// tb_swap_controller: checks the double-swap routing against two
// sequential swaps on a random S-box. Index quadruples are drawn at random
// and, in most trials, forced into one of the equality patterns of the
// data-movement table, so every reachable row (1..7) is exercised. For each
// trial the controller's writes are applied to a copy of the S-box and the
// whole copy, and the post-swap bytes at i_{n+1}, j_{n+1}, are compared with
// the reference; the row number is checked against the index equalities.
module tb_swap_controller;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  int checks = 0, failures = 0;
  int rows_seen [8];

  byte_t i_n, j_n, i_n1, j_n1, s_i_n, s_j_n, s_i_n1, s_j_n1, post_i_n1, post_j_n1;
  sbox_wr_t [3:0] wr;
  logic [2:0] case_no;

  swap_controller dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    rsbox_t s0, ref_s, got;
    rbyte_t t;
    int unsigned pat;
    logic [2:0] exp_row;
    for (int trial = 0; trial < 20000; trial++) begin
      s0   = ref_random_perm();
      i_n  = byte_t'($urandom);
      i_n1 = i_n + 8'd1;
      j_n  = byte_t'($urandom);
      j_n1 = byte_t'($urandom);
      pat  = $urandom_range(7, 0);
      case (pat)
        1: j_n1 = j_n;
        2: j_n1 = i_n;
        3: begin j_n = i_n; j_n1 = i_n; end
        4: j_n = i_n1;
        5: begin j_n = i_n1; j_n1 = i_n1; end
        6: begin j_n = i_n1; j_n1 = i_n; end
        7: j_n = i_n;
        default: ;
      endcase
      s_i_n = s0[i_n]; s_j_n = s0[j_n]; s_i_n1 = s0[i_n1]; s_j_n1 = s0[j_n1];
      #1;
      // reference: two sequential swaps
      ref_s = s0;
      t = ref_s[i_n];  ref_s[i_n]  = ref_s[j_n];  ref_s[j_n]  = t;
      t = ref_s[i_n1]; ref_s[i_n1] = ref_s[j_n1]; ref_s[j_n1] = t;
      // apply controller writes
      got = s0;
      for (int p = 0; p < 4; p++) if (wr[p].en) got[wr[p].addr] = wr[p].data;
      check(got == ref_s, $sformatf("trial %0d S-box after double swap (row %0d)", trial, case_no));
      check(post_i_n1 == ref_s[i_n1] && post_j_n1 == ref_s[j_n1],
            $sformatf("trial %0d post bytes", trial));
      // write ports never disagree on one address
      for (int p = 0; p < 4; p++)
        for (int q = p + 1; q < 4; q++)
          if (wr[p].en && wr[q].en && wr[p].addr == wr[q].addr)
            check(wr[p].data == wr[q].data, "aliased write ports carry different data");
      exp_row = 3'({(i_n1 == j_n), (i_n == j_n1), (j_n1 == j_n)}) + 3'd1;
      check(case_no == exp_row, $sformatf("row %0d expected %0d", case_no, exp_row));
      rows_seen[case_no]++;
    end
    for (int r = 1; r <= 7; r++) begin
      $display("table row %0d: %0d trials", r, rows_seen[r]);
      check(rows_seen[r] > 0, $sformatf("row %0d never exercised", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
