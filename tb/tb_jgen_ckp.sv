// tb_jgen_ckp: compares j_n, j_{n+1} of the CKP generator with two
// sequential RC4 key-schedule steps (pkrs_en = 0) and two key-less steps
// (pkrs_en = 1) on random S-boxes, keys and j_{n-1}. Half the trials pick
// S[i_n] so that j_n lands on i_{n+1}, the case where the first swap changes
// the byte the second step reads.
module tb_jgen_ckp;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  int checks = 0, failures = 0, eq_cases = 0;

  byte_t j_prev, i_n1, s_i_n, s_i_n1, k_i_n, k_i_n1, j_n, j_n1;
  logic pkrs_en;

  jgen_ckp dut (.*);

  initial begin
    rsbox_t s, key;
    rbyte_t i_n, jr, t, ki, ki1;
    for (int trial = 0; trial < 20000; trial++) begin
      s = ref_random_perm();
      for (int p = 0; p < 256; p++) key[p] = rbyte_t'($urandom);
      i_n = rbyte_t'($urandom);
      i_n1 = i_n + 1;
      pkrs_en = trial[0];
      j_prev = byte_t'($urandom);
      ki  = pkrs_en ? 8'd0 : key[i_n];
      ki1 = pkrs_en ? 8'd0 : key[i_n1];
      if (trial[1]) begin
        // force j_n == i_{n+1}: choose the S value that gives it, swap it into i_n
        rbyte_t want;
        want = rbyte_t'(i_n1 - j_prev - ki);
        for (int p = 0; p < 256; p++)
          if (s[p] == want) begin t = s[p]; s[p] = s[i_n]; s[i_n] = t; end
      end
      s_i_n = s[i_n]; s_i_n1 = s[i_n1]; k_i_n = key[i_n]; k_i_n1 = key[i_n1];
      #1;
      // reference: two sequential steps
      jr = j_prev + s[i_n] + ki;
      t = s[i_n]; s[i_n] = s[jr]; s[jr] = t;
      checks++; if (j_n != jr) begin failures++; $display("FAIL j_n trial %0d", trial); end
      if (jr == i_n1) eq_cases++;
      jr = jr + s[i_n1] + ki1;
      checks++; if (j_n1 != jr) begin failures++; $display("FAIL j_n1 trial %0d", trial); end
    end
    checks++;
    if (eq_cases == 0) begin failures++; $display("FAIL i_{n+1} == j_n never hit"); end
    $display("i_{n+1} == j_n trials: %0d", eq_cases);
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
