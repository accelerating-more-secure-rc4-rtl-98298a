// tb_jgen_prga: compares j_n, j_{n+1} of the stand-alone PRGA generator
// with two sequential key-less RC4 steps on random S-boxes, forcing the
// j_n == i_{n+1} case in half of the trials.
module tb_jgen_prga;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  int checks = 0, failures = 0, eq_cases = 0;

  byte_t j_prev, i_n1, s_i_n, s_i_n1, j_n, j_n1;

  jgen_prga dut (.*);

  initial begin
    rsbox_t s;
    rbyte_t i_n, jr, t;
    for (int trial = 0; trial < 20000; trial++) begin
      s = ref_random_perm();
      i_n = rbyte_t'($urandom);
      i_n1 = i_n + 1;
      j_prev = byte_t'($urandom);
      if (trial[0]) begin
        rbyte_t want;
        want = rbyte_t'(i_n1 - j_prev);
        for (int p = 0; p < 256; p++)
          if (s[p] == want) begin t = s[p]; s[p] = s[i_n]; s[i_n] = t; end
      end
      s_i_n = s[i_n]; s_i_n1 = s[i_n1];
      #1;
      jr = j_prev + s[i_n];
      t = s[i_n]; s[i_n] = s[jr]; s[jr] = t;
      checks++; if (j_n != jr) begin failures++; $display("FAIL j_n trial %0d", trial); end
      if (jr == i_n1) eq_cases++;
      jr = jr + s[i_n1];
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
