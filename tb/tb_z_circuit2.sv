// tb_z_circuit2: runs a chain of double RC4 steps, with the S-box kept by
// the testbench, through the Z circuit. Each clock the testbench presents
// the pre-swap indices/bytes of the next double step, the post-swap bytes
// at i_{n+1}, j_{n+1}, and the current S-box; the expected Z_n, Z_{n+1}
// come from two one-swap-at-a-time RC4 steps. Random clocks without a step
// and random stall clocks (en = 0, S-box frozen) check the valid flag and
// that the outputs hold. Counts how often the t_n = i_n and t_n = j_n
// corrections of the Z_n selection were needed.
module tb_z_circuit2;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  int checks = 0, failures = 0, ti_cases = 0, tj_cases = 0, stalls = 0;
  logic clk = 0, rst_n = 0, en = 0, flush = 0, step_valid = 0, z_valid;
  byte_t i_n, j_n, s_i_n, s_j_n, post_i_n1, post_j_n1, z_n, z_n1;
  sbox_t sbox;

  z_circuit2 dut (.*);
  always #5 clk = ~clk;

  rc4_state_t st, nx;
  rbyte_t exp_zn, exp_zn1, tn, c_zn, c_zn1;
  bit     exp_valid;

  initial begin
    st.s = ref_random_perm(); st.i = 0; st.j = 0;
    sbox = st.s; i_n = 0; j_n = 0; s_i_n = 0; s_j_n = 0; post_i_n1 = 0; post_j_n1 = 0;
    exp_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      // check what the previous clock produced
      checks++;
      if (z_valid != exp_valid || (exp_valid && (z_n != exp_zn || z_n1 != exp_zn1))) begin
        failures++;
        if (failures < 10) $display("FAIL cyc %0d: valid %0b/%0b z %02x %02x exp %02x %02x",
                                    cyc, z_valid, exp_valid, z_n, z_n1, exp_zn, exp_zn1);
      end
      en = ($urandom_range(9, 0) != 0);
      step_valid = ($urandom_range(7, 0) != 0);
      flush = 0;
      // present the next double step from state st
      nx = st;
      i_n = nx.i + 1;
      j_n = nx.j + nx.s[i_n];
      s_i_n = st.s[i_n]; s_j_n = st.s[j_n];
      sbox = st.s;
      c_zn = ref_step(nx);
      tn = rbyte_t'(s_i_n + s_j_n);
      if (tn == i_n && tn != j_n) ti_cases++;
      if (tn == j_n && tn != i_n) tj_cases++;
      c_zn1 = ref_step(nx);
      post_i_n1 = nx.s[nx.i]; post_j_n1 = nx.s[nx.j];
      @(posedge clk);
      if (en) begin
        exp_valid = step_valid;
        if (step_valid) begin       // the bank takes the double step
          st = nx; exp_zn = c_zn; exp_zn1 = c_zn1;
        end
      end else begin
        stalls++;
      end
      // bank seen by the Z circuit in the next clock
      #1 sbox = st.s;
    end
    checks++;
    if (ti_cases == 0 || tj_cases == 0 || stalls == 0) begin
      failures++; $display("FAIL coverage: t=i %0d t=j %0d stalls %0d", ti_cases, tj_cases, stalls);
    end
    $display("t_n=i_n: %0d  t_n=j_n: %0d  stalls: %0d", ti_cases, tj_cases, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
