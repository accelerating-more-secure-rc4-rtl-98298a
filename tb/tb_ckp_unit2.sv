// tb_ckp_unit2: the CKP coprocessor alone (design D3 behaviour). For random
// keys of random length the K-box is filled, a request is issued, and
//  - the S1 bank at each copy enable is compared with one-swap-at-a-time
//    RC4: KSA, then PKRS from i = j = 0 for 256 (S4_EN), 512 (S3_EN) and
//    768 (S2_EN) swaps;
//  - the key-stream pairs are compared with the reference PRGA started from
//    i = j = 0 on the S-box after 1024 PKRS swaps;
//  - the first pair must be valid in clock 644 after the request (642
//    schedule clocks, one PRGA step, one output clock) and, with adv held
//    high, a pair must follow every clock (2 bytes per clock);
//  - random adv = 0 clocks freeze the stream without losing bytes.
// The data-movement table rows seen by the swap controller are counted.
module tb_ckp_unit2;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  int checks = 0, failures = 0, stalls = 0;
  int rows [8];
  logic clk = 0, rst_n = 0, start = 0, adv = 1, key_we = 0;
  byte_t key_waddr = 0, key_wdata = 0, i_n, i_n1, z_n, z_n1;
  sbox_t sbox;
  logic [3:0] copy_en;
  logic prga_en, prga_start, prga_step, z_valid;
  phase_t phase;
  logic [2:0] swap_case;

  ckp_unit2 dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && prga_step) rows[swap_case]++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run_key(input int len, input int npairs, input bit random_adv);
    rsbox_t key, kb, s;
    rsbox_t snap [4];
    rc4_state_t st;
    rbyte_t zref [];
    int c, got, first_valid, copies;
    bit gap;
    for (int p = 0; p < 256; p++) key[p] = rbyte_t'($urandom);
    kb = ref_kbox(key, len);
    for (int p = 0; p < 256; p++) begin
      @(negedge clk); key_we = 1; key_waddr = byte_t'(p); key_wdata = kb[p];
    end
    @(negedge clk); key_we = 0;
    // reference schedule
    st.s = ref_ksa(kb); st.i = 0; st.j = 0;
    for (int n = 1; n <= 1024; n++) begin
      void'(ref_step(st));
      if (n == 256) snap[3] = st.s;
      if (n == 512) snap[2] = st.s;
      if (n == 768) snap[1] = st.s;
    end
    st.i = 0; st.j = 0;
    zref = new[2*npairs];
    foreach (zref[n]) zref[n] = ref_step(st);
    start = 1;
    @(negedge clk); start = 0;
    c = 1; got = 0; first_valid = -1; copies = 0; gap = 0;
    while (got < npairs && c < 5000) begin
      adv = random_adv ? ($urandom_range(3, 0) != 0) : 1'b1;
      #1;
      for (int k = 1; k < 4; k++)
        if (copy_en[k]) begin
          copies++;
          check(sbox == snap[k], $sformatf("S1 at S%0d_EN", k + 1));
        end
      if (z_valid) begin
        if (first_valid < 0) first_valid = c;
        check(z_n == zref[2*got] && z_n1 == zref[2*got+1], $sformatf("Z pair %0d", got));
        if (!adv) stalls++;
      end
      if (z_valid && adv) got++;
      else if (first_valid > 0 && !random_adv) gap = 1;
      @(negedge clk);
      c++;
    end
    check(got == npairs, "not all pairs received");
    check(copies == 3, $sformatf("%0d copy enables", copies));
    if (!random_adv) begin
      check(first_valid == 644, $sformatf("first pair in clock %0d, expected 644", first_valid));
      check(!gap, "pairs not delivered every clock");
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_key(16, 300, 0);
    run_key(5, 300, 1);
    run_key(256, 100, 0);
    for (int r = 1; r <= 7; r++) $display("table row %0d: %0d steps", r, rows[r]);
    check(stalls > 0, "stall never exercised");
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
