// tb_rc4_d7_top: end-to-end test of the 8-bytes-per-clock accelerator at
// its default size (four coprocessors, 128 KSA clocks, 512 PKRS clocks).
// For each of several random keys the K-box is written, a request issued,
// and the key-stream words read from the FIFO are compared with a
// one-swap-at-a-time RC4 reference: KSA, then 1024 key-less PKRS swaps
// from i = j = 0 with snapshots after 256 (S4), 512 (S3) and 768 (S2)
// swaps, then four independent PRGA streams from i = j = 0 on S1..S4;
// word bytes 2k, 2k+1 are the next pair Z_n, Z_{n+1} of S(k+1).
// Mechanisms counted (each must occur): S-box copies (S2_EN..S4_EN),
// FIFO-full stalls, restarts from PRGA with a new key,
// and rows 1, 2, 3 and 5 of the swap controller's data-movement table.
// Timing: with the reader always ready, the first word must be readable
// in clock 645 after the request (642 schedule clocks, PRGA step, Z output,
// FIFO write) and one 8-byte word must follow every clock.
module tb_rc4_d7_top;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  localparam int NCOP = 4;
  int checks = 0, failures = 0;
  int stalls = 0, copies = 0, restarts = 0, empty_waits = 0;
  int rows [8];
  int must_rows [4] = '{1, 2, 3, 5};

  logic clk = 0, rst_n = 0, start = 0, key_we = 0, ks_rd = 0;
  byte_t key_waddr = 0, key_wdata = 0;
  logic [16*NCOP-1:0] ks_data;
  logic ks_empty, busy, prga_en, stall;
  logic [$clog2(16):0] ks_count;
  logic [NCOP-1:0][2:0] swap_case;

  rc4_d7_top dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (stall) stalls++;
    for (int k = 1; k < NCOP; k++) if (dut.copy_en[k]) copies++;
    if (dut.prga_step) for (int k = 0; k < NCOP; k++) rows[swap_case[k]]++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // mode 0: reader always ready; mode 1: bursty reader (forces stalls)
  task automatic run_key(input int len, input int nwords, input int mode);
    rsbox_t key, kb;
    rc4_state_t st [NCOP];
    rc4_state_t s1;
    logic [16*NCOP-1:0] wref [];
    int got, c, first_word;
    bit gap;
    for (int p = 0; p < 256; p++) key[p] = rbyte_t'($urandom);
    kb = ref_kbox(key, len);
    for (int p = 0; p < 256; p++) begin
      @(negedge clk); key_we = 1; key_waddr = byte_t'(p); key_wdata = kb[p];
    end
    @(negedge clk); key_we = 0;
    s1.s = ref_ksa(kb); s1.i = 0; s1.j = 0;
    for (int n = 1; n <= 1024; n++) begin
      void'(ref_step(s1));
      if (n % 256 == 0 && n < 1024) begin
        st[NCOP - n / 256].s = s1.s;
      end
    end
    st[0].s = s1.s;
    for (int k = 0; k < NCOP; k++) begin st[k].i = 0; st[k].j = 0; end
    wref = new[nwords];
    foreach (wref[w])
      for (int k = 0; k < NCOP; k++) begin
        wref[w][16*k +: 8]     = ref_step(st[k]);
        wref[w][16*k + 8 +: 8] = ref_step(st[k]);
      end
    start = 1;
    @(negedge clk); start = 0;
    got = 0; c = 1; first_word = -1; gap = 0;
    while (got < nwords && c < 20000) begin
      if (mode == 0) ks_rd = !ks_empty;
      else ks_rd = !ks_empty && (((c / 40) % 2) == 1) && ($urandom_range(2, 0) != 0);
      #1;
      if (!ks_empty) begin
        if (first_word < 0) first_word = c;
        if (ks_rd) begin
          check(ks_data == wref[got], $sformatf("word %0d: %h exp %h", got, ks_data, wref[got]));
          got++;
        end
      end else if (first_word > 0) begin
        empty_waits++;
        if (mode == 0) gap = 1;
      end
      @(negedge clk);
      c++;
    end
    ks_rd = 0;
    check(got == nwords, $sformatf("only %0d words", got));
    if (mode == 0) begin
      check(first_word == 645, $sformatf("first word in clock %0d, expected 645", first_word));
      check(!gap, "a clock without a word while the reader was ready");
    end
  endtask

  initial begin
    int copies0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_key(16, 400, 0);
    check(copies == 3, $sformatf("%0d copies for one schedule", copies));
    run_key(5, 300, 1);     // restart from PRGA with a new key, bursty reader
    restarts++;
    run_key(256, 200, 1);
    restarts++;
    run_key(1, 200, 0);
    restarts++;
    $display("copies %0d stalls %0d empty waits %0d restarts %0d", copies, stalls, empty_waits, restarts);
    for (int r = 1; r <= 7; r++) $display("table row %0d: %0d double steps", r, rows[r]);
    check(copies == 12, "S-box copies");
    check(stalls > 0, "FIFO-full stall never happened");
    check(restarts > 0, "no restart");
    // rows 4, 6 and 7 need two index coincidences in one step (about one step
    // in 65536); they are exercised in the swap controller's own test.
    foreach (must_rows[m]) check(rows[must_rows[m]] > 0, $sformatf("table row %0d never used", must_rows[m]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
