// rc4_stream_check: drives one rc4_d7_top of a given coprocessor count
// through one key and one long key stream, and checks every word against
// the one-swap-at-a-time RC4 reference.
//
// Used by the workload testbench to run the three 2-bytes-per-clock
// configurations (one, two and four coprocessors: 2, 4 and 8 bytes per
// clock) side by side. The key (KEY_LEN random bytes, repeated over the
// K-box) is written, start is pulsed and the reader takes a word every
// clock it can. Checked: every word; the first word readable in clock 645
// after the request; no empty clock once the stream has begun; and the
// last of NWORDS words read in clock 644 + NWORDS, i.e. n bytes of key
// stream cost 642 + 2 + n/(2*NCOP) clocks. The reference takes the
// S-box copy for S(k+1) after 1024*(NCOP-k)/NCOP PKRS swaps (k = 1..NCOP-1),
// which for four coprocessors is 768, 512 and 256 swaps.
// Interface: common clock in; done, checks and failures out.
module rc4_stream_check
  import rc4_pkg::*;
  import rc4_ref_pkg::*;
#(
  parameter int unsigned NCOP    = 4,
  parameter int unsigned NWORDS  = 1000,
  parameter int unsigned KEY_LEN = 16
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);

  logic rst_n = 0, start = 0, key_we = 0, ks_rd = 0;
  byte_t key_waddr = 0, key_wdata = 0;
  logic [16*NCOP-1:0] ks_data;
  logic ks_empty, busy, prga_en, stall;
  logic [$clog2(16):0] ks_count;
  logic [NCOP-1:0][2:0] swap_case;

  rc4_d7_top #(.NCOP(NCOP)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL NCOP=%0d %s at %0t", NCOP, what, $time);
    end
  endtask

  initial begin
    rsbox_t key, kb;
    rc4_state_t st [NCOP];
    rc4_state_t s1;
    logic [16*NCOP-1:0] want;
    int got, c, first_word, last_word;
    bit gap;
    done = 0; checks = 0; failures = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int p = 0; p < 256; p++) key[p] = rbyte_t'($urandom);
    kb = ref_kbox(key, KEY_LEN);
    for (int p = 0; p < 256; p++) begin
      @(negedge clk); key_we = 1; key_waddr = byte_t'(p); key_wdata = kb[p];
    end
    @(negedge clk); key_we = 0;
    s1.s = ref_ksa(kb); s1.i = 0; s1.j = 0;
    for (int n = 1; n <= 1024; n++) begin
      void'(ref_step(s1));
      for (int k = 1; k < NCOP; k++)
        if (n == 1024 * (NCOP - k) / NCOP) st[k].s = s1.s;
    end
    st[0].s = s1.s;
    for (int k = 0; k < NCOP; k++) begin st[k].i = 0; st[k].j = 0; end
    start = 1;
    @(negedge clk); start = 0;
    got = 0; c = 1; first_word = -1; last_word = -1; gap = 0;
    while (got < NWORDS && c < NWORDS + 2000) begin
      ks_rd = !ks_empty;
      #1;
      if (!ks_empty) begin
        if (first_word < 0) first_word = c;
        for (int k = 0; k < NCOP; k++) begin
          want[16*k +: 8]     = ref_step(st[k]);
          want[16*k + 8 +: 8] = ref_step(st[k]);
        end
        check(ks_data == want, $sformatf("word %0d: %h exp %h", got, ks_data, want));
        got++;
        last_word = c;
      end else if (first_word > 0) gap = 1;
      @(negedge clk);
      c++;
    end
    ks_rd = 0;
    check(got == NWORDS, $sformatf("only %0d words", got));
    check(first_word == 645, $sformatf("first word in clock %0d, expected 645", first_word));
    check(!gap, "a clock without a word while the reader was ready");
    check(last_word == 644 + int'(NWORDS),
          $sformatf("last word in clock %0d, expected %0d", last_word, 644 + NWORDS));
    $display("NCOP=%0d: %0d words (%0d bytes) in %0d clocks after the request",
             NCOP, got, got * 2 * NCOP, last_word);
    done = 1;
  end
endmodule
