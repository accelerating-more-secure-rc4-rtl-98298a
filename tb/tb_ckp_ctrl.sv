// tb_ckp_ctrl: checks the phase sequence and its clock counts after a key
// request: 1 INIT clock, 128 KSA steps with the key, 1 PKRS_INIT clock,
// 512 PKRS steps without key, then PRGA from clock 643 on; the S-box copy
// enables S4_EN, S3_EN, S2_EN after 128, 256 and 384 PKRS steps, one clock
// each; prga_start on the last PKRS clock; PRGA steps only while adv is
// high; and a restart from PRGA by a second request.
module tb_ckp_ctrl;
  import rc4_pkg::*;

  int checks = 0, failures = 0;
  localparam int NCOP = 4;
  logic clk = 0, rst_n = 0, start = 0, adv = 1;
  phase_t phase;
  logic step, pkrs_en, prga_en, init, ksa_ij, reset_ij, prga_start;
  logic [NCOP-1:0] copy_en;

  ckp_ctrl #(.NCOP(NCOP)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int ksa_steps, pkrs_steps, prga_steps, inits, first_prga, pkrs_idx, prga_starts, adv_low;
  int copy_at [NCOP];
  int copy_cnt [NCOP];

  task automatic run_schedule(input int prga_clocks);
    ksa_steps = 0; pkrs_steps = 0; prga_steps = 0; inits = 0; first_prga = -1;
    prga_starts = 0; adv_low = 0;
    for (int k = 0; k < NCOP; k++) begin copy_at[k] = -1; copy_cnt[k] = 0; end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int c = 1; c <= 643 + prga_clocks; c++) begin
      // c = clock number after the request
      adv = (phase == PH_PRGA) ? ($urandom_range(3, 0) != 0) : 1'b1;
      #1;
      if (init) begin inits++; check(c == 1 && ksa_ij, "INIT not in clock 1"); end
      if (step && !pkrs_en) ksa_steps++;
      if (step && pkrs_en && !prga_en) begin
        for (int k = 0; k < NCOP; k++)
          if (copy_en[k]) begin copy_at[k] = pkrs_steps; copy_cnt[k]++; end
        if (prga_start) begin prga_starts++; check(pkrs_steps == 511, "prga_start not on last PKRS clock"); end
        pkrs_steps++;
      end
      if (phase == PH_PRGA) begin
        if (first_prga < 0) first_prga = c;
        check(step == adv, "PRGA step does not follow adv");
        if (!adv) adv_low++;
        if (step) prga_steps++;
      end
      @(negedge clk);
    end
    check(inits == 1, "INIT count");
    check(ksa_steps == 128, $sformatf("KSA steps %0d", ksa_steps));
    check(pkrs_steps == 512, $sformatf("PKRS steps %0d", pkrs_steps));
    check(first_prga == 643, $sformatf("first PRGA clock %0d", first_prga));
    check(prga_starts == 1, "prga_start count");
    check(copy_at[3] == 128 && copy_at[2] == 256 && copy_at[1] == 384 && copy_at[0] == -1,
          $sformatf("copy points %0d %0d %0d", copy_at[3], copy_at[2], copy_at[1]));
    check(copy_cnt[1] == 1 && copy_cnt[2] == 1 && copy_cnt[3] == 1, "copy enables not single pulses");
    check(adv_low > 0 && prga_steps > 0, "PRGA stall never exercised");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check(phase == PH_IDLE && !step, "not idle after reset");
    run_schedule(100);
    check(phase == PH_PRGA, "not in PRGA");
    run_schedule(20);   // restart with a new request from PRGA
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
