// tb_prga_unit2: a stand-alone PRGA coprocessor. A random permutation is
// copied in through the load port, prga_start clears j, and the testbench
// supplies the shared indices i_n = i_{n-1}+1, i_{n+1} = i_{n-1}+2 as the
// CKP would, starting from i_{n-1} = 0. The key-stream pairs are compared
// with one-swap-at-a-time RC4 PRGA from i = j = 0 on the same permutation.
// Random stall clocks (adv = prga_step = 0) check that bytes are held, not
// lost; a second load while the unit runs checks the reload.
module tb_prga_unit2;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0, load = 0, prga_en = 0, prga_start = 0, prga_step = 0, adv = 1;
  sbox_t load_data = '0;
  byte_t i_n, i_n1, z_n, z_n1, i_prev;
  logic z_valid;
  logic [2:0] swap_case;

  prga_unit2 dut (.*);
  always #5 clk = ~clk;
  assign i_n  = i_prev + 8'd1;
  assign i_n1 = i_prev + 8'd2;

  task automatic run_perm(input int npairs);
    rc4_state_t st;
    rbyte_t zref [];
    int got, c;
    st.s = ref_random_perm(); st.i = 0; st.j = 0;
    @(negedge clk);
    prga_en = 0; load = 1; load_data = st.s;
    @(negedge clk);
    load = 0; prga_start = 1; i_prev = 0;
    @(negedge clk);
    prga_start = 0; prga_en = 1;
    zref = new[2*npairs];
    foreach (zref[n]) zref[n] = ref_step(st);
    got = 0; c = 0;
    while (got < npairs && c < 10 * npairs) begin
      adv = ($urandom_range(4, 0) != 0);
      prga_step = adv;
      #1;
      if (z_valid) begin
        checks++;
        if (z_n != zref[2*got] || z_n1 != zref[2*got+1]) begin
          failures++;
          if (failures < 10) $display("FAIL pair %0d: %02x %02x exp %02x %02x", got, z_n, z_n1, zref[2*got], zref[2*got+1]);
        end
        if (adv) got++; else stalls++;
      end
      @(posedge clk);
      if (prga_step) i_prev <= i_prev + 8'd2;
      @(negedge clk);
      c++;
    end
    prga_step = 0; adv = 1;
    checks++;
    if (got != npairs) begin failures++; $display("FAIL only %0d pairs", got); end
  endtask

  initial begin
    i_prev = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) run_perm(400);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL stall never exercised"); end
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
