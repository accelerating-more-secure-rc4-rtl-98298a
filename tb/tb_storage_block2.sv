// tb_storage_block2: drives the storage block with random double swaps
// produced by a reference computed in the testbench (four write ports with
// random addresses/enables), whole-bank loads and identity fills, and
// compares the four quad-MUX read ports and the full bank with a shadow
// copy after every clock. Also checks the identity value after reset.
module tb_storage_block2;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  int checks = 0, failures = 0, loads = 0, inits = 0;

  logic clk = 0, rst_n = 0, init = 0, load = 0;
  sbox_t load_data, sbox;
  sbox_wr_t [3:0] wr;
  byte_t i_n, j_n, i_n1, j_n1, s_i_n, s_j_n, s_i_n1, s_j_n1;
  rsbox_t shadow;

  storage_block2 dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    wr = '0; load_data = '0;
    i_n = 0; j_n = 0; i_n1 = 0; j_n1 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    shadow = ref_identity();
    check(sbox == shadow, "reset value is not the identity");
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      init = ($urandom_range(99, 0) == 0);
      load = !init && ($urandom_range(49, 0) == 0);
      load_data = ref_random_perm();
      for (int p = 0; p < 4; p++) begin
        wr[p].en   = $urandom_range(1, 0);
        wr[p].addr = byte_t'($urandom);
        wr[p].data = byte_t'($urandom);
      end
      // keep aliased enabled ports consistent, like the swap controller does
      for (int p = 1; p < 4; p++)
        for (int q = 0; q < p; q++)
          if (wr[p].en && wr[q].en && wr[p].addr == wr[q].addr) wr[p].data = wr[q].data;
      i_n = byte_t'($urandom); j_n = byte_t'($urandom);
      i_n1 = byte_t'($urandom); j_n1 = byte_t'($urandom);
      #1;
      check(s_i_n == shadow[i_n] && s_j_n == shadow[j_n] &&
            s_i_n1 == shadow[i_n1] && s_j_n1 == shadow[j_n1], "quad MUX read");
      if (init) begin shadow = ref_identity(); inits++; end
      else if (load) begin shadow = load_data; loads++; end
      else for (int p = 0; p < 4; p++) if (wr[p].en) shadow[wr[p].addr] = wr[p].data;
      @(posedge clk); #1;
      check(sbox == shadow, "bank contents after clock");
    end
    check(loads > 0 && inits > 0, "load or init never exercised");
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
