// tb_kbox: writes K[p] = key[p mod l] for random keys and lengths through
// the write port and reads back every pair (i, i+1) through the 256:2
// multiplexer, comparing with the key; also checks the reset value.
module tb_kbox;
  import rc4_pkg::*;
  import rc4_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0;
  byte_t waddr = 0, wdata = 0, i_n = 0, i_n1 = 1, k_i_n, k_i_n1;

  kbox dut (.*);
  always #5 clk = ~clk;

  initial begin
    rsbox_t key, kb;
    int len;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 checks++; if (k_i_n != 0 || k_i_n1 != 0) failures++;
    for (int r = 0; r < 8; r++) begin
      len = $urandom_range(256, 1);
      for (int p = 0; p < 256; p++) key[p] = rbyte_t'($urandom);
      kb = ref_kbox(key, len);
      for (int p = 0; p < 256; p++) begin
        @(negedge clk); we = 1; waddr = byte_t'(p); wdata = kb[p];
      end
      @(negedge clk); we = 0;
      for (int p = 0; p < 256; p++) begin
        i_n = byte_t'(p); i_n1 = byte_t'(p + 1);
        #1;
        checks++;
        if (k_i_n != key[p % len] || k_i_n1 != key[((p + 1) % 256) % len]) begin
          failures++;
          if (failures < 10) $display("FAIL K[%0d] len %0d", p, len);
        end
      end
    end
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
