// tb_rc4_workloads: the key-stream lengths evaluated for the three
// 2-bytes-per-clock configurations, run end to end.
//
// The randomness study generates, per key, a file of 1,342,400 key-stream
// bits (167,800 bytes) from a 16-character key. This testbench produces
// one such file with each configuration of the accelerator, all three in
// parallel on one clock:
//   one coprocessor   (2 bytes/clock): 83,900 words of 16 bits
//   two coprocessors  (4 bytes/clock): 41,950 words of 32 bits
//   four coprocessors (8 bytes/clock): 20,975 words of 64 bits
// Every word is compared with the reference model, and the clock count
// of the whole run (642 + 2 + n/(bytes per clock)) is checked; see
// rc4_stream_check. The four-coprocessor instance is the default design.
module tb_rc4_workloads;
  localparam int unsigned FILE_BYTES = 1342400 / 8;

  logic clk = 0;
  always #5 clk = ~clk;

  logic done [3];
  int   chk  [3];
  int   bad  [3];
  int   checks = 0, failures = 0;

  rc4_stream_check #(.NCOP(1), .NWORDS(FILE_BYTES / 2)) u_c1 (.clk, .done(done[0]), .checks(chk[0]), .failures(bad[0]));
  rc4_stream_check #(.NCOP(2), .NWORDS(FILE_BYTES / 4)) u_c2 (.clk, .done(done[1]), .checks(chk[1]), .failures(bad[1]));
  rc4_stream_check #(.NCOP(4), .NWORDS(FILE_BYTES / 8)) u_c4 (.clk, .done(done[2]), .checks(chk[2]), .failures(bad[2]));

  initial begin
    #20;
    wait (done[0] && done[1] && done[2]);
    foreach (chk[m]) begin checks += chk[m]; failures += bad[m]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    foreach (chk[m]) begin checks += chk[m]; failures += bad[m]; end
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
