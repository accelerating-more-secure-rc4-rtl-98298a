// tb_z_fifo: random pushes and pops against a queue model; checks data
// order, empty/full/count flags every clock, and that both the full and
// the empty condition occur; random clear pulses must empty it. Writes and reads are only issued when the
// flags allow them, as the surrounding design does.
module tb_z_fifo;
  int checks = 0, failures = 0, full_seen = 0, empty_seen = 0;
  localparam int W = 64, D = 16;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(D):0] count;
  logic [W-1:0] q [$];

  z_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    int bias;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bias = (cyc / 500) % 2 ? 80 : 20;
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || count != q.size()) begin
        failures++; $display("FAIL flags at %0d: size %0d empty %0b full %0b", cyc, q.size(), empty, full);
      end
      if (!empty) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("FAIL data at %0d", cyc); end
      end
      if (full) full_seen++;
      if (empty) empty_seen++;
      clear = ($urandom_range(299, 0) == 0);
      wr_en = !full && ($urandom_range(99, 0) < bias);
      rd_en = !empty && ($urandom_range(99, 0) >= bias);
      wr_data = {$urandom, $urandom};
      @(posedge clk);
      if (clear) q.delete();
      else begin
        if (rd_en) void'(q.pop_front());
        if (wr_en) q.push_back(wr_data);
      end
    end
    checks++;
    if (full_seen == 0 || empty_seen == 0) begin failures++; $display("FAIL full/empty never seen"); end
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
