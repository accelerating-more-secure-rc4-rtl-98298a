// z_fifo: key-stream FIFO between the coprocessors and the processor bus.
//
// The coprocessors push one WIDTH-bit word per clock (8 key bytes with the
// default four coprocessors); the host side pops them. Synchronous,
// single clock, DEPTH words (a power of two) in a register array with
// read/write pointers one bit wider than the address. The read side is
// show-ahead: rd_data is the oldest word whenever empty is low, and rd_en
// removes it at the clock edge. A write while full and a read while empty
// are ignored (assertions flag them). clear empties the FIFO at the next
// edge, discarding its contents. full is used upstream to stall the
// coprocessors. The paper only says that the key stream is stored in a
// FIFO and read by the main processor over a 64-bit bus; depth and
// protocol are this design's choices. The assertions are disabled while
// the asynchronous reset is asserted, so lint sees rst_n used both
// asynchronously and synchronously; that is intended and harmless.
module z_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [AW:0]      wp_q, rp_q;
  logic             do_wr, do_rd;

  assign count = wp_q - rp_q;
  assign empty = (wp_q == rp_q);
  assign full  = (wp_q[AW] != rp_q[AW]) && (wp_q[AW-1:0] == rp_q[AW-1:0]);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign rd_data = mem_q[rp_q[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0;
      rp_q <= '0;
    end else if (clear) begin
      wp_q <= '0;
      rp_q <= '0;
    end else begin
      if (do_wr) wp_q <= wp_q + 1'b1;
      if (do_rd) rp_q <= rp_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem_q[wp_q[AW-1:0]] <= wr_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
