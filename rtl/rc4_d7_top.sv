// rc4_d7_top: the 8-bytes-per-clock RC4 accelerator with post-KSA random
// shuffling (design D7 of the paper, NCOP = 4).
//
// Coprocessor 1 is the CKP unit: it schedules S1 from the key (KSA,
// 128 clocks of two swaps), then shuffles it 1024 more times without key
// (PKRS, 512 clocks). While PKRS runs, one-clock buffers copy the current
// S1 into the S-boxes of the NCOP-1 stand-alone PRGA coprocessors (S4 after
// 128, S3 after 256, S2 after 384 PKRS clocks), so S1..S4 are successively
// less shuffled versions of one key schedule. Then all coprocessors run the
// PRGA in lock-step on the common i index with private j indices, each
// emitting two bytes per clock: 2*NCOP key-stream bytes per clock.
//
// Output word (16*NCOP bits, pushed into the key-stream FIFO), byte 0 first
// in stream order: bytes 0,1 = Z_n, Z_{n+1} of S1, bytes 2,3 = the pair of
// S2, and so on, as the paper's block diagram numbers the outputs
// (Z_n..Z_{n+7}). The paper's text also says the four-S-box designs at one
// and two bytes per clock give identical key-stream files, which would
// need the bytes interleaved across S-boxes instead; the diagram was
// followed.
// When the FIFO is full the whole PRGA stalls (adv = 0) and resumes
// without loss. Host interface: write the 256-byte K-box (key repeated),
// pulse start, then read words with ks_rd while ks_empty is low; a new
// start restarts the schedule with the K-box contents and discards the
// key-stream words still in the FIFO. The paper's main
// processor, bus interface controller and Ethernet side are outside this
// block; the FIFO read side is their connection point.
// Lint notes: copy_en[0] is left unused on purpose (S1 is never copied,
// the vector is indexed by coprocessor for readability), and rst_n also
// disables the lock-step assertion synchronously besides resetting the
// registers asynchronously.
module rc4_d7_top
  import rc4_pkg::*;
#(
  parameter int unsigned NCOP       = 4,
  parameter int unsigned KSA_CLKS   = 128,
  parameter int unsigned PKRS_CLKS  = 512,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 key_we,
  input  byte_t                key_waddr,
  input  byte_t                key_wdata,
  input  logic                 ks_rd,
  output logic [16*NCOP-1:0]   ks_data,
  output logic                 ks_empty,
  output logic [$clog2(FIFO_DEPTH):0] ks_count,
  output logic                 busy,
  output logic                 prga_en,
  output logic                 stall,
  output logic [NCOP-1:0][2:0] swap_case   // data-movement table row of each coprocessor
);

  localparam int unsigned W = 16 * NCOP;

  byte_t            i_n, i_n1;
  sbox_t            s1;
  logic [NCOP-1:0]  copy_en;
  logic             prga_start, prga_step, adv;
  phase_t           phase;
  logic [NCOP-1:0]  z_valid;
  byte_t            z_n  [NCOP];
  byte_t            z_n1 [NCOP];
  logic [W-1:0]     word;
  logic             fifo_full;

  assign stall = z_valid[0] && fifo_full;
  assign adv   = !stall;
  assign busy  = (phase != PH_IDLE) && (phase != PH_PRGA);

  ckp_unit2 #(.NCOP(NCOP), .KSA_CLKS(KSA_CLKS), .PKRS_CLKS(PKRS_CLKS)) u_ckp (
    .clk, .rst_n, .start, .adv,
    .key_we, .key_waddr, .key_wdata,
    .i_n, .i_n1, .sbox(s1), .copy_en, .prga_en, .prga_start, .prga_step,
    .phase, .z_valid(z_valid[0]), .z_n(z_n[0]), .z_n1(z_n1[0]),
    .swap_case(swap_case[0])
  );

  for (genvar k = 1; k < NCOP; k++) begin : g_prga
    prga_unit2 u_prga (
      .clk, .rst_n, .load(copy_en[k]), .load_data(s1),
      .prga_en, .prga_start, .prga_step, .adv,
      .i_n, .i_n1,
      .z_valid(z_valid[k]), .z_n(z_n[k]), .z_n1(z_n1[k]),
      .swap_case(swap_case[k])
    );
  end

  always_comb begin
    for (int k = 0; k < NCOP; k++) begin
      word[16*k +: 8]     = z_n[k];
      word[16*k + 8 +: 8] = z_n1[k];
    end
  end

  z_fifo #(.WIDTH(W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clear(start),
    .wr_en(z_valid[0] && !fifo_full), .wr_data(word), .full(fifo_full),
    .rd_en(ks_rd), .rd_data(ks_data), .empty(ks_empty), .count(ks_count)
  );

  // all coprocessors run in lock-step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) z_valid == {NCOP{z_valid[0]}});

endmodule
