// ckp_unit2: coprocessor 1 of the design, the 2-bytes-per-clock Composite
// KSA-PRGA (CKP) with the Post-KSA Random Shuffling (PKRS) built in.
//
// One S-box (S1) is shuffled by the same double-step datapath in all three
// phases; only the key bytes and the Z circuit are switched:
//   i_n = i_{n-1} + 1, i_{n+1} = i_{n-1} + 2 (two adders on the i register)
//   the storage block reads S[i_n], S[i_{n+1}]; the K-box reads K[i_n],
//   K[i_{n+1}]; jgen_ckp forms j_n, j_{n+1}; the storage block reads
//   S[j_n], S[j_{n+1}]; the swap controller routes the four bytes back and
//   the bank, i_{n-1} and j_{n-1} are updated at the clock edge.
// KSA (128 clocks) uses the key, PKRS (512 clocks) and PRGA pass 0 instead
// (PKRS_EN). In PRGA the Z circuit emits Z_n, Z_{n+1} one clock after each
// double step. The unit also exports i_n, i_{n+1}, the S1 bank, the copy
// enables and PRGA controls for the stand-alone PRGA coprocessors.
//
// Interface: start requests a new key schedule (the K-box must hold the
// key first, written through key_we/key_waddr/key_wdata); adv = 0 freezes
// the PRGA (bank, indices and Z registers hold), used when the key-stream
// FIFO is full. Timing: first PRGA step 642 clocks after start, first
// z_valid one clock later, then one pair per clock while adv is high.
// Single rising-edge clocking is this design's choice (the paper uses both
// clock edges).
module ckp_unit2
  import rc4_pkg::*;
#(
  parameter int unsigned NCOP      = 4,
  parameter int unsigned KSA_CLKS  = 128,
  parameter int unsigned PKRS_CLKS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            adv,
  input  logic            key_we,
  input  byte_t           key_waddr,
  input  byte_t           key_wdata,
  output byte_t           i_n,
  output byte_t           i_n1,
  output sbox_t           sbox,
  output logic [NCOP-1:0] copy_en,
  output logic            prga_en,
  output logic            prga_start,
  output logic            prga_step,
  output phase_t          phase,
  output logic            z_valid,
  output byte_t           z_n,
  output byte_t           z_n1,
  output logic [2:0]      swap_case
);

  logic  step, pkrs_en, init, ksa_ij, reset_ij;
  byte_t i_prev_q, j_prev_q;
  byte_t j_n, j_n1;
  byte_t s_i_n, s_j_n, s_i_n1, s_j_n1;
  byte_t k_i_n, k_i_n1;
  byte_t post_i_n1, post_j_n1;
  sbox_wr_t [3:0] wr, wr_g;

  ckp_ctrl #(.NCOP(NCOP), .KSA_CLKS(KSA_CLKS), .PKRS_CLKS(PKRS_CLKS)) u_ctrl (
    .clk, .rst_n, .start, .adv,
    .phase, .step, .pkrs_en, .prga_en, .init, .ksa_ij, .reset_ij,
    .prga_start, .copy_en
  );

  // sequential index: two adders on i_{n-1}
  assign i_n  = i_prev_q + 8'd1;
  assign i_n1 = i_prev_q + 8'd2;

  kbox u_kbox (
    .clk, .rst_n, .we(key_we), .waddr(key_waddr), .wdata(key_wdata),
    .i_n, .i_n1, .k_i_n, .k_i_n1
  );

  storage_block2 u_sb (
    .clk, .rst_n, .init, .load(1'b0), .load_data('0), .wr(wr_g),
    .i_n, .j_n, .i_n1, .j_n1,
    .s_i_n, .s_j_n, .s_i_n1, .s_j_n1, .sbox
  );

  jgen_ckp u_jgen (
    .j_prev(j_prev_q), .i_n1, .s_i_n, .s_i_n1, .k_i_n, .k_i_n1, .pkrs_en,
    .j_n, .j_n1
  );

  swap_controller u_swap (
    .i_n, .j_n, .i_n1, .j_n1, .s_i_n, .s_j_n, .s_i_n1, .s_j_n1,
    .wr, .post_i_n1, .post_j_n1, .case_no(swap_case)
  );

  always_comb begin
    wr_g = wr;
    for (int p = 0; p < 4; p++) wr_g[p].en = wr[p].en && step;
  end

  // i_{n-1} and j_{n-1} registers (the D-FF of the paper's figure)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_prev_q <= '0;
      j_prev_q <= '0;
    end else if (ksa_ij) begin
      i_prev_q <= 8'hFF;
      j_prev_q <= '0;
    end else if (reset_ij) begin
      i_prev_q <= '0;
      j_prev_q <= '0;
    end else if (step) begin
      i_prev_q <= i_n1;
      j_prev_q <= j_n1;
    end
  end

  assign prga_step = step && prga_en;

  z_circuit2 u_z (
    .clk, .rst_n, .en(adv), .flush(!prga_en), .step_valid(prga_step),
    .i_n, .j_n, .s_i_n, .s_j_n, .post_i_n1, .post_j_n1, .sbox,
    .z_valid, .z_n, .z_n1
  );

endmodule
