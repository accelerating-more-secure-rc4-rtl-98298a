// prga_unit2: a 2-bytes-per-clock stand-alone PRGA coprocessor.
//
// It owns a storage block (S2, S3 or S4 of the design), a key-less j
// generator, a swap controller and a Z circuit, and shares the sequential
// indices i_n, i_{n+1} of the CKP coprocessor. Its S-box is not scheduled
// from a key: during the CKP's PKRS phase the buffer copies the S1 bank
// into it in one clock (load, the paper's S(k)_EN). When the PRGA starts,
// j_{n-1} is cleared (prga_start) and every prga_step performs the double
// step S[i_n]<->S[j_n], S[i_{n+1}]<->S[j_{n+1}] on the local S-box, with
// j_n, j_{n+1} from the local j_{n-1}. The Z circuit presents Z_n, Z_{n+1}
// one clock after each step, in lock-step with the CKP's pair; adv = 0
// holds the Z registers. Structure as in the paper; starting j from 0 is
// the reading adopted here.
module prga_unit2
  import rc4_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  sbox_t      load_data,
  input  logic       prga_en,
  input  logic       prga_start,
  input  logic       prga_step,
  input  logic       adv,
  input  byte_t      i_n,
  input  byte_t      i_n1,
  output logic       z_valid,
  output byte_t      z_n,
  output byte_t      z_n1,
  output logic [2:0] swap_case
);

  byte_t j_prev_q, j_n, j_n1;
  byte_t s_i_n, s_j_n, s_i_n1, s_j_n1;
  byte_t post_i_n1, post_j_n1;
  sbox_t sbox;
  sbox_wr_t [3:0] wr, wr_g;

  storage_block2 u_sb (
    .clk, .rst_n, .init(1'b0), .load, .load_data, .wr(wr_g),
    .i_n, .j_n, .i_n1, .j_n1,
    .s_i_n, .s_j_n, .s_i_n1, .s_j_n1, .sbox
  );

  jgen_prga u_jgen (
    .j_prev(j_prev_q), .i_n1, .s_i_n, .s_i_n1, .j_n, .j_n1
  );

  swap_controller u_swap (
    .i_n, .j_n, .i_n1, .j_n1, .s_i_n, .s_j_n, .s_i_n1, .s_j_n1,
    .wr, .post_i_n1, .post_j_n1, .case_no(swap_case)
  );

  always_comb begin
    wr_g = wr;
    for (int p = 0; p < 4; p++) wr_g[p].en = wr[p].en && prga_step;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          j_prev_q <= '0;
    else if (prga_start) j_prev_q <= '0;
    else if (prga_step)  j_prev_q <= j_n1;
  end

  z_circuit2 u_z (
    .clk, .rst_n, .en(adv), .flush(!prga_en), .step_valid(prga_step),
    .i_n, .j_n, .s_i_n, .s_j_n, .post_i_n1, .post_j_n1, .sbox,
    .z_valid, .z_n, .z_n1
  );

endmodule
