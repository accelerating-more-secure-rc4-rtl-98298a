// z_circuit2: produces the key-stream pair Z_n, Z_{n+1} of one double step.
//
// RC4 outputs Z_n = S_n[t_n] with t_n = S_n[i_n] + S_n[j_n], i.e. after the
// n-th swap. In the 2-bytes-per-clock mode the bank jumps from S_{n-1} to
// S_{n+1}, so S_n never exists. Z_n is therefore taken from the pre-swap
// bank: t_n = S_{n-1}[i_n] + S_{n-1}[j_n] (the swap does not change the
// sum), and
//   Z_n = S_{n-1}[j_n]  if t_n = i_n and t_n != j_n   (Comp2)
//       = S_{n-1}[i_n]  if t_n = j_n                  (Comp1)
//       = S_{n-1}[t_n]  otherwise,
// which is the byte the first swap puts at t_n. Z_{n+1} is the ordinary
// RC4 output of the bank after both swaps: t_{n+1} = S_{n+1}[i_{n+1}] +
// S_{n+1}[j_{n+1}] (the two bytes come from the swap controller), and the
// byte S_{n+1}[t_{n+1}] is selected one clock later, when the register bank
// holds S_{n+1}.
//
// Timing: Z_n and t_{n+1} are registered at the edge that commits the
// double step (when step_valid and en); in the next clock z_valid is high
// and z_n, z_n1 are both presented. While en is low (downstream full) the
// registers and the bank hold, so the outputs stay valid. flush clears
// z_valid. Eq. (4)/(5) and the comparator/MUX structure are the paper's;
// the one-clock register between the two halves is this design's choice.
// The t_n = i_n = j_n case (no byte moves) returns S_{n-1}[i_n].
module z_circuit2
  import rc4_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  flush,
  input  logic  step_valid,
  input  byte_t i_n,
  input  byte_t j_n,
  input  byte_t s_i_n,      // S_{n-1}[i_n]
  input  byte_t s_j_n,      // S_{n-1}[j_n]
  input  byte_t post_i_n1,  // S_{n+1}[i_{n+1}]
  input  byte_t post_j_n1,  // S_{n+1}[j_{n+1}]
  input  sbox_t sbox,       // register bank
  output logic  z_valid,
  output byte_t z_n,
  output byte_t z_n1
);

  byte_t t_n, t_n1, zn_comb;
  logic  comp1, comp2;   // t_n == j_n, t_n == i_n

  byte_t zn_q, t_n1_q;
  logic  vld_q;

  assign t_n   = s_i_n + s_j_n;
  assign comp1 = (t_n == j_n);
  assign comp2 = (t_n == i_n);
  assign t_n1  = post_i_n1 + post_j_n1;

  always_comb begin
    if (comp1)      zn_comb = s_i_n;
    else if (comp2) zn_comb = s_j_n;
    else            zn_comb = sbox[t_n];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zn_q   <= '0;
      t_n1_q <= '0;
      vld_q  <= 1'b0;
    end else if (flush) begin
      vld_q  <= 1'b0;
    end else if (en) begin
      vld_q  <= step_valid;
      if (step_valid) begin
        zn_q   <= zn_comb;
        t_n1_q <= t_n1;
      end
    end
  end

  assign z_valid = vld_q;
  assign z_n     = zn_q;
  assign z_n1    = sbox[t_n1_q];

endmodule
