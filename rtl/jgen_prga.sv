// jgen_prga: j_n and j_{n+1} generator of a 2-bytes-per-clock stand-alone
// PRGA coprocessor (no key bytes).
//   j_n     = j_{n-1} + S[i_n]                                   (Adder9)
//   j_{n+1} = j_{n-1} + S[i_n] + S[i_{n+1}]   if i_{n+1} != j_n  (Adder10, Adder12)
//           = j_{n-1} + 2 S[i_n]              if i_{n+1} == j_n  (Adder11, Adder12)
// MUX5 picks the Adder10 or Adder11 sum from the comparison i_{n+1} == j_n.
// All sums are modulo 256; S[.] are bytes of S_{n-1}. Follows the paper's
// circuit; purely combinational.
module jgen_prga
  import rc4_pkg::*;
(
  input  byte_t j_prev,
  input  byte_t i_n1,
  input  byte_t s_i_n,
  input  byte_t s_i_n1,
  output byte_t j_n,
  output byte_t j_n1
);

  byte_t adder9, adder10, adder11, adder12, mux5;

  assign adder9  = j_prev + s_i_n;
  assign adder10 = s_i_n1 + s_i_n;
  assign adder11 = s_i_n + s_i_n;
  assign mux5    = (i_n1 == adder9) ? adder11 : adder10;
  assign adder12 = mux5 + j_prev;

  assign j_n  = adder9;
  assign j_n1 = adder12;

endmodule
