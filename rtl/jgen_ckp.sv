// jgen_ckp: j_n and j_{n+1} generator of the 2-bytes-per-clock CKP.
//
// Both random indices are formed from j_{n-1} in one clock:
//   j_n     = j_{n-1} + S[i_n] + K[i_n]                       (Adder8, Adder7)
//   j_{n+1} = j_{n-1} + K[i_n] + K[i_{n+1}] + S[i_n] + S[i_{n+1}]  if i_{n+1} != j_n
//           = j_{n-1} + K[i_n] + K[i_{n+1}] + 2 S[i_n]             if i_{n+1} == j_n
// (Adder1..Adder6, all modulo 256). The second form accounts for the first
// swap having moved S[i_n] into location j_n = i_{n+1}. A comparator
// ("1 if eql") checks i_{n+1} == j_n and a 2:1 multiplexer picks j_{n+1}.
// With pkrs_en set (PKRS and PRGA) the key multiplexers pass '0', so the
// same circuit serves the key-less phases. S[.] are bytes of S_{n-1}.
// The adder/multiplexer structure follows the paper's figure; purely
// combinational.
module jgen_ckp
  import rc4_pkg::*;
(
  input  byte_t j_prev,   // j_{n-1}
  input  byte_t i_n1,     // i_{n+1}
  input  byte_t s_i_n,    // S_{n-1}[i_n]
  input  byte_t s_i_n1,   // S_{n-1}[i_{n+1}]
  input  byte_t k_i_n,    // K[i_n]
  input  byte_t k_i_n1,   // K[i_{n+1}]
  input  logic  pkrs_en,
  output byte_t j_n,
  output byte_t j_n1
);

  byte_t mux1, mux2, mux4;
  byte_t adder1, adder2, adder3, adder4, adder5, adder6, adder7, adder8;
  logic  eql;

  // key selectors: '0' once PKRS_EN is set
  assign mux1 = pkrs_en ? 8'd0 : k_i_n;
  assign mux2 = pkrs_en ? 8'd0 : k_i_n1;
  assign mux4 = pkrs_en ? 8'd0 : k_i_n;

  // j_n
  assign adder8 = j_prev + s_i_n;
  assign adder7 = adder8 + mux4;
  assign j_n    = adder7;

  // j_{n+1}, both candidates
  assign adder1 = mux1 + mux2;
  assign adder2 = adder1 + j_prev;
  assign adder3 = adder2 + s_i_n1;
  assign adder4 = adder2 + s_i_n;
  assign adder5 = adder3 + s_i_n;   // i_{n+1} != j_n
  assign adder6 = adder4 + s_i_n;   // i_{n+1} == j_n

  assign eql  = (i_n1 == adder7);
  assign j_n1 = eql ? adder6 : adder5;

endmodule
