// kbox: the K-box, 256 key bytes read two at a time.
//
// RC4 stores the l-byte key repeatedly in a 256-byte array, K[p] =
// key[p mod l]. This block is that array: a byte-wide write port through
// which the host fills it (the host writes all 256 locations, repeating the
// key), and a 256:2 multiplexer (MUX1 in the paper) that reads K[i_n] and
// K[i_{n+1}] combinationally for the CKP's j generator. Writes take effect
// at the rising edge. The write port is this design's choice; the paper
// does not say how the key is loaded. Reset clears the array.
module kbox
  import rc4_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  we,
  input  byte_t waddr,
  input  byte_t wdata,
  input  byte_t i_n,
  input  byte_t i_n1,
  output byte_t k_i_n,
  output byte_t k_i_n1
);

  sbox_t k_q;   // same shape as an S-box: 256 bytes

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  k_q <= '0;
    else if (we) k_q[waddr] <= wdata;
  end

  assign k_i_n  = k_q[i_n];
  assign k_i_n1 = k_q[i_n1];

endmodule
