// storage_block2: the 2-bytes-per-clock Storage Block that holds one S-box.
//
// A register bank of 256 bytes sits between a quad-selecting DEMUX and a
// quad-selecting MUX, as in the paper. The MUX side reads the four bytes
// S[i_n], S[j_n], S[i_{n+1}], S[j_{n+1}] from the register outputs at the
// same time; the DEMUX side takes the four (enable, address, data) write
// ports produced by the swap controller and writes them into the bank at
// the rising clock edge, so a double swap is read, routed and committed in
// one clock. Two further ways to write the bank exist: `init` fills it with
// the identity permutation (first KSA clock) and `load` copies a whole
// S-box in at once (the buffer that copies S1 into the S-boxes of the
// stand-alone PRGA coprocessors). Priority: init, then load, then the
// write ports. The whole bank is also an output, for the Z circuit's
// 256:1 multiplexers and for the copy buffers.
//
// The paper writes the bank on the falling edge and reads it on the next
// rising edge; this block uses the rising edge only, with combinational
// reads of the register outputs. Reset loads the identity permutation
// (the paper does not specify a reset value).
module storage_block2
  import rc4_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  logic            load,
  input  sbox_t           load_data,
  input  sbox_wr_t [3:0]  wr,
  input  byte_t           i_n,
  input  byte_t           j_n,
  input  byte_t           i_n1,
  input  byte_t           j_n1,
  output byte_t           s_i_n,
  output byte_t           s_j_n,
  output byte_t           s_i_n1,
  output byte_t           s_j_n1,
  output sbox_t           sbox
);

  sbox_t bank_q;

  // quad-selecting MUX
  assign s_i_n  = bank_q[i_n];
  assign s_j_n  = bank_q[j_n];
  assign s_i_n1 = bank_q[i_n1];
  assign s_j_n1 = bank_q[j_n1];
  assign sbox   = bank_q;

  // quad-selecting DEMUX into the register bank
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_q <= identity_sbox();
    end else if (init) begin
      bank_q <= identity_sbox();
    end else if (load) begin
      bank_q <= load_data;
    end else begin
      for (int p = 0; p < 4; p++)
        if (wr[p].en) bank_q[wr[p].addr] <= wr[p].data;
    end
  end

endmodule
