// rc4_pkg: types shared by the 2-bytes-per-clock RC4 coprocessors.
//
// byte_t      one S-box or key byte.
// sbox_t      a whole 256-entry S-box as one packed vector; entry k sits in
//             bits [8k+7:8k], so sbox[k] selects S[k].
// sbox_wr_t   one write port of the quad-selecting DEMUX of a storage block
//             (enable, address, data).
// phase_t     the phases the composite KSA-PKRS-PRGA (CKP) controller walks
//             through after a key request.
// identity_sbox() returns the identity permutation S[k] = k that the KSA
// starts from.
package rc4_pkg;

  typedef logic [7:0] byte_t;
  typedef logic [255:0][7:0] sbox_t;

  typedef struct packed {
    logic  en;
    byte_t addr;
    byte_t data;
  } sbox_wr_t;

  typedef enum logic [2:0] {
    PH_IDLE      = 3'd0,
    PH_INIT      = 3'd1,
    PH_KSA       = 3'd2,
    PH_PKRS_INIT = 3'd3,
    PH_PKRS      = 3'd4,
    PH_PRGA      = 3'd5
  } phase_t;

  function automatic sbox_t identity_sbox();
    sbox_t s;
    for (int k = 0; k < 256; k++) s[k] = byte_t'(k);
    return s;
  endfunction

endpackage
