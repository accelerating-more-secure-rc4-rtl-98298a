// rc4_ref_pkg: plain one-swap-at-a-time RC4 reference used by the
// testbenches. Written from the textbook algorithm, independently of the
// 2-bytes-per-clock datapath:
//   KSA : S = identity; j = 0; for i = 0..255: j += S[i] + K[i]; swap
//   step: i += 1; j += S[i]; swap S[i], S[j]; Z = S[S[i] + S[j]]
// PKRS is the step without output, run from i = j = 0.
package rc4_ref_pkg;

  typedef logic [7:0] rbyte_t;
  typedef logic [255:0][7:0] rsbox_t;

  typedef struct packed {
    rsbox_t s;
    rbyte_t i;
    rbyte_t j;
  } rc4_state_t;

  function automatic rsbox_t ref_identity();
    rsbox_t s;
    for (int k = 0; k < 256; k++) s[k] = rbyte_t'(k);
    return s;
  endfunction

  function automatic rsbox_t ref_ksa(input rsbox_t k);
    rsbox_t s = ref_identity();
    rbyte_t j = 0, t;
    for (int i = 0; i < 256; i++) begin
      j = j + s[i] + k[i];
      t = s[i]; s[i] = s[j]; s[j] = t;
    end
    return s;
  endfunction

  // one PRGA step; returns Z
  function automatic rbyte_t ref_step(inout rc4_state_t st);
    rbyte_t t;
    st.i = st.i + 1;
    st.j = st.j + st.s[st.i];
    t = st.s[st.i]; st.s[st.i] = st.s[st.j]; st.s[st.j] = t;
    return st.s[rbyte_t'(st.s[st.i] + st.s[st.j])];
  endfunction

  // K-box contents for a key of len bytes: K[p] = key[p mod len]
  function automatic rsbox_t ref_kbox(input rsbox_t key, input int len);
    rsbox_t k;
    for (int p = 0; p < 256; p++) k[p] = key[p % len];
    return k;
  endfunction

  function automatic rsbox_t ref_random_perm();
    rsbox_t s = ref_identity();
    rbyte_t t;
    for (int k = 255; k > 0; k--) begin
      int r = int'($urandom_range(k, 0));
      t = s[k]; s[k] = s[r]; s[r] = t;
    end
    return s;
  endfunction

endpackage
