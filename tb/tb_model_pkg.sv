// tb_model_pkg: reference models shared by the testbenches.
//
// Plain-integer models of the signed bit-slice encoding, of the coarse
// run-length encoding and of the dot products a PE lane computes. They are
// written from the arithmetic definition (value = sum of slice_i * 8^i),
// not from the RTL structure.
package tb_model_pkg;

  // Signed bit-slice o of value x cut into n slices, as an integer.
  function automatic int sbr_slice(int x, int o, int n);
    int r, u, s[4];
    r = x;
    for (int i = 0; i < n - 1; i++) begin
      u = r & 7;            // floor remainder
      s[i] = u;
      r = (r - u) / 8;
    end
    s[n-1] = r;             // signed top slice
    if (x < 0 && n > 1) begin
      s[n-1] += 1;
      for (int i = 1; i < n - 1; i++) s[i] += 1 - 8;
      s[0] -= 8;
    end
    if (o >= n) return 0;
    return s[o];
  endfunction

  function automatic logic [3:0] s4(int v);
    return v[3:0];
  endfunction

  function automatic int sx4(logic [3:0] v);
    return int'($signed(v));
  endfunction

  function automatic int wrap12(int v);
    logic [11:0] t;
    t = v[11:0];
    return int'($signed(t));
  endfunction

  // one lane's tile: C input sub-words, RLE-compressed (or not)
  typedef struct {
    logic [15:0] word[$];
    logic [3:0]  idx[$];
  } stream_t;

  function automatic void rle(ref stream_t st, input logic [15:0] sw[], input bit cmp);
    int run;
    run = 0;
    foreach (sw[c]) begin
      bit last;
      last = (c == sw.size() - 1);
      if (!cmp || sw[c] != 0 || run == 15 || last) begin
        st.word.push_back(sw[c]);
        st.idx.push_back(cmp ? 4'(run) : 4'd0);
        run = 0;
      end else run++;
    end
  endfunction

  function automatic int rand_val(int bits, int zero_pct);
    int lim;
    lim = 1 << (bits - 1);
    if (int'($urandom_range(99)) < zero_pct) return int'($urandom_range(6)) - 3;
    return int'($urandom_range(2*lim - 1)) - lim;
  endfunction

endpackage
