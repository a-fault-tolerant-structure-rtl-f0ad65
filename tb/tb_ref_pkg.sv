// tb_ref_pkg: reference models shared by the system-level testbenches.
// idct_ref computes the fixed-point 8x8 IDCT that idct_ip implements, with
// its kernel derived here from $cos rather than taken from the RTL table;
// sort_ref sorts the four bytes of a word ascending.
package tb_ref_pkg;

  typedef int blk_t [64];

  function automatic int kern(int u, int x);
    real c = (u == 0) ? 1.0 / $sqrt(2.0) : 1.0;
    return int'(4096.0 * c * $cos((2.0 * x + 1.0) * u * 3.141592653589793 / 16.0));
  endfunction

  function automatic int rsr(longint v, int s);
    return int'((v + (longint'(1) <<< (s - 1))) >>> s);
  endfunction

  function automatic blk_t idct_ref(blk_t F);
    blk_t t, f;
    for (int v = 0; v < 8; v++)
      for (int x = 0; x < 8; x++) begin
        longint s = 0;
        for (int u = 0; u < 8; u++) s += longint'(kern(u, x)) * F[v*8+u];
        t[v*8+x] = rsr(s, 10);
      end
    for (int y = 0; y < 8; y++)
      for (int x = 0; x < 8; x++) begin
        longint s = 0;
        int q;
        for (int v = 0; v < 8; v++) s += longint'(kern(v, y)) * t[v*8+x];
        q = rsr(s, 16);
        f[y*8+x] = (q > 255) ? 255 : (q < -256) ? -256 : q;
      end
    return f;
  endfunction

  // a random coefficient block shaped like MPEG-2 data: large low frequencies
  function automatic blk_t rand_block();
    blk_t F;
    for (int i = 0; i < 64; i++)
      F[i] = (i < 6) ? int'($urandom_range(0, 1600)) - 800 : int'($urandom_range(0, 80)) - 40;
    return F;
  endfunction

  function automatic logic [31:0] sort_ref(logic [31:0] w);
    logic [7:0] a [4];
    logic [7:0] t;
    for (int i = 0; i < 4; i++) a[i] = w[i*8 +: 8];
    for (int i = 0; i < 4; i++)
      for (int j = i + 1; j < 4; j++)
        if (a[j] < a[i]) begin t = a[i]; a[i] = a[j]; a[j] = t; end
    return {a[3], a[2], a[1], a[0]};
  endfunction

endpackage
