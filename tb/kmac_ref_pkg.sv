// kmac_ref_pkg: reference model of Keccak-f[1600] and KMAC128 for the
// testbenches, written from the FIPS 202 / SP 800-185 definitions and kept
// deliberately different from the RTL: the round constants come from the
// rc(t) LFSR of the standard, the rho offsets from the (t+1)(t+2)/2 walk,
// the state is a 5x5 array, and the KMAC input string is built as one byte
// array and then cut into blocks.
package kmac_ref_pkg;

  typedef logic [63:0] lane_t;
  typedef lane_t       lanes_t [5][5];   // [x][y]
  typedef byte unsigned bytes_t [];

  function automatic bit rc_bit(int t);
    logic [8:0] r = 9'b0_0000_0001;     // R = 10000000, R[0] is the first bit
    if (t % 255 == 0) return 1'b1;
    for (int i = 1; i <= t % 255; i++) begin
      r = {r[7:0], 1'b0};                // R = 0 || R (bit index grows)
      r[0] ^= r[8];
      r[4] ^= r[8];
      r[5] ^= r[8];
      r[6] ^= r[8];
      r[8] = 1'b0;
    end
    return r[0];
  endfunction

  function automatic lane_t rot(lane_t v, int n);
    n = n % 64;
    if (n == 0) return v;
    return (v << n) | (v >> (64 - n));
  endfunction

  function automatic lanes_t permute(lanes_t a);
    lanes_t b;
    lane_t  c [5];
    lane_t  d [5];
    int     x, y, t, tmp;
    for (int ir = 0; ir < 24; ir++) begin
      // theta
      for (x = 0; x < 5; x++) c[x] = a[x][0] ^ a[x][1] ^ a[x][2] ^ a[x][3] ^ a[x][4];
      for (x = 0; x < 5; x++) d[x] = c[(x + 4) % 5] ^ rot(c[(x + 1) % 5], 1);
      for (x = 0; x < 5; x++) for (y = 0; y < 5; y++) a[x][y] ^= d[x];
      // rho
      b = a;
      x = 1; y = 0;
      for (t = 0; t < 24; t++) begin
        b[x][y] = rot(a[x][y], ((t + 1) * (t + 2) / 2) % 64);
        tmp = y; y = (2 * x + 3 * y) % 5; x = tmp;
      end
      // pi
      for (x = 0; x < 5; x++) for (y = 0; y < 5; y++) a[x][y] = b[(x + 3 * y) % 5][x];
      // chi
      b = a;
      for (x = 0; x < 5; x++) for (y = 0; y < 5; y++)
        a[x][y] = b[x][y] ^ (~b[(x + 1) % 5][y] & b[(x + 2) % 5][y]);
      // iota
      for (int j = 0; j <= 6; j++)
        a[0][0][(1 << j) - 1] ^= rc_bit(j + 7 * ir);
    end
    return a;
  endfunction

  // Flat 1600-bit view: byte i of the sponge state in bits 8i+7:8i.
  function automatic logic [1599:0] to_flat(lanes_t a);
    logic [1599:0] f;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
      f[64 * (x + 5 * y) +: 64] = a[x][y];
    return f;
  endfunction

  function automatic lanes_t from_flat(logic [1599:0] f);
    lanes_t a;
    for (int x = 0; x < 5; x++) for (int y = 0; y < 5; y++)
      a[x][y] = f[64 * (x + 5 * y) +: 64];
    return a;
  endfunction

  function automatic logic [1599:0] permute_flat(logic [1599:0] f);
    return to_flat(permute(from_flat(f)));
  endfunction

  function automatic bytes_t left_encode(int unsigned v);
    bytes_t r;
    int n = 1;
    while (n < 4 && (v >> (8 * n)) != 0) n++;
    r = new[n + 1];
    r[0] = byte'(n);
    for (int i = 0; i < n; i++) r[1 + i] = byte'(v >> (8 * (n - 1 - i)));
    return r;
  endfunction

  function automatic bytes_t right_encode(int unsigned v);
    bytes_t r;
    int n = 1;
    while (n < 4 && (v >> (8 * n)) != 0) n++;
    r = new[n + 1];
    for (int i = 0; i < n; i++) r[i] = byte'(v >> (8 * (n - 1 - i)));
    r[n] = byte'(n);
    return r;
  endfunction

  function automatic bytes_t cat(bytes_t a, bytes_t b);
    bytes_t r = new[a.size() + b.size()];
    foreach (a[i]) r[i] = a[i];
    foreach (b[i]) r[a.size() + i] = b[i];
    return r;
  endfunction

  function automatic bytes_t bytepad(bytes_t x, int w);
    bytes_t r = cat(left_encode(w), x);
    int n = r.size();
    while (n % w != 0) n++;
    r = new[n](r);
    for (int i = cat(left_encode(w), x).size(); i < n; i++) r[i] = 8'h00;
    return r;
  endfunction

  function automatic bytes_t encode_string(bytes_t s);
    return cat(left_encode(8 * s.size()), s);
  endfunction

  // KMAC128(key, msg, out_bits, S = "") as out_bits/8 bytes.
  function automatic bytes_t kmac128(bytes_t key, bytes_t msg, int out_bits);
    bytes_t name = new[4];
    bytes_t empty;
    bytes_t s, r;
    logic [1599:0] st = '0;
    int nblk;
    name[0] = "K"; name[1] = "M"; name[2] = "A"; name[3] = "C";
    empty = new[0];
    s = bytepad(cat(encode_string(name), encode_string(empty)), 168);
    s = cat(s, bytepad(encode_string(key), 168));
    s = cat(s, msg);
    s = cat(s, right_encode(out_bits));
    // cSHAKE suffix 00 and pad10*1 -> 0x04 ... 0x80
    nblk = s.size() / 168 + 1;
    begin
      int base = s.size();
      s = new[nblk * 168](s);
      for (int i = base; i < nblk * 168; i++) s[i] = 8'h00;
      s[base] ^= 8'h04;
      s[nblk * 168 - 1] ^= 8'h80;
    end
    for (int b = 0; b < nblk; b++) begin
      for (int i = 0; i < 168; i++) st[8 * i +: 8] ^= s[b * 168 + i];
      st = permute_flat(st);
    end
    r = new[out_bits / 8];
    foreach (r[i]) r[i] = st[8 * i +: 8];
    return r;
  endfunction

endpackage
