// bdi_ref_pkg: reference model of the SHIELD BDI image format and line generators, for
// the testbenches only.
//
// The model is written independently of the RTL, with 64-bit integer arithmetic: an element
// fits a signed Q-byte value when its signed P-byte reading lies in [-2^(8Q-1), 2^(8Q-1)).
// States are tried from the smallest payload (0, 8, 15, 19, 22, 33, 34, 36 bytes) up, and
// the image is base, deltas without the base element's, then one mask bit per element.
package bdi_ref_pkg;

  typedef logic [511:0] line_t;

  // State codes as in the RTL package: 0 zero, 1 repeat, 2 B8D1, 3 B4D1, 4 B8D2, 5 B2D1,
  // 6 B4D2, 7 B8D4, 8 uncompressed.
  localparam int PB [9] = '{0, 0, 8, 4, 8, 2, 4, 8, 0};
  localparam int QB [9] = '{0, 0, 1, 1, 2, 1, 2, 4, 0};
  localparam int PAYLOAD [9] = '{0, 8, 15, 19, 22, 33, 34, 36, 64};

  function automatic int img_len(int st);
    if (PB[st] == 0) return PAYLOAD[st];
    return PAYLOAD[st] + (64 / PB[st]) / 8;
  endfunction

  function automatic longint get_elem(line_t l, int p, int i);
    longint v = 0;
    for (int b = p - 1; b >= 0; b--) v = (v << 8) | longint'(l[(i*p + b)*8 +: 8]);
    return v;
  endfunction

  // Signed reading of the low p bytes of v.
  function automatic longint sgn(longint v, int p);
    if (p == 8) return v;
    v = v & ((longint'(1) << (8*p)) - 1);
    if (v >= (longint'(1) << (8*p - 1))) v = v - (longint'(1) << (8*p));
    return v;
  endfunction

  function automatic bit fits(longint v, int p, int q);
    longint s = sgn(v, p);
    longint lim = longint'(1) << (8*q - 1);
    return (s >= -lim) && (s < lim);
  endfunction

  function automatic void put_bytes(ref line_t img, input int off, input longint v,
                                    input int n);
    for (int b = 0; b < n; b++) img[(off + b)*8 +: 8] = 8'(v >> (8*b));
  endfunction

  // Try one base-delta pattern; returns 1 and the image when the line fits.
  function automatic bit try_bd(line_t l, int p, int q, output line_t img);
    int n = 64 / p;
    int bi = -1;
    longint base;
    bit ok = 1;
    bit [31:0] mask = '0;
    int k = 0;
    img = '0;
    for (int i = 0; i < n; i++)
      if (bi < 0 && !fits(get_elem(l, p, i), p, q)) bi = i;
    if (bi < 0) bi = 0;
    base = get_elem(l, p, bi);
    put_bytes(img, 0, base, p);
    for (int i = 0; i < n; i++) begin
      longint e = get_elem(l, p, i);
      longint d;
      if (i == bi) begin
        mask[i] = 1;
        continue;
      end
      if (fits(e, p, q)) d = e;
      else if (fits(e - base, p, q)) begin d = e - base; mask[i] = 1; end
      else ok = 0;
      put_bytes(img, p + k*q, d, q);
      k++;
    end
    put_bytes(img, p + (n-1)*q, longint'(mask), n / 8);
    return ok;
  endfunction

  function automatic void compress(line_t l, output int st, output line_t img);
    bit rep = 1;
    line_t t;
    for (int i = 1; i < 8; i++) if (l[i*64 +: 64] != l[63:0]) rep = 0;
    if (l == '0) begin st = 0; img = '0; return; end
    if (rep) begin st = 1; img = '0; img[63:0] = l[63:0]; return; end
    for (int s = 2; s <= 7; s++)
      if (try_bd(l, PB[s], QB[s], t)) begin st = s; img = t; return; end
    st = 8;
    img = l;
  endfunction

  // Random line of a chosen kind: 0 zero, 1 repeat, 2..7 built to fit that base-delta
  // state's element/delta sizes (it may compress even better), 8 random.
  function automatic line_t gen_line(int kind);
    line_t l = '0;
    int p, q, n;
    longint base;
    case (kind)
      0: l = '0;
      1: begin
        longint v = {$urandom, $urandom};
        for (int i = 0; i < 8; i++) l[i*64 +: 64] = v;
      end
      8: for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
      default: begin
        p = PB[kind]; q = QB[kind]; n = 64 / p;
        base = {$urandom, $urandom};
        for (int i = 0; i < n; i++) begin
          longint d = longint'($urandom) & ((longint'(1) << (8*q - 1)) - 1);
          if ($urandom_range(1) == 1) d = -d;
          if ($urandom_range(3) == 0) put_bytes(l, i*p, d, p);          // zero base
          else                        put_bytes(l, i*p, base + d, p);   // non-zero base
        end
      end
    endcase
    return l;
  endfunction

endpackage
