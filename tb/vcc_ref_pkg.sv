// vcc_ref_pkg: reference model of Virtual Coset Coding used by the
// testbenches. It is written separately from the RTL: the word is handled as
// a sequence of positions counted from the left (position 0 = MSB), the MLC
// energy comes from a symbol transition lookup, and the kernel search is a
// plain loop over kernels and partitions. Fixed at n = 64, m = 16, p = 4;
// the kernel count is an argument.
package vcc_ref_pkg;

  localparam int EH = 10;  // energy of writing a symbol whose right digit is 1
  localparam int EL = 1;   // energy of writing a symbol whose right digit is 0

  typedef logic [15:0] kern_t;
  typedef kern_t kern_arr_t [16];

  // bit at position pos counted from the left of a w-bit value
  function automatic logic lbit(logic [79:0] v, int w, int pos);
    return v[w-1-pos];
  endfunction

  // energy and SAW of writing nw over od, w bits, stuck flags st
  function automatic void cost(logic [79:0] nw, logic [79:0] od, logic [79:0] st,
                               int w, bit mlc, output int e, output int s);
    e = 0; s = 0;
    if (mlc) begin
      for (int k = 0; k < w/2; k++) begin
        logic [1:0] n2, o2;
        n2 = {lbit(nw, w, 2*k), lbit(nw, w, 2*k+1)};
        o2 = {lbit(od, w, 2*k), lbit(od, w, 2*k+1)};
        if (n2 != o2) begin
          case (n2)
            2'b01, 2'b11: e += EH;
            default:      e += EL;
          endcase
          if (lbit(st, w, 2*k) || lbit(st, w, 2*k+1)) s++;
        end
      end
    end else begin
      for (int k = 0; k < w; k++)
        if (lbit(nw, w, k) != lbit(od, w, k)) begin
          e++;
          if (lbit(st, w, k)) s++;
        end
    end
  endfunction

  function automatic int scalar(int e, int s, bit saw_first);
    return saw_first ? s * 1024 + e : e * 1024 + s;
  endfunction

  // The kernel as applied: MLC mode keeps only the right digits, which sit
  // at odd positions counted from the left.
  function automatic kern_t applied(kern_t k, bit mlc);
    kern_t r;
    for (int pos = 0; pos < 16; pos++)
      r[15-pos] = (mlc && (pos % 2 == 0)) ? 1'b0 : k[15-pos];
    return r;
  endfunction

  // Encode one word with nk kernels. aux width = log2(nk) + 4.
  function automatic void encode(logic [63:0] d, logic [63:0] od, logic [7:0] oaux,
                                 logic [71:0] st, kern_arr_t ks, int nk, bit mlc,
                                 bit saw_first, output logic [63:0] x,
                                 output logic [7:0] aux, output int best);
    int iw;
    iw = $clog2(nk);
    best = 32'h7fffffff;
    x = '0; aux = '0;
    for (int i = 0; i < nk; i++) begin
      logic [63:0] cand;
      logic [7:0]  a;
      int tot, e, s;
      tot = 0;
      a = 8'(i) << 4;
      for (int j = 0; j < 4; j++) begin
        logic [15:0] dj, oj, sj, y0, y1;
        int c0, c1;
        dj = d[63-16*j -: 16];
        oj = od[63-16*j -: 16];
        sj = st[71-16*j -: 16];
        y0 = dj ^ applied(ks[i], mlc);
        y1 = dj ^ applied(~ks[i], mlc);
        cost({64'b0, y0}, {64'b0, oj}, {64'b0, sj}, 16, mlc, e, s);
        c0 = scalar(e, s, saw_first);
        cost({64'b0, y1}, {64'b0, oj}, {64'b0, sj}, 16, mlc, e, s);
        c1 = scalar(e, s, saw_first);
        if (c1 < c0) begin
          cand[63-16*j -: 16] = y1; a[3-j] = 1'b1; tot += c1;
        end else begin
          cand[63-16*j -: 16] = y0; a[3-j] = 1'b0; tot += c0;
        end
      end
      // the aux field is iw + 4 bits wide, right-aligned
      a = {a[7:4] & 4'((1 << iw) - 1), a[3:0]};
      cost({72'b0, a}, {72'b0, oaux}, {72'b0, st[7:0]}, iw + 4, mlc, e, s);
      tot += scalar(e, s, saw_first);
      if (tot < best) begin
        best = tot; x = cand; aux = a;
      end
    end
  endfunction

  // Decode one word
  function automatic logic [63:0] decode(logic [63:0] x, logic [7:0] aux, kern_arr_t ks,
                                         bit mlc);
    logic [63:0] d;
    kern_t k;
    k = ks[aux[7:4]];
    for (int j = 0; j < 4; j++)
      d[63-16*j -: 16] = x[63-16*j -: 16] ^ applied(aux[3-j] ? ~k : k, mlc);
    return d;
  endfunction

  // Kernels generated from the left digits of w (nk = 4, 8 or 16).
  function automatic kern_arr_t gen(logic [63:0] w, int nk);
    kern_arr_t ks;
    logic [31:0] left;
    int per, mw;
    for (int s = 0; s < 32; s++) left[31-s] = w[63-2*s];
    per = nk / 2;
    mw  = 1 + $clog2(per);
    for (int i = 0; i < 16; i++) ks[i] = '0;
    for (int i = 0; i < per; i++)
      for (int j = 0; j < 2; j++) begin
        kern_t base, rep;
        base = left[31-16*j -: 16];
        for (int pos = 0; pos < 16; pos++)       // mask repeated, MSB first
          rep[15-pos] = 1'((i >> (mw - 1 - (pos % mw))) & 1);
        ks[i*2+j] = base ^ rep;
      end
    return ks;
  endfunction

endpackage
