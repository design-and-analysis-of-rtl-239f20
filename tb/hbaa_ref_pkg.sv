// hbaa_ref_pkg -- arithmetic reference model of the HBAA for the testbenches.
//
// It computes what an approximate sub-adder and a whole HBAA should return
// with integer arithmetic on bit slices, not with gates, so that it is an
// independent check of the structural RTL:
//   * bits [0,L) are a | b;
//   * H-S < L : carry into bit L = carry out of (a[L-1:T] + b[L-1:T]), T=H-S;
//               bits [L,H) and cout = a[H-1:L] + b[H-1:L] + that carry;
//   * H-S >= L: bits [L,T) = (a[T-1:L] + b[T-1:L]) mod 2^(T-L);
//               bits [T,H) and cout = a[H-1:T] + b[H-1:T];
//   * cout is 0 when the block's carry is not used.
// Widths are limited to 62 bits so that longint arithmetic is exact.
package hbaa_ref_pkg;

  function automatic longint unsigned field(longint unsigned x, int unsigned lo, int unsigned w);
    if (w == 0) return 0;
    return (x >> lo) & ((64'd1 << w) - 1);
  endfunction

  // Returns {cout, sum[H-1:0]} of one approximate sub-adder.
  function automatic longint unsigned ref_block(int unsigned h, int unsigned l, int unsigned s,
                                                bit cout_used,
                                                longint unsigned a, longint unsigned b);
    int unsigned     t = h - s;
    longint unsigned res, up, c;
    res = field(a, 0, l) | field(b, 0, l);
    if (t < l) begin
      c   = (field(a, t, l - t) + field(b, t, l - t)) >> (l - t);
      up  = field(a, l, h - l) + field(b, l, h - l) + c;
      res = res | (up << l);                 // includes cout at bit h
    end else begin
      up  = field(field(a, l, t - l) + field(b, l, t - l), 0, t - l);
      res = res | (up << l);
      up  = field(a, t, s) + field(b, t, s);
      res = res | (up << t);                 // includes cout at bit h
    end
    if (!cout_used) res = field(res, 0, h);
    return res;
  endfunction

  // Returns sum[N:0] of an N-bit HBAA.
  function automatic longint unsigned ref_adder(int unsigned n, int unsigned h, int unsigned napprox,
                                                int unsigned lvec[], int unsigned svec[],
                                                longint unsigned a, longint unsigned b);
    int unsigned     k = n / h;
    longint unsigned res = 0, carry = 0, blk;
    for (int unsigned j = 0; j < k; j++) begin
      if (j < napprox) begin
        blk   = ref_block(h, lvec[j], svec[j], j == napprox - 1, field(a, j*h, h), field(b, j*h, h));
        carry = (j == napprox - 1) ? (blk >> h) : 0;
      end else begin
        blk   = field(a, j*h, h) + field(b, j*h, h) + carry;
        carry = blk >> h;
      end
      res = res | (field(blk, 0, h) << (j*h));
    end
    return res | (carry << n);
  endfunction

endpackage
