// ga_ref_pkg - reference models used by the testbenches, written from the
// formulas of the design rather than from its RTL:
//   lfsr_step   one shift of the r^32 + r^22 + r^2 + 1 Fibonacci register;
//   fitness     y = gamma(alpha(px) + beta(qx)) for the F1, F2 and F3
//               benchmarks, including the bucketing of the gamma table
//               (delta rounded down to a multiple of 2^(d - 16) when the sum
//               is wider than 16 bits);
//   cut_mask    the crossover mask for a 32-bit generator value.
package ga_ref_pkg;

  function automatic logic [31:0] lfsr_step(logic [31:0] s);
    return {s[30:0], ^(s & 32'h8020_0002)};
  endfunction

  function automatic longint sq_root(longint v);
    longint lo = 0, hi = 1 << 24;
    if (v <= 0) return 0;
    while (lo < hi) begin
      longint mid = (lo + hi + 1) / 2;
      if (mid * mid <= v) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction

  // func: 0 = F1, 1 = F2, 2 = F3; h = m/2
  function automatic longint fitness(int func, longint x, int h);
    longint pu, qu, ps, qs, dl;
    int dw, sh;
    pu = (x >> h) & ((64'd1 << h) - 1);
    qu = x & ((64'd1 << h) - 1);
    ps = (pu >= (64'd1 << (h - 1))) ? pu - (64'd1 << h) : pu;
    qs = (qu >= (64'd1 << (h - 1))) ? qu - (64'd1 << h) : qu;
    case (func)
      0: begin dl = qs * qs * qs - 15 * qs * qs + 50; dw = 3 * h + 1; end
      1: begin dl = 8 * pu - 4 * qu + 1020;           dw = h + 6;     end
      default: begin dl = ps * ps + qs * qs;          dw = 2 * h + 2; end
    endcase
    sh = (dw > 16) ? dw - 16 : 0;
    dl = (dl >>> sh) << sh;
    return (func == 2) ? sq_root(dl) : dl;
  endfunction

  function automatic logic [31:0] cut_mask(logic [31:0] r, int h);
    int sw, code;
    sw = $clog2(h + 1);
    code = int'(r >> (32 - sw));
    if (code > h - 1) code = h - 1;
    return ((32'd1 << h) - 1) >> (code + 1);
  endfunction

endpackage
