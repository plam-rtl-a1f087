// plam_ref_pkg: behavioural reference model of posit<N,ES> decoding,
// encoding with round-to-nearest-even, and PLAM multiplication, used by the
// testbenches to work out expected results independently of the RTL.
//
// The model is written bit by bit: the decoder walks the regime run of
// equation k = -x[n-2] + sum(...) one bit at a time, and the encoder
// appends regime, exponent and fraction bits to a bit string, then rounds
// on that string. PLAM itself is computed on plain integers: the scale
// 2^ES*K + E and the fraction are added as one fixed-point number and split
// again. Also provided: conversion of a posit to a real value, used for the
// 1/9 error-bound checks. Supports N <= 32.
package plam_ref_pkg;

  typedef struct {
    bit       sign;
    int       k;
    int       e;
    longint   f;      // fraction bits, FW wide
    bit       zero;
    bit       nar;
  } fields_t;

  class plam_ref #(int N = 32, int ES = 2);
    localparam int FW = N - ES - 3;

    static function bit [N-1:0] nar_word();
      return {1'b1, {(N-1){1'b0}}};
    endfunction

    static function fields_t decode(bit [N-1:0] x);
      fields_t d;
      bit [N-1:0] m;
      int i, run;
      bit r;
      d.sign = x[N-1];
      d.zero = (x == 0);
      d.nar  = (x == nar_word());
      d.k = 0; d.e = 0; d.f = 0;
      if (d.zero || d.nar) return d;
      m = d.sign ? (~x + 1) : x;
      r = m[N-2];
      run = 0;
      i = N - 2;
      while (i >= 0 && m[i] == r) begin
        run++;
        i--;
      end
      d.k = r ? run - 1 : -run;
      i--;                                  // skip the terminating bit
      for (int j = 0; j < ES; j++) begin
        d.e = d.e * 2 + ((i >= 0) ? int'(m[i]) : 0);
        i--;
      end
      for (int j = 0; j < FW; j++) begin
        d.f = d.f * 2 + ((i >= 0) ? longint'(m[i]) : 0);
        i--;
      end
      return d;
    endfunction

    // Encode sign, regime K, exponent E, FW-bit fraction F with RNE on the
    // bit string; saturates at maxpos/minpos.
    static function bit [N-1:0] encode(bit sign, int k, int e, longint f,
                                       output bit rnd_up, output bit smax,
                                       output bit smin);
      bit bits[$];
      bit [N-1:0] body;
      bit guard, sticky;
      rnd_up = 0; smax = 0; smin = 0;
      if (k > N - 2) begin
        smax = 1;
        body = {1'b0, {(N-1){1'b1}}};
      end else if (k < -(N - 2)) begin
        smin = 1;
        body = 1;
      end else begin
        if (k >= 0) begin
          repeat (k + 1) bits.push_back(1'b1);
          bits.push_back(1'b0);
        end else begin
          repeat (-k) bits.push_back(1'b0);
          bits.push_back(1'b1);
        end
        for (int j = ES - 1; j >= 0; j--) bits.push_back(e[j]);
        for (int j = FW - 1; j >= 0; j--) bits.push_back(f[j]);
        body = 0;
        for (int j = 0; j < N - 1; j++)
          body = (body << 1) | N'((j < bits.size()) ? bits[j] : 1'b0);
        guard  = (N - 1 < bits.size()) ? bits[N-1] : 1'b0;
        sticky = 0;
        for (int j = N; j < bits.size(); j++) sticky |= bits[j];
        rnd_up = guard & (body[0] | sticky);
        body   = body + rnd_up;
      end
      return sign ? (~body + 1) : body;
    endfunction

    // PLAM product, with the mechanisms it went through.
    static function bit [N-1:0] mult(bit [N-1:0] a, bit [N-1:0] b,
                                     output bit f_carry, output bit e_carry,
                                     output bit rnd_up, output bit smax,
                                     output bit smin);
      fields_t da, db;
      longint la, lb, lc;
      int k, e;
      longint f;
      da = decode(a);
      db = decode(b);
      f_carry = 0; e_carry = 0; rnd_up = 0; smax = 0; smin = 0;
      if (da.nar || db.nar) return nar_word();
      if (da.zero || db.zero) return '0;
      la = ((longint'(da.k) * (1 << ES) + longint'(da.e)) <<< FW) + da.f;
      lb = ((longint'(db.k) * (1 << ES) + longint'(db.e)) <<< FW) + db.f;
      lc = la + lb;
      f_carry = (da.f + db.f) >= (longint'(1) << FW);
      e_carry = (da.e + db.e + int'(f_carry)) >= (1 << ES);
      f = lc & ((longint'(1) << FW) - 1);
      e = int'((lc >>> FW) & ((1 << ES) - 1));
      k = int'(lc >>> (FW + ES));
      return encode(da.sign ^ db.sign, k, e, f, rnd_up, smax, smin);
    endfunction

    // Nearest posit at or below |v| in fraction (the fraction is truncated
    // to FW bits, then the encoder rounds on the bit string). Used only to
    // turn generated data into posit words.
    static function bit [N-1:0] from_real(real v);
      bit ru, sx, sn, s;
      real m;
      int sc, k;
      longint f;
      if (v == 0.0) return '0;
      s = (v < 0.0);
      m = s ? -v : v;
      sc = 0;
      while (m >= 2.0) begin m = m / 2.0; sc++; end
      while (m < 1.0)  begin m = m * 2.0; sc--; end
      k = (sc >= 0) ? sc / (1 << ES) : -((-sc + (1 << ES) - 1) / (1 << ES));
      f = longint'((m - 1.0) * (2.0 ** FW));
      if (f >= (longint'(1) << FW)) f = (longint'(1) << FW) - 1;
      return encode(s, k, sc - k * (1 << ES), f, ru, sx, sn);
    endfunction

    static function real to_real(bit [N-1:0] x);
      fields_t d;
      real v;
      d = decode(x);
      if (d.zero || d.nar) return 0.0;
      v = (1.0 + real'(d.f) / (2.0 ** FW)) *
          (2.0 ** (real'(d.k) * (2.0 ** ES) + real'(d.e)));
      return d.sign ? -v : v;
    endfunction
  endclass

endpackage
