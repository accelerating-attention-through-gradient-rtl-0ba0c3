// tb_util_pkg: reference arithmetic shared by the testbenches.
// Key values are sign-magnitude integers in -2047..2047, query values two's
// complement in -2048..2047. key_word() builds the Key Buffer word of one
// digit of a key; ref_stop() replays the bit-serial schedule with plain
// integer arithmetic (partial sum of the digits seen so far plus the
// conservative margin) and reports the digit at which a key is dropped.
package tb_util_pkg;
  import leopard_pkg::*;

  typedef int key_t [D];
  typedef int qv_t  [D];

  function automatic logic [KBUF_W-1:0] key_word(input key_t k, input int s);
    logic [KBUF_W-1:0] w;
    int mag;
    for (int i = 0; i < D; i++) begin
      mag = (k[i] < 0) ? -k[i] : k[i];
      if (s == 0) w[2*i +: 2] = {1'(k[i] < 0), 1'((mag >> 10) & 1)};
      else        w[2*i +: 2] = 2'((mag >> (10 - 2*s)) & 3);
    end
    return w;
  endfunction

  function automatic longint dot(input qv_t q, input key_t k);
    longint acc = 0;
    for (int i = 0; i < D; i++) acc += longint'(q[i]) * longint'(k[i]);
    return acc;
  endfunction

  // partial sum after digit s: only magnitude bits 10 .. 10-2s+... counted
  function automatic longint partial(input qv_t q, input key_t k, input int s);
    longint acc = 0;
    int mag, keep_bits;
    keep_bits = (s == 0) ? 10 : 10 - 2*s;   // bits below this are unseen
    for (int i = 0; i < D; i++) begin
      mag = (k[i] < 0) ? -k[i] : k[i];
      mag = (mag >> keep_bits) << keep_bits;
      acc += longint'(q[i]) * longint'((k[i] < 0) ? -mag : mag);
    end
    return acc;
  endfunction

  function automatic longint possum(input qv_t q, input key_t k);
    longint s = 0;
    for (int i = 0; i < D; i++)
      if ((q[i] > 0 && k[i] >= 0) || (q[i] < 0 && k[i] < 0) || (q[i] < 0 && k[i] == 0 && 0))
        s += (q[i] < 0) ? -q[i] : q[i];
    return s;
  endfunction

  function automatic longint margin_ref(input qv_t q, input key_t k, input int s);
    int rem = (s == 0) ? 10 : 10 - 2*s;
    return possum(q, k) * ((longint'(1) << rem) - 1);
  endfunction

  // digit (0..5) at which the key is pruned, or 6 if it survives
  function automatic int ref_stop(input qv_t q, input key_t k, input longint th);
    for (int s = 0; s < SLICES; s++)
      if (partial(q, k, s) + margin_ref(q, k, s) < th) return s;
    return SLICES;
  endfunction

  // softmax weight of a surviving score: mant * 2^ex (mant has 15 fraction
  // bits), x = (s - th) >> shift in units of 1/512, saturating at ex = 15
  function automatic longint exp_weight(input longint s, input longint th, input int shift);
    longint x = (s - th) >> shift;
    longint xi = x >> 9, xf = x & 511;
    if (x < 0) begin xi = 0; xf = 0; end
    if (xi > 15) begin xi = 15; xf = 511; end
    return longint'($rtoi(2.0 ** (real'(xf) / 512.0) * 32768.0 + 0.5)) << xi;
  endfunction

  function automatic longint floordiv(input longint a, input longint b);
    if (b == 0) return 0;
    return (a >= 0) ? a / b : -((-a + b - 1) / b);
  endfunction

  function automatic int rand_range(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction
endpackage
