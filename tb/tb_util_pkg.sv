// tb_util_pkg: testbench helpers for the MPGD compressor: a bit-serial decoder of
// the compressed stream and the reference arithmetic of the micromegas mode.
//
// The decoder keeps a queue of received bits (MSB of each 32-bit word first) and
// reads symbols by growing a code one bit at a time until it matches an entry of
// the static table (len and code both equal), which works for any prefix code.
// An escape code is followed by a 13-bit two's complement difference.
package tb_util_pkg;
  import mpgd_pkg::*;

  bit bitq [$];

  function automatic void push_word(logic [31:0] w);
    for (int i = 31; i >= 0; i--) bitq.push_back(w[i]);
  endfunction

  function automatic int unsigned get_bits(int n);
    int unsigned v = 0;
    for (int i = 0; i < n; i++) begin
      v = (v << 1) | int'(bitq.pop_front());
    end
    return v;
  endfunction

  // Reads one coded difference; returns 1 on success, 0 if no code matched.
  function automatic bit get_delta(output int d, input tbl_e tbl = TBL_REF);
    huff_entry_t e;
    int unsigned c = 0;
    for (int l = 1; l <= MAX_CODE_LEN; l++) begin
      if (bitq.size() == 0) return 0;
      c = (c << 1) | int'(bitq.pop_front());
      for (int s = 0; s < NSYM; s++) begin
        e = huff_lookup(tbl, SYM_W'(s));
        if (int'(e.len) == l && int'(e.code) == int'(c)) begin
          if (s == int'(ESC_SYM)) begin
            d = int'(get_bits(DELTA_W));
            if (d >= (1 << (DELTA_W-1))) d -= (1 << DELTA_W);
          end else begin
            d = (s >= 128) ? s - 256 : s;
          end
          return 1;
        end
      end
    end
    return 0;
  endfunction

  // Drop the padding after a frame's last code (to the next 32-bit boundary).
  function automatic void align_word();
    while (bitq.size() % 32 != 0) void'(bitq.pop_front());
  endfunction

  // Prediction of the micromegas mode, written from its definition:
  // reference shifted so its peak sits at the sample peak, scaled by peak ratio.
  function automatic int predict(int i, int p, int v, int rp, int r, int ref_val_at, int frac);
    longint k, j;
    longint y;
    j = longint'(i) - p + rp;
    if (j < 0 || j >= NSAMP) return 0;
    k = (r == 0) ? 0 : (longint'(v) << frac) / r;
    y = (longint'(ref_val_at) * k + (longint'(1) << (frac-1))) >>> frac;
    if (y > 4095) y = 4095;
    return int'(y);
  endfunction
endpackage
