// tb_huffman_core: checks the two static tables and one core.
// Tables: every code length within 1..MAX_CODE_LEN, the code is complete (Kraft
// sum exactly 1) and prefix-free, and |v| larger never gets a shorter code.
// Core: random differences (inside and outside -127..127, so escapes occur) and
// raw literals; the expected word is built here from the table entries. The word
// must appear CORE_CYCLES-1 clocks after the item is taken, and with a free output
// a new item is taken every CORE_CYCLES clocks.
module tb_huffman_core;
  import mpgd_pkg::*;
  localparam int CC = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  huff_item_t in_item;
  code_word_t out_word;
  int checks = 0, failures = 0, n_esc = 0, n_raw = 0;

  huffman_core #(.CORE_CYCLES(CC)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  function automatic int lenof(tbl_e t, int v);
    return int'(huff_lookup(t, SYM_W'(v)).len);
  endfunction

  function automatic huff_entry_t ent(tbl_e t, int s);
    return huff_lookup(t, SYM_W'(s));
  endfunction

  initial begin
    longint kraft = 0;
    bit pf = 1, mono = 1;
    int d, n, lat, t_acc, t_prev;
    longint expb; int expl;
    // ---- tables ----
    for (int ti = 0; ti < 2; ti++) begin
      tbl_e t;
      t = tbl_e'(ti);
      kraft = 0; pf = 1; mono = 1;
      for (int s = 0; s < NSYM; s++) begin
        check(ent(t, s).len >= 1 && ent(t, s).len <= MAX_CODE_LEN, $sformatf("table %0d length of %0d", ti, s));
        kraft += longint'(1) << (MAX_CODE_LEN - ent(t, s).len);
      end
      check(kraft == (longint'(1) << MAX_CODE_LEN), $sformatf("table %0d Kraft sum %0d", ti, kraft));
      for (int a = 0; a < NSYM; a++)
        for (int b = 0; b < NSYM; b++)
          if (a != b && ent(t, a).len <= ent(t, b).len &&
              (int'(ent(t, b).code) >> (ent(t, b).len - ent(t, a).len)) == int'(ent(t, a).code))
            pf = 0;
      check(pf, $sformatf("table %0d prefix-free", ti));
      for (int v = 1; v < 128; v++) begin
        if (lenof(t, v) < lenof(t, v - 1) || lenof(t, -v) < lenof(t, -(v - 1))) mono = 0;
      end
      check(mono, $sformatf("table %0d: code length grows with |v|", ti));
      $display("table %0d code lengths: 0:%0d 1:%0d -1:%0d 3:%0d 10:%0d 50:%0d 127:%0d escape:%0d", ti,
               lenof(t, 0), lenof(t, 1), lenof(t, -1), lenof(t, 3), lenof(t, 10), lenof(t, 50), lenof(t, 127),
               ent(t, int'(ESC_SYM)).len);
    end
    check(lenof(TBL_DIFF, 0) < lenof(TBL_REF, 0), "differential table is the narrower one");

    // ---- core ----
    in_valid = 0; out_ready = 0; in_item = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    t_prev = -1;
    for (int k = 0; k < 600; k++) begin
      in_item = '0;
      in_item.last = k[0];
      if (k % 9 == 4) begin
        n = $urandom_range(1, RAW_W);
        in_item.is_raw = 1;
        in_item.nbits  = LEN_W'(n);
        in_item.data   = RAW_W'($urandom);          // bits above nbits must be dropped
        expb = longint'(in_item.data) & ((longint'(1) << n) - 1);
        expl = n;
        n_raw++;
      end else begin
        d = (k % 5 == 0) ? $urandom_range(0, 8190) - 4095 : $urandom_range(0, 60) - 30;
        in_item.data = RAW_W'(d);
        in_item.tbl  = tbl_e'($urandom_range(0, 1));
        if (d >= -127 && d <= 127) begin
          expb = longint'(ent(in_item.tbl, d).code);
          expl = ent(in_item.tbl, d).len;
        end else begin
          expb = (longint'(ent(in_item.tbl, int'(ESC_SYM)).code) << DELTA_W) | (longint'(d) & 64'h1fff);
          expl = ent(in_item.tbl, int'(ESC_SYM)).len + DELTA_W;
          n_esc++;
        end
      end
      in_valid = 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      t_acc = $time;
      if (k >= 301) check(t_acc - t_prev == 10 * CC, $sformatf("issue interval %0t", t_acc - t_prev));
      t_prev = t_acc;
      @(negedge clk);
      in_valid = 0;
      lat = 0;
      out_ready = (k >= 300) || ($urandom_range(0, 3) == 0);
      #1;
      while (!(out_valid && out_ready)) begin
        @(negedge clk);
        lat++;
        out_ready = (k >= 300) || ($urandom_range(0, 3) == 0);
        #1;
      end
      if (k >= 300) check(lat == CC - 1, $sformatf("word %0d clocks after the taking edge", lat + 1));
      check(longint'(out_word.bits) == expb && int'(out_word.len) == expl && out_word.last == in_item.last,
            $sformatf("item %0d: %h/%0d expected %h/%0d", k, out_word.bits, out_word.len, expb, expl));
      // the handshake at the next edge frees the core; the next item is offered now
    end
    check(n_esc > 0 && n_raw > 0, "escapes and literals exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
