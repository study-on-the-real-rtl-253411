// mpgd_pkg: shared widths, stream types and the static Huffman code table of the
// MPGD readout compressor.
//
// The compressor turns 12-bit ADC samples into small signed differences (against a
// scaled reference wave, or against the previous sample) and codes those with a
// static Huffman table in which values near zero get the shortest codes. The table
// is a canonical Huffman code built here at elaboration time, so it synthesises to
// plain look-up logic. Its weights model the measured delta histogram (a sharp peak
// at zero falling by about a factor e every 7-8 units): weight(v) = HUFF_W0 *
// (HUFF_REF_NUM/HUFF_REF_DEN)^|v| + HUFF_REF_FLOOR for |v| <= 127. This model, the
// canonical code ordering and the escape mechanism are this design's own choices:
// the original table values were never published.
//
// Symbols are 8-bit two's complement values. Symbol 0x80 (-128) is the escape:
// a difference outside -127..127 is sent as the escape code followed by the full
// DELTA_W-bit two's complement difference, which keeps the coding lossless.
// Codes are sent MSB first.
//
// There are two tables of the same form. HUFF_TABLE_REF codes the deltas against
// the reference wave (wide histogram); HUFF_TABLE_DIFF codes the sample-to-sample
// differences of long flat pulses, whose histogram is much narrower (weights
// 65536*(2/3)^|v| + 64, escape 512). Each item names its table.
package mpgd_pkg;

  localparam int SAMPLE_W     = 12;          // ADC resolution
  localparam int NSAMP        = 512;         // analog memory cells per channel
  localparam int POS_W        = 9;           // $clog2(NSAMP)
  localparam int DELTA_W      = 13;          // signed difference of two 12-bit values
  localparam int SYM_W        = 8;           // Huffman symbol width
  localparam int NSYM         = 256;
  localparam int MAX_CODE_LEN = 16;          // longest code the table may hold
  localparam int LEN_W        = 5;           // width of a code/literal length
  localparam int RAW_W        = 24;          // widest raw literal an item may carry
  localparam int BITS_W       = 32;          // widest coded item (escape + delta = 26)
  localparam int BLEN_W       = 6;
  localparam int HDR_W        = SAMPLE_W + POS_W;   // frame header: peak value, peak position
  localparam logic [SYM_W-1:0] ESC_SYM = 8'h80;

  // Model histograms of the static tables: weight(v) = W0*(NUM/DEN)^|v| + FLOOR,
  // escape weight ESC.
  localparam longint HUFF_W0         = 65536;
  localparam longint HUFF_REF_NUM    = 7;
  localparam longint HUFF_REF_DEN    = 8;
  localparam longint HUFF_REF_FLOOR  = 16;
  localparam longint HUFF_REF_ESC    = 128;
  localparam longint HUFF_DIFF_NUM   = 2;
  localparam longint HUFF_DIFF_DEN   = 3;
  localparam longint HUFF_DIFF_FLOOR = 64;
  localparam longint HUFF_DIFF_ESC   = 512;

  // Pre-processing mode of the top level.
  typedef enum logic {
    MODE_REF_DELTA = 1'b0,   // micromegas: delta against the normalised reference wave
    MODE_DIFF      = 1'b1    // PandaX-III: differential of consecutive samples
  } mode_e;

  // Static code table an item is coded with.
  typedef enum logic {
    TBL_REF  = 1'b0,         // deltas against the reference wave
    TBL_DIFF = 1'b1          // sample-to-sample differences
  } tbl_e;

  // One item for the Huffman coder: a signed difference, or a raw literal.
  typedef struct packed {
    logic             is_raw;
    tbl_e             tbl;      // table for a symbol   // 1: send data[nbits-1:0] verbatim
    logic [RAW_W-1:0] data;     // symbol: sign-extended difference; raw: the literal
    logic [LEN_W-1:0] nbits;    // literal length, 1..RAW_W (unused for symbols)
    logic             last;     // last item of a frame
  } huff_item_t;

  // One coded item: len bits, right aligned in bits[], zero above.
  typedef struct packed {
    logic [BITS_W-1:0] bits;
    logic [BLEN_W-1:0] len;
    logic              last;
  } code_word_t;

  typedef struct packed {
    logic [MAX_CODE_LEN-1:0] code;   // right aligned
    logic [LEN_W-1:0]        len;
  } huff_entry_t;

  typedef huff_entry_t [NSYM-1:0] huff_table_t;

  // Canonical Huffman code of the model histogram. Tree built by repeatedly
  // merging the two lightest live nodes (ties: lower node index first).
  function automatic huff_table_t build_huff_table(longint num, longint den, longint floor_w, longint esc_w);
    longint      w     [2*NSYM];
    int          par   [2*NSYM];
    bit          alive [2*NSYM];
    int          len   [NSYM];
    longint      x, wa, wb;
    int          n, a, b, node, depth;
    logic [MAX_CODE_LEN:0] code;
    huff_table_t t;
    for (int i = 0; i < 2*NSYM; i++) begin
      w[i] = 0; par[i] = -1; alive[i] = (i < NSYM);
    end
    x = HUFF_W0;
    for (int m = 0; m < NSYM/2; m++) begin
      w[m] = x + floor_w;
      if (m != 0) w[NSYM-m] = x + floor_w;
      x = x * num / den;
    end
    w[int'(ESC_SYM)] = esc_w;
    n = NSYM;
    for (int k = 0; k < NSYM-1; k++) begin
      a = 0; b = 0; wa = 64'h7fff_ffff_ffff_ffff; wb = wa;
      for (int i = 0; i < n; i++) begin
        if (alive[i]) begin
          if (w[i] < wa) begin
            b = a; wb = wa; a = i; wa = w[i];
          end else if (w[i] < wb) begin
            b = i; wb = w[i];
          end
        end
      end
      w[n] = wa + wb; alive[n] = 1'b1; alive[a] = 1'b0; alive[b] = 1'b0;
      par[a] = n; par[b] = n;
      n++;
    end
    for (int s = 0; s < NSYM; s++) begin
      depth = 0; node = s;
      for (int d = 0; d < 2*NSYM; d++) begin
        if (par[node] >= 0) begin
          depth++; node = par[node];
        end
      end
      len[s] = depth;
    end
    code = '0;
    for (int l = 1; l <= MAX_CODE_LEN; l++) begin
      for (int s = 0; s < NSYM; s++) begin
        if (len[s] == l) begin
          t[s].code = code[MAX_CODE_LEN-1:0];
          t[s].len  = LEN_W'(l);
          code = code + 1'b1;
        end
      end
      code = code << 1;
    end
    return t;
  endfunction

  localparam huff_table_t HUFF_TABLE_REF  =
    build_huff_table(HUFF_REF_NUM, HUFF_REF_DEN, HUFF_REF_FLOOR, HUFF_REF_ESC);
  localparam huff_table_t HUFF_TABLE_DIFF =
    build_huff_table(HUFF_DIFF_NUM, HUFF_DIFF_DEN, HUFF_DIFF_FLOOR, HUFF_DIFF_ESC);

  function automatic huff_entry_t huff_lookup(tbl_e tbl, logic [SYM_W-1:0] sym);
    return (tbl == TBL_DIFF) ? HUFF_TABLE_DIFF[sym] : HUFF_TABLE_REF[sym];
  endfunction

  // Code one item: table code, escape + difference, or raw literal.
  function automatic code_word_t huff_encode(huff_item_t it);
    code_word_t       o;
    logic signed [RAW_W-1:0] d;
    huff_entry_t      e;
    logic [SYM_W-1:0] sym;
    logic [RAW_W-1:0] mask;
    o = '0;
    o.last = it.last;
    d = signed'(it.data);
    if (it.is_raw) begin
      mask   = ~({RAW_W{1'b1}} << it.nbits);
      o.bits = BITS_W'(it.data & mask);
      o.len  = BLEN_W'(it.nbits);
    end else if (d >= -127 && d <= 127) begin
      sym    = it.data[SYM_W-1:0];
      e      = huff_lookup(it.tbl, sym);
      o.bits = BITS_W'(e.code);
      o.len  = BLEN_W'(e.len);
    end else begin
      e      = huff_lookup(it.tbl, ESC_SYM);
      o.bits = (BITS_W'(e.code) << DELTA_W) | BITS_W'(it.data[DELTA_W-1:0]);
      o.len  = BLEN_W'(e.len) + BLEN_W'(DELTA_W);
    end
    return o;
  endfunction

endpackage
