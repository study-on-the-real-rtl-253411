// tb_bit_packer: N random producers offer codes of random length (1..BITS_W)
// with random frame ends; the packer must take them in rotation and the output
// words must equal the reference bit string built here (codes MSB first, each
// frame zero-padded to a 32-bit boundary, out_last on the frame's final word).
// The output is stalled at random. Some frames hold a single code.
module tb_bit_packer;
  import mpgd_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready;
  code_word_t in_word [N];
  logic out_valid, out_ready, out_last;
  logic [31:0] out_data;
  int checks = 0, failures = 0, n_stall = 0, n_frames = 0, n_words = 0;
  bit  ref_bits [$];
  bit  ref_last [$];     // per reference word
  int  total = 3000;
  int  prod_k;           // index of the next code to be produced
  code_word_t codes [$];

  bit_packer #(.N(N), .OUT_W(32), .ACC_W(96)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    int len, fl;
    code_word_t c;
    // build the code list and the reference words
    fl = 0;
    for (int k = 0; k < total; k++) begin
      len = (k % 11 == 0) ? $urandom_range(20, BITS_W) : $urandom_range(1, 8);
      c = '0;
      c.len  = BLEN_W'(len);
      c.bits = BITS_W'($urandom) & ((BITS_W'(1) << len) - 1);
      if (len == BITS_W) c.bits = BITS_W'($urandom);
      c.last = (k == total - 1) || ($urandom_range(0, 40) == 0) || (k % 97 == 0);
      codes.push_back(c);
      for (int b = len - 1; b >= 0; b--) ref_bits.push_back(c.bits[b]);
      if (c.last) begin
        while (ref_bits.size() % 32 != 0) ref_bits.push_back(1'b0);
        while (ref_last.size() < ref_bits.size() / 32 - 1) ref_last.push_back(1'b0);
        ref_last.push_back(1'b1);
      end
    end
  end

  // producers: producer p offers codes p, p+N, ... ; each is busy for a random time
  int nxt [N];
  int wait_c [N];
  bit fire [N];          // handshakes seen just before the last rising edge
  always @(negedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < N; p++) begin
        if (fire[p]) begin
          nxt[p] += N;
          wait_c[p] = $urandom_range(0, 5);
        end
      end
      for (int p = 0; p < N; p++) begin
        if (wait_c[p] > 0) wait_c[p]--;
        in_valid[p] = (nxt[p] < total) && (wait_c[p] == 0);
        in_word[p]  = (nxt[p] < total) ? codes[nxt[p]] : '0;
      end
    end
    out_ready = ($urandom_range(0, 9) < 7);
    #1;
    for (int p = 0; p < N; p++) fire[p] = in_valid[p] && in_ready[p];
    if (rst_n && out_valid && !out_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      logic [31:0] w;
      for (int b = 0; b < 32; b++) w[31-b] = ref_bits[32*n_words + b];
      check(out_data == w && out_last == ref_last[n_words],
            $sformatf("word %0d: %h/%b expected %h/%b", n_words, out_data, out_last, w, ref_last[n_words]));
      n_words++;
    end
  end

  initial begin
    for (int p = 0; p < N; p++) begin nxt[p] = p; wait_c[p] = 0; fire[p] = 0; end
    in_valid = '0; out_ready = 0;
    for (int p = 0; p < N; p++) in_word[p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (n_words == ref_bits.size() / 32);
    repeat (20) @(negedge clk);
    check(n_words == ref_bits.size() / 32, "word count");
    check(n_stall > 0, "output stall never happened");
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
