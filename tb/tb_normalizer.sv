// tb_normalizer: the normaliser between a FIFO model (first-word fall-through),
// a peak-result source and a reference-table model with a registered read port.
// Frames of quasi-Gaussian pulses at random positions and amplitudes; expected
// output per frame: a raw header {peak value, peak position}, then for each
// sample  sample - round(ref[i-P+RP] * floor(V*4096/R) / 4096)  (0 outside the
// table), computed here with integer arithmetic. Output stalls at random; in the
// last frames the output is free and the frame must take at most len + 32 clocks.
// One frame runs with an empty reference (R = 0), where the deltas are the samples.
module tb_normalizer;
  import mpgd_pkg::*;
  import tb_util_pkg::*;
  localparam int AW = 9;
  logic clk = 0, rst_n = 0;
  logic peak_valid, peak_ready, fifo_valid, fifo_ready, ref_rd_en, out_valid, out_ready;
  logic [AW-1:0] peak_pos, ref_rd_addr, ref_peak_pos;
  logic [SAMPLE_W-1:0] peak_val, ref_rd_data, ref_peak_val;
  logic [SAMPLE_W:0] fifo_data;
  huff_item_t out_item;
  int checks = 0, failures = 0, n_stall = 0, n_outside = 0;

  normalizer #(.REF_LEN(NSAMP), .FRAC(12)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  int refm [NSAMP];
  logic [SAMPLE_W:0] fq [$];        // FIFO model
  int pq_pos [$], pq_val [$];       // peak results
  huff_item_t exp_q [$];
  bit free_out = 0;
  bit f_pop, f_peak, f_rd, f_out;
  logic [AW-1:0] rd_a;

  always @(negedge clk) begin
    // effects of the handshakes at the last rising edge
    if (f_pop) void'(fq.pop_front());
    if (f_peak) begin void'(pq_pos.pop_front()); void'(pq_val.pop_front()); end
    if (f_rd) ref_rd_data = SAMPLE_W'(refm[rd_a]);
    fifo_valid = fq.size() > 0;
    fifo_data  = (fq.size() > 0) ? fq[0] : '0;
    peak_valid = pq_pos.size() > 0;
    peak_pos   = (pq_pos.size() > 0) ? AW'(pq_pos[0]) : '0;
    peak_val   = (pq_val.size() > 0) ? SAMPLE_W'(pq_val[0]) : '0;
    out_ready  = free_out || ($urandom_range(0, 9) < 6);
    #1;
    f_pop  = fifo_ready;
    f_peak = peak_valid && peak_ready;
    f_rd   = ref_rd_en; rd_a = ref_rd_addr;
    if (rst_n && out_valid && !out_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      check(exp_q.size() > 0, "output without input");
      if (exp_q.size() > 0) begin
        check(out_item == exp_q[0], $sformatf("item raw=%b data=%0d last=%b expected raw=%b data=%0d last=%b",
              out_item.is_raw, int'(signed'(out_item.data)), out_item.last,
              exp_q[0].is_raw, int'(signed'(exp_q[0].data)), exp_q[0].last));
        void'(exp_q.pop_front());
      end
    end
  end

  function automatic int pulse(int i, real t0, real amp);
    real x;
    if (real'(i) <= t0) return 0;
    x = (real'(i) - t0) / 5.0;
    return int'(amp * (x**4) * $exp(4.0 * (1.0 - x)));
  endfunction

  task automatic frame(int len, real t0, real amp);
    int s [$];
    int mx = -1, mp = 0, rp = 0, r = -1, j, v;
    huff_item_t it;
    for (int i = 0; i < NSAMP; i++) if (refm[i] > r) begin r = refm[i]; rp = i; end
    for (int i = 0; i < len; i++) begin
      v = 25 + pulse(i, t0, amp) + $urandom_range(0, 6);
      if (v > 4095) v = 4095;
      s.push_back(v);
      if (v > mx) begin mx = v; mp = i; end
    end
    it = '0; it.is_raw = 1; it.nbits = LEN_W'(HDR_W); it.data = RAW_W'({SAMPLE_W'(mx), AW'(mp)});
    exp_q.push_back(it);
    for (int i = 0; i < len; i++) begin
      j = i - mp + rp;
      if (j < 0 || j >= NSAMP) n_outside++;
      it = '0;
      it.data  = RAW_W'(s[i] - predict(i, mp, mx, rp, r, (j >= 0 && j < NSAMP) ? refm[j] : 0, 12));
      it.nbits = LEN_W'(DELTA_W);
      it.last  = (i == len - 1);
      exp_q.push_back(it);
      fq.push_back({(i == len - 1), SAMPLE_W'(s[i])});
    end
    pq_pos.push_back(mp); pq_val.push_back(mx);
  endtask

  initial begin
    int t0;
    f_pop = 0; f_peak = 0; f_rd = 0; rd_a = '0; ref_rd_data = '0;
    for (int i = 0; i < NSAMP; i++) refm[i] = 25 + pulse(i, 120.0, 4000.0);
    ref_peak_pos = '0; ref_peak_val = '0;
    for (int i = 0; i < NSAMP; i++) if (refm[i] > int'(ref_peak_val)) begin
      ref_peak_val = SAMPLE_W'(refm[i]); ref_peak_pos = AW'(i);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 16; f++) begin
      frame((f % 4 == 0) ? NSAMP : $urandom_range(20, NSAMP),
            real'($urandom_range(2, 400)) + real'($urandom_range(0, 9)) / 10.0,
            real'($urandom_range(200, 4000)));
    end
    wait (exp_q.size() == 0);
    // free output: time one full frame
    repeat (5) @(negedge clk);
    free_out = 1;
    t0 = $time;
    frame(NSAMP, 200.3, 3000.0);
    wait (exp_q.size() == 0);
    check($time - t0 <= 10 * (NSAMP + 32), $sformatf("frame took %0t", $time - t0));
    // empty reference
    repeat (5) @(negedge clk);
    for (int i = 0; i < NSAMP; i++) refm[i] = 0;
    ref_peak_val = '0; ref_peak_pos = '0;
    frame(100, 50.0, 2000.0);
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    check(fq.size() == 0 && pq_pos.size() == 0, "input left over");
    check(n_stall > 0, "output stall never happened");
    check(n_outside > 0, "reference outside the table never happened");
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
