// tb_mpgd_compressor: end-to-end test of the compressor at its default size.
//
// Loads a quasi-Gaussian reference wave (CR-RC^4 shape, peak 4000 at sample 100),
// then sends 512-sample frames: pulses of random amplitude, position and noise in
// MODE_REF_DELTA, then long flat-topped pulses in MODE_DIFF. The compressed words
// are decoded bit by bit with the static table and the same prediction arithmetic
// written independently here; every decoded sample must equal the sample sent.
// Frame headers are checked against the peak found here. Mechanisms that must
// occur at least once: output backpressure, input stall, escape codes, mode
// switch, reference outside the table, one sample per clock with a free output.
// Prints the compressed size of each mode relative to 12 bits per sample.
module tb_mpgd_compressor;
  import mpgd_pkg::*;
  import tb_util_pkg::*;

  localparam int LEN = NSAMP;
  localparam int NF0 = 12;       // frames in MODE_REF_DELTA
  localparam int NF1 = 8;        // frames in MODE_DIFF

  logic clk = 1'b0, rst_n = 1'b0;
  logic mode;
  logic s_valid, s_ready, s_last;
  logic [SAMPLE_W-1:0] s_data;
  logic ref_wr_en;
  logic [POS_W-1:0] ref_wr_addr;
  logic [SAMPLE_W-1:0] ref_wr_data;
  logic m_valid, m_ready, m_last;
  logic [31:0] m_data;

  mpgd_compressor dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int refw [NSAMP];
  int frames [$][LEN];
  int fmode [$];
  int words_out = 0, frames_done = 0;
  int n_out_stall = 0, n_in_stall = 0, n_esc = 0, n_mode_sw = 0, n_ref_out = 0;
  longint bits_mode [2] = '{0, 0};
  longint samp_mode [2] = '{0, 0};
  bit    rand_ready = 1'b1;
  int    cyc = 0;

  function automatic int shape(real t, real tau, real amp);
    real x;
    if (t <= 0.0) return 0;
    x = t / tau;
    return int'(amp * (x**4) * $exp(4.0 * (1.0 - x)));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // output side: random backpressure, collect words
  logic [31:0] fw [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && m_valid && !m_ready) n_out_stall++;
    if (rst_n && s_valid && !s_ready) n_in_stall++;
    if (rst_n && m_valid && m_ready) begin
      fw.push_back(m_data);
      words_out++;
      if (m_last) begin
        decode_frame();
        fw.delete();
      end
    end
    m_ready <= rand_ready ? ($urandom_range(0, 9) < 7) : 1'b1;
  end

  task automatic decode_frame();
    int f[LEN];
    int md, p, v, rp, r, d, pred, prev, mx, mxp, j;
    bit ok;
    if (fmode.size() == 0) begin
      check(0, "frame output with no frame sent");
      return;
    end
    f  = frames.pop_front();
    md = fmode.pop_front();
    bitq.delete();
    foreach (fw[k]) push_word(fw[k]);
    bits_mode[md] += 32 * fw.size();
    samp_mode[md] += LEN;
    if (md == 0) begin
      mx = -1; mxp = 0;
      for (int i = 0; i < LEN; i++) if (f[i] > mx) begin mx = f[i]; mxp = i; end
      v = int'(get_bits(SAMPLE_W));
      p = int'(get_bits(POS_W));
      check(v == mx && p == mxp, $sformatf("header peak %0d@%0d expected %0d@%0d", v, p, mx, mxp));
      rp = 0; r = -1;
      for (int i = 0; i < NSAMP; i++) if (refw[i] > r) begin r = refw[i]; rp = i; end
      for (int i = 0; i < LEN; i++) begin
        ok = get_delta(d);
        if (d < -127 || d > 127) n_esc++;
        j = i - p + rp;
        if (j < 0 || j >= NSAMP) n_ref_out++;
        pred = predict(i, p, v, rp, r, (j >= 0 && j < NSAMP) ? refw[j] : 0, 12);
        check(ok && (d + pred == f[i]), $sformatf("mode0 frame %0d sample %0d: got %0d exp %0d", frames_done, i, d + pred, f[i]));
      end
    end else begin
      prev = 0;
      for (int i = 0; i < LEN; i++) begin
        ok = get_delta(d, TBL_DIFF);
        if (d < -127 || d > 127) n_esc++;
        check(ok && (prev + d == f[i]), $sformatf("mode1 frame %0d sample %0d: got %0d exp %0d", frames_done, i, prev + d, f[i]));
        prev = f[i];
      end
    end
    align_word();
    check(bitq.size() == 0, "trailing words after frame");
    frames_done++;
  endtask

  task automatic send_frame(int md, int ff[LEN]);
    frames.push_back(ff);
    fmode.push_back(md);
    // inputs change at the falling edge; s_ready is looked at just after it
    for (int i = 0; i < LEN; i++) begin
      s_valid = 1'b1;
      s_data  = SAMPLE_W'(ff[i]);
      s_last  = (i == LEN-1);
      #1;
      while (!s_ready) begin
        @(negedge clk);
        #1;
      end
      @(negedge clk);
    end
    s_valid = 1'b0;
    s_last  = 1'b0;
  endtask

  function automatic void gauss_frame(output int ff[LEN], input int amp, input real t0);
    for (int i = 0; i < LEN; i++) begin
      ff[i] = 30 + shape(real'(i) - t0, 5.0, real'(amp)) + $urandom_range(0, 6) - 3;
      if (ff[i] < 0) ff[i] = 0;
      if (ff[i] > 4095) ff[i] = 4095;
    end
  endfunction

  function automatic void flat_frame(output int ff[LEN], input int amp, input int t0, input int width, input int rise);
    int y;
    for (int i = 0; i < LEN; i++) begin
      if (i < t0) y = 0;
      else if (i < t0 + rise) y = amp * (i - t0) / rise;
      else if (i < t0 + rise + width) y = amp;
      else if (i < t0 + 2*rise + width) y = amp - amp * (i - t0 - rise - width) / rise;
      else y = 0;
      ff[i] = 200 + y + $urandom_range(0, 4) - 2;
    end
  endfunction

  task automatic wait_idle(int nframes);
    int t = 0;
    while (frames_done < nframes && t < 200000) begin @(posedge clk); t++; end
    repeat (10) @(posedge clk);
  endtask

  int ff [LEN];
  int t_start, stall0;

  initial begin
    mode = 1'b0; s_valid = 0; s_last = 0; s_data = 0;
    ref_wr_en = 0; ref_wr_addr = 0; ref_wr_data = 0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    // load the reference wave
    for (int i = 0; i < NSAMP; i++) begin
      refw[i] = 30 + shape(real'(i) - 80.0, 5.0, 3970.0);
      ref_wr_en <= 1'b1; ref_wr_addr <= POS_W'(i); ref_wr_data <= SAMPLE_W'(refw[i]);
      @(posedge clk);
    end
    ref_wr_en <= 1'b0;
    @(negedge clk);

    // micromegas mode, random output backpressure
    for (int k = 0; k < NF0; k++) begin
      gauss_frame(ff, $urandom_range(300, 3900), real'($urandom_range(10, 470)) + real'($urandom_range(0, 9)) / 10.0);
      if (k == 3) for (int i = 300; i < 320; i++) ff[i] = ff[i] + 900;   // pile-up: escapes
      send_frame(0, ff);
    end
    // micromegas mode, free output: one sample per clock, no input stall
    wait_idle(NF0);
    rand_ready = 1'b0;
    repeat (5) @(posedge clk);
    stall0 = n_in_stall; t_start = cyc;
    for (int k = 0; k < 4; k++) begin
      gauss_frame(ff, $urandom_range(300, 3900), real'($urandom_range(10, 470)));
      send_frame(0, ff);
    end
    check(n_in_stall == stall0, $sformatf("input stalled %0d clocks with free output", n_in_stall - stall0));
    check(cyc - t_start <= 4*LEN + 2, $sformatf("4 frames took %0d clocks", cyc - t_start));
    wait_idle(NF0 + 4);

    // switch to the differential mode
    mode = 1'b1; n_mode_sw++;
    rand_ready = 1'b1;
    for (int k = 0; k < NF1; k++) begin
      flat_frame(ff, $urandom_range(100, 3000), $urandom_range(5, 100), $urandom_range(20, 300), $urandom_range(1, 12));
      send_frame(1, ff);
    end
    wait_idle(NF0 + 4 + NF1);
    rand_ready = 1'b0;
    repeat (5) @(posedge clk);
    stall0 = n_in_stall; t_start = cyc;
    for (int k = 0; k < 2; k++) begin
      flat_frame(ff, $urandom_range(100, 3000), $urandom_range(5, 100), $urandom_range(20, 300), $urandom_range(1, 12));
      send_frame(1, ff);
    end
    check(n_in_stall == stall0, "differential mode stalled with free output");
    check(cyc - t_start <= 2*LEN + 2, $sformatf("2 diff frames took %0d clocks", cyc - t_start));
    wait_idle(NF0 + 4 + NF1 + 2);

    check(frames_done == NF0 + 4 + NF1 + 2, $sformatf("frames decoded %0d", frames_done));
    check(fw.size() == 0, "words left after the last frame");
    check(n_out_stall > 0, "output backpressure never happened");
    check(n_in_stall > 0,  "input stall never happened");
    check(n_esc > 0,       "escape code never used");
    check(n_mode_sw > 0,   "mode switch never happened");
    check(n_ref_out > 0,   "reference outside the table never happened");
    $display("events: out_stall=%0d in_stall=%0d escapes=%0d mode_switches=%0d ref_outside=%0d",
             n_out_stall, n_in_stall, n_esc, n_mode_sw, n_ref_out);
    $display("compressed size: reference-delta mode %0.1f%%, differential mode %0.1f%% of 12-bit samples",
             100.0 * real'(bits_mode[0]) / (12.0 * real'(samp_mode[0])),
             100.0 * real'(bits_mode[1]) / (12.0 * real'(samp_mode[1])));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
