// tb_workload_pandax: the long-pulse workload in the differential mode.
//
// Pulses like the simulated AGET outputs of a high-pressure xenon TPC: a fast
// rise, a flat top whose length equals the charge-collection time, and a fall.
// Widths 0.25, 2.5, 5, 10, 20, 50, 100 and 200 us, sampled every 0.5 us into
// 512-sample frames (256 us). The charge is taken constant, so above 2.5 us the
// flat-top height falls as 1/width (3000 counts up to 2.5 us); 1000 mV corresponds to 3000 ADC
// counts here; baseline 250, noise +-2 counts. The sampling period, the mV-to-ADC
// scale and the noise are this test's own assumptions.
// Every frame is decoded and compared with the input; the compressed size of each
// width is printed. The output runs free except in the first frames, and the
// input must never stall in those free frames (one sample per clock).
module tb_workload_pandax;
  import mpgd_pkg::*;
  import tb_util_pkg::*;

  localparam int LEN = NSAMP;
  localparam int NW  = 8;
  localparam real WIDTH_US [NW] = '{0.25, 2.5, 5.0, 10.0, 20.0, 50.0, 100.0, 200.0};
  localparam int  REPS = 3;

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

  int checks = 0, failures = 0, frames_done = 0, n_in_stall = 0, n_out_stall = 0;
  int frames [$][LEN];
  int fwid [$];
  longint bits_w [NW];
  bit free_out = 0;
  logic [31:0] fw [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) begin
    m_ready = free_out || ($urandom_range(0, 9) < 6);
    #1;
    if (rst_n && m_valid && !m_ready) n_out_stall++;
    if (rst_n && free_out && s_valid && !s_ready) n_in_stall++;
    if (rst_n && m_valid && m_ready) begin
      fw.push_back(m_data);
      if (m_last) begin
        decode_frame();
        fw.delete();
      end
    end
  end

  task automatic decode_frame();
    int f[LEN];
    int w, d, prev;
    bit ok;
    f = frames.pop_front();
    w = fwid.pop_front();
    bitq.delete();
    foreach (fw[k]) push_word(fw[k]);
    bits_w[w] += 32 * fw.size();
    prev = 0;
    for (int i = 0; i < LEN; i++) begin
      ok = get_delta(d, TBL_DIFF);
      check(ok && prev + d == f[i], $sformatf("width %0d frame sample %0d: %0d expected %0d", w, i, prev + d, f[i]));
      prev = f[i];
    end
    align_word();
    check(bitq.size() == 0, "trailing bits");
    frames_done++;
  endtask

  task automatic send_frame(int w);
    int ff[LEN];
    real amp, t0, rise, fall, y, t;
    amp  = (WIDTH_US[w] <= 2.5) ? 3000.0 : 3000.0 * 2.5 / WIDTH_US[w];
    t0   = 20.0 + real'($urandom_range(0, 20));        // us
    rise = 1.0;                                          // us
    fall = 3.0;                                          // us
    for (int i = 0; i < LEN; i++) begin
      t = 0.5 * real'(i);
      if (t < t0)                              y = 0.0;
      else if (t < t0 + rise)                  y = amp * (t - t0) / rise;
      else if (t < t0 + rise + WIDTH_US[w])    y = amp;
      else if (t < t0 + rise + WIDTH_US[w] + fall) y = amp * (1.0 - (t - t0 - rise - WIDTH_US[w]) / fall);
      else                                     y = 0.0;
      ff[i] = 250 + int'(y) + $urandom_range(0, 4) - 2;
    end
    frames.push_back(ff);
    fwid.push_back(w);
    for (int i = 0; i < LEN; i++) begin
      s_valid = 1'b1; s_data = SAMPLE_W'(ff[i]); s_last = (i == LEN - 1);
      #2;
      while (!s_ready) begin @(negedge clk); #2; end
      @(negedge clk);
    end
    s_valid = 1'b0; s_last = 1'b0;
  endtask

  initial begin
    mode = 1'b1; s_valid = 0; s_last = 0; s_data = 0;
    ref_wr_en = 0; ref_wr_addr = 0; ref_wr_data = 0;
    foreach (bits_w[w]) bits_w[w] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < REPS; r++) begin
      free_out = (r > 0);
      for (int w = 0; w < NW; w++) send_frame(w);
    end
    repeat (200) @(negedge clk);
    check(frames_done == NW * REPS, $sformatf("frames decoded %0d", frames_done));
    check(n_in_stall == 0, $sformatf("input stalled %0d clocks with free output", n_in_stall));
    check(n_out_stall > 0, "output stall never happened");
    for (int w = 0; w < NW; w++)
      $display("width %6.2f us: compressed to %0.1f%% of 12-bit samples", WIDTH_US[w],
               100.0 * real'(bits_w[w]) / (12.0 * real'(LEN * REPS)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
