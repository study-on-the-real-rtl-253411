// tb_diff_preproc: frames of random samples with random input gaps and output
// backpressure. Every output item must be sample[n] - sample[n-1] (the first item
// of a frame: the sample itself), in order, with last on the frame's final item.
// With a free output the block must take one sample per clock.
module tb_diff_preproc;
  import mpgd_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, out_valid, out_ready;
  logic [SAMPLE_W-1:0] in_data;
  huff_item_t out_item;
  int checks = 0, failures = 0, n_stall = 0;
  int expd [$];
  bit expl [$];
  bit free_out = 0;

  diff_preproc dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  always @(negedge clk) begin
    out_ready = free_out || ($urandom_range(0, 9) < 6);
    #1;
    if (rst_n && out_valid && !out_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      check(expd.size() > 0, "item without input");
      if (expd.size() > 0) begin
        check(!out_item.is_raw && out_item.tbl == TBL_DIFF && int'(signed'(out_item.data)) == expd[0] && out_item.last == expl[0],
              $sformatf("diff %0d expected %0d", int'(signed'(out_item.data)), expd[0]));
        void'(expd.pop_front()); void'(expl.pop_front());
      end
    end
  end

  initial begin
    int prev, v, len, t0;
    in_valid = 0; in_last = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 60; f++) begin
      if (f == 50) free_out = 1;
      len = $urandom_range(1, 300);
      prev = 0;
      t0 = $time;
      for (int i = 0; i < len; i++) begin
        v = (f % 2) ? $urandom_range(0, 4095) : 1000 + $urandom_range(0, 10);
        in_valid = 1; in_data = SAMPLE_W'(v); in_last = (i == len - 1);
        #2;
        while (!in_ready) begin @(negedge clk); #2; end
        expd.push_back(v - prev); expl.push_back(i == len - 1);
        prev = v;
        @(negedge clk);
        if (!free_out && $urandom_range(0, 9) == 0) begin
          in_valid = 0; @(negedge clk);
        end
      end
      if (free_out) check(($time - t0) == 10 * len, $sformatf("frame of %0d took %0t", len, $time - t0));
      in_valid = 0;
    end
    repeat (20) @(negedge clk);
    check(expd.size() == 0, "items missing");
    check(n_stall > 0, "backpressure never happened");
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
