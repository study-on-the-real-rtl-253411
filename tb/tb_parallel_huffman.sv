// tb_parallel_huffman: streams of differences (mostly small, some large enough to
// be escaped) and raw literals through the full parallel coder; the output words
// are decoded bit by bit with the static table and must give back the items, frame
// by frame. With a free output, 4 cores of 4 clocks each must take one item per
// clock; with random output stalls, the result must still be exact.
module tb_parallel_huffman;
  import mpgd_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_last;
  huff_item_t in_item;
  logic [31:0] out_data;
  int checks = 0, failures = 0, n_stall = 0, n_frames = 0;
  huff_item_t sent [$];
  bit free_out = 0;

  parallel_huffman #(.N_CORES(4), .CORE_CYCLES(4), .OUT_W(32)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  task automatic decode_frame();
    huff_item_t it;
    int d;
    bit ok;
    forever begin
      check(sent.size() > 0, "more output than input");
      if (sent.size() == 0) return;
      it = sent.pop_front();
      if (it.is_raw) begin
        check(get_bits(int'(it.nbits)) == int'(it.data), "raw literal");
      end else begin
        ok = get_delta(d, it.tbl);
        check(ok && d == int'(signed'(it.data)), $sformatf("delta %0d expected %0d", d, int'(signed'(it.data))));
      end
      if (it.last) break;
    end
    align_word();
    check(bitq.size() == 0, "bits left after frame");
    bitq.delete();
    n_frames++;
  endtask

  always @(negedge clk) begin
    out_ready = free_out || ($urandom_range(0, 9) < 5);
    #1;
    if (rst_n && out_valid && !out_ready) n_stall++;
    if (rst_n && out_valid && out_ready) begin
      push_word(out_data);
      if (out_last) decode_frame();
    end
  end

  initial begin
    int d, t0, nf;
    in_valid = 0; in_item = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 2; ph++) begin
      free_out = (ph == 1);
      t0 = $time;
      for (int k = 0; k < 3000; k++) begin
        in_item = '0;
        if (k % 100 == 0) begin
          in_item.is_raw = 1; in_item.nbits = LEN_W'(HDR_W); in_item.data = RAW_W'($urandom_range(0, (1 << HDR_W) - 1));
        end else begin
          d = (k % 37 == 0) ? $urandom_range(0, 8190) - 4095 : $urandom_range(0, 20) - 10;
          in_item.data = RAW_W'(d);
          in_item.tbl  = tbl_e'(k / 7 % 2);
        end
        in_item.last = (k % 100 == 99);
        in_valid = 1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        sent.push_back(in_item);
        @(negedge clk);
      end
      in_valid = 0;
      if (ph == 1) check($time - t0 <= 10 * 3000 + 10, $sformatf("3000 items took %0t", $time - t0));
      nf = n_frames;
      repeat (200) @(negedge clk);
    end
    check(n_frames == 60, $sformatf("frames decoded %0d", n_frames));
    check(n_stall > 0, "output stall never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
