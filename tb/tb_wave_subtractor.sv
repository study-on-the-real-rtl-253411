// tb_wave_subtractor: random and corner samples and predictions; the item must be
// a symbol (is_raw = 0) carrying sample - pred, sign-extended, with last passed on.
module tb_wave_subtractor;
  import mpgd_pkg::*;
  logic [SAMPLE_W-1:0] sample, pred;
  logic last;
  huff_item_t item;
  int checks = 0, failures = 0;

  wave_subtractor dut (.*);

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    int s, p, d;
    for (int k = 0; k < 3000; k++) begin
      case (k)
        0: begin s = 0; p = 4095; end
        1: begin s = 4095; p = 0; end
        2: begin s = 100; p = 100; end
        default: begin s = $urandom_range(0, 4095); p = (k % 2) ? $urandom_range(0, 4095) : s + $urandom_range(0, 20) - 10; end
      endcase
      if (p < 0) p = 0;
      if (p > 4095) p = 4095;
      sample = SAMPLE_W'(s); pred = SAMPLE_W'(p); last = k[0];
      #1;
      d = int'(signed'(item.data));
      check(!item.is_raw && item.tbl == TBL_REF && d == s - p && item.last == last, $sformatf("%0d - %0d gave %0d", s, p, d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
