// tb_rr_splitter: items numbered 0,1,2,... must reach output k mod N, in order,
// whatever the random readiness of the outputs; an item offered while the output
// whose turn it is is not ready must wait (no other output may receive it).
module tb_rr_splitter;
  import mpgd_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  huff_item_t in_item, out_item;
  logic [N-1:0] out_valid, out_ready;
  int checks = 0, failures = 0, n_wait = 0;
  int seen [N];

  rr_splitter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    int k = 0;
    in_valid = 0; in_item = '0; out_ready = '0;
    foreach (seen[i]) seen[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (k < 2000) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 9) < 8);
      in_item = '0; in_item.data = RAW_W'(k);
      out_ready = N'($urandom);
      #1;
      check($countones(out_valid) == (in_valid ? 1 : 0), "one output offered");
      if (in_valid) begin
        check(out_valid[k % N] && out_item.data == RAW_W'(k), $sformatf("item %0d offered to %b", k, out_valid));
        check(in_ready == out_ready[k % N], "in_ready follows the output in turn");
        if (in_ready) begin seen[k % N]++; k++; end
        else n_wait++;
      end
    end
    foreach (seen[i]) check(seen[i] == 2000 / N, "items per output");
    check(n_wait > 0, "waiting never happened");
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
