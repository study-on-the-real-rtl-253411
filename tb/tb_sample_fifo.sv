// tb_sample_fifo: random pushes and pops against a queue model, with a small
// depth so that full and empty are both reached many times. Checks out_valid,
// in_ready (full exactly at DEPTH words) and the head word every clock.
module tb_sample_fifo;
  localparam int W = 13, D = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] q [$];
  bit pu, po;

  sample_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // phases: fill-biased, drain-biased, balanced
      in_valid  = ($urandom_range(0, 99) < ((c / 500) % 2 == 0 ? 80 : 30));
      out_ready = ($urandom_range(0, 99) < ((c / 500) % 2 == 0 ? 30 : 80));
      in_data   = W'($urandom);
      #1;
      check(out_valid == (q.size() > 0), "out_valid");
      check(in_ready == (q.size() < D), $sformatf("in_ready with %0d words", q.size()));
      if (q.size() > 0) check(out_data == q[0], "head word");
      if (q.size() == D) n_full++;
      if (q.size() == 0) n_empty++;
      pu = in_valid && in_ready;
      po = out_valid && out_ready;
      if (po) void'(q.pop_front());
      if (pu) q.push_back(in_data);
    end
    check(n_full > 0 && n_empty > 0, "full and empty both reached");
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
