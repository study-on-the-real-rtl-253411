// tb_peak_search: frames of random length and content (including equal maxima)
// are written; each frame's result must give the first position of its largest
// sample. The result reader is slow at times, so a frame end that arrives while a
// result is still unread must be held off (in_ready low) and then accepted.
module tb_peak_search;
  localparam int SW = 12, PW = 9;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, res_valid, res_ready;
  logic [SW-1:0] in_data, res_val;
  logic [PW-1:0] res_pos;
  int checks = 0, failures = 0, n_hold = 0;
  int exp_pos [$], exp_val [$];

  peak_search #(.SAMPLE_W(SW), .POS_W(PW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  // result reader
  always @(negedge clk) begin
    res_ready = ($urandom_range(0, 9) < 2);
    #1;
    if (rst_n && res_valid && res_ready) begin
      check(exp_pos.size() > 0, "result without frame");
      if (exp_pos.size() > 0) begin
        check(res_pos == PW'(exp_pos[0]) && res_val == SW'(exp_val[0]),
              $sformatf("peak %0d@%0d expected %0d@%0d", res_val, res_pos, exp_val[0], exp_pos[0]));
        void'(exp_pos.pop_front()); void'(exp_val.pop_front());
      end
    end
  end

  initial begin
    int len, mx, mp, v, lim;
    in_valid = 0; in_last = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 200; f++) begin
      len = (f % 7 == 0) ? 1 : $urandom_range(2, 512);
      lim = (f % 3 == 0) ? 7 : 4095;          // small range: many equal maxima
      mx = -1; mp = 0;
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        v = $urandom_range(0, lim);
        if (v > mx) begin mx = v; mp = i; end
        in_valid = 1; in_data = SW'(v); in_last = (i == len - 1);
        #2;
        while (!in_ready) begin
          n_hold++;
          @(negedge clk); #2;
        end
        if (i == len - 1) begin exp_pos.push_back(mp); exp_val.push_back(mx); end
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      if (f % 5 == 0) repeat ($urandom_range(1, 40)) @(negedge clk);
    end
    repeat (200) @(negedge clk);
    check(exp_pos.size() == 0, "results missing");
    check(n_hold > 0, "frame end never held off");
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
