// tb_reference_wave: loads a random table (with a known unique maximum placed at a
// random position, a duplicate of it later, and further ties to the running
// maximum), checks the tracked peak position and value after every write, then
// reads entries back through the registered port (data one clock after rd_en,
// held while rd_en is low).
module tb_reference_wave;
  localparam int N = 512, SW = 12, AW = 9;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr, peak_pos;
  logic [SW-1:0] wr_data, rd_data, peak_val;
  int checks = 0, failures = 0;
  int m [N];
  int pk;

  reference_wave #(.NSAMP(N), .SAMPLE_W(SW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(peak_val == 0 && peak_pos == 0, "peak after reset");
    // Several loads, each after a reset, with the running peak checked after
    // every write. Ties to the running maximum are planted on purpose.
    for (int r = 0; r < 8; r++) begin
      int mv, mp;
      rst_n = 0; @(negedge clk); rst_n = 1; @(negedge clk);
      pk = $urandom_range(1, N - 60);
      for (int i = 0; i < N; i++) m[i] = $urandom_range(0, 3000);
      m[pk] = 4000; m[pk + 50] = 4000;
      mv = 0; mp = 0;
      for (int i = 0; i < N; i++) begin
        if (i != pk && i != pk + 50 && $urandom_range(0, 7) == 0 && mv > 0) m[i] = mv;
        if (m[i] > mv) begin mv = m[i]; mp = i; end
        wr_en = 1; wr_addr = AW'(i); wr_data = SW'(m[i]);
        @(negedge clk);
        check(peak_pos == AW'(mp) && peak_val == SW'(mv),
              $sformatf("running peak %0d@%0d expected %0d@%0d", peak_val, peak_pos, mv, mp));
      end
      wr_en = 0;
      @(negedge clk);
      check(peak_pos == AW'(pk) && peak_val == 12'd4000, $sformatf("peak %0d@%0d expected 4000@%0d", peak_val, peak_pos, pk));
    end
    for (int i = 0; i < N; i++) begin
      int a;
      a = $urandom_range(0, N - 1);
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = AW'($urandom);
      check(rd_data == SW'(m[a]), $sformatf("read %0d: %0d expected %0d", a, rd_data, m[a]));
      @(negedge clk);
      check(rd_data == SW'(m[a]), "read data held while rd_en low");
    end
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
