// tb_soft_threshold: random magnitudes, phases and thresholds; checks the
// shrunk magnitude, the unchanged phase, the zero flag and the one-cycle
// latency, and covers the cases |y| < tau, |y| = tau and |y| > tau.
module tb_soft_threshold;
  import beaches_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid;
  polar_t in_s, out_s;
  logic [XW-1:0] tau;
  logic out_valid, out_zeroed;
  int checks = 0, failures = 0;
  int n_zero = 0, n_equal = 0, n_shrink = 0;

  always #5 clk = ~clk;

  soft_threshold dut (.clk, .rst_n, .in_valid, .in_s, .tau, .out_valid, .out_s, .out_zeroed);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    in_valid = 0; in_s = '0; tau = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      int unsigned m, t, ph, e;
      m  = $urandom_range(0, 511);
      t  = (i % 7 == 0) ? m : $urandom_range(0, 511);
      ph = $urandom_range(0, 1023);
      @(negedge clk);
      in_valid = 1; in_s.mag = MAG_W'(m); in_s.phase = PH_W'(ph); tau = XW'(t);
      @(negedge clk);
      in_valid = 0;
      e = (m > t) ? m - t : 0;
      if (m < t) n_zero++; else if (m == t) n_equal++; else n_shrink++;
      check(out_valid, "out_valid after one cycle");
      check(int'(out_s.mag) == int'(e), $sformatf("mag %0d-%0d got %0d", m, t, out_s.mag));
      check(int'(out_s.phase) == int'(ph), "phase unchanged");
      check(out_zeroed == (m <= t), "zero flag");
    end
    check(n_zero > 0 && n_equal > 0 && n_shrink > 0, "all three cases seen");
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
