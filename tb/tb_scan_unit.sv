// tb_scan_unit: feeds the scan unit with random vectors, the unsorted stream
// first and then, right after, the same values sorted in ascending order (as
// the sort unit delivers them), back to back, at several noise variances (changed only between
// groups of vectors, with a pause).
// Checks tau and the minimum SURE value against the reference model, and
// that tau_valid comes 6 cycles after the last sorted value.
module tb_scan_unit;
  import beaches_pkg::*;
  import beaches_ref_pkg::*;

  localparam int unsigned B  = 32;
  localparam int unsigned NV = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid, s_valid, s_first, s_last, tau_valid;
  logic [XW-1:0] in_x, s_x, tau;
  logic [E0_W-1:0] e0;
  logic signed [63:0] sure_min;
  int checks = 0, failures = 0;
  int unsigned vec [NV][$];
  longint e0v [NV];
  longint last_s_cyc [NV];
  longint cyc = 0;
  int n_tau_min = 0, n_tau_inner = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  scan_unit #(.B(B)) dut (.clk, .rst_n, .in_valid, .in_x, .s_valid, .s_first, .s_last, .s_x,
                          .e0, .tau_valid, .tau, .sure_min);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // Vector v: a few strong entries over noise of variance e0.
  function automatic void make_vec(int v);
    real sigma;
    // e0 is constant for groups of 8 vectors, as it is a slowly changing system value
    e0v[v] = (v % 8 == 0) ? longint'($urandom_range(2, 300)) : e0v[v-1];
    sigma = $sqrt(real'(e0v[v]) / 32768.0 / 2.0);
    for (int i = 0; i < int'(B); i++) begin
      real re, im, m;
      re = sigma * ($urandom_range(0, 20000) / 10000.0 - 1.0) * 1.7;
      im = sigma * ($urandom_range(0, 20000) / 10000.0 - 1.0) * 1.7;
      if (i % 11 == v % 11) re += 0.3 + (v % 5) * 0.2;
      m = $sqrt(re * re + im * im) * 256.0;
      if (m > 511.0) m = 511.0;
      vec[v].push_back(int'($rtoi(m)));
    end
  endfunction

  // driver: unsorted stream of vector v+1 overlaps the sorted stream of v
  initial begin
    int unsigned srt [$];
    in_valid = 0; in_x = '0; s_valid = 0; s_first = 0; s_last = 0; s_x = '0; e0 = '0;
    for (int v = 0; v < NV; v++) make_vec(v);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v <= NV; v++) begin
      if (v > 0) begin srt = vec[v-1]; srt.sort(); end
      if (v > 1 && e0v[v-1] != e0v[v-2]) begin
        // let the previous vector leave the pipeline before e0 changes
        @(negedge clk);
        in_valid = 0; s_valid = 0; s_first = 0; s_last = 0;
        repeat (8) @(negedge clk);
      end
      for (int i = 0; i < int'(B); i++) begin
        @(negedge clk);
        in_valid = (v < NV);
        if (v < NV) in_x = XW'(vec[v][i]);
        s_valid = (v > 0);
        s_first = (v > 0) && i == 0;
        s_last  = (v > 0) && i == B - 1;
        if (v > 0) begin
          s_x = XW'(srt[i]);
          e0  = E0_W'(e0v[v-1]);
          if (i == B - 1) last_s_cyc[v-1] = cyc;
        end
      end
    end
    @(negedge clk);
    in_valid = 0; s_valid = 0; s_first = 0; s_last = 0;
  end

  // monitor
  initial begin
    int unsigned tau_e;
    longint smin_e;
    int unsigned srt [$];
    @(posedge rst_n);
    for (int v = 0; v < NV; v++) begin
      @(posedge clk iff tau_valid);
      ref_tau(vec[v], e0v[v], tau_e, smin_e);
      srt = vec[v]; srt.sort();
      if (tau_e == srt[0]) n_tau_min++; else n_tau_inner++;
      check(cyc == last_s_cyc[v] + 6, $sformatf("vec %0d tau at %0d, last sorted %0d", v, cyc, last_s_cyc[v]));
      check(int'(tau) == int'(tau_e), $sformatf("vec %0d tau %0d expected %0d e0 %0d %p", v, tau, tau_e, e0v[v], srt));
      check(sure_min == smin_e, $sformatf("vec %0d sure %0d expected %0d", v, sure_min, smin_e));
    end
    check(n_tau_inner > 0, "threshold found inside the vector at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
