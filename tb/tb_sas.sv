// tb_sas: streams random sparse-plus-noise magnitude vectors into the
// sort-and-scan unit, back to back and with gaps, and checks every tau* and
// minimum SURE value against the reference model, and that tau_valid comes
// B+6 cycles after the vector's last input.
module tb_sas;
  import beaches_pkg::*;
  import beaches_ref_pkg::*;

  localparam int unsigned B  = 32;
  localparam int unsigned NV = 30;
  localparam longint      E0 = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid, tau_valid;
  logic [XW-1:0] in_x, tau;
  logic signed [63:0] sure_min;
  int checks = 0, failures = 0;
  int unsigned vec [NV][$];
  longint last_in_cyc [NV];
  longint cyc = 0;
  int n_b2b = 0, n_gap = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  sas #(.B(B)) dut (.clk, .rst_n, .in_valid, .in_x, .e0(E0_W'(E0)), .tau_valid, .tau, .sure_min);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    in_valid = 0; in_x = '0;
    for (int v = 0; v < NV; v++)
      for (int i = 0; i < int'(B); i++)
        vec[v].push_back((i * 7 % int'(B) < v % 4) ? $urandom_range(100, 511) : $urandom_range(0, 12 + v));
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      if (v % 4 == 3) begin
        n_gap++;
        repeat ($urandom_range(1, 3 * B)) @(negedge clk) in_valid = 0;
      end else if (v > 0) n_b2b++;
      for (int i = 0; i < int'(B); i++) begin
        @(negedge clk);
        in_valid = 1; in_x = XW'(vec[v][i]);
        if (i == B - 1) last_in_cyc[v] = cyc;
      end
    end
    @(negedge clk) in_valid = 0;
  end

  initial begin
    int unsigned tau_e;
    longint smin_e;
    @(posedge rst_n);
    for (int v = 0; v < NV; v++) begin
      @(posedge clk iff tau_valid);
      ref_tau(vec[v], E0, tau_e, smin_e);
      check(cyc == last_in_cyc[v] + B + 6, $sformatf("vec %0d tau at %0d, last input %0d", v, cyc, last_in_cyc[v]));
      check(int'(tau) == int'(tau_e), $sformatf("vec %0d tau %0d expected %0d", v, tau, tau_e));
      check(sure_min == smin_e, $sformatf("vec %0d sure %0d expected %0d", v, sure_min, smin_e));
    end
    check(n_b2b > 0 && n_gap > 0, "back-to-back and gapped vectors covered");
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
