// tb_sort_unit: streams random vectors through the sorter, back to back and
// with gaps (also gaps inside a vector), and checks that each vector comes
// out complete, in ascending order, on B consecutive cycles starting in the
// cycle right after its last input, with correct first/last markers.
// Vectors with many equal values are included.
module tb_sort_unit;
  import beaches_pkg::*;

  localparam int unsigned B  = 16;
  localparam int unsigned NV = 60;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid, out_first, out_last;
  logic [XW-1:0] in_x, out_x;
  int checks = 0, failures = 0;
  int unsigned vec [NV][$];
  longint last_in_cyc [NV];
  longint cyc = 0;
  int n_b2b = 0, n_gap = 0, n_ties = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  sort_unit #(.B(B)) dut (.clk, .rst_n, .in_valid, .in_x, .out_valid, .out_first, .out_last, .out_x);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // driver
  initial begin
    in_valid = 0; in_x = '0;
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < int'(B); i++) begin
        case (v % 4)
          0: vec[v].push_back($urandom_range(0, 511));
          1: vec[v].push_back($urandom_range(0, 3));       // many ties
          2: vec[v].push_back($urandom_range(0, 40));
          default: vec[v].push_back((i % 5 == 0) ? $urandom_range(300, 511) : $urandom_range(0, 20));
        endcase
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      if (v % 3 == 2) begin
        n_gap++;
        repeat ($urandom_range(1, 2 * B)) @(negedge clk) in_valid = 0;
      end else if (v > 0) n_b2b++;
      if (v % 4 == 1) n_ties++;
      for (int i = 0; i < int'(B); i++) begin
        if (v % 5 == 4 && i == B / 2) begin
          @(negedge clk) in_valid = 0;   // gap inside a vector
        end
        @(negedge clk);
        in_valid = 1; in_x = XW'(vec[v][i]);
        if (i == B - 1) last_in_cyc[v] = cyc;
      end
    end
    @(negedge clk) in_valid = 0;
  end

  // monitor
  initial begin
    int unsigned srt [$];
    @(posedge rst_n);
    for (int v = 0; v < NV; v++) begin
      srt = vec[v];
      srt.sort();
      for (int i = 0; i < int'(B); i++) begin
        @(posedge clk iff out_valid);
        if (i == 0) check(cyc == last_in_cyc[v] + 1,
                          $sformatf("vec %0d first output at %0d, last input at %0d", v, cyc, last_in_cyc[v]));
        check(int'(out_x) == int'(srt[i]), $sformatf("vec %0d item %0d got %0d expected %0d", v, i, out_x, srt[i]));
        check(out_first == (i == 0) && out_last == (i == B - 1), "first/last markers");
      end
    end
    check(n_b2b > 0 && n_gap > 0 && n_ties > 0, "back-to-back, gaps and ties covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consecutive-cycle property of the output
  logic prev_ov = 0; logic prev_last = 0;
  always @(posedge clk) begin
    if (rst_n && prev_ov && !prev_last && !out_valid) begin
      failures++;
      $display("FAIL output stream of a vector interrupted");
    end
    prev_ov <= out_valid; prev_last <= out_last;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
